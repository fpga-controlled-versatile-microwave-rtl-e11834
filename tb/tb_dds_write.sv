// tb_dds_write: self-checking testbench of dds_write.
//
// Drives a series of random amplitude / frequency / phase words into the
// writer and decodes its serial output with the AD9954 port model. Checks:
// the registers that reach the model equal the words sent (ASF and POW in
// the low 14 bits, the auto-ramp bits zero), CFR1 is written with amplitude
// scaling enabled on the first write only, the number of clocks from start
// to the rising IO_UPDATE edge (183, and 265 with the CFR1 write), busy /
// done behaviour, and that no serial protocol error occurred.
module tb_dds_write;
  import mw_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic        start = 1'b0;
  dds_params_t params;
  logic        busy, done, sclk, cs_n, sdio, io_update;

  dds_write dut (.clk, .rst_n, .start, .params, .busy, .done,
                 .sclk, .cs_n, .sdio, .io_update);
  ad9954_model dds (.sclk, .cs_n, .sdio, .io_update, .reset(1'b0));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_and_check(input dds_params_t p, input int exp_cycles);
    int cyc;
    @(negedge clk);
    params = p;
    start  = 1'b1;
    @(negedge clk);
    start  = 1'b0;
    params = '0;             // the writer must have latched the word
    check(busy, "busy after start");
    cyc = 1;
    while (!io_update) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == exp_cycles, $sformatf("start to IO_UPDATE %0d clocks, expected %0d", cyc, exp_cycles));
    while (!done) @(negedge clk);
    @(negedge clk);
    check(!busy, "idle after done");
    check(dds.asf == {18'h0, p.asf}, $sformatf("ASF %h vs %h", dds.asf, p.asf));
    check(dds.ftw == p.ftw, $sformatf("FTW %h vs %h", dds.ftw, p.ftw));
    check(dds.pow == {18'h0, p.pow}, $sformatf("POW %h vs %h", dds.pow, p.pow));
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dds_params_t p;
    params = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // first write includes CFR1
    p = '{asf: 14'h3FFF, ftw: 32'h1333_3333, pow: 14'h0000};
    write_and_check(p, 265);
    check(dds.cfr1 == 32'h0200_0000, "CFR1 enables amplitude scaling");
    check(dds.cfr1_writes == 1, "CFR1 written once");
    for (int i = 0; i < 20; i++) begin
      p.asf = 14'($urandom);
      p.ftw = $urandom;
      p.pow = 14'($urandom);
      write_and_check(p, 183);
    end
    // start while busy is ignored
    @(negedge clk);
    params = '{asf: 14'h0123, ftw: 32'hDEAD_BEEF, pow: 14'h2AAA};
    start = 1'b1;
    @(negedge clk);
    params = '{asf: 14'h1111, ftw: 32'h1111_1111, pow: 14'h1111};
    repeat (5) @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    check(!busy, "no second write from a start held while busy");
    check(dds.ftw == 32'hDEAD_BEEF, "word latched at start is written");
    check(dds.cfr1_writes == 1, "CFR1 still written once");
    check(dds.updates == 22, $sformatf("IO_UPDATE count %0d", dds.updates));
    check(dds.writes == 22 * 3 + 1, $sformatf("register writes %0d", dds.writes));
    check(dds.errors == 0, "no serial protocol errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
