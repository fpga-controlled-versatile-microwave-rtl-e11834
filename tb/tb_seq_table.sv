// tb_seq_table: self-checking testbench of seq_table.
//
// Fills the whole table (default depth, 1024 words) with random words, reads
// every address back in random order and checks the data and the one-clock
// read latency, then checks that a write and a read of different addresses in
// the same cycle do not disturb each other.
module tb_seq_table;
  import mw_pkg::*;

  localparam int DEPTH = 1024;

  logic clk = 1'b0;
  always #10 clk = ~clk;

  logic        we = 1'b0;
  logic [9:0]  waddr = '0, raddr = '0;
  dds_params_t wdata = '0, rdata;

  seq_table dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  dds_params_t ref_mem [DEPTH];

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we    = 1'b1;
      waddr = 10'(i);
      wdata = '{asf: 14'($urandom), ftw: $urandom, pow: 14'($urandom)};
      ref_mem[i] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int i = 0; i < 2 * DEPTH; i++) begin
      a = $urandom_range(DEPTH - 1);
      raddr = 10'(a);
      @(negedge clk);
      check(rdata == ref_mem[a], $sformatf("read of %0d", a));
    end
    // one-cycle latency: rdata changes only after the clock edge
    raddr = 10'd5;
    @(negedge clk);
    raddr = 10'd6;
    #1;
    check(rdata == ref_mem[5], "rdata held until the next edge");
    // simultaneous write and read of other addresses
    for (int i = 0; i < 100; i++) begin
      int r;
      a = $urandom_range(DEPTH - 1);
      r = (a + 1 + $urandom_range(DEPTH - 2)) % DEPTH;
      we    = 1'b1;
      waddr = 10'(a);
      wdata = '{asf: 14'($urandom), ftw: $urandom, pow: 14'($urandom)};
      raddr = 10'(r);
      ref_mem[a] = wdata;
      @(negedge clk);
      check(rdata == ref_mem[r], "read during write");
    end
    we = 1'b0;
    raddr = waddr;
    @(negedge clk);
    check(rdata == ref_mem[waddr], "last write read back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
