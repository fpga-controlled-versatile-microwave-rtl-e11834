// tb_manual_freq: self-checking testbench of manual_freq.
//
// Applies random up / down presses (and some with both or neither) and keeps
// a reference value in the testbench. After every press it checks the held
// frequency, the `changed` pulse, saturation at 0 and F_MAX_KHZ, the tuning
// word against floor(f_kHz * 2^32 / 400000) computed in 64-bit arithmetic,
// and the BCD digits against a decimal conversion done digit by digit.
module tb_manual_freq;
  import mw_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic        up = 1'b0, down = 1'b0, changed;
  logic [17:0] freq_khz;
  logic [31:0] ftw;
  logic [23:0] bcd;

  manual_freq dut (.clk, .rst_n, .up, .down, .changed, .freq_khz, .ftw, .bcd);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [23:0] to_bcd(input int unsigned v);
    logic [23:0] r;
    for (int d = 0; d < 6; d++) begin
      r[4*d +: 4] = 4'(v % 10);
      v = v / 10;
    end
    return r;
  endfunction

  int unsigned ref_f;
  longint unsigned exp_ftw;
  int n_sat_hi = 0, n_sat_lo = 0;

  task automatic check_outputs();
    exp_ftw = (longint'(ref_f) << 32) / 64'd400000;
    check(freq_khz == 18'(ref_f), $sformatf("freq %0d vs %0d", freq_khz, ref_f));
    check(ftw == exp_ftw[31:0], $sformatf("ftw %h vs %h at %0d kHz", ftw, exp_ftw[31:0], ref_f));
    check(bcd == to_bcd(ref_f), $sformatf("bcd %h at %0d", bcd, ref_f));
  endtask

  task automatic press(input bit u, input bit d);
    @(negedge clk);
    up = u; down = d;
    @(negedge clk);
    up = 1'b0; down = 1'b0;
    check(changed == (u ^ d), "changed pulse");
    if (u && !d) begin
      if (ref_f + 100 > 160000) begin ref_f = 160000; n_sat_hi++; end
      else ref_f += 100;
    end else if (d && !u) begin
      if (ref_f < 100) begin ref_f = 0; n_sat_lo++; end
      else ref_f -= 100;
    end
    check_outputs();
    @(negedge clk);
    check(!changed, "changed is one cycle");
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    ref_f = 30000;
    @(negedge clk);
    check_outputs();
    // random walk
    for (int i = 0; i < 300; i++) press($urandom_range(1) == 1, $urandom_range(1) == 1);
    // run into the lower limit and past it
    while (ref_f > 0) press(1'b0, 1'b1);
    press(1'b0, 1'b1);
    // run into the upper limit and past it
    while (ref_f < 160000) press(1'b1, 1'b0);
    press(1'b1, 1'b0);
    check(n_sat_hi > 0 && n_sat_lo > 0, "both limits reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
