// tb_manual_amp: self-checking testbench of manual_amp.
//
// Random up / down presses against a reference percentage kept in the
// testbench; checks the held value, the `changed` pulse, saturation at 0 and
// 100 %, the amplitude scale factor against floor(pct * 16383 / 100) and the
// three BCD digits.
module tb_manual_amp;
  import mw_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic        up = 1'b0, down = 1'b0, changed;
  logic [6:0]  amp_pct;
  logic [13:0] asf;
  logic [11:0] bcd;

  manual_amp dut (.clk, .rst_n, .up, .down, .changed, .amp_pct, .asf, .bcd);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int ref_a;
  int n_sat_hi = 0, n_sat_lo = 0;

  task automatic check_outputs();
    check(amp_pct == 7'(ref_a), $sformatf("pct %0d vs %0d", amp_pct, ref_a));
    check(asf == 14'((ref_a * 16383) / 100), $sformatf("asf %0d at %0d %%", asf, ref_a));
    check(bcd == {4'(ref_a / 100), 4'((ref_a / 10) % 10), 4'(ref_a % 10)},
          $sformatf("bcd %h at %0d", bcd, ref_a));
  endtask

  task automatic press(input bit u, input bit d);
    @(negedge clk);
    up = u; down = d;
    @(negedge clk);
    up = 1'b0; down = 1'b0;
    check(changed == (u ^ d), "changed pulse");
    if (u && !d) begin
      if (ref_a == 100) n_sat_hi++; else ref_a++;
    end else if (d && !u) begin
      if (ref_a == 0) n_sat_lo++; else ref_a--;
    end
    check_outputs();
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
    ref_a = 100;
    @(negedge clk);
    check_outputs();
    press(1'b1, 1'b0);                       // already at the top
    for (int i = 0; i < 102; i++) press(1'b0, 1'b1);
    for (int i = 0; i < 300; i++) press($urandom_range(1) == 1, $urandom_range(1) == 1);
    check(n_sat_hi > 0 && n_sat_lo > 0, "both limits reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
