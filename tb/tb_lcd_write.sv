// tb_lcd_write: self-checking testbench of lcd_write.
//
// Runs the writer at 16 clocks per bit and a 200-clock clear pause, and reads
// its output with the LCD model. Checks the screen text of each kind of
// screen (remote, frequency with leading blanks, amplitude), the 37 bytes per
// screen, the clear command at its start and the pause after it, the `done`
// pulse, the time a screen takes (37 frames of 10 bits plus the pause), and
// that a start during a screen makes one more screen with the newest values.
module tb_lcd_write;
  import mw_pkg::*;

  localparam int CPB = 16;
  localparam int GAP = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic        start = 1'b0, remote = 1'b0;
  param_sel_t  sel = SEL_FREQ;
  logic [23:0] value_bcd = '0;
  logic        txd, busy, done;

  lcd_write #(.CLKS_PER_BIT(CPB), .CLEAR_WAIT_CYCLES(GAP)) dut (
    .clk, .rst_n, .start, .remote, .sel, .value_bcd, .txd, .busy, .done
  );
  lcd_model #(.CLKS_PER_BIT(CPB), .MIN_CLEAR_GAP(GAP)) lcd (.clk, .rxd(txd));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  task automatic screen(input bit r, input param_sel_t s, input logic [23:0] v,
                        input string l1, input string l2);
    int t, b0, c0;
    b0 = lcd.n_bytes;
    c0 = lcd.n_clears;
    @(negedge clk);
    remote = r; sel = s; value_bcd = v; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    remote = ~r; value_bcd = '0;           // snapshot must have been taken
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    check(t >= 37 * 10 * CPB + GAP && t <= 37 * 10 * CPB + GAP + 37 * 3 + 10,
          $sformatf("screen took %0d clocks", t));
    repeat (CPB) @(negedge clk);
    check(lcd.n_bytes - b0 == 37, $sformatf("%0d bytes", lcd.n_bytes - b0));
    check(lcd.n_clears - c0 == 1, "one clear per screen");
    check(lcd.line(0) == l1, {"line 1 '", lcd.line(0), "' expected '", l1, "'"});
    check(lcd.line(1) == l2, {"line 2 '", lcd.line(1), "' expected '", l2, "'"});
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    check(txd && !busy, "idle line high");
    screen(1'b1, SEL_FREQ, 24'h123456, "REMOTE MODE     ", "                ");
    screen(1'b0, SEL_FREQ, 24'h030000, "FREQUENCY       ", " 30000 kHz      ");
    screen(1'b0, SEL_FREQ, 24'h160000, "FREQUENCY       ", "160000 kHz      ");
    screen(1'b0, SEL_FREQ, 24'h000000, "FREQUENCY       ", "     0 kHz      ");
    screen(1'b0, SEL_AMP,  24'h000100, "AMPLITUDE       ", "100 %           ");
    screen(1'b0, SEL_AMP,  24'h000007, "AMPLITUDE       ", "  7 %           ");
    screen(1'b0, SEL_AMP,  24'hFFF042, "AMPLITUDE       ", " 42 %           ");
    check(n_done == 7, "done per screen");

    // restart: two starts during one screen give one more screen
    @(negedge clk);
    remote = 1'b0; sel = SEL_FREQ; value_bcd = 24'h001000; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (500) @(negedge clk);
    value_bcd = 24'h002000; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (500) @(negedge clk);
    value_bcd = 24'h003000; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (2 * (37 * 10 * CPB + GAP + 200)) @(negedge clk);
    check(!busy, "idle again");
    check(n_done == 9, $sformatf("two more screens, got %0d", n_done - 7));
    check(lcd.line(1) == "  3000 kHz      ", {"newest value shown: '", lcd.line(1), "'"});
    check(lcd.n_too_soon == 0, "pause after clear kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
