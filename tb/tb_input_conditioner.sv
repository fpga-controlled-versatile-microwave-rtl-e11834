// tb_input_conditioner: self-checking testbench of input_conditioner.
//
// Uses a debounce time of 20 clocks. Checks that a bouncing button press
// yields exactly one key_press pulse, on the right key, 20 clocks after the
// bouncing stops (plus the synchroniser); that the release gives no pulse;
// that a glitch shorter than the debounce time gives nothing; that the mode
// switch level follows after debouncing; and that each TTL rising edge gives
// one ttl_rise pulse exactly 3 clocks after the edge, with no debouncing.
module tb_input_conditioner;

  localparam int DB = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic [2:0] key_n = 3'b111, key_press;
  logic       sw = 1'b0, ttl = 1'b0, sw_level, ttl_rise;

  input_conditioner #(.N_KEYS(3), .DEBOUNCE_CYCLES(DB)) dut (
    .clk, .rst_n, .key_n, .sw, .ttl, .key_press, .sw_level, .ttl_rise
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_press [3] = '{0, 0, 0};
  int n_ttl = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 3; i++) if (key_press[i]) n_press[i]++;
    if (ttl_rise) n_ttl++;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    check(!sw_level, "switch low after reset");

    for (int k = 0; k < 3; k++) begin
      // bouncing press
      for (int b = 0; b < 6; b++) begin
        key_n[k] = 1'b0; repeat ($urandom_range(1, DB / 2)) @(negedge clk);
        key_n[k] = 1'b1; repeat ($urandom_range(1, DB / 2)) @(negedge clk);
      end
      key_n[k] = 1'b0;
      t = 0;
      while (!key_press[k] && t < 3 * DB) begin @(negedge clk); t++; end
      check(t >= DB && t <= DB + 3, $sformatf("press latency %0d on key %0d", t, k));
      repeat (2 * DB) @(negedge clk);
      check(n_press[k] == 1, $sformatf("one pulse for key %0d", k));
      // bouncing release
      for (int b = 0; b < 4; b++) begin
        key_n[k] = 1'b1; repeat ($urandom_range(1, DB / 2)) @(negedge clk);
        key_n[k] = 1'b0; repeat ($urandom_range(1, DB / 2)) @(negedge clk);
      end
      key_n[k] = 1'b1;
      repeat (3 * DB) @(negedge clk);
      check(n_press[k] == 1, $sformatf("no pulse on release of key %0d", k));
    end
    check(n_press[0] == 1 && n_press[1] == 1 && n_press[2] == 1, "no cross-talk");

    // short glitch
    key_n[1] = 1'b0; repeat (DB / 2) @(negedge clk); key_n[1] = 1'b1;
    repeat (3 * DB) @(negedge clk);
    check(n_press[1] == 1, "glitch ignored");

    // switch
    sw = 1'b1;
    repeat (DB + 4) @(negedge clk);
    check(sw_level, "switch high after debounce");
    sw = 1'b0; repeat (3) @(negedge clk); sw = 1'b1;
    repeat (DB) @(negedge clk);
    check(sw_level, "switch glitch ignored");

    // TTL edges: latency 3 clocks, one pulse each
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      ttl = 1'b1;
      t = 0;
      while (!ttl_rise && t < 10) begin @(negedge clk); t++; end
      check(t == 3, $sformatf("ttl latency %0d", t));
      repeat ($urandom_range(1, 5)) @(negedge clk);
      ttl = 1'b0;
      repeat ($urandom_range(3, 6)) @(negedge clk);
    end
    check(n_ttl == 10, $sformatf("ttl pulses %0d", n_ttl));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
