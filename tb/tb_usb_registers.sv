// tb_usb_registers: self-checking testbench of usb_registers.
//
// Plays the host: sends sequence strings as 8N1 serial frames (8 clocks per
// bit here) and records every table write. Checks: each complete 16-digit
// step lands at the next address with amplitude, frequency and phase decoded
// from the hex text (upper and lower case), an 'L' restarts the write address
// and pulses load_start, the terminator pulses load_done and sets seq_len,
// an incomplete last step is dropped, bytes outside a sequence are ignored,
// steps beyond DEPTH (4 here) are dropped with `overflow`, and a frame with a
// low stop bit raises rx_error and is not taken as data.
module tb_usb_registers;
  import mw_pkg::*;

  localparam int CPB   = 8;
  localparam int DEPTH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic        rxd = 1'b1;
  logic        wr_en, load_start, load_done, overflow, rx_error;
  logic [1:0]  wr_addr;
  dds_params_t wr_data;
  logic [2:0]  seq_len;

  usb_registers #(.CLKS_PER_BIT(CPB), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .rxd, .wr_en, .wr_addr, .wr_data,
    .load_start, .load_done, .seq_len, .overflow, .rx_error
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // recorded writes
  dds_params_t got [DEPTH];
  int n_writes = 0, n_start = 0, n_done = 0, n_err = 0;
  logic [1:0] last_addr;
  always @(posedge clk) if (rst_n) begin
    if (wr_en) begin
      got[wr_addr] <= wr_data;
      last_addr    <= wr_addr;
      n_writes++;
    end
    if (load_start) n_start++;
    if (load_done)  n_done++;
    if (rx_error)   n_err++;
  end

  task automatic send_byte(input logic [7:0] b, input bit bad_stop = 1'b0);
    rxd = 1'b0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      rxd = b[i];
      repeat (CPB) @(posedge clk);
    end
    rxd = bad_stop ? 1'b0 : 1'b1;
    repeat (CPB) @(posedge clk);
    rxd = 1'b1;
    repeat (2) @(posedge clk);
  endtask

  function automatic logic [7:0] hex_char(input logic [3:0] n, input bit lower);
    if (n < 10) return 8'h30 + 8'(n);
    return (lower ? 8'h61 : 8'h41) + 8'(n) - 8'd10;
  endfunction

  task automatic send_step(input logic [15:0] a, input logic [31:0] f,
                           input logic [15:0] p, input bit lower);
    logic [63:0] w;
    w = {a, f, p};
    for (int i = 15; i >= 0; i--) send_byte(hex_char(w[4*i +: 4], lower));
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] a [DEPTH];
    logic [31:0] f [DEPTH];
    logic [15:0] p [DEPTH];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // noise outside a sequence is ignored
    send_byte("1"); send_byte("A"); send_byte(8'h0A);
    check(n_writes == 0 && n_done == 0, "bytes outside a sequence ignored");

    // a sequence of three steps, mixed case, plus a partial step
    send_byte("L");
    check(n_start == 1, "load_start on L");
    for (int s = 0; s < 3; s++) begin
      a[s] = 16'($urandom); f[s] = $urandom; p[s] = 16'($urandom);
      send_step(a[s], f[s], p[s], s[0]);
      check(n_writes == s + 1, $sformatf("write for step %0d", s));
      check(last_addr == 2'(s), "write address");
    end
    send_byte("1"); send_byte("2"); send_byte("3");   // incomplete step
    send_byte(8'h0D);
    check(n_done == 1, "load_done on terminator");
    check(seq_len == 3'd3, $sformatf("seq_len %0d", seq_len));
    check(n_writes == 3, "partial step not written");
    check(!overflow, "no overflow");
    for (int s = 0; s < 3; s++) begin
      check(got[s].asf == a[s][13:0], $sformatf("asf step %0d", s));
      check(got[s].ftw == f[s],       $sformatf("ftw step %0d", s));
      check(got[s].pow == p[s][13:0], $sformatf("pow step %0d", s));
    end

    // overflow: six steps into a four-entry table
    send_byte("L");
    for (int s = 0; s < 6; s++) send_step(16'(s + 1), 32'(100 * s), 16'(s), 1'b0);
    check(overflow, "overflow raised");
    check(n_writes == 3 + DEPTH, "only DEPTH steps written");
    send_byte(8'h0A);
    check(seq_len == 3'(DEPTH), "seq_len = DEPTH after overflow");
    check(got[3].ftw == 32'd300, "last stored step is step 3");
    check(got[0].asf == 14'd1, "new sequence restarts at address 0");

    // an L in the middle of a sequence restarts it
    send_byte("L");
    send_step(16'h0AAA, 32'h1234_5678, 16'h0055, 1'b0);
    send_byte("1"); send_byte("2");
    send_byte("L");
    check(!overflow, "overflow cleared by L");
    send_step(16'h0BBB, 32'h8765_4321, 16'h0066, 1'b1);
    send_byte(8'h0A);
    check(seq_len == 3'd1, "seq_len 1 after restart");
    check(got[0].ftw == 32'h8765_4321 && last_addr == 2'd0, "restarted at address 0");

    // framing error
    send_byte("L", 1'b1);
    check(n_err == 1, "rx_error on a bad stop bit");
    check(n_start == 4, "bad frame not taken as L");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
