// tb_rabi_sequence: workload testbench. The top runs, with every parameter
// at its default, the kind of sequence used to find the hyperfine resonances
// of sodium and to drive Rabi oscillations on them.
//
// The microwave is the DDS output plus a fixed 1741.6 MHz carrier, so the
// DDS frequency for a transition at F_mw is F_mw - 1741.6 MHz. The resonance
// frequencies used here are the sodium clock transition, 1771.626 MHz, and the
// two sigma transitions |1,0> -> |2,+-1> shifted by +-150 kHz. That is half of
// a 300 kHz Zeeman shift mu_B*B/h, because g_F = 1/2 in F = 2.
//
// The testbench uploads 16 steps over the 115200-baud link:
//  * a low-power resonance scan: five on/off pulse pairs at 10 % amplitude,
//    stepped 20 kHz apart around the clock transition, one trigger every
//    5 us (the step resolution the source is specified for);
//  * three full-power pi pulses on the sigma-, pi and sigma+ transitions.
//    Their lengths are half a Rabi period for Rabi frequencies of 11.7, 4.1
//    and 11.6 kHz, rounded to the 5 us grid: 45, 120 and 45 us.
//
// The testbench then fires the TTL triggers. It checks:
//  * each DDS setting against the frequency computed in real arithmetic,
//    within half a tuning-word step;
//  * that every trigger reached the DDS, none of them held back;
//  * that the time between the IO_UPDATE edges that switch a pulse on and off
//    equals the trigger interval to the clock (50 MHz).
module tb_rabi_sequence;
  import mw_pkg::*;

  localparam int    CPB      = 50_000_000 / 115_200;
  localparam real   F_LO_MHZ = 1741.6;
  localparam real   F_CLOCK  = 1771.626;
  localparam int    N_STEPS  = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic       sw_remote = 1'b1, ttl_in = 1'b0, usb_rxd = 1'b1;
  logic [2:0] key_n = 3'b111;
  logic       dds_sclk, dds_cs_n, dds_sdio, dds_io_update, dds_reset, lcd_txd;

  dds_driver dut (
    .clk, .rst_n, .sw_remote, .key_n, .ttl_in, .usb_rxd,
    .dds_sclk, .dds_cs_n, .dds_sdio, .dds_io_update, .dds_reset, .lcd_txd
  );
  ad9954_model dds (.sclk(dds_sclk), .cs_n(dds_cs_n), .sdio(dds_sdio),
                    .io_update(dds_io_update), .reset(dds_reset));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // clock counter and IO_UPDATE edge times
  longint cyc = 0;
  longint upd_t [$];
  always @(posedge clk) cyc++;
  always @(posedge dds_io_update) upd_t.push_back(cyc);

  int n_held = 0;
  always @(posedge clk) if (rst_n && dut.new_req && !dut.dw_free) n_held++;

  // the sequence
  real         f_dds [N_STEPS];   // MHz
  logic [13:0] amp   [N_STEPS];
  int          gap   [N_STEPS];   // clocks from this trigger to the next

  function automatic logic [31:0] ftw_of(input real mhz);
    return 32'($rtoi(mhz * 1.0e6 * 4294967296.0 / 400.0e6 + 0.5));
  endfunction

  task automatic send_byte(input logic [7:0] b);
    usb_rxd = 1'b0;
    repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      usb_rxd = b[i];
      repeat (CPB) @(negedge clk);
    end
    usb_rxd = 1'b1;
    repeat (CPB + 2) @(negedge clk);
  endtask

  function automatic logic [7:0] hex_char(input logic [3:0] n);
    return (n < 10) ? 8'h30 + 8'(n) : 8'h41 + 8'(n) - 8'd10;
  endfunction

  initial begin
    #200_000_000;   // 10 million clocks
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w;
    int   s, u0, nu;
    real  f_out;
    // scan: 5 low-power pulses, 20 kHz apart, on/off every 5 us
    for (int i = 0; i < 5; i++) begin
      f_dds[2*i]     = F_CLOCK - F_LO_MHZ + 0.020 * (i - 2);
      amp[2*i]       = 14'd1638;                   // 10 % of full scale
      gap[2*i]       = 250;                        // 5 us pulse
      f_dds[2*i + 1] = f_dds[2*i];
      amp[2*i + 1]   = 14'd0;
      gap[2*i + 1]   = 250;
    end
    // pi pulses on sigma-, pi, sigma+ at full power
    f_dds[10] = F_CLOCK - 0.150 - F_LO_MHZ;  gap[10] = 2250;   // 45 us
    f_dds[12] = F_CLOCK - F_LO_MHZ;          gap[12] = 6000;   // 120 us
    f_dds[14] = F_CLOCK + 0.150 - F_LO_MHZ;  gap[14] = 2250;   // 45 us
    for (int i = 10; i < 16; i += 2) begin
      amp[i] = 14'h3FFF;
      f_dds[i + 1] = f_dds[i];
      amp[i + 1]   = 14'd0;
      gap[i + 1]   = 500;
    end

    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    // wait for the switch to be debounced and remote mode entered
    while (!(dut.entered && dut.remote)) @(negedge clk);
    repeat (10) @(negedge clk);

    send_byte("L");
    for (int i = 0; i < N_STEPS; i++) begin
      w = {2'b00, amp[i], ftw_of(f_dds[i]), 16'h0000};
      for (int k = 15; k >= 0; k--) send_byte(hex_char(w[4*k +: 4]));
    end
    send_byte(8'h0D);
    repeat (10) @(negedge clk);
    check(dut.seq_len == N_STEPS, $sformatf("%0d steps loaded", dut.seq_len));

    // play the sequence
    u0 = dds.updates;
    for (int i = 0; i < N_STEPS; i++) begin
      @(negedge clk);
      ttl_in = 1'b1;
      repeat (20) @(negedge clk);
      ttl_in = 1'b0;
      repeat (gap[i] - 21) @(negedge clk);
      // the setting of step i is active before the next trigger
      f_out = real'(dds.ftw) * 400.0 / 4294967296.0;
      check(dds.updates == u0 + i + 1, $sformatf("step %0d reached the DDS in time", i));
      check(f_out - f_dds[i] < 0.5e-7 && f_dds[i] - f_out < 0.5e-7,
            $sformatf("step %0d: %.9f MHz, wanted %.9f MHz", i, f_out, f_dds[i]));
      check(dds.asf == {18'h0, amp[i]}, $sformatf("step %0d amplitude", i));
    end
    repeat (300) @(negedge clk);
    check(n_held == 0, "no trigger held back at 5 us spacing");
    nu = upd_t.size();
    check(nu >= N_STEPS, "IO_UPDATE edges recorded");
    // pulse lengths: on-edge to off-edge equals the trigger gap
    for (int i = 0; i < N_STEPS; i += 2) begin
      s = nu - N_STEPS + i;
      check(upd_t[s + 1] - upd_t[s] == longint'(gap[i]),
            $sformatf("pulse %0d lasts %0d clocks, wanted %0d", i / 2, upd_t[s + 1] - upd_t[s], gap[i]));
    end
    check(dds.errors == 0, "no DDS serial protocol errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
