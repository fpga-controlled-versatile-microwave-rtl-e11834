// dds_driver_scenario.svh: end-to-end scenario for the dds_driver top,
// shared by tb_dds_driver (reduced clock-divider settings) and
// tb_dds_driver_full (every parameter at its default).
//
// The including module defines: T_CLK_HZ, T_USB_CPB, T_LCD_CPB, T_DB (the
// debounce time), T_GAP (LCD clear pause), T_DEPTH (table depth), and
// instantiates `dut` (dds_driver) on the signals declared here. The scenario
// plays the front panel, the host and the pulse card, and checks what reaches
// the DDS (through the AD9954 port model) and the LCD (through the LCD model):
//   1. power-up in manual mode: reset values written to the DDS, menu shown
//   2. manual menu: up/down on frequency and amplitude, parameter select
//   3. switch to remote mode: "REMOTE MODE", a trigger with an empty table
//      is ignored
//   4. sequence load over the serial link, TTL stepping through it, with
//      wrap-around and the TTL-to-IO_UPDATE latency checked against 5 us
//   5. two triggers closer than one DDS write: the second is held and sent
//   6. a new sequence loaded while running restarts at step 0; the select
//      button steps as well
//   7. (small tables only) a sequence longer than the table: overflow
//   8. back to manual mode: the manual values are written again
// Every mechanism is counted; one that never happened is a failure.

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;   // 50 MHz

  logic       sw_remote = 1'b0, ttl_in = 1'b0, usb_rxd = 1'b1;
  logic [2:0] key_n = 3'b111;
  logic       dds_sclk, dds_cs_n, dds_sdio, dds_io_update, dds_reset, lcd_txd;

  ad9954_model dds (.sclk(dds_sclk), .cs_n(dds_cs_n), .sdio(dds_sdio),
                    .io_update(dds_io_update), .reset(dds_reset));
  lcd_model #(.CLKS_PER_BIT(T_LCD_CPB), .MIN_CLEAR_GAP(T_GAP)) lcd (.clk, .rxd(lcd_txd));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_manual_write = 0, n_remote_step = 0, n_wrap = 0, n_held = 0;
  int n_empty_trigger = 0, n_rearm = 0, n_overflow = 0, n_to_remote = 0;
  int n_to_manual = 0, n_sel = 0, n_lcd_again = 0, n_key_step = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.new_req && !dut.remote) n_manual_write++;
    if (dut.step_req && dut.seq_len != 0) n_remote_step++;
    if (dut.step_req && dut.seq_len != 0 && !dut.armed && dut.nxt_ptr == 0) n_wrap++;
    if (dut.new_req && !dut.dw_free) n_held++;
    if (dut.step_req && dut.seq_len == 0) n_empty_trigger++;
    if (dut.load_done) n_rearm++;
    if (dut.tbl_we === 1'b0 && dut.u_usb.overflow && !$past(dut.u_usb.overflow)) n_overflow++;
    if (dut.entered && dut.mode_entry && dut.remote) n_to_remote++;
    if (dut.entered && dut.mode_entry && !dut.remote) n_to_manual++;
    if (dut.started && !dut.remote && dut.key_press[0]) n_sel++;
    if (dut.started && dut.remote && dut.key_press[0]) n_key_step++;
    if (dut.lcd_start && dut.lcd_busy) n_lcd_again++;
  end

  // ---- stimulus helpers ----
  task automatic wait_clks(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic press(input int k);
    key_n[k] = 1'b0;
    wait_clks(T_DB + 10);
    key_n[k] = 1'b1;
    wait_clks(T_DB + 10);
  endtask

  task automatic send_byte(input logic [7:0] b);
    usb_rxd = 1'b0;
    wait_clks(T_USB_CPB);
    for (int i = 0; i < 8; i++) begin
      usb_rxd = b[i];
      wait_clks(T_USB_CPB);
    end
    usb_rxd = 1'b1;
    wait_clks(T_USB_CPB + 2);
  endtask

  function automatic logic [7:0] hex_char(input logic [3:0] n);
    return (n < 10) ? 8'h30 + 8'(n) : 8'h41 + 8'(n) - 8'd10;
  endfunction

  logic [13:0] s_asf [64];
  logic [31:0] s_ftw [64];
  logic [13:0] s_pow [64];

  task automatic load_seq(input int n, input int seed);
    logic [63:0] w;
    send_byte("L");
    for (int s = 0; s < n; s++) begin
      s_asf[s % 64] = 14'(seed * 977 + s * 131);
      s_ftw[s % 64] = 32'(seed * 32'h0101_0101) + 32'(s) * 32'h0123_4567;
      s_pow[s % 64] = 14'(seed * 37 + s * 1024);
      w = {2'b00, s_asf[s % 64], s_ftw[s % 64], 2'b00, s_pow[s % 64]};
      for (int i = 15; i >= 0; i--) send_byte(hex_char(w[4*i +: 4]));
    end
    send_byte(8'h0A);
    wait_clks(10);
  endtask

  // one TTL pulse; returns the clocks from the rising edge to IO_UPDATE
  task automatic ttl_step(output int lat);
    int u0;
    u0 = dds.updates;
    @(negedge clk);
    ttl_in = 1'b1;
    lat = 0;
    while (dds.updates == u0 && lat < 1000) begin @(negedge clk); lat++; end
    wait_clks(5);
    ttl_in = 1'b0;
    wait_clks(20);
  endtask

  task automatic expect_dds(input logic [13:0] a, input logic [31:0] f,
                            input logic [13:0] p, input string what);
    check(dds.asf == {18'h0, a} && dds.ftw == f && dds.pow == {18'h0, p},
          $sformatf("%s: DDS asf %h ftw %h pow %h, expected %h %h %h",
                    what, dds.asf, dds.ftw, dds.pow, a, f, p));
  endtask

  task automatic wait_lcd();
    wait_clks(10);
    while (dut.lcd_busy) @(negedge clk);
    wait_clks(T_LCD_CPB * 2);
  endtask

  function automatic logic [31:0] ftw_of(input int unsigned khz);
    longint unsigned v = (longint'(khz) << 32) / 64'd400000;
    return v[31:0];
  endfunction

  // ---- the scenario ----
  initial begin
    int lat, u0, max_lat;
    max_lat = 0;
    wait_clks(5);
    rst_n = 1'b1;

    // 1. power-up in manual mode
    wait_clks(400);
    check(dds.cfr1 == 32'h0200_0000, "CFR1 written at power-up");
    expect_dds(14'h3FFF, ftw_of(30000), 14'h0, "power-up manual values");
    wait_lcd();
    check(lcd.line(0) == "FREQUENCY       " && lcd.line(1) == " 30000 kHz      ",
          {"power-up screen: ", lcd.line(0), "|", lcd.line(1)});

    // 2. manual menu
    press(1); press(1);
    wait_clks(600);
    expect_dds(14'h3FFF, ftw_of(30200), 14'h0, "frequency up twice");
    wait_lcd();
    check(lcd.line(1) == " 30200 kHz      ", {"freq screen: ", lcd.line(1)});
    press(2);
    wait_clks(600);
    expect_dds(14'h3FFF, ftw_of(30100), 14'h0, "frequency down");
    press(0);                                  // select amplitude
    wait_lcd();
    check(lcd.line(0) == "AMPLITUDE       " && lcd.line(1) == "100 %           ",
          {"amp screen: ", lcd.line(0), "|", lcd.line(1)});
    press(2); press(2); press(2);
    wait_clks(600);
    expect_dds(14'((97 * 16383) / 100), ftw_of(30100), 14'h0, "amplitude down 3");
    wait_lcd();
    check(lcd.line(1) == " 97 %           ", {"amp value: ", lcd.line(1)});

    // 3. remote mode, empty table
    sw_remote = 1'b1;
    wait_clks(T_DB + 20);
    wait_lcd();
    check(lcd.line(0) == "REMOTE MODE     " && lcd.line(1) == "                ",
          {"remote screen: ", lcd.line(0), "|", lcd.line(1)});
    u0 = dds.updates;
    ttl_step(lat);
    check(dds.updates == u0, "trigger with an empty table ignored");
    press(1);                                  // up does nothing in remote
    wait_clks(300);
    check(dds.updates == u0 && dut.f_khz == 18'd30100, "manual buttons disabled in remote");

    // 4. load three steps and step through them twice
    load_seq(3, 1);
    check(dut.seq_len == 3, "three steps loaded");
    for (int i = 0; i < 7; i++) begin
      ttl_step(lat);
      if (lat > max_lat) max_lat = lat;
      expect_dds(s_asf[i % 3], s_ftw[i % 3], s_pow[i % 3], $sformatf("TTL step %0d", i));
    end
    check(max_lat <= T_CLK_HZ / 200000, $sformatf("TTL to IO_UPDATE %0d clocks, 5 us allowed", max_lat));
    check(max_lat == 189, $sformatf("TTL to IO_UPDATE latency %0d, design value 189", max_lat));

    // 5. two triggers 30 clocks apart: the second is held, then sent
    u0 = dds.updates;
    @(negedge clk) ttl_in = 1'b1;
    wait_clks(10);
    ttl_in = 1'b0;
    wait_clks(20);
    ttl_in = 1'b1;
    wait_clks(10);
    ttl_in = 1'b0;
    wait_clks(600);
    check(dds.updates == u0 + 2, $sformatf("both close triggers written (%0d)", dds.updates - u0));
    expect_dds(s_asf[2], s_ftw[2], s_pow[2], "after close triggers");   // steps 1 and 2

    // 6. reload while running, restart at step 0; key 0 steps too
    ttl_step(lat);                                        // step 0
    load_seq(2, 5);
    ttl_step(lat);
    expect_dds(s_asf[0], s_ftw[0], s_pow[0], "new sequence starts at step 0");
    press(0);
    wait_clks(600);
    expect_dds(s_asf[1], s_ftw[1], s_pow[1], "select button steps in remote");
    ttl_step(lat);
    expect_dds(s_asf[0], s_ftw[0], s_pow[0], "wrap of the new sequence");

    // 7. overflow of a small table
    if (T_DEPTH <= 16) begin
      load_seq(T_DEPTH + 2, 9);
      check(dut.seq_len == T_DEPTH, "overflowing sequence truncated to the table");
      for (int i = 0; i <= T_DEPTH; i++) begin
        ttl_step(lat);
        expect_dds(s_asf[i % T_DEPTH], s_ftw[i % T_DEPTH], s_pow[i % T_DEPTH],
                   $sformatf("overflow sequence step %0d", i));
      end
    end

    // 8. back to manual: manual values return
    sw_remote = 1'b0;
    wait_clks(T_DB + 300);
    expect_dds(14'((97 * 16383) / 100), ftw_of(30100), 14'h0, "manual values after remote");
    wait_lcd();
    check(lcd.line(0) == "AMPLITUDE       " && lcd.line(1) == " 97 %           ",
          {"manual screen again: ", lcd.line(0), "|", lcd.line(1)});

    check(dds.errors == 0, "no DDS serial protocol errors");
    check(lcd.n_too_soon == 0, "LCD clear pause kept");

    // mechanisms
    check(n_manual_write  > 0, "mechanism: manual DDS write");
    check(n_sel           > 0, "mechanism: parameter select");
    check(n_to_remote     > 0, "mechanism: switch to remote");
    check(n_to_manual     > 0, "mechanism: switch to manual");
    check(n_empty_trigger > 0, "mechanism: trigger on empty table");
    check(n_remote_step   > 0, "mechanism: TTL step");
    check(n_wrap          > 0, "mechanism: wrap to step 0");
    check(n_held          > 0, "mechanism: request held while writing");
    check(n_rearm         > 0, "mechanism: sequence load re-arms");
    check(n_key_step      > 0, "mechanism: button step in remote");
    check(n_lcd_again     > 0, "mechanism: LCD refresh during a screen");
    if (T_DEPTH <= 16) check(n_overflow > 0, "mechanism: table overflow");
    $display("mechanisms: manual=%0d select=%0d to_remote=%0d to_manual=%0d empty=%0d step=%0d wrap=%0d held=%0d rearm=%0d key_step=%0d lcd_again=%0d overflow=%0d",
             n_manual_write, n_sel, n_to_remote, n_to_manual, n_empty_trigger, n_remote_step,
             n_wrap, n_held, n_rearm, n_key_step, n_lcd_again, n_overflow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
