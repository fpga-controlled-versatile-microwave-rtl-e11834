// dds_driver: top of the FPGA controller of the microwave source.
//
// The controller sets the frequency, amplitude and phase of an AD9954 DDS
// whose ~30 MHz output is mixed up to 1.77 GHz outside the FPGA. It has two
// modes, chosen by a switch:
//
//  * Manual mode: a small menu on the LCD. Button 0 selects frequency or
//    amplitude, buttons 1 and 2 step the selected value up or down
//    (manual_freq, manual_amp). Every change is written at once to the DDS
//    (phase 0) and the LCD shows the selected parameter and its value.
//  * Remote mode: the LCD shows "REMOTE MODE". The host loads a timing
//    sequence over the USB-serial link (usb_registers) into the sequence
//    table (seq_table). Each rising edge of the TTL input (or a press of
//    button 0) advances to the next step of the table and writes its
//    amplitude, frequency and phase to the DDS. After the last step the
//    sequence starts again at step 0. After a new sequence has been loaded,
//    and on entering remote mode, the next trigger plays step 0. Triggers
//    with an empty table are ignored.
//
// DDS writes go through one request register: a request made while dds_write
// is busy is held and sent when it finishes, and a newer request replaces a
// held one, so the DDS always ends with the latest setting. From a TTL edge at
// the pin to the rising edge of IO_UPDATE takes 3 clocks (synchroniser) + 3
// (table address, table read, issue) + 183 (serial write) = 189 clocks,
// 3.8 us at 50 MHz, inside the paper's 5 us step resolution. Triggers closer
// together than one write are the case where a request is held. LCD refreshes are likewise collapsed inside lcd_write.
//
// After reset the DDS master-reset pin is pulsed for 8 clocks, then the
// controller enters the mode set by the switch as if the switch had just
// changed (manual mode writes the reset values, 30 MHz at full amplitude).
//
// What follows the paper: the two modes and the switch, the three buttons,
// the menu of amplitude and frequency, immediate DDS and LCD updates on a
// change, stepping on a rising TTL edge, sequences from the host starting
// with 'L', the module partition and names. This design's own choices: the
// button assignment, wrap-around at the end of the table, the request
// register, the restart rules, reset behaviour, and the clock and baud rates.
module dds_driver
  import mw_pkg::*;
#(
  parameter int CLK_HZ          = 50_000_000,
  parameter int USB_BAUD        = 115_200,
  parameter int LCD_BAUD        = 9_600,
  parameter int SEQ_DEPTH       = 1024,
  parameter int DEBOUNCE_CYCLES = CLK_HZ / 100,   // 10 ms
  parameter int LCD_CLEAR_WAIT  = CLK_HZ / 500    // 2 ms
) (
  input  logic       clk,
  input  logic       rst_n,
  // front panel
  input  logic       sw_remote,     // 1 = remote mode
  input  logic [2:0] key_n,         // [0] select / step, [1] up, [2] down
  input  logic       ttl_in,
  // USB-serial module (its TxD pin)
  input  logic       usb_rxd,
  // AD9954 DDS serial port
  output logic       dds_sclk,
  output logic       dds_cs_n,
  output logic       dds_sdio,
  output logic       dds_io_update,
  output logic       dds_reset,
  // LCD serial input
  output logic       lcd_txd
);

  localparam int AW = $clog2(SEQ_DEPTH);

  // ---------------------------------------------------------------- inputs
  logic [2:0] key_press;
  logic       remote, ttl_rise;

  input_conditioner #(.N_KEYS(3), .DEBOUNCE_CYCLES(DEBOUNCE_CYCLES)) u_inputs (
    .clk, .rst_n, .key_n, .sw(sw_remote), .ttl(ttl_in),
    .key_press, .sw_level(remote), .ttl_rise
  );

  // ------------------------------------------------- host link and table
  logic          tbl_we;
  logic [AW-1:0] tbl_waddr, tbl_raddr;
  dds_params_t   tbl_wdata, tbl_rdata;
  logic          load_done;
  logic [AW:0]   seq_len;

  usb_registers #(.CLKS_PER_BIT(CLK_HZ / USB_BAUD), .DEPTH(SEQ_DEPTH)) u_usb (
    .clk, .rst_n, .rxd(usb_rxd),
    .wr_en(tbl_we), .wr_addr(tbl_waddr), .wr_data(tbl_wdata),
    .load_start(), .load_done, .seq_len, .overflow(), .rx_error()
  );

  seq_table #(.DEPTH(SEQ_DEPTH)) u_table (
    .clk, .we(tbl_we), .waddr(tbl_waddr), .wdata(tbl_wdata),
    .raddr(tbl_raddr), .rdata(tbl_rdata)
  );

  // ------------------------------------------------------- manual control
  param_sel_t sel;
  logic       f_up, f_down, a_up, a_down, f_changed, a_changed;
  logic [FTW_W-1:0] man_ftw;
  logic [ASF_W-1:0] man_asf;
  logic [23:0]      f_bcd;
  logic [11:0]      a_bcd;
  logic [17:0]      f_khz;

  assign f_up   = !remote && sel == SEL_FREQ && key_press[1];
  assign f_down = !remote && sel == SEL_FREQ && key_press[2];
  assign a_up   = !remote && sel == SEL_AMP  && key_press[1];
  assign a_down = !remote && sel == SEL_AMP  && key_press[2];

  manual_freq u_freq (
    .clk, .rst_n, .up(f_up), .down(f_down), .changed(f_changed),
    .freq_khz(f_khz), .ftw(man_ftw), .bcd(f_bcd)
  );

  manual_amp u_amp (
    .clk, .rst_n, .up(a_up), .down(a_down), .changed(a_changed),
    .amp_pct(), .asf(man_asf), .bcd(a_bcd)
  );

  dds_params_t man_params;
  assign man_params = '{asf: man_asf, ftw: man_ftw, pow: '0};

  // ---------------------------------------------------------- sequencing
  logic [3:0]    init_cnt;
  logic          started;        // DDS reset pulse over
  logic          entered;        // first mode entry done
  logic          remote_q;
  logic          mode_entry;
  logic          armed;          // next step plays table entry 0
  logic [AW-1:0] cur_ptr, nxt_ptr;
  logic          rd_p1, rd_p2;   // table read in flight
  logic          step_req;

  // DDS request register
  logic          new_req, req_pending, dw_start, dw_busy, dw_free;
  dds_params_t   new_params, req_params, dw_params;
  // LCD refresh
  logic          lcd_start, lcd_busy;

  assign dds_reset  = !started && (init_cnt < 4'd8);
  assign mode_entry = started && (!entered || remote != remote_q);
  assign step_req   = started && remote && (ttl_rise || key_press[0]);
  assign dw_free    = !dw_busy && !dw_start;

  // next table address for a step
  always_comb begin
    if (armed || (AW+1)'(cur_ptr) + 1'b1 >= seq_len) nxt_ptr = '0;
    else                                             nxt_ptr = cur_ptr + 1'b1;
  end

  // a new DDS setting: table word in remote mode, manual values otherwise
  always_comb begin
    new_req    = 1'b0;
    new_params = man_params;
    if (remote) begin
      if (rd_p2) begin
        new_req    = 1'b1;
        new_params = tbl_rdata;
      end
    end else if (mode_entry || f_changed || a_changed) begin
      new_req = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_cnt    <= '0;
      started     <= 1'b0;
      entered     <= 1'b0;
      remote_q    <= 1'b0;
      sel         <= SEL_FREQ;
      armed       <= 1'b1;
      cur_ptr     <= '0;
      tbl_raddr   <= '0;
      rd_p1       <= 1'b0;
      rd_p2       <= 1'b0;
      req_pending <= 1'b0;
      req_params  <= '0;
      dw_start    <= 1'b0;
      dw_params   <= '0;
      lcd_start   <= 1'b0;
    end else begin
      lcd_start <= 1'b0;
      dw_start  <= 1'b0;
      rd_p1     <= 1'b0;
      rd_p2     <= rd_p1;

      // power-up: DDS master-reset pulse, then enter the selected mode
      if (!started) begin
        init_cnt <= init_cnt + 1'b1;
        if (init_cnt == 4'd15) started <= 1'b1;
      end else begin
        remote_q <= remote;
        entered  <= 1'b1;
      end

      if (mode_entry) begin
        lcd_start <= 1'b1;
        if (remote) armed <= 1'b1;
      end

      // manual menu
      if (started && !remote) begin
        if (key_press[0]) begin
          sel       <= (sel == SEL_FREQ) ? SEL_AMP : SEL_FREQ;
          lcd_start <= 1'b1;
        end
        if (f_changed || a_changed) lcd_start <= 1'b1;
      end

      // new sequence from the host: restart at step 0
      if (load_done) armed <= 1'b1;

      // remote stepping: read the next table word
      if (step_req && seq_len != '0) begin
        cur_ptr   <= nxt_ptr;
        tbl_raddr <= nxt_ptr;
        armed     <= 1'b0;
        rd_p1     <= 1'b1;
      end

      // DDS request register: send now if the writer is free, else hold;
      // a newer request replaces a held one
      if (new_req) begin
        if (dw_free) begin
          dw_start    <= 1'b1;
          dw_params   <= new_params;
          req_pending <= 1'b0;
        end else begin
          req_params  <= new_params;
          req_pending <= 1'b1;
        end
      end else if (req_pending && dw_free) begin
        dw_start    <= 1'b1;
        dw_params   <= req_params;
        req_pending <= 1'b0;
      end
    end
  end

  dds_write u_dds (
    .clk, .rst_n, .start(dw_start), .params(dw_params),
    .busy(dw_busy), .done(),
    .sclk(dds_sclk), .cs_n(dds_cs_n), .sdio(dds_sdio), .io_update(dds_io_update)
  );

  lcd_write #(.CLKS_PER_BIT(CLK_HZ / LCD_BAUD), .CLEAR_WAIT_CYCLES(LCD_CLEAR_WAIT)) u_lcd (
    .clk, .rst_n, .start(lcd_start), .remote, .sel,
    .value_bcd(sel == SEL_FREQ ? f_bcd : {12'h000, a_bcd}),
    .txd(lcd_txd), .busy(lcd_busy), .done()
  );

  // the writer is only started when idle
  a_dw_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                    dw_start |-> !dw_busy);

endmodule
