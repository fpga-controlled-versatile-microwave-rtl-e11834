// tb_dds_driver: end-to-end testbench of the dds_driver top with shortened
// timing: serial links at 8 (host) and 16 (LCD) clocks per bit, a 20-clock
// debounce, a 200-clock LCD clear pause and an 8-step table, so that the whole
// scenario of dds_driver_scenario.svh, including a table overflow, runs in a
// fraction of a second. The DDS serial clock and the TTL-to-DDS latency are as
// in the default configuration.
module tb_dds_driver;
  import mw_pkg::*;

  localparam int T_CLK_HZ  = 50_000_000;
  localparam int T_USB_CPB = 8;
  localparam int T_LCD_CPB = 16;
  localparam int T_DB      = 20;
  localparam int T_GAP     = 200;
  localparam int T_DEPTH   = 8;

  initial begin
    #200_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "dds_driver_scenario.svh"

  dds_driver #(
    .CLK_HZ(T_CLK_HZ), .USB_BAUD(T_CLK_HZ / T_USB_CPB), .LCD_BAUD(T_CLK_HZ / T_LCD_CPB),
    .SEQ_DEPTH(T_DEPTH), .DEBOUNCE_CYCLES(T_DB), .LCD_CLEAR_WAIT(T_GAP)
  ) dut (
    .clk, .rst_n, .sw_remote, .key_n, .ttl_in, .usb_rxd,
    .dds_sclk, .dds_cs_n, .dds_sdio, .dds_io_update, .dds_reset, .lcd_txd
  );

endmodule
