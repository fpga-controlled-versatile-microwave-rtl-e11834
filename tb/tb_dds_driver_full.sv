// tb_dds_driver_full: end-to-end testbench of the dds_driver top with every
// parameter at its default: 50 MHz clock, 115200-baud host link, 9600-baud
// LCD, 10 ms debounce, 1024-step table. Runs the scenario of
// dds_driver_scenario.svh (all of it except the table overflow, which would
// need a 1025-step upload) in real time: about 23 million clocks, 0.46 s of device time.
module tb_dds_driver_full;
  import mw_pkg::*;

  localparam int T_CLK_HZ  = 50_000_000;
  localparam int T_USB_CPB = 50_000_000 / 115_200;
  localparam int T_LCD_CPB = 50_000_000 / 9_600;
  localparam int T_DB      = 500_000;
  localparam int T_GAP     = 100_000;
  localparam int T_DEPTH   = 1024;

  initial begin
    #2_000_000_000;   // 100 million clocks
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "dds_driver_scenario.svh"

  dds_driver dut (
    .clk, .rst_n, .sw_remote, .key_n, .ttl_in, .usb_rxd,
    .dds_sclk, .dds_cs_n, .dds_sdio, .dds_io_update, .dds_reset, .lcd_txd
  );

endmodule
