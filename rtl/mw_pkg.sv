// mw_pkg: types and constants shared by the microwave-source controller.
//
// One timing-sequence step is a dds_params_t word holding the three DDS
// settings in the order the host sends them: amplitude, frequency, phase.
// The widths are those of the AD9954 DDS registers: a 14-bit amplitude scale
// factor (ASF), a 32-bit frequency tuning word (FTW0) and a 14-bit phase
// offset word (POW0). The register addresses and the CFR1 bit that enables
// amplitude scaling come from the AD9954 data sheet, not from the paper,
// which only names the chip. The LCD command bytes are those of the
// serial-interface Newhaven NHD-0216K3Z display named in the paper.
package mw_pkg;

  // --- DDS words ----------------------------------------------------------
  localparam int ASF_W = 14;
  localparam int FTW_W = 32;
  localparam int POW_W = 14;

  typedef struct packed {
    logic [ASF_W-1:0] asf;  // amplitude scale factor, full scale = 16383
    logic [FTW_W-1:0] ftw;  // frequency = ftw * f_sysclk / 2^32
    logic [POW_W-1:0] pow;  // phase = pow * 360 deg / 2^14
  } dds_params_t;


  // AD9954 serial-port register addresses (instruction byte bits [4:0]).
  localparam logic [4:0] AD_CFR1 = 5'h00;
  localparam logic [4:0] AD_ASF  = 5'h02;
  localparam logic [4:0] AD_FTW0 = 5'h04;
  localparam logic [4:0] AD_POW0 = 5'h05;

  // CFR1 value written once after reset: OSK enable (bit 25) so that the
  // ASF register scales the output amplitude; everything else default.
  localparam logic [31:0] AD_CFR1_INIT = 32'h0200_0000;

  // DDS reference clock (external 400 MHz, internal multiplier bypassed).
  localparam longint unsigned DDS_SYSCLK_HZ = 64'd400_000_000;

  // --- manual menu ---------------------------------------------------------
  typedef enum logic {
    SEL_FREQ = 1'b0,
    SEL_AMP  = 1'b1
  } param_sel_t;

  // --- host string format --------------------------------------------------
  localparam logic [7:0] CH_LOAD = 8'h4C;  // 'L' starts a timing sequence

  // --- LCD (NHD-0216K3Z serial command set) ---------------------------------
  localparam logic [7:0] LCD_PREFIX     = 8'hFE;
  localparam logic [7:0] LCD_CLEAR      = 8'h51;
  localparam logic [7:0] LCD_SET_CURSOR = 8'h45;
  localparam logic [7:0] LCD_LINE2_ADDR = 8'h40;

endpackage
