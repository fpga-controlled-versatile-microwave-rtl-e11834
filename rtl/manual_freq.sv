// manual_freq: manual-mode frequency setting (part of "DDS Control").
//
// Holds the output frequency in kHz. A one-cycle `up` or `down` pulse moves
// it by F_STEP_KHZ, saturating at 0 and F_MAX_KHZ; `changed` pulses in the
// cycle in which the new value appears, which dds_driver uses to start the
// DDS and LCD writes. Two conversions of the held value are given
// combinationally:
//   ftw = floor(freq_khz * 2^32 / SYSCLK_KHZ)   the AD9954 tuning word
//   bcd = freq_khz in decimal digits            for the LCD
// The paper says this module changes the frequency on button presses, keeps
// the value, sends it to the DDS and converts it to BCD for the display. The
// kHz unit, step, limits and reset value (30 MHz, the paper's typical DDS
// output) are this design's choices.
module manual_freq
  import mw_pkg::*;
#(
  parameter int unsigned     F_MAX_KHZ   = 160_000,
  parameter int unsigned     F_STEP_KHZ  = 100,
  parameter int unsigned     F_RESET_KHZ = 30_000,
  parameter longint unsigned SYSCLK_KHZ  = DDS_SYSCLK_HZ / 1000,
  parameter int              FW          = $clog2(F_MAX_KHZ + 1),
  parameter int              DIGITS      = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                up,
  input  logic                down,
  output logic                changed,
  output logic [FW-1:0]       freq_khz,
  output logic [FTW_W-1:0]    ftw,
  output logic [4*DIGITS-1:0] bcd
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      freq_khz <= FW'(F_RESET_KHZ);
      changed  <= 1'b0;
    end else begin
      changed <= 1'b0;
      if (up && !down) begin
        freq_khz <= (32'(freq_khz) + F_STEP_KHZ > F_MAX_KHZ) ? FW'(F_MAX_KHZ)
                                                              : freq_khz + FW'(F_STEP_KHZ);
        changed  <= 1'b1;
      end else if (down && !up) begin
        freq_khz <= (32'(freq_khz) < F_STEP_KHZ) ? '0 : freq_khz - FW'(F_STEP_KHZ);
        changed  <= 1'b1;
      end
    end
  end

  logic [FW+FTW_W-1:0] scaled;
  assign scaled = {freq_khz, {FTW_W{1'b0}}};
  assign ftw    = FTW_W'(scaled / (FW+FTW_W)'(SYSCLK_KHZ));

  bin2bcd #(.W(FW), .DIGITS(DIGITS)) u_bcd (.bin(freq_khz), .bcd(bcd));

endmodule
