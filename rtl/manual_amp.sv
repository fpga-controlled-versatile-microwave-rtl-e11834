// manual_amp: manual-mode amplitude setting (part of "DDS Control").
//
// Holds the output amplitude in percent of full scale. A one-cycle `up` or
// `down` pulse moves it by A_STEP_PCT, saturating at 0 and 100; `changed`
// pulses in the cycle in which the new value appears. Combinational outputs:
//   asf = floor(amp_pct * 16383 / 100)   the AD9954 amplitude scale factor
//   bcd = amp_pct in three decimal digits for the LCD
// The paper says this module changes the amplitude on button presses, keeps
// the value, sends it to the DDS and converts it to BCD for the display. The
// percent unit, the step and the reset value (full power, as used for the
// paper's Rabi measurements) are this design's choices.
module manual_amp
  import mw_pkg::*;
#(
  parameter int unsigned A_STEP_PCT  = 1,
  parameter int unsigned A_RESET_PCT = 100
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             up,
  input  logic             down,
  output logic             changed,
  output logic [6:0]       amp_pct,
  output logic [ASF_W-1:0] asf,
  output logic [11:0]      bcd
);

  localparam int unsigned A_MAX = 100;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      amp_pct <= 7'(A_RESET_PCT);
      changed <= 1'b0;
    end else begin
      changed <= 1'b0;
      if (up && !down) begin
        amp_pct <= (32'(amp_pct) + A_STEP_PCT > A_MAX) ? 7'(A_MAX) : amp_pct + 7'(A_STEP_PCT);
        changed <= 1'b1;
      end else if (down && !up) begin
        amp_pct <= (32'(amp_pct) < A_STEP_PCT) ? '0 : amp_pct - 7'(A_STEP_PCT);
        changed <= 1'b1;
      end
    end
  end

  logic [20:0] scaled;   // up to 100 * 16383
  assign scaled = 21'(amp_pct) * 21'((1 << ASF_W) - 1);
  assign asf    = ASF_W'(scaled / 21'(A_MAX));

  bin2bcd #(.W(7), .DIGITS(3)) u_bcd (.bin(amp_pct), .bcd(bcd));

endmodule
