// bin2bcd: combinational binary to packed-BCD converter (double dabble).
//
// Converts an unsigned W-bit value into DIGITS decimal digits, four bits per
// digit, most significant digit in the top nibble. The classic shift-and-add-3
// algorithm is unrolled into combinational logic, so the result is valid in the
// same cycle as the input. Used by manual_freq and manual_amp to produce the
// decimal value shown on the LCD. DIGITS must be large enough for 2^W-1 or the
// top digits are lost; that sizing is left to the instantiating module.
module bin2bcd #(
  parameter int W      = 18,
  parameter int DIGITS = 6
) (
  input  logic [W-1:0]          bin,
  output logic [4*DIGITS-1:0]   bcd
);

  always_comb begin
    logic [4*DIGITS-1:0] acc;
    acc = '0;
    for (int i = W - 1; i >= 0; i--) begin
      for (int d = 0; d < DIGITS; d++) begin
        if (acc[4*d +: 4] >= 4'd5) acc[4*d +: 4] = acc[4*d +: 4] + 4'd3;
      end
      acc = {acc[4*DIGITS-2:0], bin[i]};
    end
    bcd = acc;
  end

endmodule
