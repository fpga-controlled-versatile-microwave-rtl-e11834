// uart_tx: 8N1 asynchronous serial transmitter.
//
// Sends one byte per `start` pulse: a start bit, eight data bits LSB first and
// one stop bit, each CLKS_PER_BIT clocks long. `busy` is high from the cycle
// after `start` until the stop bit has been sent; `start` while busy is
// ignored. The idle line is high. Used by lcd_write to drive the serial input
// of the LCD; the 8N1 format is that display's serial mode.
module uart_tx #(
  parameter int CLKS_PER_BIT = 5208
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] data,
  output logic       txd,
  output logic       busy
);

  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]    frame;   // {stop, data, start}, shifted out LSB first
  logic [3:0]    nbits;
  logic [CW-1:0] cnt;

  assign txd = busy ? frame[0] : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      frame <= '1;
      nbits <= '0;
      cnt   <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        frame <= {1'b1, data, 1'b0};
        nbits <= 4'd10;
        cnt   <= '0;
      end
    end else if (cnt == CW'(CLKS_PER_BIT - 1)) begin
      cnt   <= '0;
      frame <= {1'b1, frame[9:1]};
      nbits <= nbits - 1'b1;
      if (nbits == 4'd1) busy <= 1'b0;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
