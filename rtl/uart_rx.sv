// uart_rx: 8N1 asynchronous serial receiver.
//
// Receives the byte stream that the USB-serial bridge puts on its TxD pin.
// The line is passed through a two-flop synchroniser. A falling edge starts a
// frame; the start bit is re-checked at its middle, then the eight data bits
// (LSB first) and the stop bit are sampled at their middles, CLKS_PER_BIT
// clocks apart. A valid frame gives a one-cycle `valid` pulse with `data`;
// a frame whose stop bit is low gives a `frame_err` pulse instead and its byte
// is dropped. Latency from the middle of the stop bit to `valid` is one clock.
// The 8N1 format is an assumption: the paper only says the link is serial.
module uart_rx #(
  parameter int CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;

  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  state_t        state;
  logic [1:0]    sync;
  logic [CW-1:0] cnt;
  logic [2:0]    bit_idx;
  logic [7:0]    shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      state     <= S_IDLE;
      cnt       <= '0;
      bit_idx   <= '0;
      shreg     <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (state)
        S_IDLE: begin
          cnt <= '0;
          if (!sync[1]) state <= S_START;
        end
        S_START: begin
          if (cnt == CW'((CLKS_PER_BIT - 1) / 2)) begin
            cnt     <= '0;
            bit_idx <= '0;
            state   <= sync[1] ? S_IDLE : S_DATA;  // glitch: back to idle
          end else cnt <= cnt + 1'b1;
        end
        S_DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            shreg <= {sync[1], shreg[7:1]};
            if (bit_idx == 3'd7) state <= S_STOP;
            bit_idx <= bit_idx + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_STOP: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
            if (sync[1]) begin
              valid <= 1'b1;
              data  <= shreg;
            end else frame_err <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
