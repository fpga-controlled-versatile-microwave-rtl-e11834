// lcd_write: writes the front-panel text to the 2x16 LCD (part of
// "Write Data").
//
// On `start` it takes a snapshot of the mode, the selected menu item and the
// value digits and sends one complete screen over the LCD's serial input
// (8N1, CLKS_PER_BIT clocks per bit):
//   FE 51                clear screen, then a pause of CLEAR_WAIT_CYCLES
//   16 characters        line 1
//   FE 45 40             cursor to the start of line 2
//   16 characters        line 2
// 37 bytes in all, about 39 ms at 9600 baud. The screens are
//   remote mode:   "REMOTE MODE" / blank
//   manual, freq:  "FREQUENCY"   / the value in kHz, e.g. " 30000 kHz"
//   manual, amp:   "AMPLITUDE"   / the value in percent, e.g. "100 %"
// with leading zeros shown as blanks. A `start` that arrives while a screen
// is being sent is remembered (busy stays high), and the screen is sent again with
// the values of that moment, so the display always ends up current. `done`
// pulses when a screen is complete.
// The paper gives the two kinds of screen ("REMOTE MODE", and the selected
// parameter with its value). The command bytes and the 9600-baud serial mode
// are those of the Newhaven NHD-0216K3Z display; the screen layout is this
// design's own.
module lcd_write
  import mw_pkg::*;
#(
  parameter int CLKS_PER_BIT      = 5208,     // 50 MHz / 9600 baud
  parameter int CLEAR_WAIT_CYCLES = 100_000   // 2 ms, clear takes 1.5 ms
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        remote,
  input  param_sel_t  sel,
  input  logic [23:0] value_bcd,   // 6 BCD digits; amplitude uses the low 3
  output logic        txd,
  output logic        busy,
  output logic        done
);

  typedef enum logic [2:0] {S_IDLE, S_SEND, S_WAIT, S_CLEAR} state_t;

  localparam int NBYTES = 37;
  localparam int WW     = $clog2(CLEAR_WAIT_CYCLES + 1);

  state_t      state;
  logic [5:0]  idx;
  logic        again;
  logic        remote_l;
  param_sel_t  sel_l;
  logic [23:0] bcd_l;
  logic [WW-1:0] wcnt;

  logic       tx_start, tx_busy;
  logic [7:0] tx_byte;

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .start(tx_start), .data(tx_byte), .txd, .busy(tx_busy)
  );

  // ---- screen text (character k of a line is bits [8*(15-k) +: 8]) ----
  logic [127:0] line1, line2;

  function automatic logic [7:0] digit_char(input logic [3:0] d, input logic blank);
    return blank ? " " : (8'h30 + 8'(d));
  endfunction

  always_comb begin
    logic lead;
    lead  = 1'b1;
    line1 = "                ";
    line2 = "                ";
    if (remote_l) begin
      line1 = "REMOTE MODE     ";
    end else if (sel_l == SEL_FREQ) begin
      line1 = "FREQUENCY       ";
      lead  = 1'b1;
      for (int k = 0; k < 6; k++) begin
        lead = lead && (bcd_l[4*(5-k) +: 4] == 4'd0) && (k != 5);
        line2[8*(15-k) +: 8] = digit_char(bcd_l[4*(5-k) +: 4], lead);
      end
      line2[8*(15-9) +: 32] = " kHz";   // characters 6..9
    end else begin
      line1 = "AMPLITUDE       ";
      lead  = 1'b1;
      for (int k = 0; k < 3; k++) begin
        lead = lead && (bcd_l[4*(2-k) +: 4] == 4'd0) && (k != 2);
        line2[8*(15-k) +: 8] = digit_char(bcd_l[4*(2-k) +: 4], lead);
      end
      line2[8*(15-4) +: 16] = " %";     // characters 3..4
    end
  end

  always_comb begin
    if (idx == 6'd0 || idx == 6'd18)  tx_byte = LCD_PREFIX;
    else if (idx == 6'd1)             tx_byte = LCD_CLEAR;
    else if (idx == 6'd19)            tx_byte = LCD_SET_CURSOR;
    else if (idx == 6'd20)            tx_byte = LCD_LINE2_ADDR;
    else if (idx < 6'd18)             tx_byte = line1[8*(15-(int'(idx)-2)) +: 8];
    else                              tx_byte = line2[8*(15-(int'(idx)-21)) +: 8];
  end

  assign tx_start = (state == S_SEND);
  assign busy     = (state != S_IDLE) || again;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      idx      <= '0;
      again    <= 1'b0;
      remote_l <= 1'b1;
      sel_l    <= SEL_FREQ;
      bcd_l    <= '0;
      wcnt     <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && state != S_IDLE) again <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (start || again) begin
            again    <= 1'b0;
            remote_l <= remote;
            sel_l    <= sel;
            bcd_l    <= value_bcd;
            idx      <= '0;
            state    <= S_SEND;
          end
        end
        S_SEND: state <= S_WAIT;           // tx_start is high in this state
        S_WAIT: begin
          if (!tx_busy) begin
            idx <= idx + 1'b1;
            if (idx == 6'd1) begin
              wcnt  <= '0;
              state <= S_CLEAR;
            end else if (idx == 6'(NBYTES - 1)) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else state <= S_SEND;
          end
        end
        S_CLEAR: begin
          if (wcnt == WW'(CLEAR_WAIT_CYCLES - 1)) state <= S_SEND;
          else wcnt <= wcnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
