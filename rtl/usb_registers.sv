// usb_registers: receives timing sequences from the host over the serial
// link of the USB module and writes them into the sequence table.
//
// A sequence is an ASCII string. It starts with the letter 'L'; then follow
// the steps, each as 16 hexadecimal characters (upper or lower case): 4 for
// the amplitude (ASF, low 14 bits used), 8 for the frequency tuning word and
// 4 for the phase offset word (low 14 bits used), most significant digit
// first. Any other character (for example CR or LF) ends the sequence.
//
//   'L' AAAA FFFFFFFF PPPP  AAAA FFFFFFFF PPPP ... '\n'
//
// An 'L' resets the write address and pulses load_start. Each complete
// 16-digit step is written to table address 0, 1, 2, ... (wr_en pulse). The
// terminating character pulses load_done and latches seq_len, the number of
// complete steps; an incomplete last step is discarded. Steps beyond DEPTH
// are dropped and raise `overflow` (held until the next 'L'). Bytes outside
// a sequence, other than 'L', are ignored. A sequence can arrive while the
// device runs: seq_len keeps the old length until load_done.
// The paper gives only that strings start with 'L' and carry amplitude,
// frequency and phase; the hex encoding, the field order inside a step
// (following the paper's wording "amplitude, frequency, and phase") and the
// terminator are this design's choices.
module usb_registers
  import mw_pkg::*;
#(
  parameter int CLKS_PER_BIT = 434,   // 50 MHz / 115200 baud
  parameter int DEPTH        = 1024,
  parameter int AW           = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rxd,
  // table write port
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output dds_params_t   wr_data,
  // sequence status
  output logic          load_start,
  output logic          load_done,
  output logic [AW:0]   seq_len,
  output logic          overflow,
  output logic          rx_error
);

  logic       rx_valid;
  logic [7:0] rx_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rxd,
    .valid(rx_valid), .data(rx_data), .frame_err(rx_error)
  );

  // ASCII hex digit decode
  logic       is_hex;
  logic [3:0] nibble;
  always_comb begin
    is_hex = 1'b1;
    nibble = '0;
    if (rx_data >= "0" && rx_data <= "9")      nibble = 4'(rx_data - "0");
    else if (rx_data >= "A" && rx_data <= "F") nibble = 4'(rx_data - "A" + 8'd10);
    else if (rx_data >= "a" && rx_data <= "f") nibble = 4'(rx_data - "a" + 8'd10);
    else is_hex = 1'b0;
  end

  logic        in_seq;
  logic [3:0]  digit_cnt;
  logic [59:0] acc;     // digits received so far (the top one is dropped)
  logic [AW:0] count;   // complete steps received in this sequence

  // acc after shifting in the current nibble: {amp16, ftw32, pow16}
  logic [63:0] acc_next;
  assign acc_next = {acc, nibble};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_seq     <= 1'b0;
      digit_cnt  <= '0;
      acc        <= '0;
      count      <= '0;
      seq_len    <= '0;
      overflow   <= 1'b0;
      wr_en      <= 1'b0;
      wr_addr    <= '0;
      wr_data    <= '0;
      load_start <= 1'b0;
      load_done  <= 1'b0;
    end else begin
      wr_en      <= 1'b0;
      load_start <= 1'b0;
      load_done  <= 1'b0;
      if (rx_valid) begin
        if (rx_data == CH_LOAD) begin
          in_seq     <= 1'b1;
          digit_cnt  <= '0;
          count      <= '0;
          overflow   <= 1'b0;
          load_start <= 1'b1;
        end else if (in_seq && is_hex) begin
          acc       <= acc_next[59:0];
          digit_cnt <= digit_cnt + 1'b1;
          if (digit_cnt == 4'd15) begin
            if (count < (AW+1)'(DEPTH)) begin
              wr_en   <= 1'b1;
              wr_addr <= count[AW-1:0];
              wr_data <= '{asf: acc_next[63-2 -: ASF_W],
                           ftw: acc_next[47:16],
                           pow: acc_next[POW_W-1:0]};
              count   <= count + 1'b1;
            end else begin
              overflow <= 1'b1;
            end
          end
        end else if (in_seq) begin
          in_seq    <= 1'b0;
          seq_len   <= count;
          load_done <= 1'b1;
        end
      end
    end
  end

endmodule
