// lcd_model: behavioural model of the serial 2x16 character LCD, for
// testbenches only.
//
// Receives 8N1 frames at CLKS_PER_BIT clocks per bit (sampling each bit in
// its middle, counted in clk cycles) and keeps the screen contents the way the
// Newhaven serial display does: 0xFE 0x51 clears the screen and homes the
// cursor, 0xFE 0x45 <addr> moves the cursor (0x00 line 1, 0x40 line 2), any
// other byte is a character written at the cursor, which then advances.
// It counts received bytes, clear commands and bytes that arrive sooner than
// MIN_CLEAR_GAP clocks after the end of a clear command (the display would
// lose them while it clears). It starts listening 8 clocks after time 0,
// once the line is high, so that the line before reset is not read as data.
module lcd_model #(
  parameter int CLKS_PER_BIT  = 16,
  parameter int MIN_CLEAR_GAP = 0
) (
  input logic clk,
  input logic rxd
);

  logic [7:0] scr [2][16];
  int n_bytes = 0, n_clears = 0, n_too_soon = 0;
  longint cyc = 0, clear_end = -1000000000;

  int state = 0;   // 0 data, 1 after FE, 2 cursor address

  function automatic string line(input int l);
    string s = "";
    for (int k = 0; k < 16; k++) s = {s, string'(scr[l][k])};
    return s;
  endfunction

  initial begin
    for (int l = 0; l < 2; l++) for (int k = 0; k < 16; k++) scr[l][k] = " ";
  end

  always @(posedge clk) cyc++;

  int cur = 0;
  task automatic take(input logic [7:0] b);
    n_bytes++;
    case (state)
      1: begin
        if (b == 8'h51) begin
          for (int l = 0; l < 2; l++) for (int k = 0; k < 16; k++) scr[l][k] = " ";
          cur = 0;
          n_clears++;
          clear_end = cyc;
          state = 0;
        end else if (b == 8'h45) state = 2;
        else state = 0;
      end
      2: begin
        cur = (b >= 8'h40) ? 16 + int'(b - 8'h40) : int'(b);
        state = 0;
      end
      default: begin
        if (b == 8'hFE) state = 1;
        else begin
          if (cur < 32) scr[cur / 16][cur % 16] = b;
          cur++;
        end
      end
    endcase
  endtask

  initial begin
    logic [7:0] b;
    longint t0;
    // the line is undefined until the driver leaves reset
    repeat (8) @(posedge clk);
    wait (rxd == 1'b1);
    forever begin
      @(negedge rxd);
      t0 = cyc;
      if (t0 - clear_end < MIN_CLEAR_GAP) n_too_soon++;
      repeat (CLKS_PER_BIT / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (CLKS_PER_BIT) @(posedge clk);
        b[i] = rxd;
      end
      repeat (CLKS_PER_BIT) @(posedge clk);   // stop bit
      take(b);
    end
  end

endmodule
