// input_conditioner: the "Inputs" block in front of dds_driver.
//
// Brings the asynchronous front-panel signals into the clock domain:
//  * N_KEYS push buttons (active low, as on the DE0-CV board) are
//    synchronised by two flops and debounced: a button's state is accepted
//    only after it has read the same for DEBOUNCE_CYCLES clocks in a row.
//    Each accepted press gives a one-cycle pulse on key_press[i].
//  * The mode switch is synchronised and debounced the same way and is
//    given as a level, sw_level.
//  * The TTL trigger is synchronised by two flops only (a pulse card drives
//    it cleanly, and debouncing would eat into the 5 us step resolution); a
//    low-to-high change gives a one-cycle ttl_rise pulse, 3 clocks after the
//    edge at the pin.
// The paper draws this block and says the buttons and TTL are read by the
// FPGA; synchronising and debouncing are this design's own choice.
module input_conditioner #(
  parameter int N_KEYS          = 3,
  parameter int DEBOUNCE_CYCLES = 500_000   // 10 ms at 50 MHz
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_KEYS-1:0] key_n,
  input  logic              sw,
  input  logic              ttl,
  output logic [N_KEYS-1:0] key_press,
  output logic              sw_level,
  output logic              ttl_rise
);

  localparam int CW = $clog2(DEBOUNCE_CYCLES + 1);
  localparam int NI = N_KEYS + 1;   // buttons plus the switch

  logic [NI-1:0] raw, s1, s2, stable;
  logic [CW-1:0] cnt [NI];
  logic [2:0]    ttl_sync;

  assign raw = {sw, key_n};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1        <= {1'b0, {N_KEYS{1'b1}}};
      s2        <= {1'b0, {N_KEYS{1'b1}}};
      stable    <= {1'b0, {N_KEYS{1'b1}}};
      key_press <= '0;
      ttl_sync  <= '0;
      ttl_rise  <= 1'b0;
      for (int i = 0; i < NI; i++) cnt[i] <= '0;
    end else begin
      s1        <= raw;
      s2        <= s1;
      key_press <= '0;
      for (int i = 0; i < NI; i++) begin
        if (s2[i] == stable[i]) begin
          cnt[i] <= '0;
        end else if (cnt[i] == CW'(DEBOUNCE_CYCLES - 1)) begin
          cnt[i]    <= '0;
          stable[i] <= s2[i];
          if (i < N_KEYS && !s2[i]) key_press[i] <= 1'b1;  // press = to low
        end else begin
          cnt[i] <= cnt[i] + 1'b1;
        end
      end
      ttl_sync <= {ttl_sync[1:0], ttl};
      ttl_rise <= ttl_sync[1] & ~ttl_sync[2];
    end
  end

  assign sw_level = stable[N_KEYS];

endmodule
