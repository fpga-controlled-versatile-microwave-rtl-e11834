// dds_write: serial writer for the AD9954 DDS (part of "Write Data").
//
// On a `start` pulse it latches `params` and writes, over the DDS's 3-wire
// serial port, the registers ASF (0x02, 16 bits), FTW0 (0x04, 32 bits) and
// POW0 (0x05, 16 bits), then pulses IO_UPDATE so that the new amplitude,
// frequency and phase take effect together. The first write after reset
// first sends CFR1 (0x00, 32 bits) with amplitude scaling enabled. Each
// register is one instruction cycle: CS_N falls, the instruction byte
// (bit 7 = 0 for write, bits 4:0 = address) and the data follow MSB first,
// SDIO changes while SCLK is low and the DDS samples it on SCLK's rising
// edge; CS_N rises between registers.
//
// Timing: SCLK runs at clk / (2*SCLK_HALF); each register costs
// 2*SCLK_HALF*(8+bits) + 2 clocks, the update pulse IO_UPDATE_CYCLES + 1.
// With the defaults (SCLK = 25 MHz from a 50 MHz clock, the AD9954's limit)
// an update takes 183 clocks = 3.7 us from `start` to IO_UPDATE, within the
// 4 us / 5 us figures the paper quotes. `busy` is high during the write,
// `done` pulses once when IO_UPDATE ends; `start` while busy is ignored.
// The paper gives the job (write frequency, amplitude and phase to the DDS);
// the register map and port protocol are the AD9954's, the sequencing and
// the one-time CFR1 write are this design's own.
module dds_write
  import mw_pkg::*;
#(
  parameter int SCLK_HALF        = 1,
  parameter int IO_UPDATE_CYCLES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  dds_params_t params,
  output logic        busy,
  output logic        done,
  output logic        sclk,
  output logic        cs_n,
  output logic        sdio,
  output logic        io_update
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SHIFT, S_GAP, S_UPDATE} state_t;
  typedef enum logic [1:0] {R_CFR1, R_ASF, R_FTW, R_POW} reg_t;

  localparam int HW = $clog2(SCLK_HALF + 1);
  localparam int UW = $clog2(IO_UPDATE_CYCLES + 1);

  state_t      state;
  reg_t        cur;
  dds_params_t p;
  logic        cfr_done;
  logic [39:0] shreg;     // instruction byte + up to 32 data bits, MSB first
  logic [5:0]  nbits;     // bits left to send in this register
  logic [HW-1:0] hcnt;
  logic [UW-1:0] ucnt;

  assign busy = (state != S_IDLE);
  assign sdio = shreg[39];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= R_CFR1;
      p         <= '0;
      cfr_done  <= 1'b0;
      shreg     <= '0;
      nbits     <= '0;
      hcnt      <= '0;
      ucnt      <= '0;
      sclk      <= 1'b0;
      cs_n      <= 1'b1;
      io_update <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            p     <= params;
            cur   <= cfr_done ? R_ASF : R_CFR1;
            state <= S_LOAD;
          end
        end
        S_LOAD: begin
          unique case (cur)
            R_CFR1: begin shreg <= {3'b000, AD_CFR1, AD_CFR1_INIT};        nbits <= 6'd40; end
            R_ASF:  begin shreg <= {3'b000, AD_ASF, 2'b00, p.asf, 16'h0};  nbits <= 6'd24; end
            R_FTW:  begin shreg <= {3'b000, AD_FTW0, p.ftw};               nbits <= 6'd40; end
            R_POW:  begin shreg <= {3'b000, AD_POW0, 2'b00, p.pow, 16'h0}; nbits <= 6'd24; end
            default: ;
          endcase
          cs_n  <= 1'b0;
          sclk  <= 1'b0;
          hcnt  <= '0;
          state <= S_SHIFT;
        end
        S_SHIFT: begin
          if (hcnt == HW'(SCLK_HALF - 1)) begin
            hcnt <= '0;
            if (!sclk) begin
              sclk <= 1'b1;                  // DDS samples SDIO here
            end else begin
              sclk  <= 1'b0;
              shreg <= {shreg[38:0], 1'b0};
              nbits <= nbits - 1'b1;
              if (nbits == 6'd1) state <= S_GAP;
            end
          end else hcnt <= hcnt + 1'b1;
        end
        S_GAP: begin
          cs_n <= 1'b1;
          if (cur == R_CFR1) cfr_done <= 1'b1;
          if (cur == R_POW) begin
            io_update <= 1'b1;
            ucnt      <= '0;
            state     <= S_UPDATE;
          end else begin
            cur   <= reg_t'(cur + 2'd1);
            state <= S_LOAD;
          end
        end
        S_UPDATE: begin
          if (ucnt == UW'(IO_UPDATE_CYCLES - 1)) begin
            io_update <= 1'b0;
            done      <= 1'b1;
            state     <= S_IDLE;
          end else ucnt <= ucnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // serial-port rules: SCLK only pulses inside a frame, IO_UPDATE only
  // outside one, and a frame never starts on a high SCLK
  a_sclk_in_frame: assert property (@(posedge clk) disable iff (!rst_n)
                                    sclk |-> !cs_n);
  a_update_outside: assert property (@(posedge clk) disable iff (!rst_n)
                                     io_update |-> cs_n);
  a_frame_start:   assert property (@(posedge clk) disable iff (!rst_n)
                                    $fell(cs_n) |-> !sclk);

endmodule
