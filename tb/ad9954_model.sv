// ad9954_model: behavioural model of the serial register port of the AD9954
// DDS, for testbenches only (not synthesizable logic of the design).
//
// Models what the controller relies on: while CS_N is low, SDIO is sampled
// on each rising SCLK edge, MSB first; the first byte is the instruction
// (bit 7 = read, bits 4:0 = address), followed by as many data bits as the
// addressed register holds (CFR1 32, CFR2 24, ASF 16, ARR 8, FTW0 32,
// POW0 16). A complete write lands in a buffer register; a rising edge on
// IO_UPDATE copies the buffers to the active registers, as in the chip.
// RESET clears everything. The model counts register writes, updates and
// protocol errors (CS_N rising in the middle of an instruction cycle, or a
// read instruction, which the controller never issues).
module ad9954_model (
  input  logic sclk,
  input  logic cs_n,
  input  logic sdio,
  input  logic io_update,
  input  logic reset
);

  logic [31:0] buf_cfr1, buf_asf, buf_ftw, buf_pow;
  logic [31:0] cfr1, asf, ftw, pow;
  int          writes, updates, errors, cfr1_writes;

  logic [7:0]  instr;
  logic [31:0] data;
  int          nbit, need;

  function automatic int reg_bits(input logic [4:0] a);
    case (a)
      5'h00: return 32;
      5'h01: return 24;
      5'h02: return 16;
      5'h03: return 8;
      5'h04: return 32;
      5'h05: return 16;
      default: return 32;
    endcase
  endfunction

  initial begin
    buf_cfr1 = 0; buf_asf = 0; buf_ftw = 0; buf_pow = 0;
    cfr1 = 0; asf = 0; ftw = 0; pow = 0;
    writes = 0; updates = 0; errors = 0; cfr1_writes = 0;
    nbit = 0; need = 0; instr = 0; data = 0;
  end

  always @(negedge cs_n) begin
    nbit = 0;
    data = 0;
  end

  always @(posedge cs_n) begin
    if (nbit != 0) errors++;
    nbit = 0;
  end

  always @(posedge sclk) begin
    if (!cs_n) begin
      if (nbit < 8) begin
        instr = {instr[6:0], sdio};
        nbit++;
        if (nbit == 8) begin
          need = reg_bits(instr[4:0]);
          if (instr[7]) errors++;
        end
      end else begin
        data = {data[30:0], sdio};
        nbit++;
        if (nbit == 8 + need) begin
          writes++;
          case (instr[4:0])
            5'h00: begin buf_cfr1 = data; cfr1_writes++; end
            5'h02: buf_asf = data;
            5'h04: buf_ftw = data;
            5'h05: buf_pow = data;
            default: ;
          endcase
          nbit = 0;
        end
      end
    end
  end

  always @(posedge io_update) begin
    cfr1 = buf_cfr1;
    asf  = buf_asf;
    ftw  = buf_ftw;
    pow  = buf_pow;
    updates++;
  end

  always @(posedge reset) begin
    buf_cfr1 = 0; buf_asf = 0; buf_ftw = 0; buf_pow = 0;
    cfr1 = 0; asf = 0; ftw = 0; pow = 0;
  end

endmodule
