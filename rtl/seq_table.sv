// seq_table: the timing-sequence table.
//
// DEPTH words of mw_pkg::dds_params_t (amplitude, frequency, phase), one word
// per step of the timing sequence. Simple dual-port RAM: the write port is
// driven by usb_registers while a sequence arrives from the host, the read
// port by dds_driver when it steps. Reads are synchronous, rdata is valid one
// clock after raddr, which lets synthesis map the table onto block RAM. The
// contents are not reset (a new sequence is always written before use).
// The paper stores the steps "as words in a table" in volatile memory; the
// depth is not given and the default of 1024 steps is this design's choice.
module seq_table
  import mw_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  dds_params_t   wdata,
  input  logic [AW-1:0] raddr,
  output dds_params_t   rdata
);

  dds_params_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
