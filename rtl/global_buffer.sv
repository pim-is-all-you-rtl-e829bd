// global_buffer: the 2 KB buffer shared by the four bank groups of a PIM
// channel. It holds ENTRIES 256-bit words, one per DRAM column of a 2 KB row,
// so a vector segment at column c lines up with column c of every bank.
// Every cycle it can broadcast one word (rdata, valid the cycle after re) to
// all 16 near-bank PUs, and accept one write (from the shared buffer through
// WR_GB or from a bank through COPY_BKGB). Size and 256-bit broadcast are the
// paper's; the one-read one-write synchronous port is this design's choice.
module global_buffer
  import cent_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic             clk,
  input  logic             re,
  input  logic [COL_W-1:0] raddr,
  output slot_t            rdata,
  input  logic             we,
  input  logic [COL_W-1:0] waddr,
  input  slot_t            wdata
);
  localparam int unsigned AW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  slot_t mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr[AW-1:0]];
    if (we) mem[waddr[AW-1:0]] <= wdata;
  end
endmodule
