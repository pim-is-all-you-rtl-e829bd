// instr_buffer: the 2 MB instruction SRAM of a CXL device. The host fills it
// with 128-bit CENT instructions through CXL writes (one instruction per
// write); the decoder fetches one instruction per read, with the data valid
// the cycle after re. 2 MB / 16 B = 131072 entries. Capacity is the paper's;
// the 128-bit word and single-port-per-side organisation are this design's.
module instr_buffer
  import cent_pkg::*;
#(
  parameter int unsigned DEPTH = 131072
) (
  input  logic        clk,
  input  logic        we,
  input  logic [16:0] waddr,
  input  instr_t      wdata,
  input  logic        re,
  input  logic [16:0] raddr,
  output instr_t      rdata
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  instr_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr[AW-1:0]] <= wdata;
    if (re) rdata <= mem[raddr[AW-1:0]];
  end
endmodule
