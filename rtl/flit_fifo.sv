// flit_fifo: a DEPTH-entry first-in first-out queue of CXL messages (flit_t)
// with valid/ready on both sides. Used for the virtual-channel queues of the
// CXL port. Data is written at the tail on in_valid && in_ready and the head
// is shown on out_data whenever out_valid is high.
module flit_fifo
  import cent_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  flit_t         q [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;
  logic          push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = q[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) begin
        q[wp] <= in_data;
        wp    <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule
