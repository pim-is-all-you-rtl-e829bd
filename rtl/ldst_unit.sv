// ldst_unit: the load/store unit beside each PIM controller. Words read out
// of the DRAM banks or PU accumulators (RD_SBK, RD_MAC) arrive here tagged
// with their destination shared-buffer slot and wait in a DEPTH-entry FIFO
// until the shared buffer accepts them (valid/ready on the sb_* side). The
// controller only issues a read when `space` shows room for two words. Words
// travelling the other way (WR_SBK, WR_GB, WR_BIAS, WR_ABK) are read from the
// shared buffer by the decoder and ride with the micro-op, so this unit only
// buffers the read direction. The paper names the unit and its role; the
// FIFO and its depth are this design's own.
module ldst_unit
  import cent_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [SB_AW-1:0] in_tag,
  input  slot_t            in_data,
  output logic [2:0]       space,
  output logic             sb_valid,
  output logic [SB_AW-1:0] sb_addr,
  output slot_t            sb_data,
  input  logic             sb_ready,
  output logic             empty
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [SB_AW-1:0] tag_q [DEPTH];
  slot_t            dat_q [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      count;
  logic             push, pop;

  assign push     = in_valid && (count != (AW+1)'(DEPTH));
  assign pop      = sb_valid && sb_ready;
  assign sb_valid = (count != '0);
  assign sb_addr  = tag_q[rp];
  assign sb_data  = dat_q[rp];
  assign empty    = (count == '0);
  assign space    = 3'((AW+1)'(DEPTH) - count);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) begin
        tag_q[wp] <= in_tag;
        dat_q[wp] <= in_data;
        wp        <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (count != (AW+1)'(DEPTH)));

endmodule
