// pnm_reduction_tree: one of the 32 near-memory reduction trees. It sums
// the 16 BF16 elements of a 256-bit slot in a balanced tree of 15 BF16
// adders (4 levels: 8, 4, 2, 1) and returns a slot whose element 0 holds the
// sum, as the paper specifies ("stored into the first 16-bit element").
// The paper does not say what the other 15 elements become; here they are
// zero. Combinational; pnm_units registers operands and results.
module pnm_reduction_tree
  import cent_pkg::*;
(
  input  slot_t s,
  output slot_t y
);
  bf16_t l1 [8];
  bf16_t l2 [4];
  bf16_t l3 [2];
  always_comb begin
    for (int i = 0; i < 8; i++) l1[i] = bf16_add(s[(2*i)*16 +: 16], s[(2*i+1)*16 +: 16]);
    for (int i = 0; i < 4; i++) l2[i] = bf16_add(l1[2*i], l1[2*i+1]);
    for (int i = 0; i < 2; i++) l3[i] = bf16_add(l2[2*i], l2[2*i+1]);
    y        = '0;
    y[15:0]  = bf16_add(l3[0], l3[1]);
  end
endmodule
