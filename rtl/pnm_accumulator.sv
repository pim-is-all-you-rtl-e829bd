// pnm_accumulator: one of the 32 near-memory accumulators. It takes two
// shared-buffer slots, splits each 256-bit slot into 16 BF16 lanes and adds
// them lane by lane: y[i] = d[i] + s[i] (the paper's Rd[i] = Rd[i] + Rs[i];
// used for residual connections). Purely combinational; the pnm_units
// sequencer registers the operands from the shared buffer and writes y back
// to Rd. Lane split and function are the paper's; BF16 rounding is the
// truncation of cent_pkg::bf16_add.
module pnm_accumulator
  import cent_pkg::*;
(
  input  slot_t d,
  input  slot_t s,
  output slot_t y
);
  always_comb
    for (int i = 0; i < 16; i++) y[i*16 +: 16] = bf16_add(d[i*16 +: 16], s[i*16 +: 16]);
endmodule
