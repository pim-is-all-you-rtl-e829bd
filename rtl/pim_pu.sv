// pim_pu: the processing unit beside one DRAM bank of a GDDR6-PIM channel.
//
// Datapath (as drawn in the paper): 16 BF16 multipliers, each fed 16 bits of
// the bank's 256-bit column and 16 bits of a second operand, which is either
// the word broadcast by the global buffer or the column of the neighbouring
// bank (bank 2k pairs with 2k+1). The products go through a 4-level adder
// tree into one of NUM_ACC (32) BF16 accumulation registers chosen by Regid.
//
// Operations, all applied in the cycle `op` is presented together with the
// bank/global-buffer data it needs (the channel aligns them):
//   C_MAC    acc[regid] += sum_i bank[i] * opnd[i]
//   C_EWMUL  prod[i] = bank[i] * nb[i] (element-wise, adder tree bypassed)
//   C_WRBIAS every acc register := bias (this PU's lane of WR_BIAS data)
//   C_AF     acc[regid] := a * x + b, where x = acc[regid] and (a, b) is a
//            linear-interpolation segment read from a table in the bank.
// af_idx gives the table index of acc[af_regid] one cycle ahead so the
// channel can read the right column: index = {sign, exponent} of x (512
// segments, one per binade), column = index[8:3], pair = index[2:0]; within a
// column, pair p holds slope a in lane 2p and intercept b in lane 2p+1. The
// paper says only "lookup tables stored within the DRAM bank and linear
// interpolation"; this table format is this design's own.
// WR_BIAS writing all 32 registers is also this design's choice: the paper's
// WR_BIAS has no register operand.
module pim_pu
  import cent_pkg::*;
#(
  parameter int unsigned NACC = NUM_ACC
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ccmd_e      op,
  input  logic [4:0] regid,
  input  logic       nb_sel,
  input  slot_t      bank_d,
  input  slot_t      gb_d,
  input  slot_t      nb_d,
  input  bf16_t      bias,
  input  logic [4:0] rd_regid,
  output bf16_t      acc_out,
  input  logic [4:0] af_regid,
  output logic [8:0] af_idx,
  output slot_t      prod
);
  localparam int unsigned RIW = (NACC > 1) ? $clog2(NACC) : 1;

  bf16_t acc [NACC];
  bf16_t lvl1 [8];
  bf16_t lvl2 [4];
  bf16_t lvl3 [2];
  bf16_t tree_sum, x, slope, icpt;
  slot_t opnd;
  logic [8:0] idx;

  assign opnd = nb_sel ? nb_d : gb_d;

  always_comb begin
    for (int i = 0; i < 16; i++)
      prod[i*16 +: 16] = bf16_mul(bank_d[i*16 +: 16],
                                  (op == C_EWMUL) ? nb_d[i*16 +: 16] : opnd[i*16 +: 16]);
    for (int i = 0; i < 8; i++) lvl1[i] = bf16_add(prod[(2*i)*16 +: 16], prod[(2*i+1)*16 +: 16]);
    for (int i = 0; i < 4; i++) lvl2[i] = bf16_add(lvl1[2*i], lvl1[2*i+1]);
    for (int i = 0; i < 2; i++) lvl3[i] = bf16_add(lvl2[2*i], lvl2[2*i+1]);
    tree_sum = bf16_add(lvl3[0], lvl3[1]);
  end

  // activation function: segment lookup + linear interpolation
  assign x     = acc[regid[RIW-1:0]];
  assign idx   = x[15:7];
  assign slope = bank_d[(2*idx[2:0])*16 +: 16];
  assign icpt  = bank_d[(2*idx[2:0]+1)*16 +: 16];

  assign af_idx  = acc[af_regid[RIW-1:0]][15:7];
  assign acc_out = acc[rd_regid[RIW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < NACC; r++) acc[r] <= '0;
    end else begin
      case (op)
        C_MAC:    acc[regid[RIW-1:0]] <= bf16_add(acc[regid[RIW-1:0]], tree_sum);
        C_AF:     acc[regid[RIW-1:0]] <= bf16_add(bf16_mul(slope, x), icpt);
        C_WRBIAS: for (int r = 0; r < NACC; r++) acc[r] <= bias;
        default: ;
      endcase
    end
  end
endmodule
