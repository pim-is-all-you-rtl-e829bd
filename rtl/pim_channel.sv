// pim_channel: one GDDR6-PIM channel: a 2 KB global buffer and four bank
// groups of four banks, each bank with its near-bank PU (pim_pu).
//
// The channel executes one command per cycle from its PIM controller
// (chcmd_t). Commands act in two steps: in the cycle the command arrives the
// banks and the global buffer are read, written, activated or precharged; in
// the next cycle the read data reaches the PUs (or the read port) and the
// results are written back. Commands:
//   C_ACT / C_PRE  activate / precharge the banks in bmask (all 16 = ACTab/PREab)
//   C_RD / C_WR    single-bank column read (returned on rdata) / write
//   C_MAC          all 16 PUs: acc[regid] += bank column . (global buffer
//                  column, or neighbouring bank's column when nb = 1)
//   C_EWMUL        in each bank group g: bank 4g+2 := bank 4g * bank 4g+1
//                  (element-wise, same row and column)
//   C_AF           each PU applies the activation table in its own bank
//   C_WRGB         global buffer[col] := data
//   C_BKGB / C_GBBK copy between bank bk and the global buffer, column col
//   C_WRBIAS       every PU's accumulators := its 16-bit lane of data
//   C_RDMAC        rdata := {acc[regid] of PU15 .. PU0}
//   C_WRABK        lane regid of column col in bank b := lane b of data
// Read data (C_RD, C_RDMAC) appears on rdata/rvalid one cycle after the
// command with the command's tag. The bank-group layout, the 256-bit global
// bus and neighbour pairing (bank 0 with bank 1) follow the paper; which banks
// of a group hold the EW_MUL inputs and output is this design's choice (the
// paper says two banks hold the inputs and "another bank" the result). For
// C_AF each bank reads its own column (chosen by its PU's accumulator), which
// a real GDDR6 command bus cannot address individually; this is a
// simplification of the paper's unspecified table access.
module pim_channel
  import cent_pkg::*;
#(
  parameter int unsigned ROWS = 16384,
  parameter int unsigned COLS = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  chcmd_t           cmd,
  output logic             rvalid,
  output slot_t            rdata,
  output logic [SB_AW-1:0] rtag
);
  localparam int unsigned NB = NUM_BANKS;

  chcmd_t q;
  always_ff @(posedge clk) begin
    if (!rst_n) q <= '0;
    else        q <= cmd;
  end

  // bank ports
  logic             b_act [NB];
  logic             b_pre [NB];
  logic             b_rd  [NB];
  logic [COL_W-1:0] b_rcol[NB];
  logic             b_wr  [NB];
  logic [COL_W-1:0] b_wcol[NB];
  logic [15:0]      b_wl  [NB];
  slot_t            b_wd  [NB];
  slot_t            b_q   [NB];
  logic             b_open[NB];
  logic [ROW_W-1:0] b_orow[NB];

  // PU ports
  bf16_t      pu_acc [NB];
  logic [8:0] pu_idx [NB];
  slot_t      pu_prod[NB];

  // global buffer
  logic             gb_re, gb_we;
  logic [COL_W-1:0] gb_waddr;
  slot_t            gb_wd, gb_q;

  always_comb begin
    gb_re    = (cmd.cmd == C_MAC) || (cmd.cmd == C_GBBK);
    gb_we    = 1'b0;
    gb_waddr = cmd.col;
    gb_wd    = cmd.data;
    if (cmd.cmd == C_WRGB) gb_we = 1'b1;
    if (q.cmd == C_BKGB) begin
      gb_we    = 1'b1;
      gb_waddr = q.col;
      gb_wd    = b_q[q.bk];
    end
  end

  global_buffer u_gb (
    .clk  (clk),
    .re   (gb_re),
    .raddr(cmd.col),
    .rdata(gb_q),
    .we   (gb_we),
    .waddr(gb_waddr),
    .wdata(gb_wd)
  );

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      b_act[b]  = (cmd.cmd == C_ACT) && cmd.bmask[b];
      b_pre[b]  = (cmd.cmd == C_PRE) && cmd.bmask[b];
      b_rd[b]   = (cmd.cmd == C_MAC) || (cmd.cmd == C_EWMUL) || (cmd.cmd == C_AF) ||
                  (((cmd.cmd == C_RD) || (cmd.cmd == C_BKGB)) && (cmd.bk == 4'(b)));
      b_rcol[b] = (cmd.cmd == C_AF) ? pu_idx[b][8:3] : cmd.col;
      // first-step writes
      b_wr[b]   = 1'b0;
      b_wcol[b] = cmd.col;
      b_wl[b]   = 16'hFFFF;
      b_wd[b]   = cmd.data;
      if (cmd.cmd == C_WR && cmd.bk == 4'(b)) b_wr[b] = 1'b1;
      if (cmd.cmd == C_WRABK) begin
        b_wr[b] = 1'b1;
        b_wl[b] = 16'(1) << cmd.regid[3:0];
        b_wd[b] = {16{cmd.data[b*16 +: 16]}};
      end
      // second-step writes take the port
      if (q.cmd == C_EWMUL && (b % 4) == 2) begin
        b_wr[b]   = 1'b1;
        b_wcol[b] = q.col;
        b_wl[b]   = 16'hFFFF;
        b_wd[b]   = pu_prod[b-2];
      end
      if (q.cmd == C_GBBK && q.bk == 4'(b)) begin
        b_wr[b]   = 1'b1;
        b_wcol[b] = q.col;
        b_wl[b]   = 16'hFFFF;
        b_wd[b]   = gb_q;
      end
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    dram_bank #(.ROWS(ROWS), .COLS(COLS)) u_bank (
      .clk     (clk),
      .rst_n   (rst_n),
      .act     (b_act[b]),
      .pre     (b_pre[b]),
      .act_row (cmd.row),
      .rd      (b_rd[b]),
      .rd_col  (b_rcol[b]),
      .wr      (b_wr[b]),
      .wr_col  (b_wcol[b]),
      .wr_lanes(b_wl[b]),
      .wr_data (b_wd[b]),
      .rd_data (b_q[b]),
      .row_open(b_open[b]),
      .open_row(b_orow[b])
    );

    pim_pu u_pu (
      .clk     (clk),
      .rst_n   (rst_n),
      .op      (q.cmd),
      .regid   (q.regid),
      .nb_sel  (q.nb),
      .bank_d  (b_q[b]),
      .gb_d    (gb_q),
      .nb_d    (b_q[b ^ 1]),
      .bias    (q.data[b*16 +: 16]),
      .rd_regid(q.regid),
      .acc_out (pu_acc[b]),
      .af_regid(cmd.regid),
      .af_idx  (pu_idx[b]),
      .prod    (pu_prod[b])
    );
  end

  always_comb begin
    rvalid = (q.cmd == C_RD) || (q.cmd == C_RDMAC);
    rtag   = q.tag;
    rdata  = b_q[q.bk];
    if (q.cmd == C_RDMAC)
      for (int b = 0; b < NB; b++) rdata[b*16 +: 16] = pu_acc[b];
  end

  // PIM column commands need every bank open on the same row (ACTab).
  a_allbank_open : assert property (@(posedge clk) disable iff (!rst_n)
    (cmd.cmd inside {C_MAC, C_EWMUL}) |-> (b_open[0] && b_open[15] && b_orow[0] == b_orow[15]));

endmodule
