// pim_controller: the memory controller of two GDDR6-PIM channels.
//
// It accepts micro-ops from the decoder (valid/ready) and turns them into
// channel commands while honouring the GDDR6 timing of the paper's Table 4,
// counted in 1 ns controller cycles (the PIM PU clock, equal to tCCDS):
//   ACT -> column read-type command   >= T_RCDRD (18)
//   ACT -> column write-type command  >= T_RCDWR (14)
//   column -> column                  >= T_CCDS  (1)
//   last read-type column -> PRE      >= T_CL    (25, data out of the banks)
//   ACT -> PRE                        >= T_RAS   (27)
//   PRE -> next ACT                   >= T_RP    (16)
// A PIM instruction runs as the paper describes: one all-bank activate
// (ACTab), a burst of one column command per cycle (e.g. MACab), then one
// all-bank precharge (PREab) after the micro-op flagged `last`. Single-bank
// transfers (WR_SBK, RD_SBK, COPY_*) activate only their bank. WR_GB,
// WR_BIAS and RD_MAC touch no DRAM row and issue straight away. Both
// channels whose bit is set in the micro-op's chmask receive the same
// commands. Read data coming back from the channels (RD_SBK, RD_MAC) is
// passed on ret_* to the load/store unit; a read-type micro-op is accepted
// only when that unit has room for two more words. The write-recovery time
// is not given in the paper; a write-type burst precharges T_CCDS after its
// last column (subject to T_RAS).
module pim_controller
  import cent_pkg::*;
#(
  parameter int unsigned T_RCDRD = 18,
  parameter int unsigned T_RCDWR = 14,
  parameter int unsigned T_RAS   = 27,
  parameter int unsigned T_CL    = 25,
  parameter int unsigned T_RP    = 16,
  parameter int unsigned T_CCDS  = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             uop_valid,
  input  uop_t             uop,
  output logic             uop_ready,
  output logic             busy,
  output chcmd_t           ch_cmd [2],
  input  logic             ch_rvalid [2],
  input  slot_t            ch_rdata [2],
  input  logic [SB_AW-1:0] ch_rtag [2],
  output logic             ret_valid,
  output logic [SB_AW-1:0] ret_tag,
  output slot_t            ret_data,
  input  logic [2:0]       ret_space
);
  typedef enum logic [2:0] {S_IDLE, S_RCD, S_COL, S_TAIL, S_RP} state_e;
  state_e      state;
  uop_t        cur;
  logic [7:0]  cnt, ras, ccd;
  logic [15:0] open_mask;

  function automatic logic needs_row(input uop_e k);
    return k inside {U_MAC, U_EWMUL, U_AF, U_WRSBK, U_RDSBK, U_WRABK, U_BKGB, U_GBBK};
  endfunction
  function automatic logic all_bank(input uop_e k);
    return k inside {U_MAC, U_EWMUL, U_AF, U_WRABK};
  endfunction
  function automatic logic write_type(input uop_e k);
    return k inside {U_WRSBK, U_WRABK, U_GBBK};
  endfunction
  function automatic logic returns_data(input uop_e k);
    return k inside {U_RDSBK, U_RDMAC};
  endfunction
  function automatic logic [7:0] t_rcd(input uop_e k);
    return write_type(k) ? 8'(T_RCDWR) : 8'(T_RCDRD);
  endfunction
  function automatic logic [7:0] t_tail(input uop_e k);
    return write_type(k) ? 8'(T_CCDS) : 8'(T_CL);
  endfunction
  function automatic logic [15:0] bmask_of(input uop_t u);
    return all_bank(u.kind) ? 16'hFFFF : (16'(1) << u.bk);
  endfunction

  function automatic chcmd_t col_cmd(input uop_t u);
    chcmd_t c;
    c       = '0;
    c.row   = u.row;
    c.col   = u.col;
    c.bk    = u.bk;
    c.regid = u.regid;
    c.afid  = u.afid;
    c.nb    = u.nb;
    c.tag   = u.sb_addr;
    c.data  = u.data;
    case (u.kind)
      U_MAC:    c.cmd = C_MAC;
      U_EWMUL:  c.cmd = C_EWMUL;
      U_AF:     c.cmd = C_AF;
      U_WRSBK:  c.cmd = C_WR;
      U_RDSBK:  c.cmd = C_RD;
      U_WRABK:  c.cmd = C_WRABK;
      U_BKGB:   c.cmd = C_BKGB;
      U_GBBK:   c.cmd = C_GBBK;
      U_WRBIAS: c.cmd = C_WRBIAS;
      U_RDMAC:  c.cmd = C_RDMAC;
      default:  c.cmd = C_WRGB;
    endcase
    return c;
  endfunction

  logic   space_ok, accept;
  chcmd_t cmd;
  logic [1:0] cmask;

  assign space_ok = !returns_data(uop.kind) || (ret_space >= 3'd2);

  always_comb begin
    cmd       = '0;
    cmd.cmd   = C_NOP;
    cmask     = cur.chmask;
    uop_ready = 1'b0;
    case (state)
      S_IDLE: if (uop_valid && space_ok) begin
        uop_ready = 1'b1;
        cmask     = uop.chmask;
        if (needs_row(uop.kind)) begin
          cmd.cmd   = C_ACT;
          cmd.bmask = bmask_of(uop);
          cmd.row   = (uop.kind == U_AF) ? af_row(uop.afid) : uop.row;
        end else begin
          cmd = col_cmd(uop);
        end
      end
      S_RCD: if (cnt == 8'd0) cmd = col_cmd(cur);
      S_COL: if (uop_valid && space_ok && ccd == 8'd0) begin
        uop_ready = 1'b1;
        cmask     = uop.chmask;
        cmd       = col_cmd(uop);
      end
      S_TAIL: if (cnt == 8'd0 && ras == 8'd0) begin
        cmd.cmd   = C_PRE;
        cmd.bmask = open_mask;
      end
      default: ;
    endcase
  end

  assign accept = uop_valid && uop_ready;

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      ch_cmd[c] = cmask[c] ? cmd : '0;
      if (!cmask[c]) ch_cmd[c].cmd = C_NOP;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      cnt       <= '0;
      ras       <= '0;
      ccd       <= '0;
      open_mask <= '0;
    end else begin
      if (ras != 8'd0) ras <= ras - 8'd1;
      if (ccd != 8'd0) ccd <= ccd - 8'd1;
      case (state)
        S_IDLE: if (accept && needs_row(uop.kind)) begin
          cur       <= uop;
          cnt       <= t_rcd(uop.kind) - 8'd1;
          ras       <= 8'(T_RAS) - 8'd1;
          open_mask <= bmask_of(uop);
          state     <= S_RCD;
        end
        S_RCD: begin
          if (cnt == 8'd0) begin
            ccd <= 8'(T_CCDS) - 8'd1;
            if (cur.last) begin
              cnt   <= t_tail(cur.kind) - 8'd1;
              state <= S_TAIL;
            end else begin
              state <= S_COL;
            end
          end else begin
            cnt <= cnt - 8'd1;
          end
        end
        S_COL: if (accept) begin
          cur <= uop;
          ccd <= 8'(T_CCDS) - 8'd1;
          if (uop.last) begin
            cnt   <= t_tail(uop.kind) - 8'd1;
            state <= S_TAIL;
          end
        end
        S_TAIL: begin
          if (cnt != 8'd0) cnt <= cnt - 8'd1;
          else if (ras == 8'd0) begin
            cnt   <= 8'(T_RP) - 8'd1;
            state <= S_RP;
          end
        end
        S_RP: begin
          if (cnt == 8'd0) state <= S_IDLE;
          else             cnt   <= cnt - 8'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  always_comb begin
    ret_valid = ch_rvalid[0] || ch_rvalid[1];
    ret_tag   = ch_rvalid[0] ? ch_rtag[0]  : ch_rtag[1];
    ret_data  = ch_rvalid[0] ? ch_rdata[0] : ch_rdata[1];
  end

  // Micro-ops that read data target exactly one channel, so the two channels
  // never return data in the same cycle.
  a_one_return : assert property (@(posedge clk) disable iff (!rst_n) !(ch_rvalid[0] && ch_rvalid[1]));

endmodule
