// cent_decoder: program counter and instruction decoder of a CXL device.
//
// After the host writes the program length to the control register
// (start/prog_len) the decoder fetches instructions 0 .. prog_len-1 from the
// instruction buffer and executes them in order, one at a time:
//  * PIM instructions become micro-ops for the PIM controllers. A micro-op
//    goes to every controller whose channel pair has a bit set in the
//    channel mask (CHmask, or the single channel CHid); the decoder waits
//    until all addressed controllers accept it. "OPsize" instructions give
//    OPsize micro-ops on consecutive DRAM columns (CO+k) and shared-buffer
//    slots (Rs+k / Rd+k); the last carries `last`, which makes the controller
//    precharge. RD_MAC gives one micro-op per selected channel, writing the
//    n-th selected channel's 16 accumulators to slot Rd+n. Micro-ops that
//    carry data (WR_SBK, WR_GB, WR_BIAS, WR_ABK) first read their slot from
//    the shared buffer (one extra cycle each); the others issue at one per
//    cycle. After the last micro-op the decoder waits until every
//    controller is idle and every load/store unit has drained.
//  * EXP / RED / ACC start the PNM units; RISCV starts the external RISC-V
//    cores at PC (=RO field); SEND_CXL / RECV_CXL / BCAST_CXL start the
//    inter-device controller. The decoder waits for the matching done
//    (SEND/BCAST report done once the message is queued, so they do not
//    wait for the acknowledgement: the paper calls them non-blocking; RECV
//    is blocking).
// sb_owner tells the device which unit drives the shared buffer's narrow
// port. The paper describes the decoder's role and the micro-op expansion;
// strictly in-order, one-instruction-at-a-time issue is this design's
// simplification.
module cent_decoder
  import cent_pkg::*;
#(
  parameter int unsigned NUM_CTRL = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [17:0]         prog_len,
  output logic                running,
  output logic [17:0]         pc,
  // instruction buffer
  output logic                ib_re,
  output logic [16:0]         ib_raddr,
  input  instr_t              ib_rdata,
  // micro-ops to the PIM controllers
  output logic                uop_valid,
  output uop_t                uop,
  output logic [2*NUM_CTRL-1:0] uop_chmask,
  input  logic [NUM_CTRL-1:0] pim_ready,
  input  logic                pim_idle,
  // shared buffer narrow read
  output logic                sb_re,
  output logic [SB_AW-1:0]    sb_raddr,
  input  slot_t               sb_rdata,
  output sb_owner_e           sb_owner,
  // PNM units
  output logic                pnm_start,
  input  logic                pnm_done,
  // inter-device controller
  output logic                idc_start,
  input  logic                idc_done,
  // RISC-V cores (outside this design)
  output logic                rv_start,
  input  logic                rv_done,
  // current instruction, for the units above
  output instr_t              ins
);
  localparam int unsigned NCH = 2 * NUM_CTRL;

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_SBRD, S_UOP, S_DRAIN, S_WAIT_PNM, S_WAIT_IDC,
    S_WAIT_RV, S_NEXT
  } state_e;

  state_e      state;
  logic [17:0] len;
  logic [15:0] k, count;
  logic [15:0] rank;
  logic [NCH-1:0] sel;
  logic        all_ready;

  function automatic logic is_pim(input opcode_e o);
    return o inside {OP_MAC_ABK, OP_EW_MUL, OP_AF, OP_WR_SBK, OP_RD_SBK, OP_WR_ABK,
                     OP_COPY_BKGB, OP_COPY_GBBK, OP_WR_BIAS, OP_RD_MAC, OP_WR_GB};
  endfunction
  function automatic logic has_data(input opcode_e o);
    return o inside {OP_WR_SBK, OP_WR_GB, OP_WR_BIAS, OP_WR_ABK};
  endfunction
  function automatic logic by_chid(input opcode_e o);
    return o inside {OP_WR_SBK, OP_RD_SBK, OP_WR_ABK};
  endfunction
  function automatic uop_e kind_of(input opcode_e o);
    case (o)
      OP_MAC_ABK:   return U_MAC;
      OP_EW_MUL:    return U_EWMUL;
      OP_AF:        return U_AF;
      OP_WR_SBK:    return U_WRSBK;
      OP_RD_SBK:    return U_RDSBK;
      OP_WR_ABK:    return U_WRABK;
      OP_COPY_BKGB: return U_BKGB;
      OP_COPY_GBBK: return U_GBBK;
      OP_WR_BIAS:   return U_WRBIAS;
      OP_RD_MAC:    return U_RDMAC;
      default:      return U_WRGB;
    endcase
  endfunction

  // channel selection of the current micro-op
  always_comb begin
    if (ins.op == OP_RD_MAC)   sel = NCH'(1) << k[4:0];
    else if (by_chid(ins.op))  sel = NCH'(1) << ins.chmask[4:0];
    else                       sel = NCH'(ins.chmask);
  end

  always_comb begin
    all_ready = 1'b1;
    for (int c = 0; c < NUM_CTRL; c++)
      if (sel[2*c +: 2] != 2'b00 && !pim_ready[c]) all_ready = 1'b0;
  end

  always_comb begin
    uop         = '0;
    uop.kind    = kind_of(ins.op);
    uop.row     = ins.ro[ROW_W-1:0];
    uop.col     = COL_W'(ins.co + k[7:0]);
    uop.bk      = ins.bk;
    uop.regid   = ins.regid;
    uop.afid    = ins.afid;
    uop.nb      = ins.nb;
    uop.sb_addr = (ins.op == OP_RD_MAC) ? SB_AW'(ins.rd + rank) : SB_AW'(ins.rd + k);
    uop.last    = (k + 16'd1 == count);
    uop.data    = sb_rdata;
    uop_chmask  = sel;
    uop_valid   = (state == S_UOP) && !((ins.op == OP_RD_MAC) && !ins.chmask[k[4:0]]);
  end

  assign ib_re     = (state == S_FETCH);
  assign ib_raddr  = pc[16:0];
  assign sb_re     = (state == S_SBRD);
  assign sb_raddr  = (ins.op == OP_WR_SBK || ins.op == OP_WR_GB) ? SB_AW'(ins.rs + k) : SB_AW'(ins.rs);
  assign running   = (state != S_IDLE);

  always_comb begin
    sb_owner = OWN_HOST;
    if (state != S_IDLE) begin
      case (ins.op)
        OP_RD_SBK, OP_RD_MAC:                  sb_owner = OWN_LDST;
        OP_EXP, OP_RED, OP_ACC:                sb_owner = OWN_PNM;
        OP_SEND_CXL, OP_RECV_CXL, OP_BCAST_CXL: sb_owner = OWN_IDC;
        OP_RISCV:                              sb_owner = OWN_RV;
        default:                               sb_owner = OWN_DEC;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pc        <= '0;
      len       <= '0;
      k         <= '0;
      count     <= '0;
      rank      <= '0;
      ins       <= '0;
      pnm_start <= 1'b0;
      idc_start <= 1'b0;
      rv_start  <= 1'b0;
    end else begin
      pnm_start <= 1'b0;
      idc_start <= 1'b0;
      rv_start  <= 1'b0;
      case (state)
        S_IDLE: if (start && prog_len != 18'd0) begin
          pc    <= '0;
          len   <= prog_len;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DECODE;
        S_DECODE: begin
          ins  <= ib_rdata;
          k    <= '0;
          rank <= '0;
          case (ib_rdata.op)
            OP_AF, OP_WR_BIAS, OP_WR_ABK: count <= 16'd1;
            OP_RD_MAC:                    count <= 16'(NCH);
            default:                      count <= ib_rdata.opsize;
          endcase
          if (is_pim(ib_rdata.op)) begin
            if (ib_rdata.opsize == 16'd0 && !(ib_rdata.op inside {OP_AF, OP_WR_BIAS, OP_WR_ABK, OP_RD_MAC}))
              state <= S_NEXT;
            else
              state <= has_data(ib_rdata.op) ? S_SBRD : S_UOP;
          end else if (ib_rdata.op inside {OP_EXP, OP_RED, OP_ACC}) begin
            pnm_start <= 1'b1;
            state     <= S_WAIT_PNM;
          end else if (ib_rdata.op inside {OP_SEND_CXL, OP_RECV_CXL, OP_BCAST_CXL}) begin
            idc_start <= 1'b1;
            state     <= S_WAIT_IDC;
          end else if (ib_rdata.op == OP_RISCV) begin
            rv_start <= 1'b1;
            state    <= S_WAIT_RV;
          end else begin
            state <= S_NEXT;
          end
        end
        S_SBRD: state <= S_UOP;
        S_UOP: begin
          if (!uop_valid || all_ready) begin
            if (uop_valid && ins.op == OP_RD_MAC) rank <= rank + 16'd1;
            k <= k + 16'd1;
            if (k + 16'd1 == count) state <= S_DRAIN;
            else if (has_data(ins.op)) state <= S_SBRD;
          end
        end
        S_DRAIN:    if (pim_idle) state <= S_NEXT;
        S_WAIT_PNM: if (pnm_done) state <= S_NEXT;
        S_WAIT_IDC: if (idc_done) state <= S_NEXT;
        S_WAIT_RV:  if (rv_done)  state <= S_NEXT;
        S_NEXT: begin
          pc    <= pc + 18'd1;
          state <= (pc + 18'd1 == len) ? S_IDLE : S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
