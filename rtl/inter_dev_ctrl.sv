// inter_dev_ctrl: the inter-device communication controller of a CXL device.
// It sits between the CXL port and the shared buffer and does two jobs.
//
// 1. Executes the CXL instructions handed over by the decoder (start/ins):
//    SEND_CXL DVid Rs Rd   reads slot Rs and sends a write (RWD) of it to
//                          slot Rd of device DVid; done once queued
//                          (non-blocking).
//    BCAST_CXL DVcount Rs Rd  as SEND, but one broadcast message (M_BRWD)
//                          whose device-id mask names the DVcount devices
//                          following this one (ids my_id+1 .. my_id+DVcount,
//                          below NUM_DEVICES); the switch copies it.
//    RECV_CXL              blocks until a remote write is waiting, stores it
//                          in the slot the sender named, and completes; the
//                          port then acknowledges it (NDR). It names no
//                          sender, so a gather is several RECV_CXL in any
//                          arrival order.
//    Every RWD sent adds one expected acknowledgement per destination to
//    `outstanding`; each NDR received removes one.
// 2. Serves the host: writes to the instruction buffer, the shared buffer
//    and the control register (start a program of `data` instructions), and
//    reads of the shared buffer and the status register
//    {.., outstanding, running, pc}. Shared-buffer accesses of the host wait
//    while a program runs. Host accesses to the DRAM region are acknowledged
//    but not carried out (see the design notes).
// The instructions, their operands and blocking behaviour follow the paper;
// the host address map, the status word and the one-slot message size are
// this design's own.
module inter_dev_ctrl
  import cent_pkg::*;
#(
  parameter int unsigned NUM_DEVICES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_id,
  // decoder
  input  logic              start,
  input  instr_t            ins,
  output logic              done,
  input  logic              running,
  input  logic [17:0]       pc,
  output logic              prog_start,
  output logic [17:0]       prog_len,
  // shared buffer narrow port
  output logic              sb_re,
  output logic [SB_AW-1:0]  sb_raddr,
  input  slot_t             sb_rdata,
  output logic              sb_we,
  output logic [SB_AW-1:0]  sb_waddr,
  output slot_t             sb_wdata,
  // instruction buffer write
  output logic              ib_we,
  output logic [16:0]       ib_waddr,
  output instr_t            ib_wdata,
  // CXL port
  output logic              l2r_rwd_valid,
  input  logic              l2r_rwd_ready,
  output flit_t             l2r_rwd,
  input  logic              r2l_rwd_valid,
  output logic              r2l_rwd_ready,
  input  flit_t             r2l_rwd,
  input  logic              r2l_ndr_valid,
  output logic              r2l_ndr_ready,
  input  logic              h2l_rwd_valid,
  output logic              h2l_rwd_ready,
  input  flit_t             h2l_rwd,
  input  logic              h2l_req_valid,
  output logic              h2l_req_ready,
  input  flit_t             h2l_req,
  output logic              drs_valid,
  input  logic              drs_ready,
  output flit_t             drs,
  output logic [15:0]       outstanding
);
  typedef enum logic [2:0] {S_IDLE, S_SEND_RD, S_SEND_TX, S_RECV, S_HRD, S_HRSP} state_e;
  state_e state;
  instr_t cur;
  flit_t  hreq;
  logic [MASK_W-1:0] bmask;
  logic [15:0]       bcount;

  // broadcast destination mask: the DVcount devices after this one
  always_comb begin
    bmask  = '0;
    bcount = '0;
    for (int d = 0; d < MASK_W; d++) begin
      if (d < NUM_DEVICES && d > int'(my_id) && d <= int'(my_id) + int'(cur.chmask[7:0])) begin
        bmask[d] = 1'b1;
        bcount   = bcount + 16'd1;
      end
    end
  end

  logic [1:0] hw_region, hr_region;
  logic       hw_take, hr_take;
  assign hw_region = h2l_rwd.addr[31:30];
  assign hr_region = h2l_req.addr[31:30];

  // host writes: SB / instruction writes wait while a program runs
  assign hw_take = h2l_rwd_valid && (state == S_IDLE) && !start &&
                   ((hw_region == REG_CTRL) || (hw_region == REG_DRAM) || !running);
  assign hr_take = h2l_req_valid && (state == S_IDLE) && !start && !hw_take &&
                   ((hr_region == REG_CTRL) || !running);

  assign h2l_rwd_ready = hw_take;
  assign h2l_req_ready = hr_take;
  assign r2l_ndr_ready = 1'b1;

  always_comb begin
    sb_re         = 1'b0;
    sb_raddr      = cur.rs[SB_AW-1:0];
    sb_we         = 1'b0;
    sb_waddr      = r2l_rwd.addr[SB_AW-1:0];
    sb_wdata      = r2l_rwd.data;
    ib_we         = 1'b0;
    ib_waddr      = h2l_rwd.addr[16:0];
    ib_wdata      = h2l_rwd.data[127:0];
    r2l_rwd_ready = 1'b0;
    prog_start    = 1'b0;
    prog_len      = h2l_rwd.data[17:0];
    l2r_rwd_valid = (state == S_SEND_TX);
    l2r_rwd       = '0;
    l2r_rwd.src   = my_id;
    l2r_rwd.addr  = {REG_SB, 19'd0, cur.rd[SB_AW-1:0]};
    l2r_rwd.data  = sb_rdata;
    if (cur.op == OP_BCAST_CXL) begin
      l2r_rwd.typ   = M_BRWD;
      l2r_rwd.dmask = bmask;
    end else begin
      l2r_rwd.typ   = M_RWD;
      l2r_rwd.dst   = NODE_W'(cur.chmask[7:0]);
    end
    drs_valid     = (state == S_HRSP);
    drs           = '0;
    drs.addr      = hreq.addr;
    drs.data      = (hreq.addr[31:30] == REG_CTRL)
                    ? slot_t'({outstanding, 7'd0, running, 6'd0, pc})
                    : sb_rdata;
    case (state)
      S_SEND_RD: sb_re = 1'b1;
      S_RECV: if (r2l_rwd_valid) begin
        sb_we         = 1'b1;
        r2l_rwd_ready = 1'b1;
      end
      S_HRD: begin
        sb_re    = 1'b1;
        sb_raddr = hreq.addr[SB_AW-1:0];
      end
      default: ;
    endcase
    if (hw_take) begin
      case (hw_region)
        REG_IBUF: ib_we = 1'b1;
        REG_SB: begin
          sb_we    = 1'b1;
          sb_waddr = h2l_rwd.addr[SB_AW-1:0];
          sb_wdata = h2l_rwd.data;
        end
        REG_CTRL: prog_start = 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cur         <= '0;
      hreq        <= '0;
      done        <= 1'b0;
      outstanding <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            cur <= ins;
            if (ins.op == OP_RECV_CXL) state <= S_RECV;
            else                       state <= S_SEND_RD;
          end else if (hr_take) begin
            hreq  <= h2l_req;
            state <= (hr_region == REG_SB) ? S_HRD : S_HRSP;
          end
        end
        S_SEND_RD: state <= S_SEND_TX;
        S_SEND_TX: if (l2r_rwd_ready) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_RECV: if (r2l_rwd_valid) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_HRD:  state <= S_HRSP;
        S_HRSP: if (drs_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      begin : ack_count
        logic [15:0] add;
        add = '0;
        if (state == S_SEND_TX && l2r_rwd_ready)
          add = (cur.op == OP_BCAST_CXL) ? bcount : 16'd1;
        outstanding <= outstanding + add - (r2l_ndr_valid ? 16'd1 : 16'd0);
      end
    end
  end
endmodule
