// cxl_device: one CENT CXL device: a CXL controller chip plus 16 GDDR6-PIM
// memory chips with two PIM channels each (32 channels, 512 banks, 16 GB at
// the paper's 32 MB per bank).
//
// Inside the controller (as in the paper's device diagram):
//   cxl_port        CXL link to the switch, virtual-channel queues
//   inter_dev_ctrl  SEND/RECV/BCAST_CXL and host accesses
//   instr_buffer    2 MB program memory, written by the host
//   cent_decoder    PC + decoder, issues micro-ops
//   shared_buffer   64 KB, 256-bit slots, meeting point of all units
//   pnm_units       32 accumulators, 32 reduction trees, 32 exp processors
//   NUM_CTRL x (pim_controller + ldst_unit), each driving two pim_channels
// The eight BOOM RISC-V cores of the paper are not part of this RTL: the
// RISCV instruction is handed out on rv_start/rv_pc/rv_opsize/rv_rd/rv_rs
// and completes on rv_done, and the cores reach the shared buffer through a
// byte-addressed 16-bit load/store port (rv_req/rv_we/rv_addr/rv_wdata,
// rv_rdata valid the next cycle) while that instruction runs.
// The shared buffer's one-slot port is given to one unit at a time, chosen
// by the instruction being executed (sb_owner); with no program running it
// belongs to the host. Read data from the load/store units is written into
// the shared buffer in fixed priority order (unit 0 first).
// Clocking: a single clock; the paper runs PIM at 1 GHz and projects the
// controller at 2 GHz. DRAM timing parameters are in cycles of this clock.
module cxl_device
  import cent_pkg::*;
#(
  parameter int unsigned NUM_CTRL    = 16,
  parameter int unsigned ROWS        = 16384,
  parameter int unsigned COLS        = 64,
  parameter int unsigned IB_DEPTH    = 131072,
  parameter int unsigned NUM_DEVICES = 32,
  parameter int unsigned T_RCDRD     = 18,
  parameter int unsigned T_RCDWR     = 14,
  parameter int unsigned T_RAS       = 27,
  parameter int unsigned T_CL        = 25,
  parameter int unsigned T_RP        = 16,
  parameter int unsigned T_CCDS      = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_id,
  // link to the switch
  input  logic              rx_valid,
  output logic              rx_ready,
  input  flit_t             rx_data,
  output logic              tx_valid,
  input  logic              tx_ready,
  output flit_t             tx_data,
  // RISC-V cores (external)
  output logic              rv_start,
  output logic [15:0]       rv_pc,
  output logic [15:0]       rv_opsize,
  output logic [15:0]       rv_rd,
  output logic [15:0]       rv_rs,
  input  logic              rv_done,
  input  logic              rv_req,
  input  logic              rv_we,
  input  logic [15:0]       rv_addr,
  input  logic [15:0]       rv_wdata,
  output logic [15:0]       rv_rdata,
  // status
  output logic              running,
  output logic [15:0]       outstanding,
  output logic [15:0]       crc_errors
);
  localparam int unsigned NCH = 2 * NUM_CTRL;

  // ---------------------------------------------------------- CXL port
  logic  r2l_ndr_valid, r2l_ndr_ready, r2l_rwd_valid, r2l_rwd_ready;
  logic  h2l_rwd_valid, h2l_rwd_ready, h2l_req_valid, h2l_req_ready;
  logic  l2r_rwd_valid, l2r_rwd_ready, drs_valid, drs_ready;
  flit_t r2l_ndr, r2l_rwd, h2l_rwd, h2l_req, l2r_rwd, drs;

  cxl_port u_port (
    .clk(clk), .rst_n(rst_n), .my_id(my_id),
    .rx_valid(rx_valid), .rx_ready(rx_ready), .rx_data(rx_data),
    .tx_valid(tx_valid), .tx_ready(tx_ready), .tx_data(tx_data),
    .r2l_ndr_valid(r2l_ndr_valid), .r2l_ndr_ready(r2l_ndr_ready), .r2l_ndr(r2l_ndr),
    .r2l_rwd_valid(r2l_rwd_valid), .r2l_rwd_ready(r2l_rwd_ready), .r2l_rwd(r2l_rwd),
    .h2l_rwd_valid(h2l_rwd_valid), .h2l_rwd_ready(h2l_rwd_ready), .h2l_rwd(h2l_rwd),
    .h2l_req_valid(h2l_req_valid), .h2l_req_ready(h2l_req_ready), .h2l_req(h2l_req),
    .l2r_rwd_valid(l2r_rwd_valid), .l2r_rwd_ready(l2r_rwd_ready), .l2r_rwd(l2r_rwd),
    .drs_valid(drs_valid), .drs_ready(drs_ready), .drs(drs),
    .crc_errors(crc_errors));

  // shared-buffer ports (driven below)
  logic             n_re, n_we;
  logic [SB_AW-1:0] n_raddr, n_waddr;
  logic [15:0]      n_wlanes;
  slot_t            n_wdata, n_rdata;
  logic             w_re   [32];
  logic [SB_AW-1:0] w_aaddr[32];
  logic [SB_AW-1:0] w_baddr[32];
  slot_t            w_adata[32];
  slot_t            w_bdata[32];
  logic             w_we   [32];
  logic [SB_AW-1:0] w_waddr[32];
  slot_t            w_wdata[32];

  // -------------------------------------------------- decoder and buffers
  logic        prog_start, ib_re, ib_we;
  logic [17:0] prog_len, pc;
  logic [16:0] ib_raddr, ib_waddr;
  instr_t      ib_rdata, ib_wdata, ins;
  logic        uop_valid, pim_idle, pnm_start, pnm_done, idc_start, idc_done;
  uop_t        uop;
  logic [NCH-1:0]      uop_chmask;
  logic [NUM_CTRL-1:0] pim_ready;
  sb_owner_e   sb_owner;
  logic             dec_sb_re;
  logic [SB_AW-1:0] dec_sb_raddr;

  instr_buffer #(.DEPTH(IB_DEPTH)) u_ibuf (
    .clk(clk), .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(ib_re), .raddr(ib_raddr), .rdata(ib_rdata));

  cent_decoder #(.NUM_CTRL(NUM_CTRL)) u_dec (
    .clk(clk), .rst_n(rst_n), .start(prog_start), .prog_len(prog_len),
    .running(running), .pc(pc),
    .ib_re(ib_re), .ib_raddr(ib_raddr), .ib_rdata(ib_rdata),
    .uop_valid(uop_valid), .uop(uop), .uop_chmask(uop_chmask),
    .pim_ready(pim_ready), .pim_idle(pim_idle),
    .sb_re(dec_sb_re), .sb_raddr(dec_sb_raddr), .sb_rdata(n_rdata), .sb_owner(sb_owner),
    .pnm_start(pnm_start), .pnm_done(pnm_done),
    .idc_start(idc_start), .idc_done(idc_done),
    .rv_start(rv_start), .rv_done(rv_done), .ins(ins));

  assign rv_pc     = ins.ro;
  assign rv_opsize = ins.opsize;
  assign rv_rd     = ins.rd;
  assign rv_rs     = ins.rs;

  // ------------------------------------------------ inter-device control
  logic             idc_sb_re, idc_sb_we;
  logic [SB_AW-1:0] idc_sb_raddr, idc_sb_waddr;
  slot_t            idc_sb_wdata;

  inter_dev_ctrl #(.NUM_DEVICES(NUM_DEVICES)) u_idc (
    .clk(clk), .rst_n(rst_n), .my_id(my_id),
    .start(idc_start), .ins(ins), .done(idc_done), .running(running), .pc(pc),
    .prog_start(prog_start), .prog_len(prog_len),
    .sb_re(idc_sb_re), .sb_raddr(idc_sb_raddr), .sb_rdata(n_rdata),
    .sb_we(idc_sb_we), .sb_waddr(idc_sb_waddr), .sb_wdata(idc_sb_wdata),
    .ib_we(ib_we), .ib_waddr(ib_waddr), .ib_wdata(ib_wdata),
    .l2r_rwd_valid(l2r_rwd_valid), .l2r_rwd_ready(l2r_rwd_ready), .l2r_rwd(l2r_rwd),
    .r2l_rwd_valid(r2l_rwd_valid), .r2l_rwd_ready(r2l_rwd_ready), .r2l_rwd(r2l_rwd),
    .r2l_ndr_valid(r2l_ndr_valid), .r2l_ndr_ready(r2l_ndr_ready),
    .h2l_rwd_valid(h2l_rwd_valid), .h2l_rwd_ready(h2l_rwd_ready), .h2l_rwd(h2l_rwd),
    .h2l_req_valid(h2l_req_valid), .h2l_req_ready(h2l_req_ready), .h2l_req(h2l_req),
    .drs_valid(drs_valid), .drs_ready(drs_ready), .drs(drs),
    .outstanding(outstanding));

  // -------------------------------------------------------- shared buffer
  shared_buffer u_sb (
    .clk(clk),
    .n_re(n_re), .n_raddr(n_raddr), .n_rdata(n_rdata),
    .n_we(n_we), .n_waddr(n_waddr), .n_wlanes(n_wlanes), .n_wdata(n_wdata),
    .w_re(w_re), .w_aaddr(w_aaddr), .w_baddr(w_baddr),
    .w_adata(w_adata), .w_bdata(w_bdata),
    .w_we(w_we), .w_waddr(w_waddr), .w_wdata(w_wdata));

  // load/store units toward the shared buffer (fixed priority)
  logic             ls_valid [NUM_CTRL];
  logic             ls_ready [NUM_CTRL];
  logic [SB_AW-1:0] ls_addr  [NUM_CTRL];
  slot_t            ls_data  [NUM_CTRL];
  logic             ls_empty [NUM_CTRL];
  logic             ls_any;
  logic [SB_AW-1:0] ls_waddr;
  slot_t            ls_wdata;

  always_comb begin
    ls_any   = 1'b0;
    ls_waddr = '0;
    ls_wdata = '0;
    for (int c = 0; c < NUM_CTRL; c++) begin
      ls_ready[c] = 1'b0;
      if (!ls_any && ls_valid[c] && sb_owner == OWN_LDST) begin
        ls_any      = 1'b1;
        ls_ready[c] = 1'b1;
        ls_waddr    = ls_addr[c];
        ls_wdata    = ls_data[c];
      end
    end
  end

  // RISC-V 16-bit view of the shared buffer
  logic [3:0] rv_lane_q;
  always_ff @(posedge clk) if (rv_req && !rv_we) rv_lane_q <= rv_addr[4:1];
  assign rv_rdata = n_rdata[rv_lane_q*16 +: 16];

  always_comb begin
    n_re     = 1'b0;
    n_raddr  = '0;
    n_we     = 1'b0;
    n_waddr  = '0;
    n_wlanes = 16'hFFFF;
    n_wdata  = '0;
    case (sb_owner)
      OWN_DEC: begin
        n_re    = dec_sb_re;
        n_raddr = dec_sb_raddr;
      end
      OWN_LDST: begin
        n_we    = ls_any;
        n_waddr = ls_waddr;
        n_wdata = ls_wdata;
      end
      OWN_RV: begin
        n_re     = rv_req && !rv_we;
        n_raddr  = rv_addr[15:5];
        n_we     = rv_req && rv_we;
        n_waddr  = rv_addr[15:5];
        n_wlanes = 16'(1) << rv_addr[4:1];
        n_wdata  = {16{rv_wdata}};
      end
      OWN_HOST, OWN_IDC: begin
        n_re    = idc_sb_re;
        n_raddr = idc_sb_raddr;
        n_we    = idc_sb_we;
        n_waddr = idc_sb_waddr;
        n_wdata = idc_sb_wdata;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ PNM units
  pnm_units u_pnm (
    .clk(clk), .rst_n(rst_n), .start(pnm_start), .op(ins.op), .opsize(ins.opsize),
    .rd(ins.rd[SB_AW-1:0]), .rs(ins.rs[SB_AW-1:0]), .done(pnm_done),
    .w_re(w_re), .w_aaddr(w_aaddr), .w_baddr(w_baddr),
    .w_adata(w_adata), .w_bdata(w_bdata),
    .w_we(w_we), .w_waddr(w_waddr), .w_wdata(w_wdata));

  // ------------------------------------------- PIM controllers + channels
  logic [NUM_CTRL-1:0] ctrl_busy, ret_any;

  for (genvar c = 0; c < NUM_CTRL; c++) begin : g_ctrl
    chcmd_t           ch_cmd    [2];
    logic             ch_rvalid [2];
    slot_t            ch_rdata  [2];
    logic [SB_AW-1:0] ch_rtag   [2];
    logic             ret_valid;
    logic [SB_AW-1:0] ret_tag;
    slot_t            ret_data;
    logic [2:0]       ret_space;
    uop_t             cuop;

    always_comb begin
      cuop        = uop;
      cuop.chmask = uop_chmask[2*c +: 2];
    end

    pim_controller #(
      .T_RCDRD(T_RCDRD), .T_RCDWR(T_RCDWR), .T_RAS(T_RAS),
      .T_CL(T_CL), .T_RP(T_RP), .T_CCDS(T_CCDS)
    ) u_ctrl (
      .clk(clk), .rst_n(rst_n),
      .uop_valid(uop_valid && (uop_chmask[2*c +: 2] != 2'b00)),
      .uop(cuop), .uop_ready(pim_ready[c]), .busy(ctrl_busy[c]),
      .ch_cmd(ch_cmd), .ch_rvalid(ch_rvalid), .ch_rdata(ch_rdata), .ch_rtag(ch_rtag),
      .ret_valid(ret_valid), .ret_tag(ret_tag), .ret_data(ret_data), .ret_space(ret_space));

    assign ret_any[c] = ret_valid;

    ldst_unit u_ldst (
      .clk(clk), .rst_n(rst_n),
      .in_valid(ret_valid), .in_tag(ret_tag), .in_data(ret_data), .space(ret_space),
      .sb_valid(ls_valid[c]), .sb_addr(ls_addr[c]), .sb_data(ls_data[c]),
      .sb_ready(ls_ready[c]), .empty(ls_empty[c]));

    for (genvar h = 0; h < 2; h++) begin : g_ch
      pim_channel #(.ROWS(ROWS), .COLS(COLS)) u_ch (
        .clk(clk), .rst_n(rst_n), .cmd(ch_cmd[h]),
        .rvalid(ch_rvalid[h]), .rdata(ch_rdata[h]), .rtag(ch_rtag[h]));
    end
  end

  always_comb begin
    pim_idle = (ctrl_busy == '0) && (ret_any == '0);
    for (int c = 0; c < NUM_CTRL; c++) if (!ls_empty[c]) pim_idle = 1'b0;
  end

endmodule
