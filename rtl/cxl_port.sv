// cxl_port: the CXL port of a device, with the virtual-channel queues of the
// paper's port diagram. Nodes are the Host (H), this Local device (L) and
// Remote devices (R).
//
// Receive path: a message from the switch (rx_*) passes the integrity check
// (CRC-16 over the whole message; a failing message is dropped and counted
// in crc_errors) and is unpacked into one of four queues by type and source:
//   R2L NDR  write acknowledgement from a remote device
//   R2L RWD  write of a remote device (SEND_CXL / BCAST_CXL data)
//   H2L RWD  host write            H2L Req  host read
// The local device takes them from the r2l_*/h2l_* outputs (valid/ready).
// Transmit path: four queues, L2R RWD (local SEND/BCAST), L2R NDR, L2H NDR
// and L2H DRS (read data for the host), are served round-robin by the flit
// packer, which seals each message with its CRC and drives tx_* (valid/ready).
// "Prepare Request" builds the responses: when the local device takes an
// R2L RWD or H2L RWD, the port itself queues the NDR back to its sender
// (the RWD is only handed over while that NDR queue has room); for H2L Req
// the device returns the data on drs_* and the port addresses the DRS.
// One message per cycle in each direction. The queue structure and the
// transaction types (Req/DRS, RWD/NDR) are the paper's; message format, CRC,
// queue depth and arbitration are this design's choices. A message is one
// 256-bit shared-buffer slot, not a 256-byte CXL flit.
module cxl_port
  import cent_pkg::*;
#(
  parameter int unsigned QDEPTH = 4
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
  // receive queues toward the device
  output logic              r2l_ndr_valid,
  input  logic              r2l_ndr_ready,
  output flit_t             r2l_ndr,
  output logic              r2l_rwd_valid,
  input  logic              r2l_rwd_ready,
  output flit_t             r2l_rwd,
  output logic              h2l_rwd_valid,
  input  logic              h2l_rwd_ready,
  output flit_t             h2l_rwd,
  output logic              h2l_req_valid,
  input  logic              h2l_req_ready,
  output flit_t             h2l_req,
  // transmit requests from the device
  input  logic              l2r_rwd_valid,
  output logic              l2r_rwd_ready,
  input  flit_t             l2r_rwd,
  input  logic              drs_valid,
  output logic              drs_ready,
  input  flit_t             drs,
  output logic [15:0]       crc_errors
);
  // ------------------------------------------------------------ receive
  typedef enum logic [2:0] {Q_R2L_NDR, Q_R2L_RWD, Q_H2L_RWD, Q_H2L_REQ, Q_DROP} rxq_e;
  rxq_e  cls;
  logic  rx_ok;
  logic  rq_in_ready [4];
  logic  rq_out_valid[4];
  logic  rq_out_ready[4];
  flit_t rq_out      [4];

  assign rx_ok = flit_ok(rx_data);

  always_comb begin
    cls = Q_DROP;
    if (rx_ok) begin
      if (rx_data.src == HOST_ID) begin
        if (rx_data.typ == M_RWD)      cls = Q_H2L_RWD;
        else if (rx_data.typ == M_REQ) cls = Q_H2L_REQ;
      end else begin
        if (rx_data.typ == M_NDR)                             cls = Q_R2L_NDR;
        else if (rx_data.typ == M_RWD || rx_data.typ == M_BRWD) cls = Q_R2L_RWD;
      end
    end
  end

  assign rx_ready = (cls == Q_DROP) ? 1'b1 : rq_in_ready[cls[1:0]];

  for (genvar i = 0; i < 4; i++) begin : g_rxq
    flit_fifo #(.DEPTH(QDEPTH)) u_q (
      .clk(clk), .rst_n(rst_n),
      .in_valid (rx_valid && cls == rxq_e'(i)),
      .in_ready (rq_in_ready[i]),
      .in_data  (rx_data),
      .out_valid(rq_out_valid[i]),
      .out_ready(rq_out_ready[i]),
      .out_data (rq_out[i]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) crc_errors <= '0;
    else if (rx_valid && !rx_ok) crc_errors <= crc_errors + 16'd1;
  end

  // ----------------------------------------------------------- transmit
  // queue 0: L2R RWD, 1: L2R NDR, 2: L2H NDR, 3: L2H DRS
  logic  tq_in_valid [4];
  logic  tq_in_ready [4];
  flit_t tq_in       [4];
  logic  tq_out_valid[4];
  logic  tq_out_ready[4];
  flit_t tq_out      [4];

  function automatic flit_t make_ndr(input flit_t req, input logic [NODE_W-1:0] me);
    flit_t f;
    f      = '0;
    f.typ  = M_NDR;
    f.src  = me;
    f.dst  = req.src;
    f.addr = req.addr;
    return f;
  endfunction

  // receive queues to the device; an RWD is released only with room for its NDR
  assign r2l_ndr_valid   = rq_out_valid[0];
  assign r2l_ndr         = rq_out[0];
  assign rq_out_ready[0] = r2l_ndr_ready;
  assign r2l_rwd_valid   = rq_out_valid[1] && tq_in_ready[1];
  assign r2l_rwd         = rq_out[1];
  assign rq_out_ready[1] = r2l_rwd_ready && tq_in_ready[1];
  assign h2l_rwd_valid   = rq_out_valid[2] && tq_in_ready[2];
  assign h2l_rwd         = rq_out[2];
  assign rq_out_ready[2] = h2l_rwd_ready && tq_in_ready[2];
  assign h2l_req_valid   = rq_out_valid[3];
  assign h2l_req         = rq_out[3];
  assign rq_out_ready[3] = h2l_req_ready;

  always_comb begin
    tq_in_valid[0] = l2r_rwd_valid;
    tq_in[0]       = l2r_rwd;
    tq_in_valid[1] = r2l_rwd_valid && r2l_rwd_ready;
    tq_in[1]       = make_ndr(rq_out[1], my_id);
    tq_in_valid[2] = h2l_rwd_valid && h2l_rwd_ready;
    tq_in[2]       = make_ndr(rq_out[2], my_id);
    tq_in_valid[3] = drs_valid;
    tq_in[3]       = drs;
    tq_in[3].typ   = M_DRS;
    tq_in[3].src   = my_id;
    tq_in[3].dst   = HOST_ID;
  end
  assign l2r_rwd_ready = tq_in_ready[0];
  assign drs_ready     = tq_in_ready[3];

  for (genvar i = 0; i < 4; i++) begin : g_txq
    flit_fifo #(.DEPTH(QDEPTH)) u_q (
      .clk(clk), .rst_n(rst_n),
      .in_valid (tq_in_valid[i]),
      .in_ready (tq_in_ready[i]),
      .in_data  (tq_in[i]),
      .out_valid(tq_out_valid[i]),
      .out_ready(tq_out_ready[i]),
      .out_data (tq_out[i]));
  end

  // flit packer: round-robin over the four transmit queues
  logic [1:0] rr, pick;
  logic       any;
  always_comb begin
    any  = 1'b0;
    pick = rr;
    for (int n = 0; n < 4; n++) begin
      if (!any && tq_out_valid[2'(rr + 2'(n))]) begin
        any  = 1'b1;
        pick = 2'(rr + 2'(n));
      end
    end
    for (int i = 0; i < 4; i++) tq_out_ready[i] = any && (pick == 2'(i)) && tx_ready;
  end

  assign tx_valid = any;
  assign tx_data  = flit_seal(tq_out[pick]);

  always_ff @(posedge clk) begin
    if (!rst_n) rr <= '0;
    else if (tx_valid && tx_ready) rr <= pick + 2'd1;
  end

endmodule
