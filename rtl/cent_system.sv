// cent_system: the CENT system: a CXL switch joining NUM_DEVICES CENT CXL
// devices and a host CPU. The paper's system has 32 devices; the default here
// is 8 (the paper's Llama2-7B configuration), because linting one full-size
// device already takes about 2.5 GB, so 32 would not fit a 32 GB machine. The host is outside this design; its link to
// the switch is brought out as host_rx_* (messages from the host into the
// switch) and host_tx_* (messages from the switch to the host). Device i
// has node id i; the host has node id HOST_ID (63). Each device's RISC-V
// core interface (the cores are outside this design) is brought out as
// arrays indexed by device. Parameters are passed down to every device; the
// defaults are otherwise the paper's configuration (16 PIM controllers and
// 32 channels per device, 32 MB banks, 2 MB instruction buffer, GDDR6 timing
// of the paper's Table 4 in 1 ns cycles).
module cent_system
  import cent_pkg::*;
#(
  parameter int unsigned NUM_DEVICES = 8,
  parameter int unsigned NUM_CTRL    = 16,
  parameter int unsigned ROWS        = 16384,
  parameter int unsigned COLS        = 64,
  parameter int unsigned IB_DEPTH    = 131072,
  parameter int unsigned T_RCDRD     = 18,
  parameter int unsigned T_RCDWR     = 14,
  parameter int unsigned T_RAS       = 27,
  parameter int unsigned T_CL        = 25,
  parameter int unsigned T_RP        = 16,
  parameter int unsigned T_CCDS      = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // host link
  input  logic        host_rx_valid,
  output logic        host_rx_ready,
  input  flit_t       host_rx_data,
  output logic        host_tx_valid,
  input  logic        host_tx_ready,
  output flit_t       host_tx_data,
  // RISC-V cores of each device (external)
  output logic        rv_start  [NUM_DEVICES],
  output logic [15:0] rv_pc     [NUM_DEVICES],
  output logic [15:0] rv_opsize [NUM_DEVICES],
  output logic [15:0] rv_rd     [NUM_DEVICES],
  output logic [15:0] rv_rs     [NUM_DEVICES],
  input  logic        rv_done   [NUM_DEVICES],
  input  logic        rv_req    [NUM_DEVICES],
  input  logic        rv_we     [NUM_DEVICES],
  input  logic [15:0] rv_addr   [NUM_DEVICES],
  input  logic [15:0] rv_wdata  [NUM_DEVICES],
  output logic [15:0] rv_rdata  [NUM_DEVICES],
  // status
  output logic        running     [NUM_DEVICES],
  output logic [15:0] outstanding [NUM_DEVICES],
  output logic [15:0] crc_errors  [NUM_DEVICES]
);
  localparam int unsigned P = NUM_DEVICES + 1;

  logic  sw_in_valid  [P];
  logic  sw_in_ready  [P];
  flit_t sw_in_data   [P];
  logic  sw_out_valid [P];
  logic  sw_out_ready [P];
  flit_t sw_out_data  [P];

  cxl_switch #(.NUM_DEVICES(NUM_DEVICES)) u_switch (
    .clk(clk), .rst_n(rst_n),
    .in_valid(sw_in_valid), .in_ready(sw_in_ready), .in_data(sw_in_data),
    .out_valid(sw_out_valid), .out_ready(sw_out_ready), .out_data(sw_out_data));

  assign sw_in_valid[NUM_DEVICES]  = host_rx_valid;
  assign host_rx_ready             = sw_in_ready[NUM_DEVICES];
  assign sw_in_data[NUM_DEVICES]   = host_rx_data;
  assign host_tx_valid             = sw_out_valid[NUM_DEVICES];
  assign sw_out_ready[NUM_DEVICES] = host_tx_ready;
  assign host_tx_data              = sw_out_data[NUM_DEVICES];

  for (genvar d = 0; d < NUM_DEVICES; d++) begin : g_dev
    cxl_device #(
      .NUM_CTRL(NUM_CTRL), .ROWS(ROWS), .COLS(COLS), .IB_DEPTH(IB_DEPTH),
      .NUM_DEVICES(NUM_DEVICES), .T_RCDRD(T_RCDRD), .T_RCDWR(T_RCDWR),
      .T_RAS(T_RAS), .T_CL(T_CL), .T_RP(T_RP), .T_CCDS(T_CCDS)
    ) u_dev (
      .clk(clk), .rst_n(rst_n), .my_id(NODE_W'(d)),
      .rx_valid(sw_out_valid[d]), .rx_ready(sw_out_ready[d]), .rx_data(sw_out_data[d]),
      .tx_valid(sw_in_valid[d]), .tx_ready(sw_in_ready[d]), .tx_data(sw_in_data[d]),
      .rv_start(rv_start[d]), .rv_pc(rv_pc[d]), .rv_opsize(rv_opsize[d]),
      .rv_rd(rv_rd[d]), .rv_rs(rv_rs[d]), .rv_done(rv_done[d]),
      .rv_req(rv_req[d]), .rv_we(rv_we[d]), .rv_addr(rv_addr[d]),
      .rv_wdata(rv_wdata[d]), .rv_rdata(rv_rdata[d]),
      .running(running[d]), .outstanding(outstanding[d]), .crc_errors(crc_errors[d]));
  end
endmodule
