// cxl_switch: the CXL switch that joins the host and NUM_DEVICES CXL devices.
//
// Port p < NUM_DEVICES connects device p (node id p); port NUM_DEVICES
// connects the host (node id HOST_ID). Routing is port based: a message goes
// to the port of its dst id. A message with the reserved broadcast header
// code (M_BRWD) goes to every device whose bit is set in its device-id mask;
// each copy leaves with dst set to the receiving device. An input is released
// (in_ready) only when every destination has taken its copy, so a broadcast
// may be delivered to different outputs in different cycles. Each output
// holds one message in a register and picks among the inputs that want it
// round-robin; it takes a new message when empty or when the current one is
// accepted. Messages to an unknown id are discarded.
// What the paper gives: the switch decodes the header for routing and turns
// a reserved code into a broadcast to designated devices. The arbitration,
// the one-message-per-cycle ports and the message format are this design's.
module cxl_switch
  import cent_pkg::*;
#(
  parameter int unsigned NUM_DEVICES = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid  [NUM_DEVICES+1],
  output logic  in_ready  [NUM_DEVICES+1],
  input  flit_t in_data   [NUM_DEVICES+1],
  output logic  out_valid [NUM_DEVICES+1],
  input  logic  out_ready [NUM_DEVICES+1],
  output flit_t out_data  [NUM_DEVICES+1]
);
  localparam int unsigned P  = NUM_DEVICES + 1;
  localparam int unsigned PW = $clog2(P);

  logic [P-1:0] started;             // input's message partly delivered
  logic [P-1:0] rem   [P];           // outputs still owed, per input
  logic [P-1:0] want  [P];           // outputs wanted this cycle, per input
  logic [P-1:0] gnt   [P];           // gnt[o][i]
  logic [P-1:0] got   [P];           // got[i][o]
  logic [P-1:0] ofree;
  logic [PW-1:0] rr  [P];

  function automatic logic [P-1:0] targets(input flit_t f);
    logic [P-1:0] t;
    t = '0;
    if (f.typ == M_BRWD) begin
      for (int d = 0; d < NUM_DEVICES; d++) t[d] = f.dmask[d];
    end else if (f.dst == HOST_ID) begin
      t[NUM_DEVICES] = 1'b1;
    end else if (int'(f.dst) < NUM_DEVICES) begin
      t[f.dst] = 1'b1;
    end
    return t;
  endfunction

  always_comb begin
    for (int i = 0; i < P; i++)
      want[i] = !in_valid[i] ? '0 : (started[i] ? rem[i] : targets(in_data[i]));
  end

  always_comb begin
    for (int o = 0; o < P; o++) begin
      ofree[o] = !out_valid[o] || out_ready[o];
      gnt[o]   = '0;
      for (int n = 0; n < P; n++) begin
        if (ofree[o] && gnt[o] == '0 && want[(int'(rr[o]) + n) % P][o])
          gnt[o][(int'(rr[o]) + n) % P] = 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < P; i++) begin
      for (int o = 0; o < P; o++) got[i][o] = gnt[o][i];
      in_ready[i] = in_valid[i] && ((want[i] & ~got[i]) == '0);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      started <= '0;
      for (int i = 0; i < P; i++) begin
        rem[i]       <= '0;
        rr[i]        <= '0;
        out_valid[i] <= 1'b0;
        out_data[i]  <= '0;
      end
    end else begin
      for (int i = 0; i < P; i++) begin
        rem[i]     <= want[i] & ~got[i];
        started[i] <= in_valid[i] && !in_ready[i];
      end
      for (int o = 0; o < P; o++) begin
        if (ofree[o]) begin
          out_valid[o] <= (gnt[o] != '0);
          for (int i = 0; i < P; i++) begin
            if (gnt[o][i]) begin
              out_data[o] <= in_data[i];
              if (in_data[i].typ == M_BRWD) out_data[o].dst <= NODE_W'(o);
              rr[o] <= PW'((i + 1) % P);
            end
          end
        end
      end
    end
  end
endmodule
