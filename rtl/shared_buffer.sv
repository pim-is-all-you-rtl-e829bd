// shared_buffer: the 64 KB SRAM through which every part of the device
// exchanges data: 2048 slots of 256 bits (16 BF16), which PIM channels and
// PNM units treat as a register file and the RISC-V cores as byte memory.
//
// Organisation (this design's choice; the paper gives only size and the
// 256-bit slot): NBANKS (32) interleaved banks, slot s in bank s % 32 at
// entry s / 32, so any 32 consecutive slots sit in 32 different banks and
// the 32 parallel PNM units can read two operands and write one result per
// slot every cycle.
//   narrow port  one slot: synchronous read (n_rdata valid the cycle after
//                n_re, held until the next read) and a write with 16-bit
//                lane enables (RISC-V 16-bit stores use a single lane)
//   wide port    per bank: two synchronous reads (a, b) and one write
// A narrow write to a bank takes priority over a wide write to that bank;
// the decoder never lets both happen in one cycle.
module shared_buffer
  import cent_pkg::*;
#(
  parameter int unsigned SLOTS  = SB_SLOTS,
  parameter int unsigned NBANKS = 32
) (
  input  logic             clk,
  // narrow port
  input  logic             n_re,
  input  logic [SB_AW-1:0] n_raddr,
  output slot_t            n_rdata,
  input  logic             n_we,
  input  logic [SB_AW-1:0] n_waddr,
  input  logic [15:0]      n_wlanes,
  input  slot_t            n_wdata,
  // wide port, one set per bank
  input  logic             w_re   [NBANKS],
  input  logic [SB_AW-1:0] w_aaddr[NBANKS],
  input  logic [SB_AW-1:0] w_baddr[NBANKS],
  output slot_t            w_adata[NBANKS],
  output slot_t            w_bdata[NBANKS],
  input  logic             w_we   [NBANKS],
  input  logic [SB_AW-1:0] w_waddr[NBANKS],
  input  slot_t            w_wdata[NBANKS]
);
  localparam int unsigned BW = $clog2(NBANKS);
  localparam int unsigned DEPTH = SLOTS / NBANKS;
  localparam int unsigned EW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  function automatic logic [BW-1:0] bank_of(input logic [SB_AW-1:0] a);
    return a[BW-1:0];
  endfunction
  function automatic logic [EW-1:0] entry_of(input logic [SB_AW-1:0] a);
    return EW'(a >> BW);
  endfunction

  slot_t         nrd [NBANKS];
  logic [BW-1:0] nsel;

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    slot_t mem [DEPTH];
    logic  nw;
    assign nw = n_we && (bank_of(n_waddr) == BW'(b));
    always_ff @(posedge clk) begin
      if (w_re[b]) begin
        w_adata[b] <= mem[entry_of(w_aaddr[b])];
        w_bdata[b] <= mem[entry_of(w_baddr[b])];
      end
      if (n_re) nrd[b] <= mem[entry_of(n_raddr)];
      if (nw) begin
        for (int l = 0; l < 16; l++)
          if (n_wlanes[l]) mem[entry_of(n_waddr)][l*16 +: 16] <= n_wdata[l*16 +: 16];
      end else if (w_we[b]) begin
        mem[entry_of(w_waddr[b])] <= w_wdata[b];
      end
    end
  end

  // narrow read: every bank reads the entry, the registered bank index selects
  always_ff @(posedge clk) if (n_re) nsel <= bank_of(n_raddr);
  assign n_rdata = nrd[nsel];

endmodule
