// dram_bank: one GDDR6 DRAM bank of a PIM channel, as a row/column array.
//
// The bank holds ROWS rows of COLS 256-bit columns (16384 x 64 x 32 B = 32 MB,
// the paper's bank capacity; the 2 KB row equals the 2 KB global buffer). A
// row must be activated (act) before its columns are read or written and is
// closed with pre. Reads are synchronous: rd_data is valid the cycle after rd
// and holds until the next read. Writes carry a 16-bit lane enable so that a
// single BF16 element of a column can be written (needed by WR_ABK).
// The DRAM timing (tRCD, tRAS, tCL, tRP) is enforced by the PIM controller,
// not here; this model performs an access in the cycle it is commanded.
// The row/column organisation is this design's own choice: the paper only
// gives the 32 MB capacity and the 256-bit bank I/O.
module dram_bank
  import cent_pkg::*;
#(
  parameter int unsigned ROWS = 16384,
  parameter int unsigned COLS = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             act,
  input  logic             pre,
  input  logic [ROW_W-1:0] act_row,
  input  logic             rd,
  input  logic [COL_W-1:0] rd_col,
  input  logic             wr,
  input  logic [COL_W-1:0] wr_col,
  input  logic [15:0]      wr_lanes,
  input  slot_t            wr_data,
  output slot_t            rd_data,
  output logic             row_open,
  output logic [ROW_W-1:0] open_row
);
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1;

  slot_t mem [ROWS*COLS];

  logic [RW+CW-1:0] ra, wa;
  assign ra = {open_row[RW-1:0], rd_col[CW-1:0]};
  assign wa = {open_row[RW-1:0], wr_col[CW-1:0]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row_open <= 1'b0;
      open_row <= '0;
    end else if (act) begin
      row_open <= 1'b1;
      open_row <= act_row;
    end else if (pre) begin
      row_open <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (rd) rd_data <= mem[ra];
    if (wr) begin
      for (int l = 0; l < 16; l++)
        if (wr_lanes[l]) mem[wa][l*16 +: 16] <= wr_data[l*16 +: 16];
    end
  end

  // Column access needs an open row; activating an open row is illegal.
  a_col_open : assert property (@(posedge clk) disable iff (!rst_n) (rd || wr) |-> row_open);
  a_act_closed : assert property (@(posedge clk) disable iff (!rst_n) act |-> !row_open);

endmodule
