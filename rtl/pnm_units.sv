// pnm_units: the processing-near-memory accelerators of a CXL device and the
// sequencer that runs the EXP, RED and ACC instructions on them.
//
// It holds NUM_UNITS (32) accumulators, 32 reduction trees and 32 exponent
// processors, the counts given in the paper. An instruction
// "EXP|RED|ACC OPsize Rd Rs" covers OPsize consecutive shared-buffer slots:
// slot Rs+k (and Rd+k for ACC) is processed into slot Rd+k. The slots are
// taken in chunks of 32; within a chunk unit u handles k = 32*j + u, so all
// 32 units work in parallel. The shared buffer's 32-way slot interleaving
// lets the chunk's operands be read from 32 banks at once; the rotation
// between unit number and bank number is (Rs + u) mod 32.
// Timing per chunk: one read cycle, then for RED and ACC one compute-and-
// write cycle; for EXP the exponent processors take ORDER + 2 cycles before
// the write. `done` pulses in the cycle after the last chunk is written.
// The chunked sequencing is this design's choice; the paper gives the unit
// counts, their functions and the 256-bit, 16-lane operand format.
module pnm_units
  import cent_pkg::*;
#(
  parameter int unsigned NUM_UNITS = 32,
  parameter int unsigned ORDER     = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  opcode_e          op,
  input  logic [15:0]      opsize,
  input  logic [SB_AW-1:0] rd,
  input  logic [SB_AW-1:0] rs,
  output logic             done,
  // wide shared-buffer port
  output logic             w_re   [NUM_UNITS],
  output logic [SB_AW-1:0] w_aaddr[NUM_UNITS],
  output logic [SB_AW-1:0] w_baddr[NUM_UNITS],
  input  slot_t            w_adata[NUM_UNITS],
  input  slot_t            w_bdata[NUM_UNITS],
  output logic             w_we   [NUM_UNITS],
  output logic [SB_AW-1:0] w_waddr[NUM_UNITS],
  output slot_t            w_wdata[NUM_UNITS]
);
  localparam int unsigned BW = $clog2(NUM_UNITS);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_EXEC, S_EWAIT, S_DONE} state_e;
  state_e           state;
  opcode_e          opq;
  logic [15:0]      left;       // slots still to process, this chunk onward
  logic [SB_AW-1:0] rdq, rsq;   // base slots of the current chunk

  slot_t src [NUM_UNITS];
  slot_t dst [NUM_UNITS];
  slot_t acc_y [NUM_UNITS];
  slot_t red_y [NUM_UNITS];
  slot_t exp_y [NUM_UNITS];
  logic  exp_done [NUM_UNITS];
  logic  exp_start;

  // unit u <-> bank rotation
  function automatic logic [BW-1:0] unit_of(input int unsigned b, input logic [SB_AW-1:0] base);
    return BW'(b) - base[BW-1:0];
  endfunction

  always_comb begin
    for (int u = 0; u < NUM_UNITS; u++) begin
      src[u] = w_adata[BW'(rsq[BW-1:0] + BW'(u))];
      dst[u] = w_bdata[BW'(rdq[BW-1:0] + BW'(u))];
    end
    for (int b = 0; b < NUM_UNITS; b++) begin
      w_re[b]    = (state == S_READ);
      w_aaddr[b] = rsq + SB_AW'(unit_of(b, rsq));
      w_baddr[b] = rdq + SB_AW'(unit_of(b, rdq));
      w_waddr[b] = rdq + SB_AW'(unit_of(b, rdq));
      w_we[b]    = 1'b0;
      case (opq)
        OP_ACC:  w_wdata[b] = acc_y[unit_of(b, rdq)];
        OP_RED:  w_wdata[b] = red_y[unit_of(b, rdq)];
        default: w_wdata[b] = exp_y[unit_of(b, rdq)];
      endcase
      if (((state == S_EXEC) && (opq != OP_EXP)) || ((state == S_EWAIT) && exp_done[0]))
        w_we[b] = (16'(unit_of(b, rdq)) < left);
    end
  end

  assign exp_start = (state == S_EXEC) && (opq == OP_EXP);

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    pnm_accumulator    u_acc (.d(dst[u]), .s(src[u]), .y(acc_y[u]));
    pnm_reduction_tree u_red (.s(src[u]), .y(red_y[u]));
    pnm_exp_unit #(.ORDER(ORDER)) u_exp (
      .clk(clk), .rst_n(rst_n), .start(exp_start), .x(src[u]),
      .done(exp_done[u]), .y(exp_y[u]));
  end

  logic chunk_written;
  assign chunk_written = ((state == S_EXEC) && (opq != OP_EXP)) ||
                         ((state == S_EWAIT) && exp_done[0]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      opq   <= OP_NOP;
      left  <= '0;
      rdq   <= '0;
      rsq   <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          opq   <= op;
          left  <= opsize;
          rdq   <= rd;
          rsq   <= rs;
          state <= (opsize == 16'd0) ? S_DONE : S_READ;
        end
        S_READ:  state <= S_EXEC;
        S_EXEC:  if (opq == OP_EXP) state <= S_EWAIT;
        default: ;
      endcase
      if (chunk_written) begin
        rdq <= rdq + SB_AW'(NUM_UNITS);
        rsq <= rsq + SB_AW'(NUM_UNITS);
        if (left <= 16'(NUM_UNITS)) begin
          left  <= '0;
          state <= S_DONE;
        end else begin
          left  <= left - 16'(NUM_UNITS);
          state <= S_READ;
        end
      end
      if (state == S_DONE) begin
        done  <= 1'b1;
        state <= S_IDLE;
      end
    end
  end
endmodule
