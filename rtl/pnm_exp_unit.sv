// pnm_exp_unit: one of the 32 exponent processors. For each of the 16 BF16
// lanes of a slot it computes e^x with the ORDER-term (10) Taylor series
//     e^x ~ sum_{k=0..ORDER} c_k x^k,   c_k = 1/k!
// using the three-register lane drawn in the paper: a multiplier with
// feedback builds the powers x^k, a second multiplier scales them by the
// Taylor coefficient c_k, and an adder with feedback accumulates the terms.
// The three registers form a pipeline, so one term enters the sum per cycle.
// Timing: `start` loads x; `done` pulses ORDER + 2 cycles later with y valid
// (held until the next start). The coefficients are BF16 values of 1/k!,
// truncated: 0x3F80 (k=0,1), 0x3F00, 0x3E2A, 0x3D2A, 0x3C08, 0x3AB6, 0x3950,
// 0x37D0, 0x3638, 0x3493 (k=10). Accuracy is best for |x| <= 2; inputs of
// softmax are usually shifted so that x <= 0 (the paper does not state the
// input range).
module pnm_exp_unit
  import cent_pkg::*;
#(
  parameter int unsigned ORDER = 10
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  slot_t x,
  output logic  done,
  output slot_t y
);
  localparam bf16_t COEF [11] = '{16'h3F80, 16'h3F80, 16'h3F00, 16'h3E2A, 16'h3D2A,
                                  16'h3C08, 16'h3AB6, 16'h3950, 16'h37D0, 16'h3638, 16'h3493};

  slot_t      xq, p, t;
  logic [4:0] kp, kt;
  logic       run, tv;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run  <= 1'b0;
      tv   <= 1'b0;
      done <= 1'b0;
      kp   <= '0;
      kt   <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        xq  <= x;
        p   <= x;                                 // x^1
        kp  <= 5'd1;
        tv  <= 1'b0;
        run <= 1'b1;
        for (int i = 0; i < 16; i++) y[i*16 +: 16] <= COEF[0];
      end else if (run) begin
        // stage 1: next power; stage 2: term; stage 3: accumulate
        for (int i = 0; i < 16; i++) begin
          p[i*16 +: 16] <= bf16_mul(p[i*16 +: 16], xq[i*16 +: 16]);
          t[i*16 +: 16] <= bf16_mul(p[i*16 +: 16], COEF[(kp > 5'd10) ? 4'd0 : kp[3:0]]);
          if (tv) y[i*16 +: 16] <= bf16_add(y[i*16 +: 16], t[i*16 +: 16]);
        end
        kt <= kp;
        tv <= (kp <= 5'(ORDER)) && (kp != 5'd0);
        kp <= (kp <= 5'(ORDER)) ? kp + 5'd1 : 5'd0;
        if (tv && kt == 5'(ORDER)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
