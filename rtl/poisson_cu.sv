// poisson_cu: stencil computation unit of the Poisson-5pt-2D solver.
//
// Computes one mesh point of
//   U' = 1/8 (U_w + U_e + U_n + U_s) + 1/2 U_c
// in single precision, as a 4-stage pipeline: (n+s) and (w+e); their sum and
// 0.5*c; the 1/8 scaling; the final add. That is four adders and two
// multipliers, the operation count behind the paper's figure of 14 DSP blocks
// per point. The stage split and the order of the additions are this design's
// choice. Points flagged as boundary leave the unit unchanged (the centre
// value is carried alongside), which gives fixed (Dirichlet) boundaries; the
// paper does not state its boundary treatment.
// Timing: en advances the pipeline; the result for inputs presented on beat t
// is on y/y_valid after beat t+3 (visible from beat t+4, LATENCY = 4 beats).
module poisson_cu
  import stencil_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  logic boundary,
  input  f32_t c, n, s, w, e,
  output f32_t y,
  output logic y_valid
);
  localparam int unsigned LATENCY = 4;

  f32_t ns_sum, we_sum, sum4, half_c, sc8, res;
  f32_t r1_ns, r1_we, r1_c;
  f32_t r2_sum, r2_half, r2_c;
  f32_t r3_sc, r3_half, r3_c;
  logic [LATENCY-2:0] v_pipe, b_pipe;

  fp_add u_ns (.a(n), .b(s), .y(ns_sum));
  fp_add u_we (.a(w), .b(e), .y(we_sum));
  fp_add u_s4 (.a(r1_ns), .b(r1_we), .y(sum4));
  fp_mul u_hc (.a(r1_c), .b(F32_HALF), .y(half_c));
  fp_mul u_s8 (.a(r2_sum), .b(F32_EIGHTH), .y(sc8));
  fp_add u_rs (.a(r3_sc), .b(r3_half), .y(res));

  always_ff @(posedge clk) begin
    if (en) begin
      r1_ns <= ns_sum;  r1_we <= we_sum;  r1_c <= c;
      r2_sum <= sum4;   r2_half <= half_c; r2_c <= r1_c;
      r3_sc <= sc8;     r3_half <= r2_half; r3_c <= r2_c;
      y <= b_pipe[LATENCY-2] ? r3_c : res;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_pipe  <= '0;
      b_pipe  <= '0;
      y_valid <= 1'b0;
    end else if (en) begin
      v_pipe  <= {v_pipe[LATENCY-3:0], in_valid};
      b_pipe  <= {b_pipe[LATENCY-3:0], boundary};
      y_valid <= v_pipe[LATENCY-2];
    end
  end
endmodule
