// jacobi_cu: stencil computation unit of the Jacobi-7pt-3D solver.
//
// Computes one mesh point of
//   U' = k1 U(i+1) + k2 U(i-1) + k3 U(j-1) + k4 U(c) + k5 U(j+1)
//        + k6 U(k+1) + k7 U(k-1)
// in single precision: seven multipliers in stage 1, then an adder tree of
// six adders over three stages, ((p1+p2)+(p3+p4)) + ((p5+p6)+p7). That is the
// 7 multiply / 6 add operation count behind the paper's 33 DSP blocks per
// point; the tree shape is this design's choice. The coefficients k1..k7 are
// run-time inputs (the paper gives none). Boundary points keep their value.
// Timing: en advances the pipeline; LATENCY = 4 beats from inputs to y.
module jacobi_cu
  import stencil_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  logic boundary,
  input  f32_t k [7],
  // neighbours in the order of the equation: i+1, i-1, j-1, c, j+1, k+1, k-1
  input  f32_t u [7],
  output f32_t y,
  output logic y_valid
);
  localparam int unsigned LATENCY = 4;

  f32_t prod [7];
  f32_t r1 [7];
  f32_t a12, a34, a56, r2_12, r2_34, r2_56, r2_7;
  f32_t b1, b2, r3_1, r3_2, res;
  f32_t r1_c, r2_c, r3_c;
  logic [LATENCY-2:0] v_pipe, b_pipe;

  for (genvar g = 0; g < 7; g++) begin : g_mul
    fp_mul u_mul (.a(k[g]), .b(u[g]), .y(prod[g]));
  end
  fp_add u_a12 (.a(r1[0]), .b(r1[1]), .y(a12));
  fp_add u_a34 (.a(r1[2]), .b(r1[3]), .y(a34));
  fp_add u_a56 (.a(r1[4]), .b(r1[5]), .y(a56));
  fp_add u_b1  (.a(r2_12), .b(r2_34), .y(b1));
  fp_add u_b2  (.a(r2_56), .b(r2_7),  .y(b2));
  fp_add u_res (.a(r3_1),  .b(r3_2),  .y(res));

  always_ff @(posedge clk) begin
    if (en) begin
      r1    <= prod;   r1_c <= u[3];
      r2_12 <= a12;  r2_34 <= a34;  r2_56 <= a56;  r2_7 <= r1[6];  r2_c <= r1_c;
      r3_1  <= b1;   r3_2 <= b2;    r3_c <= r2_c;
      y     <= b_pipe[LATENCY-2] ? r3_c : res;
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
