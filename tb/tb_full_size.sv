// tb_full_size: the top with every parameter at its default (Poisson V = 8,
// p = 60, blocks up to 8192 elements; Jacobi V = 8, p = 29, planes up to
// 304 x 300). Small meshes keep the run short while every compute module is
// in the path: Poisson solves a batch of two 40x6 meshes (one pass = 60 time
// steps) and then a 400x8 mesh in 12-word blocks (7 blocks, halo 4 words);
// Jacobi solves a 20x5x4 mesh (one pass = 29 time steps). Results are
// compared point by point with a step-by-step reference.
module tb_full_size;
  import stencil_pkg::*;
  import tb_fp_pkg::*;
  localparam int PP = 60, JP = 29, W_STALL = 92;

  `include "top_tb_body.svh"

  stencil_accel_top dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 7; i++) j_coef[i] = rnd_f32(123, 126, 0);
    p_cfg = '0; j_cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin
        poisson_case(40, 6, 2, 1, 64);
        poisson_case(400, 8, 1, 1, 12);
      end
      jacobi_case(20, 5, 4, 1, 1);
    join
    finish_report();
  end
endmodule
