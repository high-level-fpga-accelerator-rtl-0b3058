// tb_stencil_accel_top: both kernels of the top end to end, at reduced
// unroll factors (Poisson p = 3, Jacobi p = 2) and buffer sizes so that it
// runs in seconds. The two kernels run at the same time on their own memory
// models. Poisson: a batch of two 40x6 meshes (baseline/batching, 2 passes)
// and a 150x24 mesh split into 4-word blocks (spatial blocking, 1 pass).
// Jacobi: a batch of two 20x5x4 meshes (2 passes) and one 30x4x5 mesh
// (1 pass). Write data is throttled so the writer back-pressure stalls the
// pipelines.
module tb_stencil_accel_top;
  import stencil_pkg::*;
  import tb_fp_pkg::*;
  localparam int PP = 3, JP = 2, W_STALL = 92;

  `include "top_tb_body.svh"

  stencil_accel_top #(
    .POISSON_P(PP), .POISSON_MAX_WIDTH(256),
    .JACOBI_P(JP), .JACOBI_MAX_WIDTH(32), .JACOBI_MAX_HEIGHT(8)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
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
        poisson_case(40, 6, 2, 2, 64);
        poisson_case(150, 24, 1, 1, 4);
      end
      begin
        jacobi_case(20, 5, 4, 2, 2);
        jacobi_case(30, 4, 5, 1, 1);
      end
    join
    finish_report();
  end
endmodule
