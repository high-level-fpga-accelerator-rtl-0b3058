// tb_jacobi_cu: the Jacobi stencil unit on random operands and coefficients,
// including boundary points, with a random enable; checks values and latency.
module tb_jacobi_cu;
  import stencil_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, boundary = 0, y_valid;
  f32_t k [7];
  f32_t u [7];
  f32_t y;
  f32_t expq [$];
  int lat [$];
  int checks = 0, failures = 0, beats = 0;
  always #5 clk = ~clk;
  jacobi_cu dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < 7; j++) begin k[j] = 0; u[j] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      f32_t p [7];
      en = ($urandom_range(0, 4) != 0);
      in_valid = ($urandom_range(0, 5) != 0);
      boundary = ($urandom_range(0, 6) == 0);
      for (int j = 0; j < 7; j++) begin
        u[j] = rnd_f32(110, 140, 1);
        if (i % 500 == 0) k[j] = rnd_f32(120, 127, 1);
      end
      #1;
      if (en && y_valid) begin
        checks++;
        if (expq.size() == 0 || y !== expq[0] || beats - lat[0] != 4) begin
          failures++;
          if (failures < 10) $display("y=%h expected %h", y, expq.size() ? expq[0] : 0);
        end
        if (expq.size()) begin void'(expq.pop_front()); void'(lat.pop_front()); end
      end
      if (en && in_valid) begin
        for (int j = 0; j < 7; j++) p[j] = fmul(k[j], u[j]);
        expq.push_back(boundary ? u[3] : fadd(fadd(fadd(p[0], p[1]), fadd(p[2], p[3])), fadd(fadd(p[4], p[5]), p[6])));
        lat.push_back(beats);
      end
      if (en) beats++;
      @(negedge clk);
    end
    checks++;
    if (expq.size() > 4) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
