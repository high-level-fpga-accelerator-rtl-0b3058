// tb_poisson_cu: the Poisson stencil unit on random operands, including
// boundary points, with a random enable; checks values and the 4-beat latency.
module tb_poisson_cu;
  import stencil_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, boundary = 0, y_valid;
  f32_t c, n, s, w, e, y;
  f32_t expq [$];
  int lat [$];
  int checks = 0, failures = 0, beats = 0;
  always #5 clk = ~clk;
  poisson_cu dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    c = 0; n = 0; s = 0; w = 0; e = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      en = ($urandom_range(0, 4) != 0);
      in_valid = ($urandom_range(0, 5) != 0);
      boundary = ($urandom_range(0, 6) == 0);
      c = rnd_f32(100, 150, 1); n = rnd_f32(100, 150, 1); s = rnd_f32(100, 150, 1);
      w = rnd_f32(100, 150, 1); e = rnd_f32(100, 150, 1);
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
        expq.push_back(boundary ? c : fadd(fmul(fadd(fadd(n, s), fadd(w, e)), 32'h3E000000), fmul(c, 32'h3F000000)));
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
