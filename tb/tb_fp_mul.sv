// tb_fp_mul: random and directed checks of the single-precision multiplier
// against double-precision arithmetic rounded back to single precision.
module tb_fp_mul;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;
  fp_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] te);
    a = ta; b = tb_; #1;
    checks++;
    if (y !== te) begin
      failures++;
      if (failures < 10) $display("fp_mul FAIL %h * %h = %h expected %h", ta, tb_, y, te);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed
    check(32'h3F800000, 32'h40000000, 32'h40000000);  // 1*2 = 2
    check(32'h40400000, 32'h3E000000, 32'h3EC00000);  // 3*0.125
    check(32'h7F800000, 32'h00000000, 32'h7FC00000);  // inf*0
    check(32'h7F000000, 32'h7F000000, 32'h7F800000);  // overflow
    check(32'h00800000, 32'h3F000000, 32'h00000000);  // underflow flushes
    check(32'hBF800000, 32'h3F000000, 32'hBF000000);  // -1*0.5
    check(32'h3F800800, 32'h3F800800, 32'h3F801000);  // exact tie, stays even
    // random operands, including products that overflow or underflow
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] ra, rb;
      if (i % 2 == 0) begin
        ra = rnd_f32(70, 190, 1); rb = rnd_f32(70, 190, 1);
      end else begin
        ra = rnd_f32(120, 130, 1); rb = rnd_f32(120, 130, 1);
      end
      check(ra, rb, fmul(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
