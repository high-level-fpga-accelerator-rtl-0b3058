// tb_fp_add: random and directed checks of the single-precision adder
// against double-precision arithmetic rounded back to single precision.
module tb_fp_add;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;
  fp_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] te);
    a = ta; b = tb_; #1;
    checks++;
    if (y !== te) begin
      failures++;
      if (failures < 10) $display("fp_add FAIL %h + %h = %h expected %h", ta, tb_, y, te);
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
    check(32'h3F800000, 32'h3F800000, 32'h40000000);  // 1+1 = 2
    check(32'h3F800000, 32'hBF800000, 32'h00000000);  // 1-1 = +0
    check(32'h7F800000, 32'h3F800000, 32'h7F800000);  // inf+1
    check(32'h7F800000, 32'hFF800000, 32'h7FC00000);  // inf-inf
    check(32'h7F7FFFFF, 32'h7F7FFFFF, 32'h7F800000);  // overflow
    check(32'h3F800000, 32'h33800000, 32'h3F800000);  // 1 + 2^-24: tie, even
    check(32'h3F800001, 32'h33800000, 32'h3F800002);  // tie rounds to even up
    // random: similar exponents (cancellation) and wide exponent gaps
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] ra, rb;
      if (i % 2 == 0) begin
        ra = rnd_f32(100, 160, 1); rb = rnd_f32(100, 160, 1);
      end else begin
        ra = rnd_f32(120, 130, 1); rb = rnd_f32(120, 130, 1);
      end
      check(ra, rb, fadd(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
