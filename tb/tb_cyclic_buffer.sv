// tb_cyclic_buffer: the cyclic buffer as a delay line of depth+1 beats,
// at two run-time depths, with random gaps in the enable.
module tb_cyclic_buffer;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [4:0] depth;
  logic [15:0] d, q;
  logic [15:0] hist [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cyclic_buffer #(.WIDTH(16), .MAX_DEPTH(16)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int dp);
    int beats = 0;
    hist.delete();
    @(negedge clk); depth = 5'(dp); clr = 1; @(negedge clk); clr = 0;
    for (int i = 0; i < 200; i++) begin
      en = ($urandom_range(0, 3) != 0);
      d  = 16'($urandom);
      if (en) begin
        // q now holds the word written dp+1 beats ago
        if (beats > dp) begin
          checks++;
          if (q !== hist[beats - dp - 1]) begin
            failures++;
            $display("depth %0d beat %0d: q=%h expected %h", dp, beats, q, hist[beats - dp - 1]);
          end
        end
        hist.push_back(d);
        beats++;
      end
      @(negedge clk);
    end
    en = 0;
  endtask

  initial begin
    d = 0; depth = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    run(3);
    run(16);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
