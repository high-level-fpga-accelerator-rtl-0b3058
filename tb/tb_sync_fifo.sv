// tb_sync_fifo: random push/pop against a queue model; checks data order,
// the count and the full/empty flags.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0, empty, full;
  logic [15:0] din, dout;
  logic [3:0] count;
  logic [15:0] model [$];
  int checks = 0, failures = 0, fulls = 0;
  always #5 clk = ~clk;
  sync_fifo #(.WIDTH(16), .DEPTH(8)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int bias;
      bias = (i / 500) % 2;
      push = !full && ($urandom_range(0, 3) < (bias ? 3 : 1));
      pop  = !empty && ($urandom_range(0, 3) < (bias ? 1 : 3));
      din  = 16'($urandom);
      #1;
      checks++;
      if (int'(count) != model.size() || empty != (model.size() == 0) || full != (model.size() == 8)) begin
        failures++; $display("count %0d model %0d", count, model.size());
      end
      if (full) fulls++;
      if (pop) begin
        checks++;
        if (dout !== model[0]) begin failures++; $display("dout %h expected %h", dout, model[0]); end
        void'(model.pop_front());
      end
      if (push) model.push_back(din);
      @(negedge clk);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
