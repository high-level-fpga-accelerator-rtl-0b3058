// tb_mem_reader: strided segment read (3 runs of 70 words, pitch 100) and a
// contiguous one, with random memory and consumer back-pressure. Checks every
// vector against the memory contents, the burst sizes (<= 64 beats, never
// crossing a run) and that several bursts were in flight at once.
module tb_mem_reader;
  import stencil_pkg::*;
  localparam int V = 8;
  logic clk = 0, rst_n = 0, start = 0, busy;
  addr_t base;
  logic [31:0] rows, row_words;
  dim_t pitch_words;
  logic arvalid, arready, rvalid, rready, rlast, out_valid, out_ready;
  addr_t araddr;
  logic [7:0] arlen;
  word_t rdata;
  f32_t [V-1:0] out_data;
  // unused write side of the memory model
  logic awvalid = 0, awready, wvalid = 0, wready, wlast = 0, bvalid, bready = 1;
  addr_t awaddr = 0;
  logic [7:0] awlen = 0;
  word_t wdata = 0;
  logic [63:0] wstrb = 0;
  int checks = 0, failures = 0, inflight = 0, max_inflight = 0;
  always #5 clk = ~clk;

  mem_reader #(.V(V), .FIFO_DEPTH(128)) dut (.*);
  axi_mem_model #(.LATENCY(14), .STALL_PCT(15)) mem (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic f32_t elem(longint word, int k);
    return f32_t'(word * 16 + k);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (arvalid && arready) begin
      longint w, rw;
      w  = longint'(araddr) / 64;
      rw = (w - longint'(base) / 64) % pitch_words;
      checks++;
      if (int'(arlen) + 1 > 64 || rw + arlen + 1 > row_words) begin
        failures++; $display("bad burst at word %0d len %0d", w, arlen + 1);
      end
    end
    inflight <= inflight + ((arvalid && arready) ? 1 : 0) - ((rvalid && rlast) ? 1 : 0);
    if (inflight > max_inflight) max_inflight <= inflight;
  end

  task automatic run(addr_t b, int nr, int rw, int pw);
    int n = 0;
    base = b; rows = 32'(nr); row_words = 32'(rw); pitch_words = dim_t'(pw);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (n < nr * rw * (16 / V)) begin
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (out_valid && out_ready) begin
        int r = n / (rw * 16 / V), vi = n % (rw * 16 / V);
        longint w = longint'(b) / 64 + r * pw + vi / (16 / V);
        for (int l = 0; l < V; l++) begin
          checks++;
          if (out_data[l] !== elem(w, (vi % (16 / V)) * V + l)) begin
            failures++;
            if (failures < 10) $display("vector %0d lane %0d: %h expected %h", n, l, out_data[l], elem(w, (vi % (16/V)) * V + l));
          end
        end
        n++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (busy || out_valid) begin failures++; $display("reader not idle at the end"); end
  endtask

  initial begin
    out_ready = 0;
    for (longint w = 0; w < 2000; w++) begin
      word_t wd;
      for (int k = 0; k < 16; k++) wd[32*k +: 32] = elem(w, k);
      mem.mem[w] = wd;
    end
    repeat (3) @(negedge clk); rst_n = 1;
    run(34'd640, 3, 70, 100);
    run(34'd0, 1, 300, 300);
    checks++;
    if (max_inflight < 2) begin failures++; $display("never more than one burst in flight"); end
    $display("max bursts in flight: %0d", max_inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
