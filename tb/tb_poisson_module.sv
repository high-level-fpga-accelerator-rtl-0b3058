// tb_poisson_module: one 2D compute module on a batch of two small meshes.
// Runs twice: once with a continuous input stream (checks the cycle count
// T + K) and once with random input gaps (stalls). Every output point is
// compared with a reference computed here in double precision and rounded
// to single after each operation, in the same operation order.
module tb_poisson_module;
  import stencil_pkg::*;
  import tb_fp_pkg::*;
  localparam int V = 4, MAXW = 64;
  localparam int M = 5, WID = 18, NR = 6, NB = 2, TR = NR * NB, T = M * TR;
  localparam int K = M + 1 + 4;

  logic clk = 0, rst_n = 0, start = 0, en = 1;
  logic in_valid, in_ready, out_valid, busy, done;
  f32_t [V-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  f32_t mesh [TR][M*V];
  f32_t expv [TR][M*V];

  always #5 clk = ~clk;

  poisson_module #(.V(V), .MAX_WIDTH(MAXW)) dut (
    .clk, .rst_n, .start, .en, .width(dim_t'(WID)), .vecs(dim_t'(M)), .rows(dim_t'(NR)),
    .total_rows(32'(TR)), .in_valid, .in_ready, .in_data, .out_valid, .out_data, .busy, .done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void make_ref();
    for (int r = 0; r < TR; r++)
      for (int x = 0; x < M*V; x++) begin
        int rm = r % NR;
        if (rm == 0 || rm == NR-1 || x == 0 || x >= WID-1)
          expv[r][x] = mesh[r][x];
        else
          expv[r][x] = fadd(fmul(fadd(fadd(mesh[r-1][x], mesh[r+1][x]),
                                      fadd(mesh[r][x-1], mesh[r][x+1])), 32'h3E000000),
                            fmul(mesh[r][x], 32'h3F000000));
      end
  endfunction

  int outs;
  always @(posedge clk) if (out_valid) begin
    for (int l = 0; l < V; l++) begin
      int r, x;
      r = outs / M; x = (outs % M) * V + l;
      checks++;
      if (out_data[l] !== expv[r][x]) begin
        failures++;
        if (failures < 10) $display("mismatch row %0d col %0d: %h expected %h", r, x, out_data[l], expv[r][x]);
      end
    end
    outs++;
  end

  task automatic run(bit gaps);
    int i, cyc;
    for (int r = 0; r < TR; r++)
      for (int x = 0; x < M*V; x++) mesh[r][x] = rnd_f32(120, 134, 1);
    make_ref();
    outs = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    i = 0; cyc = 0;
    while (busy) begin
      in_valid = (i < T) && (!gaps || $urandom_range(0, 2) != 0);
      for (int l = 0; l < V; l++) in_data[l] = (i < T) ? mesh[i / M][(i % M) * V + l] : '0;
      @(posedge clk);
      if (in_valid && in_ready) i++;
      cyc++;
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (outs != T) begin failures++; $display("got %0d outputs, expected %0d", outs, T); end
    if (!gaps) begin
      checks++;
      if (cyc != T + K) begin failures++; $display("took %0d cycles, expected %0d", cyc, T + K); end
    end
  endtask

  initial begin
    in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
