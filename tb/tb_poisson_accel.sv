// tb_poisson_accel: the Poisson kernel end to end against a memory model.
// A reduced kernel (V = 8, P = 3) solves (1) a batch of two 40x6 meshes in
// baseline form, two passes (6 time steps), and (2) one 150x5 mesh with
// spatial blocking into 4-word-wide blocks, two passes. The results read
// back from the memory model are compared point by point with a reference
// that applies the 5-point update step by step. Memory back-pressure and
// latency exercise the stall and starve paths, which are counted.
module tb_poisson_accel;
  import stencil_pkg::*;
  import tb_fp_pkg::*;
  localparam int V = 8, P = 3;

  logic clk = 0, rst_n = 0, start = 0;
  run_cfg_t cfg;
  logic busy, done;
  logic [31:0] cycles, stall_cycles, starve_cycles, segments;
  logic arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  addr_t araddr, awaddr;
  logic [7:0] arlen, awlen;
  word_t rdata, wdata;
  logic [63:0] wstrb;
  int checks = 0, failures = 0;
  int stalls_seen = 0, starves_seen = 0, batch_runs = 0, tiled_runs = 0;

  always #5 clk = ~clk;

  poisson_accel #(.V(V), .P(P), .MAX_WIDTH(256), .WR_FIFO(4)) dut (.*);
  axi_mem_model #(.LATENCY(14), .STALL_PCT(20)) mem (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mesh kept as [row][col] with row = mesh*n + y
  typedef f32_t mesh_t [][];

  function automatic mesh_t step(mesh_t u, int m, int n);
    mesh_t r = new[u.size()];
    foreach (u[i]) begin
      r[i] = new[u[i].size()];
      foreach (u[i][x]) begin
        if (i % n == 0 || i % n == n - 1 || x == 0 || x >= m - 1)
          r[i][x] = u[i][x];
        else
          r[i][x] = fadd(fmul(fadd(fadd(u[i-1][x], u[i+1][x]), fadd(u[i][x-1], u[i][x+1])), 32'h3E000000),
                         fmul(u[i][x], 32'h3F000000));
      end
    end
    return r;
  endfunction

  task automatic run_case(int m, int n, int nb, int passes, int tile_words);
    int pitch = (m + 15) / 16;
    addr_t a = 34'h0, b = 34'h100000;
    mesh_t u = new[n * nb];
    mesh_t ref_u;
    foreach (u[i]) begin
      u[i] = new[pitch * 16];
      foreach (u[i][x]) u[i][x] = rnd_f32(120, 134, 0);
    end
    // load memory buffer a (and a copy in b, as the host would)
    foreach (u[i]) for (int w = 0; w < pitch; w++) begin
      word_t wd;
      for (int k = 0; k < 16; k++) wd[32*k +: 32] = u[i][w*16 + k];
      mem.mem[(longint'(a) / 64) + i * pitch + w] = wd;
      mem.mem[(longint'(b) / 64) + i * pitch + w] = wd;
    end
    ref_u = u;
    for (int s = 0; s < passes * P; s++) ref_u = step(ref_u, m, n);
    cfg = '0;
    cfg.src_base = a; cfg.dst_base = b;
    cfg.width = dim_t'(m); cfg.pitch_words = dim_t'(pitch); cfg.rows = dim_t'(n);
    cfg.batch = dim_t'(nb); cfg.tile_words = dim_t'(tile_words); cfg.passes = 32'(passes);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    if (nb > 1) batch_runs++;
    if (tile_words < pitch) tiled_runs++;
    if (stall_cycles > 0) stalls_seen++;
    if (starve_cycles > 0) starves_seen++;
    // result is in a after an even number of passes
    foreach (ref_u[i]) for (int x = 0; x < m; x++) begin
      longint wa = ((passes % 2 == 0) ? longint'(a) : longint'(b)) / 64 + i * pitch + x / 16;
      f32_t got = mem.mem[wa][32*(x%16) +: 32];
      checks++;
      if (got !== ref_u[i][x]) begin
        failures++;
        if (failures < 10) $display("m=%0d row %0d col %0d: %h expected %h", m, i, x, got, ref_u[i][x]);
      end
    end
    checks++;
    if (int'(segments) != passes * ((tile_words < pitch) ? (pitch + tile_words - 3) / (tile_words - 2) : 1)) begin
      failures++; $display("segments %0d", segments);
    end
    $display("case m=%0d n=%0d B=%0d passes=%0d tile=%0d: %0d cycles, %0d stalled, %0d starved",
             m, n, nb, passes, tile_words, cycles, stall_cycles, starve_cycles);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(40, 6, 2, 2, 64);     // baseline + batching
    run_case(150, 5, 1, 2, 4);     // spatial blocking
    checks += 3;
    if (batch_runs == 0) begin failures++; $display("batching never exercised"); end
    if (tiled_runs == 0) begin failures++; $display("blocking never exercised"); end
    if (stalls_seen == 0 && starves_seen == 0) begin failures++; $display("no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
