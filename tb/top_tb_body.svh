// top_tb_body.svh: body shared by the two end-to-end testbenches of
// stencil_accel_top. The including module declares localparams PP and JP
// (the unroll factors p of the Poisson and Jacobi kernels it instantiates)
// and instantiates the top as `dut`, connected by name to the signals below.
// Each kernel has its own memory model. The tasks load a mesh (or batch),
// run the kernel, read the result back and compare it point by point with a
// reference that applies the stencil one time step at a time. Mechanisms are
// counted: batching, spatial blocking, an odd number of passes (result in
// the second buffer), pipeline stalls from write back-pressure and cycles in
// which the pipeline waited for read data.

  logic clk = 0, rst_n = 0;
  logic p_start = 0, j_start = 0;
  run_cfg_t p_cfg, j_cfg;
  f32_t j_coef [7];
  logic p_busy, p_done, j_busy, j_done;
  logic [31:0] p_cycles, p_stall_cycles, p_starve_cycles, p_segments;
  logic [31:0] j_cycles, j_stall_cycles, j_starve_cycles, j_segments;
  logic p_arvalid, p_arready, p_rvalid, p_rready, p_rlast, p_awvalid, p_awready;
  logic p_wvalid, p_wready, p_wlast, p_bvalid, p_bready;
  addr_t p_araddr, p_awaddr;
  logic [7:0] p_arlen, p_awlen;
  word_t p_rdata, p_wdata;
  logic [63:0] p_wstrb;
  logic j_arvalid, j_arready, j_rvalid, j_rready, j_rlast, j_awvalid, j_awready;
  logic j_wvalid, j_wready, j_wlast, j_bvalid, j_bready;
  addr_t j_araddr, j_awaddr;
  logic [7:0] j_arlen, j_awlen;
  word_t j_rdata, j_wdata;
  logic [63:0] j_wstrb;

  int checks = 0, failures = 0;
  int n_batched = 0, n_blocked = 0, n_odd = 0, n_stall = 0, n_starve = 0;

  always #5 clk = ~clk;

  axi_mem_model #(.LATENCY(14), .STALL_PCT(10), .W_STALL_PCT(W_STALL)) pmem (
    .clk, .rst_n, .arvalid(p_arvalid), .arready(p_arready), .araddr(p_araddr), .arlen(p_arlen),
    .rvalid(p_rvalid), .rready(p_rready), .rdata(p_rdata), .rlast(p_rlast),
    .awvalid(p_awvalid), .awready(p_awready), .awaddr(p_awaddr), .awlen(p_awlen),
    .wvalid(p_wvalid), .wready(p_wready), .wdata(p_wdata), .wstrb(p_wstrb), .wlast(p_wlast),
    .bvalid(p_bvalid), .bready(p_bready));
  axi_mem_model #(.LATENCY(14), .STALL_PCT(10), .W_STALL_PCT(W_STALL)) jmem (
    .clk, .rst_n, .arvalid(j_arvalid), .arready(j_arready), .araddr(j_araddr), .arlen(j_arlen),
    .rvalid(j_rvalid), .rready(j_rready), .rdata(j_rdata), .rlast(j_rlast),
    .awvalid(j_awvalid), .awready(j_awready), .awaddr(j_awaddr), .awlen(j_awlen),
    .wvalid(j_wvalid), .wready(j_wready), .wdata(j_wdata), .wstrb(j_wstrb), .wlast(j_wlast),
    .bvalid(j_bvalid), .bready(j_bready));

  typedef f32_t mesh_t [][];   // [row][x]; 2D row = mesh*n + y, 3D row = (mesh*l + z)*n + y

  function automatic mesh_t poisson_step(mesh_t u, int m, int n);
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

  function automatic mesh_t jacobi_step(mesh_t u, int m, int n, int l);
    mesh_t r = new[u.size()];
    foreach (u[i]) begin
      int y, z;
      y = i % n; z = (i / n) % l;
      r[i] = new[u[i].size()];
      foreach (u[i][x]) begin
        if (y == 0 || y == n - 1 || z == 0 || z == l - 1 || x == 0 || x >= m - 1)
          r[i][x] = u[i][x];
        else
          r[i][x] = fadd(fadd(fadd(fmul(j_coef[0], u[i][x+1]), fmul(j_coef[1], u[i][x-1])),
                              fadd(fmul(j_coef[2], u[i-1][x]), fmul(j_coef[3], u[i][x]))),
                         fadd(fadd(fmul(j_coef[4], u[i+1][x]), fmul(j_coef[5], u[i+n][x])),
                              fmul(j_coef[6], u[i-n][x])));
      end
    end
    return r;
  endfunction

  function automatic mesh_t new_mesh(int nrows, int pitch);
    mesh_t u = new[nrows];
    foreach (u[i]) begin
      u[i] = new[pitch * 16];
      foreach (u[i][x]) u[i][x] = rnd_f32(120, 134, 0);
    end
    return u;
  endfunction

  task automatic compare(string what, mesh_t ref_u, bit in_b, int m, int pitch, bit is_p);
    foreach (ref_u[i]) for (int x = 0; x < m; x++) begin
      longint wa;
      f32_t got;
      wa  = (in_b ? 64'h100000 : 64'h0) / 64 + i * pitch + x / 16;
      got = is_p ? pmem.mem[wa][32*(x%16) +: 32] : jmem.mem[wa][32*(x%16) +: 32];
      checks++;
      if (got !== ref_u[i][x]) begin
        failures++;
        if (failures < 10) $display("%s row %0d col %0d: %h expected %h", what, i, x, got, ref_u[i][x]);
      end
    end
  endtask

  task automatic poisson_case(int m, int n, int nb, int passes, int tile_words);
    int pitch = (m + 15) / 16;
    mesh_t u = new_mesh(n * nb, pitch);
    mesh_t ref_u;
    foreach (u[i]) for (int w = 0; w < pitch; w++) begin
      word_t wd;
      for (int k = 0; k < 16; k++) wd[32*k +: 32] = u[i][w*16 + k];
      pmem.mem[i * pitch + w] = wd;
      pmem.mem[64'h100000 / 64 + i * pitch + w] = wd;
    end
    ref_u = u;
    for (int s = 0; s < passes * PP; s++) ref_u = poisson_step(ref_u, m, n);
    p_cfg = '0;
    p_cfg.src_base = 34'h0; p_cfg.dst_base = 34'h100000;
    p_cfg.width = dim_t'(m); p_cfg.pitch_words = dim_t'(pitch); p_cfg.rows = dim_t'(n);
    p_cfg.batch = dim_t'(nb); p_cfg.tile_words = dim_t'(tile_words); p_cfg.passes = 32'(passes);
    @(negedge clk); p_start = 1; @(negedge clk); p_start = 0;
    wait (p_done);
    @(negedge clk);
    compare("poisson", ref_u, passes % 2 == 1, m, pitch, 1);
    if (nb > 1) n_batched++;
    if (tile_words < pitch) n_blocked++;
    if (passes % 2 == 1) n_odd++;
    if (p_stall_cycles > 0) n_stall++;
    if (p_starve_cycles > 0) n_starve++;
    $display("poisson %0dx%0d B=%0d passes=%0d block=%0d words: %0d cycles (%0d stalled, %0d starved, %0d segments)",
             m, n, nb, passes, tile_words, p_cycles, p_stall_cycles, p_starve_cycles, p_segments);
  endtask

  task automatic jacobi_case(int m, int n, int l, int nb, int passes);
    int pitch = (m + 15) / 16;
    mesh_t u = new_mesh(n * l * nb, pitch);
    mesh_t ref_u;
    foreach (u[i]) for (int w = 0; w < pitch; w++) begin
      word_t wd;
      for (int k = 0; k < 16; k++) wd[32*k +: 32] = u[i][w*16 + k];
      jmem.mem[i * pitch + w] = wd;
      jmem.mem[64'h100000 / 64 + i * pitch + w] = wd;
    end
    ref_u = u;
    for (int s = 0; s < passes * JP; s++) ref_u = jacobi_step(ref_u, m, n, l);
    j_cfg = '0;
    j_cfg.src_base = 34'h0; j_cfg.dst_base = 34'h100000;
    j_cfg.width = dim_t'(m); j_cfg.pitch_words = dim_t'(pitch); j_cfg.rows = dim_t'(n * l);
    j_cfg.height = dim_t'(n); j_cfg.planes = dim_t'(l);
    j_cfg.batch = dim_t'(nb); j_cfg.tile_words = 16'hFFFF; j_cfg.passes = 32'(passes);
    @(negedge clk); j_start = 1; @(negedge clk); j_start = 0;
    wait (j_done);
    @(negedge clk);
    compare("jacobi", ref_u, passes % 2 == 1, m, pitch, 0);
    if (nb > 1) n_batched++;
    if (passes % 2 == 1) n_odd++;
    if (j_stall_cycles > 0) n_stall++;
    if (j_starve_cycles > 0) n_starve++;
    $display("jacobi %0dx%0dx%0d B=%0d passes=%0d: %0d cycles (%0d stalled, %0d starved)",
             m, n, l, nb, passes, j_cycles, j_stall_cycles, j_starve_cycles);
  endtask

  task automatic require(string what, int count);
    checks++;
    if (count == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end else begin
      $display("%s: %0d", what, count);
    end
  endtask

  task automatic finish_report();
    require("batched runs", n_batched);
    require("spatially blocked runs", n_blocked);
    require("runs ending in the second buffer", n_odd);
    require("runs with write back-pressure stalls", n_stall);
    require("runs with read starvation", n_starve);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
