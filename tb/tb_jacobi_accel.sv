// tb_jacobi_accel: the Jacobi kernel end to end against a memory model.
// A reduced kernel (V = 8, P = 2) solves a batch of two 20x5x4 meshes for
// two passes (4 time steps), and then a single mesh for one pass (the result
// then lies in the second buffer). Results are compared point by point with
// a reference applying the 7-point update step by step.
module tb_jacobi_accel;
  import stencil_pkg::*;
  import tb_fp_pkg::*;
  localparam int V = 8, P = 2;

  logic clk = 0, rst_n = 0, start = 0;
  run_cfg_t cfg;
  f32_t coef [7];
  logic busy, done;
  logic [31:0] cycles, stall_cycles, starve_cycles, segments;
  logic arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  addr_t araddr, awaddr;
  logic [7:0] arlen, awlen;
  word_t rdata, wdata;
  logic [63:0] wstrb;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  jacobi_accel #(.V(V), .P(P), .MAX_WIDTH(32), .MAX_HEIGHT(8), .WR_FIFO(4)) dut (.*);
  axi_mem_model #(.LATENCY(14), .STALL_PCT(20)) mem (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef f32_t mesh_t [][];   // [row][x], row = (mesh*l + z)*n + y

  function automatic mesh_t step(mesh_t u, int m, int n, int l);
    mesh_t r = new[u.size()];
    foreach (u[i]) begin
      int y, z;
      y = i % n; z = (i / n) % l;
      r[i] = new[u[i].size()];
      foreach (u[i][x]) begin
        if (y == 0 || y == n - 1 || z == 0 || z == l - 1 || x == 0 || x >= m - 1)
          r[i][x] = u[i][x];
        else
          r[i][x] = fadd(fadd(fadd(fmul(coef[0], u[i][x+1]), fmul(coef[1], u[i][x-1])),
                              fadd(fmul(coef[2], u[i-1][x]), fmul(coef[3], u[i][x]))),
                         fadd(fadd(fmul(coef[4], u[i+1][x]), fmul(coef[5], u[i+n][x])),
                              fmul(coef[6], u[i-n][x])));
      end
    end
    return r;
  endfunction

  task automatic run_case(int m, int n, int l, int nb, int passes);
    int pitch = (m + 15) / 16;
    addr_t a = 34'h0, b = 34'h100000;
    mesh_t u = new[n * l * nb];
    mesh_t ref_u;
    foreach (u[i]) begin
      u[i] = new[pitch * 16];
      foreach (u[i][x]) u[i][x] = rnd_f32(120, 134, 0);
    end
    foreach (u[i]) for (int w = 0; w < pitch; w++) begin
      word_t wd;
      for (int k = 0; k < 16; k++) wd[32*k +: 32] = u[i][w*16 + k];
      mem.mem[(longint'(a) / 64) + i * pitch + w] = wd;
      mem.mem[(longint'(b) / 64) + i * pitch + w] = wd;
    end
    ref_u = u;
    for (int s = 0; s < passes * P; s++) ref_u = step(ref_u, m, n, l);
    cfg = '0;
    cfg.src_base = a; cfg.dst_base = b;
    cfg.width = dim_t'(m); cfg.pitch_words = dim_t'(pitch); cfg.rows = dim_t'(n * l);
    cfg.height = dim_t'(n); cfg.planes = dim_t'(l);
    cfg.batch = dim_t'(nb); cfg.tile_words = 16'hFFFF; cfg.passes = 32'(passes);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    foreach (ref_u[i]) for (int x = 0; x < m; x++) begin
      longint wa = ((passes % 2 == 0) ? longint'(a) : longint'(b)) / 64 + i * pitch + x / 16;
      f32_t got = mem.mem[wa][32*(x%16) +: 32];
      checks++;
      if (got !== ref_u[i][x]) begin
        failures++;
        if (failures < 10) $display("row %0d col %0d: %h expected %h", i, x, got, ref_u[i][x]);
      end
    end
    checks++;
    if (int'(segments) != passes) begin failures++; $display("segments %0d", segments); end
    $display("case %0dx%0dx%0d B=%0d passes=%0d: %0d cycles, %0d stalled, %0d starved",
             m, n, l, nb, passes, cycles, stall_cycles, starve_cycles);
  endtask

  initial begin
    for (int i = 0; i < 7; i++) coef[i] = rnd_f32(123, 126, 0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(20, 5, 4, 2, 2);
    run_case(30, 4, 5, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
