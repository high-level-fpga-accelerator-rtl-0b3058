// tb_pass_ctrl: the pass/block loop. A blocked run (row pitch 10 words,
// blocks of 4 words, halo 1 word, 3 passes) and a single-block run
// (2 passes). For each segment the geometry is compared with the expected
// block list: valid words [2t, 2t+2) of block t, read words widened by the
// halo and clipped to the row, buffers swapped between passes.
module tb_pass_ctrl;
  import stencil_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, seg_done = 0;
  run_cfg_t cfg;
  logic busy, done, seg_start;
  addr_t rd_base, wr_base;
  logic [31:0] seg_rows, seg_row_words, tile_elems, tile_width, col_lo, col_hi, pass_idx, tile_idx;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pass_ctrl #(.HALO_WORDS(1)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint expv);
    checks++;
    if (got != expv) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, expv);
    end
  endtask

  // serve segments: answer each seg_start after a random delay
  task automatic serve(int nseg, bit tiled, int pitch, int width, int rows_total, int passes);
    int s;
    s = 0;
    while (!done) begin
      @(negedge clk);
      if (seg_start) begin
        int t, p, vs, ve, rs, re;
        longint src, dst;
        p = s / (nseg / passes); t = s % (nseg / passes);
        src = (p % 2 == 0) ? 34'h1000 : 34'h80000;
        dst = (p % 2 == 0) ? 34'h80000 : 34'h1000;
        if (tiled) begin
          vs = 2 * t; ve = (2 * t + 2 > pitch) ? pitch : 2 * t + 2;
          rs = (vs - 1 < 0) ? 0 : vs - 1; re = (ve + 1 > pitch) ? pitch : ve + 1;
          expect_eq("rd_base", rd_base, src + rs * 64);
          expect_eq("wr_base", wr_base, dst + rs * 64);
          expect_eq("seg_rows", seg_rows, rows_total);
          expect_eq("seg_row_words", seg_row_words, re - rs);
          expect_eq("col_lo", col_lo, (vs - rs) * 16);
          expect_eq("col_hi", col_hi, (ve - rs) * 16);
          expect_eq("tile_width", tile_width, (re == pitch) ? width - rs * 16 : (re - rs) * 16);
        end else begin
          expect_eq("rd_base", rd_base, src);
          expect_eq("wr_base", wr_base, dst);
          expect_eq("seg_rows", seg_rows, 1);
          expect_eq("seg_row_words", seg_row_words, rows_total * pitch);
          expect_eq("tile_width", tile_width, width);
        end
        s++;
        seg_done = 0;
        repeat ($urandom_range(1, 6)) @(negedge clk);
        seg_done = 1;
      end
    end
    expect_eq("segments", s, nseg);
  endtask

  initial begin
    cfg = '0;
    seg_done = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    cfg.src_base = 34'h1000; cfg.dst_base = 34'h80000; cfg.width = 150; cfg.pitch_words = 10;
    cfg.rows = 5; cfg.batch = 2; cfg.tile_words = 4; cfg.passes = 3;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    serve(15, 1, 10, 150, 10, 3);
    cfg.tile_words = 64; cfg.passes = 2;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    serve(2, 0, 10, 150, 10, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
