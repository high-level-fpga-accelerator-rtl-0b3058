// pass_ctrl: on-chip control loop of a stencil kernel.
//
// One pass streams the whole mesh (or batch of meshes) once through the chain
// of p compute modules, i.e. advances the solution by p time steps. The host
// asks for n_iter/p passes; passes alternate between two external buffers
// (ping-pong), so the result lies in src_base after an even number of passes
// and in dst_base after an odd one.
// With spatial blocking (2D) each pass is further split into blocks that are
// full columns of the mesh, tile_words 512-bit words wide. Neighbouring blocks
// overlap by HALO_WORDS words on each side, HALO_WORDS*16 >= p*D/2, so that
// the interior of every block is exact after p steps; only that interior is
// written back (col_lo/col_hi). Block offsets are computed here, on the fly;
// the paper notes they may be precomputed by the host, which this design
// does not need. A tile_words not smaller than the row pitch gives the
// baseline design: one block, read and written as one contiguous stream.
// Interface: `start` with `cfg` launches a run. For each segment (one block
// of one pass) seg_start pulses with the segment's geometry valid from then
// until the next seg_start; the controller then waits for seg_done. `done`
// pulses once after the last segment.
module pass_ctrl
  import stencil_pkg::*;
#(
  parameter int unsigned HALO_WORDS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  run_cfg_t    cfg,
  input  logic        seg_done,
  output logic        busy,
  output logic        done,
  output logic        seg_start,
  // geometry of the current segment
  output addr_t       rd_base,
  output addr_t       wr_base,
  output logic [31:0] seg_rows,      // runs per segment
  output logic [31:0] seg_row_words, // words per run
  output logic [31:0] tile_elems,    // elements per mesh row inside the block
  output logic [31:0] tile_width,    // mesh width as the compute modules see it
  output logic [31:0] col_lo,
  output logic [31:0] col_hi,
  output logic [31:0] pass_idx,
  output logic [31:0] tile_idx
);
  typedef enum logic [1:0] {IDLE, LAUNCH, WAIT} state_t;
  state_t      state;
  run_cfg_t    c;
  addr_t       src, dst;
  logic [31:0] vs, ve, rs, re, stride, total_rows;
  logic        single;

  // block geometry from the current block index
  always_comb begin
    total_rows = 32'(c.rows) * 32'(c.batch);
    single     = (c.tile_words >= c.pitch_words);
    stride     = 32'(c.tile_words) - 2 * HALO_WORDS;
    vs = tile_idx * stride;
    ve = (vs + stride > 32'(c.pitch_words)) ? 32'(c.pitch_words) : vs + stride;
    rs = (tile_idx == 0) ? 32'd0 : vs - HALO_WORDS;
    re = (ve + HALO_WORDS > 32'(c.pitch_words)) ? 32'(c.pitch_words) : ve + HALO_WORDS;
    if (single) begin
      seg_rows      = 32'd1;
      seg_row_words = total_rows * 32'(c.pitch_words);
      tile_elems    = 32'(c.pitch_words) * ELEMS_PER_WORD;
      tile_width    = 32'(c.width);
      col_lo        = 32'd0;
      col_hi        = 32'hFFFF_FFFF;
      rd_base       = src;
      wr_base       = dst;
    end else begin
      seg_rows      = total_rows;
      seg_row_words = re - rs;
      tile_elems    = (re - rs) * ELEMS_PER_WORD;
      tile_width    = (re == 32'(c.pitch_words)) ? 32'(c.width) - rs * ELEMS_PER_WORD
                                                 : (re - rs) * ELEMS_PER_WORD;
      col_lo        = (vs - rs) * ELEMS_PER_WORD;
      col_hi        = (ve - rs) * ELEMS_PER_WORD;
      rd_base       = src + addr_t'(rs) * (BUS_BITS / 8);
      wr_base       = dst + addr_t'(rs) * (BUS_BITS / 8);
    end
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; c <= '0; src <= '0; dst <= '0;
      pass_idx <= '0; tile_idx <= '0; seg_start <= 1'b0; done <= 1'b0;
    end else begin
      seg_start <= 1'b0;
      done      <= 1'b0;
      case (state)
        IDLE: if (start) begin
          c        <= cfg;
          src      <= cfg.src_base;
          dst      <= cfg.dst_base;
          pass_idx <= '0;
          tile_idx <= '0;
          if (cfg.passes == 0) done <= 1'b1;
          else state <= LAUNCH;
        end
        LAUNCH: begin
          seg_start <= 1'b1;
          state     <= WAIT;
        end
        WAIT: if (seg_done && !seg_start) begin
          if (!single && ve < 32'(c.pitch_words)) begin
            tile_idx <= tile_idx + 1;
            state    <= LAUNCH;
          end else if (pass_idx + 1 < c.passes) begin
            pass_idx <= pass_idx + 1;
            tile_idx <= '0;
            src      <= dst;
            dst      <= src;
            state    <= LAUNCH;
          end else begin
            done  <= 1'b1;
            state <= IDLE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && cfg.tile_words < cfg.pitch_words |-> cfg.tile_words > 2 * HALO_WORDS)
    else $error("pass_ctrl: block narrower than its two halos");
endmodule
