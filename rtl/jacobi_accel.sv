// jacobi_accel: the Jacobi-7pt-3D kernel.
//
// Same organisation as poisson_accel (reader, FIFO, chain of P compute
// modules, writer, pass control), with jacobi_module as the compute module.
// The mesh is stored x-fastest, rows of pitch_words words, n rows per plane,
// l planes per mesh; a batch of B meshes is stored back to back and streamed
// as one mesh B*l planes deep. Defaults: V = 8 lanes and P = 29 modules (the
// synthesised baseline/batched design of the paper), window buffers sized for
// planes of up to 304 x 300 elements (the largest evaluated mesh, 300^3, with
// rows padded to whole 512-bit words). The seven coefficients are run-time
// inputs. Only the baseline and batched forms are built: the paper's 3D
// spatially blocked variant (V = 64, P = 3, 768x768 blocks) is not, so
// tile_words must be at least the row pitch.
module jacobi_accel
  import stencil_pkg::*;
#(
  parameter int unsigned V         = 8,
  parameter int unsigned P          = 29,
  parameter int unsigned MAX_WIDTH  = 304,
  parameter int unsigned MAX_HEIGHT = 300,
  parameter int unsigned RD_FIFO   = 256,
  parameter int unsigned WR_FIFO   = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  run_cfg_t    cfg,
  input  f32_t        coef [7],
  output logic        busy,
  output logic        done,
  output logic [31:0] cycles,
  output logic [31:0] stall_cycles,
  output logic [31:0] starve_cycles,
  output logic [31:0] segments,
  // AXI4 read master
  output logic        arvalid,
  input  logic        arready,
  output addr_t       araddr,
  output logic [7:0]  arlen,
  input  logic        rvalid,
  output logic        rready,
  input  word_t       rdata,
  input  logic        rlast,
  // AXI4 write master
  output logic        awvalid,
  input  logic        awready,
  output addr_t       awaddr,
  output logic [7:0]  awlen,
  output logic        wvalid,
  input  logic        wready,
  output word_t       wdata,
  output logic [63:0] wstrb,
  output logic        wlast,
  input  logic        bvalid,
  output logic        bready
);
  localparam int unsigned HALO_WORDS = 1;  // no spatial blocking in 3D

  logic        seg_start, seg_done, rd_busy, wr_busy, space_ok;
  addr_t       rd_base, wr_base;
  logic [31:0] seg_rows, seg_row_words, tile_elems, tile_width, col_lo, col_hi, pass_idx, tile_idx;
  logic        rd_valid, rd_ready;
  f32_t [V-1:0] rd_data;

  logic         m_in_valid [P+1];
  f32_t [V-1:0] m_in_data  [P+1];
  logic [P-1:0] m_busy, m_done, m_in_ready;
  dim_t         vecs;

  // configuration held for the run (pass_ctrl latches its own copy)
  run_cfg_t cfg_q;
  f32_t     coef_q [7];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q  <= '0;
      coef_q <= '{default: '0};
    end else if (start && !busy) begin
      cfg_q  <= cfg;
      coef_q <= coef;
    end
  end

  pass_ctrl #(.HALO_WORDS(HALO_WORDS)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .seg_done, .busy, .done, .seg_start,
    .rd_base, .wr_base, .seg_rows, .seg_row_words, .tile_elems, .tile_width,
    .col_lo, .col_hi, .pass_idx, .tile_idx);

  mem_reader #(.V(V), .FIFO_DEPTH(RD_FIFO)) u_rd (
    .clk, .rst_n, .start(seg_start), .base(rd_base), .rows(seg_rows),
    .row_words(seg_row_words), .pitch_words(cfg_q.pitch_words), .busy(rd_busy),
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data));

  assign vecs          = dim_t'(tile_elems / V);
  assign m_in_valid[0] = rd_valid && m_in_ready[0];
  assign m_in_data[0]  = rd_data;
  assign rd_ready      = m_in_ready[0];

  for (genvar k = 0; k < P; k++) begin : g_stage
    jacobi_module #(.V(V), .MAX_WIDTH(MAX_WIDTH), .MAX_HEIGHT(MAX_HEIGHT)) u_mod (
      .clk, .rst_n, .start(seg_start), .en(space_ok), .coef(coef_q),
      .width(dim_t'(tile_width)), .vecs(vecs), .height(cfg_q.height), .planes(cfg_q.planes),
      .total_planes(32'(cfg_q.planes) * 32'(cfg_q.batch)),
      .in_valid(m_in_valid[k]), .in_ready(m_in_ready[k]), .in_data(m_in_data[k]),
      .out_valid(m_in_valid[k+1]), .out_data(m_in_data[k+1]),
      .busy(m_busy[k]), .done(m_done[k]));
  end

  mem_writer #(.V(V), .FIFO_DEPTH(WR_FIFO)) u_wr (
    .clk, .rst_n, .start(seg_start), .base(wr_base), .rows(seg_rows),
    .row_words(seg_row_words), .pitch_words(cfg_q.pitch_words),
    .col_lo, .col_hi, .busy(wr_busy), .space_ok,
    .in_valid(m_in_valid[P]), .in_data(m_in_data[P]),
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wstrb, .wlast,
    .bvalid, .bready);

  assign seg_done = !rd_busy && !wr_busy && (m_busy == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycles <= '0; stall_cycles <= '0; starve_cycles <= '0; segments <= '0;
    end else if (start && !busy) begin
      cycles <= '0; stall_cycles <= '0; starve_cycles <= '0; segments <= '0;
    end else if (busy) begin
      cycles <= cycles + 1;
      if (seg_start) segments <= segments + 1;
      if ((m_busy != '0) && !space_ok) stall_cycles <= stall_cycles + 1;
      if (m_in_ready[0] && !rd_valid) starve_cycles <= starve_cycles + 1;
    end
  end
  assert property (@(posedge clk) disable iff (!rst_n) start |-> cfg.tile_words >= cfg.pitch_words)
    else $error("jacobi_accel: spatial blocking is not supported for 3D");
endmodule
