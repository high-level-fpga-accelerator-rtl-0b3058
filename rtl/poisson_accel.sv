// poisson_accel: the Poisson-5pt-2D kernel.
//
// Data path: mem_reader (AXI read, FIFO, 512-bit word to V-float vectors)
// -> P chained poisson_module instances, each advancing the mesh by one time
// step, so that results of one step feed the next without going back to
// external memory (unrolled iteration loop, "step parallel") -> mem_writer
// (vectors to 512-bit words, AXI write). pass_ctrl sequences passes (n_iter/P
// of them) and, for meshes wider than one block, the spatial blocks. Batches
// of B equal meshes stored back to back are processed as one tall mesh, so
// the pipeline fill and drain are paid once per batch.
// Defaults follow the paper's Poisson design: V = 8 lanes, P = 60 modules,
// blocks up to 8192 elements wide, halo of 4 words (64 elements >= P*D/2).
// The whole pipeline advances only while the writer FIFO has room (`en`),
// and the first module only when the reader has a vector for it.
// Statistics for the host: `cycles` (length of the last run), `stall_cycles`
// (cycles with en low) and `starve_cycles` (cycles in which the first module
// waited for input data).
module poisson_accel
  import stencil_pkg::*;
#(
  parameter int unsigned V         = 8,
  parameter int unsigned P         = 60,
  parameter int unsigned MAX_WIDTH = 8192,
  parameter int unsigned RD_FIFO   = 256,
  parameter int unsigned WR_FIFO   = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  run_cfg_t    cfg,
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
  localparam int unsigned HALO_WORDS = (P + ELEMS_PER_WORD - 1) / ELEMS_PER_WORD; // P*D/2, D = 2

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
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_q <= '0;
    else if (start && !busy) cfg_q <= cfg;
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
    poisson_module #(.V(V), .MAX_WIDTH(MAX_WIDTH)) u_mod (
      .clk, .rst_n, .start(seg_start), .en(space_ok),
      .width(dim_t'(tile_width)), .vecs(vecs), .rows(dim_t'(cfg_q.rows)),
      .total_rows(32'(cfg_q.rows) * 32'(cfg_q.batch)),
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
endmodule
