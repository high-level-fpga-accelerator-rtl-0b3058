// mem_writer: AXI4 write master that packs the pipeline's V-float result
// vectors into 512-bit words and writes them back to external memory.
//
// The segment geometry is the same as mem_reader's (`rows` runs of
// `row_words` words, pitch_words apart). Write addresses are issued ahead in
// bursts of at most 64 beats; data words go through a FIFO and are sent as
// they are formed, with wlast on the final beat of each burst. Byte strobes
// keep only the elements whose column within a run lies in [col_lo, col_hi):
// this is how a spatial block writes back only its valid interior and leaves
// its halo columns, which another block computes correctly, untouched, while
// every transfer stays aligned to the 512-bit bus.
// `space_ok` is the back-pressure to the compute pipeline: it is high while
// the FIFO can take at least two more words, and the whole pipeline only
// advances while it is high. `busy` stays high until every burst has been
// answered on the B channel. bready is tied high: write responses are
// always accepted, only counted (their status is not checked).
// The paper asks for aligned 512-bit transfers and overlapping blocks; the
// strobe-based masking and the FIFO back-pressure are this design's own.
module mem_writer
  import stencil_pkg::*;
#(
  parameter int unsigned V          = 8,
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  addr_t         base,
  input  logic [31:0]   rows,
  input  logic [31:0]   row_words,
  input  dim_t          pitch_words,
  input  logic [31:0]   col_lo,      // first element written in a run
  input  logic [31:0]   col_hi,      // one past the last element written
  output logic          busy,
  output logic          space_ok,
  // vector stream (no ready: gated by space_ok upstream)
  input  logic          in_valid,
  input  f32_t [V-1:0]  in_data,
  // AXI4 write address / data / response channels (subset)
  output logic          awvalid,
  input  logic          awready,
  output addr_t         awaddr,
  output logic [7:0]    awlen,
  output logic          wvalid,
  input  logic          wready,
  output word_t         wdata,
  output logic [63:0]   wstrb,
  output logic          wlast,
  input  logic          bvalid,
  output logic          bready
);
  localparam int unsigned VPW = ELEMS_PER_WORD / V;
  localparam int unsigned FW  = BUS_BITS + 64 + 1;   // data, strobes, last
  localparam int unsigned CW  = $clog2(FIFO_DEPTH + 1);

  // ---- address channel
  logic [31:0] a_row, a_col, a_left, a_blen, bursts_issued, bursts_done;
  addr_t       a_base;
  logic        a_active, aw_fire;

  assign a_left  = row_words - a_col;
  assign a_blen  = (a_left > MAX_BURST) ? MAX_BURST : a_left;
  assign awvalid = a_active;
  assign awaddr  = a_base + addr_t'(a_col) * (BUS_BITS / 8);
  assign awlen   = 8'(a_blen - 1);
  assign aw_fire = awvalid && awready;
  assign bready  = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_active <= 1'b0; a_row <= '0; a_col <= '0; a_base <= '0;
      bursts_issued <= '0; bursts_done <= '0;
    end else if (start) begin
      a_active <= (rows != 0) && (row_words != 0);
      a_row <= '0; a_col <= '0; a_base <= base;
      bursts_issued <= '0; bursts_done <= '0;
    end else begin
      if (aw_fire) begin
        bursts_issued <= bursts_issued + 1;
        if (a_col + a_blen == row_words) begin
          a_col  <= '0;
          a_row  <= a_row + 1;
          a_base <= a_base + addr_t'(pitch_words) * (BUS_BITS / 8);
          if (a_row + 1 == rows) a_active <= 1'b0;
        end else begin
          a_col <= a_col + a_blen;
        end
      end
      if (bvalid) bursts_done <= bursts_done + 1;
    end
  end

  // ---- packing of vectors into words, with strobes and burst boundaries
  f32_t [ELEMS_PER_WORD-1:0] acc;
  logic [$clog2(VPW+1)-1:0]  sub;
  logic [31:0] p_col, p_burst;      // word position within the run / burst
  logic [31:0] p_left, p_blen;
  logic        word_done, f_push, f_pop, f_empty, f_full;
  logic [FW-1:0] f_din, f_dout;
  logic [CW-1:0] f_count;
  f32_t [ELEMS_PER_WORD-1:0] word_now;
  logic [63:0] strb_now;
  logic        last_now;
  logic        w_pending;           // words packed but not yet sent

  assign word_done = in_valid && (sub == ($clog2(VPW+1))'(VPW - 1));
  assign p_left    = row_words - (p_col - p_burst);
  assign p_blen    = (p_left > MAX_BURST) ? MAX_BURST : p_left;

  always_comb begin
    word_now = acc;
    word_now[sub*V +: V] = in_data;
    for (int k = 0; k < ELEMS_PER_WORD; k++) begin
      logic [31:0] e;
      e = p_col * ELEMS_PER_WORD + k;
      strb_now[4*k +: 4] = (e >= col_lo && e < col_hi) ? 4'hF : 4'h0;
    end
    last_now = (p_burst + 1 == p_blen);
  end

  assign f_push = word_done;
  assign f_din  = {last_now, strb_now, word_now};

  always_ff @(posedge clk) begin
    if (in_valid) acc[sub*V +: V] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sub <= '0; p_col <= '0; p_burst <= '0;
    end else if (start) begin
      sub <= '0; p_col <= '0; p_burst <= '0;
    end else if (in_valid) begin
      sub <= word_done ? '0 : sub + 1'b1;
      if (word_done) begin
        if (p_col + 1 == row_words) begin
          p_col   <= '0;
          p_burst <= '0;
        end else begin
          p_col   <= p_col + 1;
          p_burst <= last_now ? '0 : p_burst + 1;
        end
      end
    end
  end

  sync_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clr(1'b0), .push(f_push), .din(f_din), .pop(f_pop),
    .dout(f_dout), .empty(f_empty), .full(f_full), .count(f_count));

  assign wvalid   = !f_empty;
  assign wdata    = f_dout[BUS_BITS-1:0];
  assign wstrb    = f_dout[BUS_BITS +: 64];
  assign wlast    = f_dout[FW-1];
  assign f_pop    = wvalid && wready;
  assign space_ok = (f_count < CW'(FIFO_DEPTH - 2));
  assign w_pending = !f_empty || (sub != 0);
  assign busy     = a_active || w_pending || (bursts_done != bursts_issued);

  assert property (@(posedge clk) disable iff (!rst_n) !(f_push && f_full))
    else $error("mem_writer: FIFO overflow");
  assert property (@(posedge clk) disable iff (!rst_n) awvalid && !awready |=> awvalid && $stable(awaddr))
    else $error("mem_writer: AW request withdrawn");
endmodule
