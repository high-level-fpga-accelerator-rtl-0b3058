// mem_reader: AXI4 read master that streams a (possibly strided) block of
// the mesh into the compute pipeline as V-float vectors.
//
// A segment is `rows` runs of `row_words` consecutive 512-bit words, run r
// starting at base + r*pitch_words*64 bytes: one run for a whole mesh or
// batch, one run per mesh row for a spatial block (tile). Each run is cut
// into bursts of at most 64 beats (4 KB, never crossing a run end). Several
// bursts are kept in flight to hide the memory latency; the number of words
// requested but not yet handed on is bounded by the FIFO depth (credits), so
// read data is always accepted (rready = 1). Each 512-bit word leaves as
// 16/V vectors, lowest address first.
// From the paper: 512-bit bus, 4 KB transfers, several outstanding requests
// to hide latency, a FIFO feeding the pipeline. The credit scheme and burst
// splitting rules are this design's own.
// Interface: `start` (one cycle, idle only) launches a segment; out_valid /
// out_ready hand over vectors; `busy` stays high until every requested word
// has arrived.
module mem_reader
  import stencil_pkg::*;
#(
  parameter int unsigned V          = 8,
  parameter int unsigned FIFO_DEPTH = 256
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  addr_t         base,
  input  logic [31:0]   rows,
  input  logic [31:0]   row_words,
  input  dim_t          pitch_words,
  output logic          busy,
  // AXI4 read address / data channels (subset)
  output logic          arvalid,
  input  logic          arready,
  output addr_t         araddr,
  output logic [7:0]    arlen,
  input  logic          rvalid,
  output logic          rready,
  input  word_t         rdata,
  input  logic          rlast,
  // vector stream
  output logic          out_valid,
  input  logic          out_ready,
  output f32_t [V-1:0]  out_data
);
  localparam int unsigned VPW = ELEMS_PER_WORD / V;   // vectors per word
  localparam int unsigned CW  = $clog2(FIFO_DEPTH + 1);

  logic [31:0] row, col;             // next word to request
  addr_t       row_base;
  logic        req_active;
  logic [31:0] left_in_row, blen;
  logic [CW:0] credits;              // free FIFO slots not yet promised
  logic [31:0] words_out;            // requested words not yet received
  logic [$clog2(VPW+1)-1:0] sub;
  logic        fifo_empty, fifo_full, word_pop;
  word_t       fifo_dout;
  logic [CW-1:0] fifo_count;
  logic        ar_fire;

  assign left_in_row = row_words - col;
  assign blen        = (left_in_row > MAX_BURST) ? MAX_BURST : left_in_row;
  assign arvalid     = req_active && (credits >= (CW+1)'(blen));
  assign araddr      = row_base + addr_t'(col) * (BUS_BITS / 8);
  assign arlen       = 8'(blen - 1);
  assign ar_fire     = arvalid && arready;
  assign rready      = 1'b1;
  assign busy        = req_active || (words_out != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_active <= 1'b0; row <= '0; col <= '0; row_base <= '0;
      credits <= (CW+1)'(FIFO_DEPTH); words_out <= '0;
    end else begin
      if (start) begin
        req_active <= (rows != 0) && (row_words != 0);
        row        <= '0;
        col        <= '0;
        row_base   <= base;
      end else if (ar_fire) begin
        if (col + blen == row_words) begin
          col      <= '0;
          row      <= row + 1;
          row_base <= row_base + addr_t'(pitch_words) * (BUS_BITS / 8);
          if (row + 1 == rows) req_active <= 1'b0;
        end else begin
          col <= col + blen;
        end
      end
      credits   <= credits - (ar_fire ? (CW+1)'(blen) : '0) + (word_pop ? 1'b1 : 1'b0);
      words_out <= words_out + (ar_fire ? blen : '0) - ((rvalid && rready) ? 1 : 0);
    end
  end

  sync_fifo #(.WIDTH(BUS_BITS), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clr(1'b0), .push(rvalid), .din(rdata), .pop(word_pop),
    .dout(fifo_dout), .empty(fifo_empty), .full(fifo_full), .count(fifo_count));

  // word -> vectors
  assign out_valid = !fifo_empty;
  assign out_data  = fifo_dout[sub*V*32 +: V*32];
  assign word_pop  = out_valid && out_ready && (sub == ($clog2(VPW+1))'(VPW - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sub <= '0;
    else if (start) sub <= '0;
    else if (out_valid && out_ready)
      sub <= (sub == ($clog2(VPW+1))'(VPW - 1)) ? '0 : sub + 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) rvalid |-> !fifo_full)
    else $error("mem_reader: read data overran the FIFO");
  assert property (@(posedge clk) disable iff (!rst_n) arvalid && !arready |=> arvalid && $stable(araddr))
    else $error("mem_reader: AR request withdrawn");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("mem_reader: start while busy");
endmodule
