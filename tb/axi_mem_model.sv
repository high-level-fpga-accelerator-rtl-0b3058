// axi_mem_model: behavioural model of an external memory channel (DDR4 or
// HBM pseudo-channel) with an AXI4 slave port of 512-bit words.
// Not synthesizable. Requests are queued; read data returns LATENCY cycles
// after a request is accepted, a beat per cycle unless a random gap is
// inserted; write data is merged under its byte strobes and answered on B
// after the last beat. The ready signals drop at random (STALL_PCT percent
// of cycles, W_STALL_PCT for write data) to exercise the masters' handshakes. Storage is sparse, indexed
// by word address; unwritten words read as zero.
module axi_mem_model
  import stencil_pkg::*;
#(
  parameter int LATENCY   = 14,
  parameter int STALL_PCT = 10,
  parameter int W_STALL_PCT = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       arvalid,
  output logic       arready,
  input  addr_t      araddr,
  input  logic [7:0] arlen,
  output logic       rvalid,
  input  logic       rready,
  output word_t      rdata,
  output logic       rlast,
  input  logic       awvalid,
  output logic       awready,
  input  addr_t      awaddr,
  input  logic [7:0] awlen,
  input  logic       wvalid,
  output logic       wready,
  input  word_t      wdata,
  input  logic [63:0] wstrb,
  input  logic       wlast,
  output logic       bvalid,
  input  logic       bready
);
  word_t mem [longint];
  typedef struct { longint word; int len; longint due; } req_t;
  req_t   rq [$];
  req_t   wq [$];
  longint now = 0;
  int     rbeat = 0, wbeat = 0;
  int     bpend = 0;
  int     reads = 0, writes = 0;

  function automatic word_t rd(longint w);
    return mem.exists(w) ? mem[w] : '0;
  endfunction

  always_ff @(posedge clk) now <= now + 1;

  // ready signals: random back-pressure
  always_ff @(posedge clk) begin
    arready <= ($urandom_range(0, 99) >= STALL_PCT);
    awready <= ($urandom_range(0, 99) >= STALL_PCT);
    w_rand  <= ($urandom_range(0, 99) >= W_STALL_PCT);
  end
  logic w_rand;
  always_comb wready = w_rand && (wq.size() > 0);

  always @(posedge clk) begin
    if (!rst_n) begin
      rq.delete(); wq.delete(); rbeat <= 0; wbeat <= 0; bpend = 0;
      rvalid <= 1'b0; bvalid <= 1'b0;
    end else begin
      if (arvalid && arready) begin
        rq.push_back('{word: longint'(araddr) / 64, len: int'(arlen) + 1, due: now + LATENCY});
        reads <= reads + 1;
      end
      if (awvalid && awready) begin
        wq.push_back('{word: longint'(awaddr) / 64, len: int'(awlen) + 1, due: 0});
        writes <= writes + 1;
      end
      // read data
      if (!rvalid || rready) begin
        rvalid <= 1'b0;
        if (rq.size() > 0 && rq[0].due <= now && $urandom_range(0, 99) >= STALL_PCT) begin
          rvalid <= 1'b1;
          rdata  <= rd(rq[0].word + rbeat);
          rlast  <= (rbeat + 1 == rq[0].len);
          if (rbeat + 1 == rq[0].len) begin
            void'(rq.pop_front());
            rbeat <= 0;
          end else begin
            rbeat <= rbeat + 1;
          end
        end
      end
      // write data (AW must already be queued)
      if (wvalid && wready) begin
        word_t cur;
        if (wq.size() == 0) $error("axi_mem_model: W beat before its AW");
        else begin
          cur = rd(wq[0].word + wbeat);
          for (int k = 0; k < 64; k++) if (wstrb[k]) cur[8*k +: 8] = wdata[8*k +: 8];
          mem[wq[0].word + wbeat] = cur;
          if (wlast != (wbeat + 1 == wq[0].len)) $error("axi_mem_model: wlast misplaced");
          if (wbeat + 1 == wq[0].len) begin
            void'(wq.pop_front());
            wbeat <= 0;
            bpend = bpend + 1;
          end else begin
            wbeat <= wbeat + 1;
          end
        end
      end
      if (bvalid && bready) bpend = bpend - 1;
      bvalid <= (bpend > 0);
    end
  end
endmodule
