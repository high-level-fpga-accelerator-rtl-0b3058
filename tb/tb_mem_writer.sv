// tb_mem_writer: a strided segment (3 runs of 70 words, pitch 100) written
// with a column window, under random memory back-pressure. Checks that the
// window's elements hold the streamed values, that everything outside it is
// untouched, that the writer raised back-pressure and that it went idle.
module tb_mem_writer;
  import stencil_pkg::*;
  localparam int V = 8, NR = 3, RW = 70, PW = 100, LO = 20, HI = 1000;
  localparam longint BASE_W = 10;
  logic clk = 0, rst_n = 0, start = 0, busy, space_ok, in_valid = 0;
  f32_t [V-1:0] in_data;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  addr_t awaddr;
  logic [7:0] awlen;
  word_t wdata;
  logic [63:0] wstrb;
  logic arvalid = 0, arready, rvalid, rready = 1, rlast;
  addr_t araddr = 0;
  logic [7:0] arlen = 0;
  word_t rdata;
  int checks = 0, failures = 0, bp = 0;
  always #5 clk = ~clk;

  mem_writer #(.V(V), .FIFO_DEPTH(8)) dut (
    .clk, .rst_n, .start, .base(addr_t'(BASE_W * 64)), .rows(32'(NR)), .row_words(32'(RW)),
    .pitch_words(dim_t'(PW)), .col_lo(32'(LO)), .col_hi(32'(HI)), .busy, .space_ok,
    .in_valid, .in_data, .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata,
    .wstrb, .wlast, .bvalid, .bready);
  axi_mem_model #(.LATENCY(10), .STALL_PCT(70), .W_STALL_PCT(70)) mem (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    n = 0;
    in_data = '0;
    for (longint w = 0; w < 400; w++) mem.mem[w] = {16{32'hDEAD_BEEF}};
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (n < NR * RW * 16 / V) begin
      in_valid = space_ok;
      if (!space_ok) bp++;
      for (int l = 0; l < V; l++) in_data[l] = f32_t'(n * V + l + 1);
      @(negedge clk);
      if (in_valid) n++;
    end
    in_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    for (int r = 0; r < NR; r++)
      for (int x = 0; x < PW * 16; x++) begin
        f32_t got, expv;
        got  = mem.mem[BASE_W + r * PW + x / 16][32*(x%16) +: 32];
        expv = (x >= LO && x < HI) ? f32_t'(r * RW * 16 + x + 1) : 32'hDEAD_BEEF;
        checks++;
        if (got !== expv) begin
          failures++;
          if (failures < 10) $display("run %0d elem %0d: %h expected %h", r, x, got, expv);
        end
      end
    checks++;
    if (bp == 0) begin failures++; $display("no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
