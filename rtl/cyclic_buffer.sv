// cyclic_buffer: the on-chip cyclic (circular) buffer of a window buffer.
//
// A single-port-per-direction RAM used as a delay line: on every enabled beat
// the word at the current address is read into the output register and the
// new input word is written in its place, then the address advances and wraps
// at the run-time depth. A word written on beat t therefore appears on q from
// beat t+depth+1 on (depth+1 beats of delay). Buffering whole mesh rows (2D)
// or planes (3D) this way gives perfect data reuse: each mesh element is read
// from external memory once per pass. The paper describes window buffers built
// from BRAM/URAM with cyclic buffering; the RAM-with-registered-read form,
// the run-time depth and the clr input are this design's choices.
// Interface: en advances the buffer one beat; clr (with en low) restarts the
// address at 0 for a new run. depth must be between 1 and MAX_DEPTH.
module cyclic_buffer #(
  parameter int unsigned WIDTH     = 256,
  parameter int unsigned MAX_DEPTH = 1024
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clr,
  input  logic                         en,
  input  logic [$clog2(MAX_DEPTH+1)-1:0] depth,
  input  logic [WIDTH-1:0]             d,
  output logic [WIDTH-1:0]             q
);
  localparam int unsigned AW = (MAX_DEPTH > 1) ? $clog2(MAX_DEPTH) : 1;
  logic [WIDTH-1:0] mem [MAX_DEPTH];
  logic [AW-1:0]    addr;

  always_ff @(posedge clk) begin
    if (en) begin
      q         <= mem[addr];
      mem[addr] <= d;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      addr <= '0;
    else if (clr)
      addr <= '0;
    else if (en)
      addr <= ({1'b0, addr} + 1 >= (AW+1)'(depth)) ? '0 : addr + 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) en |-> (depth >= 1 && depth <= MAX_DEPTH))
    else $error("cyclic_buffer: depth %0d out of range", depth);
endmodule
