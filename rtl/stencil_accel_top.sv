// stencil_accel_top: the two stencil kernels of the design side by side.
//
// Instantiates the Poisson-5pt-2D kernel (V = 8, p = 60) and the
// Jacobi-7pt-3D kernel (V = 8, p = 29), each with its own control inputs,
// statistics outputs and its own AXI4 read and write master towards
// external memory (a DDR4 bank or HBM pseudo-channels, outside this design).
// The paper builds each application as a separate FPGA image; putting both
// kernels in one top is this design's choice, to give one elaboration root.
// The RTM kernel of the paper is not included (its stencil function is not
// specified). All ports are plain signals; the AXI ports follow the AXI4
// handshake rules for the subset of signals used (no IDs, INCR bursts,
// 512-bit data, OKAY responses assumed).
module stencil_accel_top
  import stencil_pkg::*;
#(
  parameter int unsigned POISSON_V = 8,
  parameter int unsigned POISSON_P = 60,
  parameter int unsigned POISSON_MAX_WIDTH = 8192,
  parameter int unsigned JACOBI_V  = 8,
  parameter int unsigned JACOBI_P  = 29,
  parameter int unsigned JACOBI_MAX_WIDTH  = 304,
  parameter int unsigned JACOBI_MAX_HEIGHT = 300
) (
  input  logic        clk,
  input  logic        rst_n,
  // Poisson kernel control and status
  input  logic        p_start,
  input  run_cfg_t    p_cfg,
  output logic        p_busy,
  output logic        p_done,
  output logic [31:0] p_cycles,
  output logic [31:0] p_stall_cycles,
  output logic [31:0] p_starve_cycles,
  output logic [31:0] p_segments,
  // Poisson kernel memory port
  output logic        p_arvalid,
  input  logic        p_arready,
  output addr_t       p_araddr,
  output logic [7:0]  p_arlen,
  input  logic        p_rvalid,
  output logic        p_rready,
  input  word_t       p_rdata,
  input  logic        p_rlast,
  output logic        p_awvalid,
  input  logic        p_awready,
  output addr_t       p_awaddr,
  output logic [7:0]  p_awlen,
  output logic        p_wvalid,
  input  logic        p_wready,
  output word_t       p_wdata,
  output logic [63:0] p_wstrb,
  output logic        p_wlast,
  input  logic        p_bvalid,
  output logic        p_bready,
  // Jacobi kernel control and status
  input  logic        j_start,
  input  run_cfg_t    j_cfg,
  input  f32_t        j_coef [7],
  output logic        j_busy,
  output logic        j_done,
  output logic [31:0] j_cycles,
  output logic [31:0] j_stall_cycles,
  output logic [31:0] j_starve_cycles,
  output logic [31:0] j_segments,
  // Jacobi kernel memory port
  output logic        j_arvalid,
  input  logic        j_arready,
  output addr_t       j_araddr,
  output logic [7:0]  j_arlen,
  input  logic        j_rvalid,
  output logic        j_rready,
  input  word_t       j_rdata,
  input  logic        j_rlast,
  output logic        j_awvalid,
  input  logic        j_awready,
  output addr_t       j_awaddr,
  output logic [7:0]  j_awlen,
  output logic        j_wvalid,
  input  logic        j_wready,
  output word_t       j_wdata,
  output logic [63:0] j_wstrb,
  output logic        j_wlast,
  input  logic        j_bvalid,
  output logic        j_bready
);
  poisson_accel #(.V(POISSON_V), .P(POISSON_P), .MAX_WIDTH(POISSON_MAX_WIDTH)) u_poisson (
    .clk, .rst_n, .start(p_start), .cfg(p_cfg), .busy(p_busy), .done(p_done),
    .cycles(p_cycles), .stall_cycles(p_stall_cycles), .starve_cycles(p_starve_cycles),
    .segments(p_segments),
    .arvalid(p_arvalid), .arready(p_arready), .araddr(p_araddr), .arlen(p_arlen),
    .rvalid(p_rvalid), .rready(p_rready), .rdata(p_rdata), .rlast(p_rlast),
    .awvalid(p_awvalid), .awready(p_awready), .awaddr(p_awaddr), .awlen(p_awlen),
    .wvalid(p_wvalid), .wready(p_wready), .wdata(p_wdata), .wstrb(p_wstrb), .wlast(p_wlast),
    .bvalid(p_bvalid), .bready(p_bready));

  jacobi_accel #(.V(JACOBI_V), .P(JACOBI_P), .MAX_WIDTH(JACOBI_MAX_WIDTH),
                 .MAX_HEIGHT(JACOBI_MAX_HEIGHT)) u_jacobi (
    .clk, .rst_n, .start(j_start), .cfg(j_cfg), .coef(j_coef), .busy(j_busy), .done(j_done),
    .cycles(j_cycles), .stall_cycles(j_stall_cycles), .starve_cycles(j_starve_cycles),
    .segments(j_segments),
    .arvalid(j_arvalid), .arready(j_arready), .araddr(j_araddr), .arlen(j_arlen),
    .rvalid(j_rvalid), .rready(j_rready), .rdata(j_rdata), .rlast(j_rlast),
    .awvalid(j_awvalid), .awready(j_awready), .awaddr(j_awaddr), .awlen(j_awlen),
    .wvalid(j_wvalid), .wready(j_wready), .wdata(j_wdata), .wstrb(j_wstrb), .wlast(j_wlast),
    .bvalid(j_bvalid), .bready(j_bready));
endmodule
