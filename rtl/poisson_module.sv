// poisson_module: one compute module (one time iteration) of the 2D pipeline.
//
// A window buffer turns the incoming row-major stream of V-wide mesh vectors
// into, for every centre vector, its north, south, west and east neighbours,
// and V stencil units (poisson_cu) update the V points of the vector in
// parallel (the "cell-parallel" vectorisation, V = 8 in the paper). Window
// buffer, for a tile of M = width/V vectors per row:
//   r0      : last input vector            -> south row   x[c+M]
//   buf_e   : cyclic buffer, depth M-2     -> east vector x[c+1]
//   rc, rw  : two registers                -> centre x[c], west x[c-1]
//   buf_n   : cyclic buffer, depth M-1     -> north row   x[c-M]
// so two rows (D = 2 for a 2nd-order stencil) are held on chip, as the paper
// prescribes for perfect data reuse. Lane l's west neighbour is lane l-1 of
// the centre (lane V-1 of the west vector for l = 0); east likewise.
// Points on the mesh border (first/last row of each mesh in a batch, first
// and last column) are passed through unchanged. Batching stacks B meshes
// along y: the row counter wraps every `rows` rows, so border rows of each
// mesh are respected and the pipeline is filled and drained once per batch.
//
// Interface and timing: `start` loads a new run (T = vecs*total_rows vectors).
// The module advances one beat per cycle in which en is high and either an
// input vector is present (in_valid, accepted at once: in_ready) or, after
// all T inputs, it is draining. Result vector i leaves on out_valid on beat
// i + K with K = M + 1 + 4; after T + K beats the run ends (`done` pulses).
// A chain of such modules therefore takes T + p*K cycles when never stalled,
// the paper's ceil(m/V)*(n + p*D/2) plus 5 beats per module.
// The register/buffer split differs from the paper's Fig. 1 drawing, which
// only shows the V = 2 case; the function is the same.
module poisson_module
  import stencil_pkg::*;
#(
  parameter int unsigned V         = 8,
  parameter int unsigned MAX_WIDTH = 8192
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                en,
  input  dim_t                width,      // m, mesh/tile width in elements
  input  dim_t                vecs,       // M = width rounded up to V, / V (>= 3)
  input  dim_t                rows,       // n, rows per mesh
  input  logic [31:0]         total_rows, // n * B
  input  logic                in_valid,
  output logic                in_ready,
  input  f32_t [V-1:0]        in_data,
  output logic                out_valid,
  output f32_t [V-1:0]        out_data,
  output logic                busy,
  output logic                done
);
  localparam int unsigned MAX_VECS = MAX_WIDTH / V;
  localparam int unsigned DW       = $clog2(MAX_VECS + 1);
  localparam int unsigned LAT      = 4;  // poisson_cu latency

  logic [CNT_BITS-1:0] total, b, k_beats;
  logic                beat, flushing;
  logic                pos_valid;
  dim_t                col, row;

  f32_t [V-1:0] r0, q_e, rc, rw, q_n;
  logic [V-1:0] y_valid;

  assign flushing = busy && (b >= total);
  assign in_ready = busy && en && (b < total);
  assign beat     = en && busy && (flushing || in_valid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; b <= '0; total <= '0; k_beats <= '0;
      col <= '0; row <= '0; pos_valid <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy       <= 1'b1;
        b          <= '0;
        total      <= CNT_BITS'(vecs) * total_rows;
        k_beats    <= CNT_BITS'(vecs) + 1 + LAT;
        col        <= '0;
        row        <= '0;
       
        pos_valid  <= 1'b0;
      end else if (beat) begin
        b <= b + 1;
        if (b + 1 == total + k_beats) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        // the centre of the next beat is x[b+1-(M+1)]
        pos_valid <= (b + 1 >= CNT_BITS'(vecs) + 1) && (b + 1 < CNT_BITS'(vecs) + 1 + total);
        if (pos_valid) begin
          if (col == vecs - 1) begin
            col <= '0;
            row <= (row == rows - 1) ? '0 : row + 1'b1;
          end else begin
            col <= col + 1'b1;
          end
        end
      end
    end
  end

  // window buffer
  always_ff @(posedge clk) begin
    if (beat) begin
      r0 <= in_data;
      rc <= q_e;
      rw <= rc;
    end
  end

  cyclic_buffer #(.WIDTH(V*32), .MAX_DEPTH(MAX_VECS)) u_buf_e (
    .clk, .rst_n, .clr(start), .en(beat),
    .depth(DW'(vecs - 2)), .d(r0), .q(q_e));
  cyclic_buffer #(.WIDTH(V*32), .MAX_DEPTH(MAX_VECS)) u_buf_n (
    .clk, .rst_n, .clr(start), .en(beat),
    .depth(DW'(vecs - 1)), .d(rc), .q(q_n));

  // V stencil units
  for (genvar l = 0; l < V; l++) begin : g_lane
    f32_t w_l, e_l;
    logic bnd;
    logic [DIM_BITS+7:0] x;
    assign w_l = (l == 0)     ? rw[V-1] : rc[(l == 0) ? 0 : l-1];
    assign e_l = (l == V - 1) ? q_e[0]  : rc[(l == V - 1) ? 0 : l+1];
    assign x   = (DIM_BITS+8)'(col) * V + l;
    assign bnd = (row == 0) || (row == rows - 1) || (x == 0) || (x + 1 >= (DIM_BITS+8)'(width));
    poisson_cu u_cu (
      .clk, .rst_n, .en(beat), .in_valid(pos_valid), .boundary(bnd),
      .c(rc[l]), .n(q_n[l]), .s(r0[l]), .w(w_l), .e(e_l),
      .y(out_data[l]), .y_valid(y_valid[l]));
  end

  assign out_valid = beat && y_valid[0];

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready)
    else $error("poisson_module: input arrived while not accepting");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> vecs >= 3 && vecs <= MAX_VECS)
    else $error("poisson_module: vecs out of range");
endmodule
