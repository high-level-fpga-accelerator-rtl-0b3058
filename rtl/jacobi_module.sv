// jacobi_module: one compute module (one time iteration) of the 3D pipeline.
//
// The 3D counterpart of poisson_module. The stream is x-fastest, then y
// (rows of M = width/V vectors), then z (planes of P = M*height vectors).
// A 7-point stencil of order D = 2 needs two planes held on chip, which the
// window buffer keeps in four cyclic buffers and three registers:
//   r0                   -> x[c+P]  (k+1, the newest vector)
//   buf_s,  depth P-M-1  -> x[c+M]  (j+1)
//   buf_e,  depth M-2    -> x[c+1]  (east vector)
//   rc, rw  (registers)  -> x[c], x[c-1]
//   buf_n,  depth M-1    -> x[c-M]  (j-1)
//   buf_b,  depth P-M-1  -> x[c-P]  (k-1)
// V jacobi_cu lanes update the V points of the centre vector. Points on any
// face of a mesh keep their value. Batching stacks B meshes along z: the
// plane counter wraps every `planes` planes.
// Interface and timing as poisson_module, with K = P + 1 + 4 beats of
// latency; a chain of p modules takes T + p*K cycles for T = P*total_planes
// vectors when never stalled, matching the paper's ceil(m/V)*n*(l + p*D/2)
// up to the 5 extra beats per module. The paper gives the 3D window buffer
// only as "D planes buffered"; this tap arrangement is this design's own.
module jacobi_module
  import stencil_pkg::*;
#(
  parameter int unsigned V              = 8,
  parameter int unsigned MAX_WIDTH      = 304,
  parameter int unsigned MAX_HEIGHT     = 300
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                en,
  input  f32_t                coef [7],   // k1..k7
  input  dim_t                width,      // m, elements along x
  input  dim_t                vecs,       // M = ceil(m/V) (>= 3)
  input  dim_t                height,     // n, rows per plane (>= 3)
  input  dim_t                planes,     // l, planes per mesh
  input  logic [31:0]         total_planes, // l * B
  input  logic                in_valid,
  output logic                in_ready,
  input  f32_t [V-1:0]        in_data,
  output logic                out_valid,
  output f32_t [V-1:0]        out_data,
  output logic                busy,
  output logic                done
);
  localparam int unsigned MAX_VECS  = MAX_WIDTH / V;
  localparam int unsigned MAX_PLANE = MAX_VECS * MAX_HEIGHT;
  localparam int unsigned DWR       = $clog2(MAX_VECS + 1);
  localparam int unsigned DWP       = $clog2(MAX_PLANE + 1);
  localparam int unsigned LAT       = 4;  // jacobi_cu latency

  logic [CNT_BITS-1:0] total, b, k_beats, pvecs;
  logic                beat, flushing, pos_valid;
  dim_t                col, row, pln;

  f32_t [V-1:0] r0, q_s, q_e, rc, rw, q_n, q_b;
  logic [V-1:0] y_valid;

  assign flushing = busy && (b >= total);
  assign in_ready = busy && en && (b < total);
  assign beat     = en && busy && (flushing || in_valid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; b <= '0; total <= '0; k_beats <= '0; pvecs <= '0;
      col <= '0; row <= '0; pln <= '0; pos_valid <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy      <= 1'b1;
        b         <= '0;
        pvecs     <= CNT_BITS'(vecs) * CNT_BITS'(height);
        total     <= CNT_BITS'(vecs) * CNT_BITS'(height) * total_planes;
        k_beats   <= CNT_BITS'(vecs) * CNT_BITS'(height) + 1 + LAT;
        col       <= '0;
        row       <= '0;
        pln       <= '0;
        pos_valid <= 1'b0;
      end else if (beat) begin
        b <= b + 1;
        if (b + 1 == total + k_beats) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        pos_valid <= (b + 1 >= pvecs + 1) && (b + 1 < pvecs + 1 + total);
        if (pos_valid) begin
          if (col == vecs - 1) begin
            col <= '0;
            if (row == height - 1) begin
              row <= '0;
              pln <= (pln == planes - 1) ? '0 : pln + 1'b1;
            end else begin
              row <= row + 1'b1;
            end
          end else begin
            col <= col + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (beat) begin
      r0 <= in_data;
      rc <= q_e;
      rw <= rc;
    end
  end

  cyclic_buffer #(.WIDTH(V*32), .MAX_DEPTH(MAX_PLANE)) u_buf_s (
    .clk, .rst_n, .clr(start), .en(beat), .depth(DWP'(pvecs - CNT_BITS'(vecs) - 1)), .d(r0), .q(q_s));
  cyclic_buffer #(.WIDTH(V*32), .MAX_DEPTH(MAX_VECS)) u_buf_e (
    .clk, .rst_n, .clr(start), .en(beat), .depth(DWR'(vecs - 2)), .d(q_s), .q(q_e));
  cyclic_buffer #(.WIDTH(V*32), .MAX_DEPTH(MAX_VECS)) u_buf_n (
    .clk, .rst_n, .clr(start), .en(beat), .depth(DWR'(vecs - 1)), .d(rc), .q(q_n));
  cyclic_buffer #(.WIDTH(V*32), .MAX_DEPTH(MAX_PLANE)) u_buf_b (
    .clk, .rst_n, .clr(start), .en(beat), .depth(DWP'(pvecs - CNT_BITS'(vecs) - 1)), .d(q_n), .q(q_b));

  for (genvar l = 0; l < V; l++) begin : g_lane
    f32_t u [7];
    logic bnd;
    logic [DIM_BITS+7:0] x;
    assign u[0] = (l == V - 1) ? q_e[0]  : rc[(l == V - 1) ? 0 : l+1];  // i+1
    assign u[1] = (l == 0)     ? rw[V-1] : rc[(l == 0) ? 0 : l-1];      // i-1
    assign u[2] = q_n[l];                                                // j-1
    assign u[3] = rc[l];                                                 // centre
    assign u[4] = q_s[l];                                                // j+1
    assign u[5] = r0[l];                                                 // k+1
    assign u[6] = q_b[l];                                                // k-1
    assign x    = (DIM_BITS+8)'(col) * V + l;
    assign bnd  = (row == 0) || (row == height - 1) || (pln == 0) || (pln == planes - 1) ||
                  (x == 0) || (x + 1 >= (DIM_BITS+8)'(width));
    jacobi_cu u_cu (
      .clk, .rst_n, .en(beat), .in_valid(pos_valid), .boundary(bnd),
      .k(coef), .u(u), .y(out_data[l]), .y_valid(y_valid[l]));
  end

  assign out_valid = beat && y_valid[0];

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready)
    else $error("jacobi_module: input arrived while not accepting");
  assert property (@(posedge clk) disable iff (!rst_n)
                   start |-> vecs >= 3 && vecs <= MAX_VECS && height >= 3 && height <= MAX_HEIGHT)
    else $error("jacobi_module: mesh extent out of range");
endmodule
