// ccu -- Culling and Conversion Unit with the two-stage accurate intersection test.
// Takes one screen-projected Gaussian at a time (valid/ready) and emits its
// Gaussian-tile pairs (valid/ready), one candidate tile per cycle.
//   accept : Stage I (tait_bbox) and the conic (inverse 2D covariance) are
//            computed combinationally from the input and registered. The
//            Gaussian is culled (no pairs) when its opacity code is 0, its depth
//            is below NEAR, its covariance is not positive definite, or its
//            tight box misses the screen.
//   iterate: the tiles of the tight box are visited row by row; Stage II
//            (tait_tile_test) decides each; a kept tile is output as a pair, a
//            dropped tile costs one cycle and no output.
// What follows the paper: the opacity-aware radii, the tight box and the strip
// test (Sec. IV-C). This design's own: the fixed-point formats, the culling
// rules, the iteration order and the fact that the 3D-to-2D projection and the
// colour evaluation (spherical harmonics) are done before this unit: the paper
// inherits them from an earlier accelerator and does not describe them.
module ccu
  import ls_pkg::*;
#(
  parameter int     TILES_X = 120,
  parameter int     TILES_Y = 68,
  parameter depth_t NEAR    = 16'd52     // 0.2 in Q8.8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  gauss_proj_t in_g,
  output logic        out_valid,
  input  logic        out_ready,
  output pair_t       out_pair,
  output logic        busy,
  output logic [31:0] n_culled,      // Gaussians culled
  output logic [31:0] n_dropped      // box tiles dropped by Stage II
);
  // ---------------- Stage I on the input ----------------
  logic [15:0]        k, rmaj, rmin, hx, hy;
  logic signed [31:0] l1, l2, ux, uy;
  tait_bbox u_s1 (.ca(in_g.ca), .cb(in_g.cb), .cc(in_g.cc), .op(in_g.op),
                  .k(k), .lam1(l1), .lam2(l2), .rmajor(rmaj), .rminor(rmin),
                  .hx(hx), .hy(hy), .ux(ux), .uy(uy));

  // conic = adj(cov) / det, 16 fractional bits
  logic signed [63:0] det;               // Q.16
  logic signed [63:0] na, nb, nc;
  logic signed [31:0] qa, qb, qc;
  assign det = 64'(in_g.ca) * 64'(in_g.cc) - 64'(in_g.cb) * 64'(in_g.cb);
  assign na  = 64'(in_g.cc) <<< 24;
  assign nb  = -(64'(in_g.cb) <<< 24);
  assign nc  = 64'(in_g.ca) <<< 24;
  always_comb begin
    if (det > 0) begin
      qa = 32'(na / det); qb = 32'(nb / det); qc = 32'(nc / det);
    end else begin
      qa = '0; qb = '0; qc = '0;
    end
  end

  // tight box in tiles (coordinates Q12.4: one tile = 256 LSB)
  logic signed [17:0] bx0, bx1, by0, by1;
  logic signed [17:0] tx0, tx1, ty0, ty1;
  logic signed [17:0] mxs, mys, hxs, hys;
  assign mxs = 18'(in_g.mx);            // sign-extended
  assign mys = 18'(in_g.my);
  assign hxs = {2'b00, hx};
  assign hys = {2'b00, hy};
  assign bx0 = (mxs - hxs) >>> 8;
  assign bx1 = (mxs + hxs) >>> 8;
  assign by0 = (mys - hys) >>> 8;
  assign by1 = (mys + hys) >>> 8;
  assign tx0 = (bx0 < 0) ? 18'sd0 : bx0;
  assign ty0 = (by0 < 0) ? 18'sd0 : by0;
  assign tx1 = (bx1 > 18'(TILES_X-1)) ? 18'(TILES_X-1) : bx1;
  assign ty1 = (by1 > 18'(TILES_Y-1)) ? 18'(TILES_Y-1) : by1;

  logic cull;
  assign cull = (in_g.op == 8'd0) || (in_g.depth < NEAR) || (det <= 0) ||
                (bx1 < 0) || (by1 < 0) || (bx0 > 18'(TILES_X-1)) || (by0 > 18'(TILES_Y-1));

  // ---------------- iteration over the box ----------------
  typedef enum logic {S_IDLE, S_ITER} state_e;
  state_e state;
  gauss2d_t           g_r;
  logic signed [31:0] ux_r, uy_r;
  logic [15:0]        rmin_r;
  logic [15:0]        cx_t, cy_t, x0_r, x1_r, y1_r;

  assign in_ready = (state == S_IDLE);
  assign busy     = (state != S_IDLE);

  logic keep;
  logic signed [15:0] tcx, tcy;
  assign tcx = 16'((cx_t << 8) + 16'd128);    // tile centre, Q12.4
  assign tcy = 16'((cy_t << 8) + 16'd128);
  tait_tile_test u_s2 (.cx(tcx), .cy(tcy), .mx(g_r.mx), .my(g_r.my),
                       .ux(ux_r), .uy(uy_r), .rminor(rmin_r), .keep(keep));

  assign out_valid     = (state == S_ITER) && keep;
  assign out_pair.tile = tile_id_t'(cy_t * TILES_X + cx_t);
  assign out_pair.g    = g_r;

  logic advance, last_tile;
  assign advance   = (state == S_ITER) && (!keep || out_ready);
  assign last_tile = (cx_t == x1_r) && (cy_t == y1_r);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n_culled <= '0; n_dropped <= '0;
      g_r <= '0; ux_r <= '0; uy_r <= '0; rmin_r <= '0;
      cx_t <= '0; cy_t <= '0; x0_r <= '0; x1_r <= '0; y1_r <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          if (cull) n_culled <= n_culled + 1;
          else begin
            g_r    <= '{mx: in_g.mx, my: in_g.my, qa: qa, qb: qb, qc: qc,
                        op: in_g.op, col: in_g.col, depth: in_g.depth};
            ux_r   <= ux; uy_r <= uy; rmin_r <= rmin;
            cx_t   <= 16'(tx0); cy_t <= 16'(ty0);
            x0_r   <= 16'(tx0); x1_r <= 16'(tx1); y1_r <= 16'(ty1);
            state  <= S_ITER;
          end
        end
        S_ITER: if (advance) begin
          if (!keep) n_dropped <= n_dropped + 1;
          if (last_tile) state <= S_IDLE;
          else if (cx_t == x1_r) begin
            cx_t <= x0_r; cy_t <= cy_t + 1'b1;
          end else cx_t <= cx_t + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
