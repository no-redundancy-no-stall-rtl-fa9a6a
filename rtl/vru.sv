// vru -- Volume Rendering Unit: one rasterization block.
// It renders one 16x16 tile at a time from a command stream (in_valid/in_ready):
//   Q_HDR   starts a tile: every pixel gets T = 1, colour 0, depth 0, dmax 0
//   Q_GAUSS one Gaussian of the tile, in front-to-back order; it is applied to
//           LANES pixels per cycle, TILE_PIX/LANES cycles per Gaussian
//   Q_END   ends the tile: TILE_PIX/LANES output cycles, LANES pixels each
// Per pixel and Gaussian (paper Eq. 1 and 2):
//   alpha = o * exp(-0.5 d^T Sigma^-1 d); skipped when alpha < 1/255
//   C += c * alpha * T;  D += depth * alpha * T;  T *= (1 - alpha)
//   a pixel whose T drops below 1e-4 stops (early stopping)
// The pixel's truncated depth dmax is the depth of the last Gaussian it
// traversed, which the VTU needs for the next frame's depth prediction; D is
// the opacity-weighted depth the paper uses as scene depth.
// When every pixel of the tile has stopped, further Gaussians of the tile are
// consumed at one per cycle without work.
// Arithmetic (this design's): exp(-p) = 2^(-p log2 e) with a 16-entry table
// for the fraction, linearly interpolated between entries; alpha and opacity are Q0.8, T is Q0.16 (stop below 7, i.e.
// 1e-4), colour accumulates in Q8.16 and saturates at 255 on output.
// The paper inherits the unit from an earlier accelerator and gives only the
// equations; the lane count is assumed.
module vru
  import ls_pkg::*;
#(
  parameter int TILES_X = 120,
  parameter int LANES   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  vru_cmd_t    in_cmd,
  output logic        out_valid,
  output tile_id_t    out_tile,
  output logic [7:0]  out_base,            // index of the first pixel of this output group
  output rgb_t        out_col   [LANES],
  output depth_t      out_depth [LANES],
  output depth_t      out_dmax  [LANES],
  output logic        busy,
  output logic        tile_done,
  output logic [31:0] n_gauss_work,         // Gaussians applied to a tile
  output logic [31:0] n_gauss_skip          // Gaussians consumed after the tile stopped
);
  localparam int GROUPS = TILE_PIX / LANES;
  localparam int GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam logic [15:0] T_STOP = 16'd7;

  typedef enum logic [1:0] {S_IDLE, S_PROC, S_OUT} state_e;
  state_e state;
  tile_id_t   tile_r;
  logic [15:0] ox, oy;                       // tile origin in pixels
  gauss2d_t   g_r;
  logic [GW-1:0] grp;

  logic [15:0] t_a   [TILE_PIX];
  logic [25:0] cr_a  [TILE_PIX];
  logic [25:0] cg_a  [TILE_PIX];
  logic [25:0] cb_a  [TILE_PIX];
  logic [23:0] d_a   [TILE_PIX];
  depth_t      dm_a  [TILE_PIX];
  logic [TILE_PIX-1:0] done_a;

  assign in_ready = (state == S_IDLE);
  assign busy     = (state != S_IDLE);

  // ---------------- per-lane arithmetic ----------------
  logic [7:0]  pidx  [LANES];
  logic [15:0] t_n   [LANES];
  logic [25:0] cr_n  [LANES], cg_n [LANES], cb_n [LANES];
  logic [23:0] d_n   [LANES];
  logic        act   [LANES];
  logic        stop_n[LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [17:0] dx, dy;
      logic signed [79:0] pw;
      logic signed [79:0] p8;
      logic [31:0] q;
      logic [8:0]  e, e0, e1, em;
      logic [16:0] alpha;
      logic [31:0] w;
      pidx[l] = 8'(32'(grp) * LANES + l);
      dx = 18'(((ox + 16'(pidx[l][3:0])) << 4) + 16'd8) - 18'(g_r.mx);
      dy = 18'(((oy + 16'(pidx[l][7:4])) << 4) + 16'd8) - 18'(g_r.my);
      // Q.16 conic * Q.8 squared offsets = Q.24
      pw = (80'(g_r.qa) * 80'(dx) * 80'(dx) + 80'(g_r.qc) * 80'(dy) * 80'(dy)) / 2
         + 80'(g_r.qb) * 80'(dx) * 80'(dy);
      p8 = pw >>> 16;                                   // Q.8
      if (p8 < 0) p8 = 0;
      if (p8 > 80'sd65535) p8 = 65535;
      q = (32'(p8) * LOG2E_Q8) >> 8;                    // exponent in log2 units, Q.8
      // 2^-frac: table entry, linearly interpolated towards the next one
      e0 = exp2_frac_lut(q[7:4]);
      e1 = (q[7:4] == 4'hF) ? 9'd128 : exp2_frac_lut(q[7:4] + 4'd1);
      em = e0 - 9'((13'(e0 - e1) * 13'(q[3:0])) >> 4);
      e = (q[31:8] >= 24'd9) ? 9'd0 : (em >> q[11:8]);
      alpha = (17'(g_r.op) * 17'(e)) >> 8;              // Q0.8
      act[l] = !done_a[pidx[l]] && (alpha != 0);
      w = (32'(alpha) * 32'(t_a[pidx[l]])) >> 8;       // Q0.16
      if (w > 32'(t_a[pidx[l]])) w = 32'(t_a[pidx[l]]);
      t_n[l]  = t_a[pidx[l]] - 16'(w);
      cr_n[l] = cr_a[pidx[l]] + 26'(32'(g_r.col.r) * w);
      cg_n[l] = cg_a[pidx[l]] + 26'(32'(g_r.col.g) * w);
      cb_n[l] = cb_a[pidx[l]] + 26'(32'(g_r.col.b) * w);
      d_n[l]  = d_a[pidx[l]] + 24'((32'(g_r.depth) * w) >> 16);
      stop_n[l] = (t_n[l] < T_STOP);
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [7:0] oi;
      oi = 8'(32'(grp) * LANES + l);
      out_col[l].r = (cr_a[oi][25:16] > 10'd255) ? 8'd255 : cr_a[oi][23:16];
      out_col[l].g = (cg_a[oi][25:16] > 10'd255) ? 8'd255 : cg_a[oi][23:16];
      out_col[l].b = (cb_a[oi][25:16] > 10'd255) ? 8'd255 : cb_a[oi][23:16];
      out_depth[l] = (d_a[oi][23:16] != 8'd0) ? 16'hFFFF : d_a[oi][15:0];
      out_dmax[l]  = dm_a[oi];
    end
  end
  assign out_valid = (state == S_OUT);
  assign out_tile  = tile_r;
  assign out_base  = 8'(32'(grp) * LANES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; tile_r <= '0; ox <= '0; oy <= '0; g_r <= '0; grp <= '0;
      done_a <= '0; tile_done <= 1'b0; n_gauss_work <= '0; n_gauss_skip <= '0;
    end else begin
      tile_done <= 1'b0;
      case (state)
        S_IDLE: if (in_valid) begin
          case (in_cmd.kind)
            Q_HDR: begin
              tile_r <= in_cmd.tile;
              ox     <= 16'((32'(in_cmd.tile) % TILES_X) * TILE);
              oy     <= 16'((32'(in_cmd.tile) / TILES_X) * TILE);
              done_a <= '0;
            end
            Q_GAUSS: begin
              if (&done_a) n_gauss_skip <= n_gauss_skip + 1;
              else begin
                g_r <= in_cmd.g; grp <= '0; state <= S_PROC;
                n_gauss_work <= n_gauss_work + 1;
              end
            end
            default: begin grp <= '0; state <= S_OUT; end
          endcase
        end
        S_PROC: begin
          for (int l = 0; l < LANES; l++)
            if (act[l] && stop_n[l]) done_a[pidx[l]] <= 1'b1;
          grp <= grp + 1'b1;
          if (grp == GW'(GROUPS-1)) state <= S_IDLE;
        end
        S_OUT: begin
          grp <= grp + 1'b1;
          if (grp == GW'(GROUPS-1)) begin state <= S_IDLE; tile_done <= 1'b1; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && in_valid && in_cmd.kind == Q_HDR) begin
      for (int i = 0; i < TILE_PIX; i++) begin
        t_a[i] <= 16'hFFFF; cr_a[i] <= '0; cg_a[i] <= '0; cb_a[i] <= '0; d_a[i] <= '0; dm_a[i] <= '0;
      end
    end else if (state == S_PROC) begin
      for (int l = 0; l < LANES; l++) begin
        if (!done_a[pidx[l]]) dm_a[pidx[l]] <= g_r.depth;   // traversed
        if (act[l]) begin
          t_a[pidx[l]]  <= t_n[l];
          cr_a[pidx[l]] <= cr_n[l]; cg_a[pidx[l]] <= cg_n[l]; cb_a[pidx[l]] <= cb_n[l];
          d_a[pidx[l]]  <= d_n[l];
        end
      end
    end
  end
endmodule
