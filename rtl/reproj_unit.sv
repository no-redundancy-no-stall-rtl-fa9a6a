// reproj_unit -- reprojection datapath of the Viewpoint Transformation Unit.
// Three matrix products per reference pixel, as in the paper's figure
// (Ref.2D -> Ref.3D -> Tgt.3D -> Tgt.2D):
//   stage 1  ray = Kinv_ref * (x+.5, y+.5, 1);  P = depth * ray     (Ref.3D)
//   stage 2  P' = R * P + t;  z'max = dmax * (R3 . ray) + t3         (Tgt.3D)
//   stage 3  q = K_tgt * P';  (x', y') = floor(qx/qz, qy/qz)         (Tgt.2D)
// The pixel centre is projected and the target pixel is the one containing
// the projected centre.
// The truncated depth dmax rides along the same ray, so only the z row of the
// rigid transform is evaluated for it. The perspective division of stage 3 is
// this design's addition: the paper names the three products only.
// Timing: three register stages, one pixel per cycle; the whole pipeline
// stalls while out_ready is low. A masked (interpolated) input pixel leaves the
// pipeline with out_hit = 0, as does a pixel that lands behind the camera or
// off the target image.
// Formats: matrices signed Q16.16, depth Q8.8, pixel coordinates integers.
module reproj_unit
  import ls_pkg::*;
#(
  parameter int IMG_W = 1920,
  parameter int IMG_H = 1080
) (
  input  logic     clk,
  input  logic     rst_n,
  input  cam_t     cam,
  input  logic     in_valid,
  output logic     in_ready,
  input  ref_pix_t in_pix,
  output logic     out_valid,
  input  logic     out_ready,
  output logic     out_hit,
  output tgt_pix_t out_pix
);
  typedef logic signed [63:0] s64;
  logic en;
  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  function automatic s64 fx(input s64 a, input s64 b);   // Q16.16 * Q16.16 -> Q16.16
    return (a * b) >>> 16;
  endfunction

  // ---------------- stage 1 ----------------
  s64 p1 [3];
  s64 ray [3];
  always_comb begin
    s64 pv [3];
    pv[0] = (s64'(in_pix.x) <<< 16) + 64'sh8000;     // pixel centre
    pv[1] = (s64'(in_pix.y) <<< 16) + 64'sh8000;
    pv[2] = s64'(1) <<< 16;
    for (int i = 0; i < 3; i++) begin
      ray[i] = fx(s64'($signed(cam.kinv_ref[i*3+0])), pv[0]) + fx(s64'($signed(cam.kinv_ref[i*3+1])), pv[1])
             + fx(s64'($signed(cam.kinv_ref[i*3+2])), pv[2]);
      p1[i]  = (ray[i] * s64'(in_pix.depth)) >>> 8;
    end
  end
  logic s1_v, s1_ok;
  s64   s1_p [3];
  s64   s1_ray [3];
  depth_t s1_dmax;
  rgb_t   s1_col;

  // ---------------- stage 2 ----------------
  s64 p2 [3];
  s64 zr, zmax2;
  always_comb begin
    for (int i = 0; i < 3; i++)
      p2[i] = fx(s64'($signed(cam.rt[i*4+0])), s1_p[0]) + fx(s64'($signed(cam.rt[i*4+1])), s1_p[1])
            + fx(s64'($signed(cam.rt[i*4+2])), s1_p[2]) + s64'($signed(cam.rt[i*4+3]));
    zr    = fx(s64'($signed(cam.rt[8])), s1_ray[0]) + fx(s64'($signed(cam.rt[9])), s1_ray[1])
          + fx(s64'($signed(cam.rt[10])), s1_ray[2]);
    zmax2 = ((zr * s64'(s1_dmax)) >>> 8) + s64'($signed(cam.rt[11]));
  end
  logic s2_v, s2_ok;
  s64   s2_p [3];
  s64   s2_zmax;
  rgb_t s2_col;

  // ---------------- stage 3 ----------------
  s64 q [3];
  s64 u, v;
  logic hit3;
  always_comb begin
    for (int i = 0; i < 3; i++)
      q[i] = fx(s64'($signed(cam.k_tgt[i*3+0])), s2_p[0]) + fx(s64'($signed(cam.k_tgt[i*3+1])), s2_p[1])
           + fx(s64'($signed(cam.k_tgt[i*3+2])), s2_p[2]);
    if (q[2] > 0) begin
      u = q[0] / q[2];
      v = q[1] / q[2];
      if (q[0] < 0) u = -1;          // floor of a negative ratio: off screen anyway
      if (q[1] < 0) v = -1;
    end else begin
      u = -1; v = -1;
    end
    hit3 = s2_ok && (q[2] > 0) && (s2_p[2] > 0) && (u >= 0) && (u < s64'(IMG_W)) && (v >= 0) && (v < s64'(IMG_H));
  end

  function automatic depth_t sat_depth(input s64 z16);       // Q16.16 -> Q8.8
    s64 d;
    d = z16 >>> 8;
    if (d < 0) return '0;
    if (d > 64'sd65535) return 16'hFFFF;
    return depth_t'(d);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s2_v <= 1'b0; out_valid <= 1'b0;
      s1_ok <= 1'b0; s2_ok <= 1'b0; out_hit <= 1'b0;
      s1_dmax <= '0; s1_col <= '0; s2_zmax <= '0; s2_col <= '0; out_pix <= '0;
      for (int i = 0; i < 3; i++) begin s1_p[i] <= '0; s1_ray[i] <= '0; s2_p[i] <= '0; end
    end else if (en) begin
      s1_v    <= in_valid;
      s1_ok   <= in_valid && !in_pix.masked;
      s1_p    <= p1;
      s1_ray  <= ray;
      s1_dmax <= in_pix.dmax;
      s1_col  <= in_pix.col;
      s2_v    <= s1_v;
      s2_ok   <= s1_ok;
      s2_p    <= p2;
      s2_zmax <= zmax2;
      s2_col  <= s1_col;
      out_valid   <= s2_v;
      out_hit     <= hit3;
      out_pix.x   <= 12'(u);
      out_pix.y   <= 12'(v);
      out_pix.depth <= sat_depth(s2_p[2]);
      out_pix.dmax  <= sat_depth(s2_zmax);
      out_pix.col   <= s2_col;
    end
  end
endmodule
