// vtu -- Viewpoint Transformation Unit.
// Reprojection: reference pixels (colour, scene depth, truncated depth and the
// "interpolated" mask bit) stream through reproj_unit. Each pixel that lands
// on the target image is written out to the target frame (tgt_valid/tgt_pix)
// and, in the same cycle, increments its tile's word in the counter buffer and
// raises the tile's word in the depth buffer to the reprojected truncated
// depth (max over the tile, Algorithm 1 line 10). Masked pixels are not
// sources: the no-cumulative-error mask of the paper.
// Classification: a pulse on cls_start scans tiles 0..NT-1, one per cycle:
// the counter word goes to the shared comparator (Thr.2 selected), and a tile
// whose count exceeds Thr.2 is interpolated, any other is re-rendered
// (cls_valid, cls_tile, cls_render). cls_done pulses after the last tile.
// Counting every landing pixel, including two reference pixels landing on one
// target pixel, is this design's simplification: the paper counts "validly
// projected pixels" and says no more.
module vtu
  import ls_pkg::*;
#(
  parameter int TILES_X = 120,
  parameter int TILES_Y = 68,
  parameter int AW      = 13        // counter-buffer address width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cam_t          cam,
  // reprojection
  input  logic          ref_valid,
  output logic          ref_ready,
  input  ref_pix_t      ref_pix,
  output logic          tgt_valid,
  input  logic          tgt_ready,
  output tgt_pix_t      tgt_pix,
  output logic          busy,
  output logic          cnt_inc,
  output logic          dmax_upd,
  output logic [AW-1:0] upd_addr,
  output depth_t        upd_dmax,
  // classification
  input  logic          cls_start,
  output logic [AW-1:0] cls_addr,
  input  logic [15:0]   cls_count,
  output logic [31:0]   cmp_value,
  input  logic          cmp_gt,
  output logic          cls_valid,
  output tile_id_t      cls_tile,
  output logic          cls_render,
  output logic          cls_done,
  output logic [31:0]   n_hit,
  output logic [31:0]   n_miss
);
  localparam int NT = TILES_X * TILES_Y;
  logic     rp_valid, rp_hit;
  tgt_pix_t rp_pix;

  reproj_unit #(.IMG_W(TILES_X*TILE), .IMG_H(TILES_Y*TILE)) u_rp (
    .clk, .rst_n, .cam, .in_valid(ref_valid), .in_ready(ref_ready), .in_pix(ref_pix),
    .out_valid(rp_valid), .out_ready(tgt_ready || !rp_hit), .out_hit(rp_hit), .out_pix(rp_pix));

  logic fire;
  assign fire      = rp_valid && rp_hit && tgt_ready;
  assign tgt_valid = rp_valid && rp_hit;
  assign tgt_pix   = rp_pix;
  assign cnt_inc   = fire;
  assign dmax_upd  = fire;
  assign upd_addr  = AW'((32'(rp_pix.y) >> 4) * TILES_X + (32'(rp_pix.x) >> 4));
  assign upd_dmax  = rp_pix.dmax;
  assign busy      = rp_valid;

  // classification scan
  logic          scanning;
  logic [AW-1:0] scan_t;
  assign cls_addr   = scan_t;
  assign cmp_value  = 32'(cls_count);
  assign cls_valid  = scanning;
  assign cls_tile   = tile_id_t'(scan_t);
  assign cls_render = !cmp_gt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scanning <= 1'b0; scan_t <= '0; cls_done <= 1'b0; n_hit <= '0; n_miss <= '0;
    end else begin
      cls_done <= 1'b0;
      if (cls_start && !scanning) begin
        scanning <= 1'b1; scan_t <= '0;
      end else if (scanning) begin
        if (scan_t == AW'(NT-1)) begin
          scanning <= 1'b0; cls_done <= 1'b1;
        end
        scan_t <= scan_t + 1'b1;
      end
      if (fire) n_hit <= n_hit + 1;
      else if (rp_valid && !rp_hit) n_miss <= n_miss + 1;
    end
  end
endmodule
