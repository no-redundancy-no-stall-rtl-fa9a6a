// depth_truncation -- LDU front end: drops Gaussian-tile pairs that cannot
// contribute to a re-rendered tile.
// A pair passes when its tile is to be re-rendered and, unless skip is set,
// its Gaussian depth is not greater than the tile's predicted early-stopping
// depth (the maximum reprojected truncated depth in the tile). Pairs of tiles
// that will be interpolated are dropped: such tiles bypass sorting and
// rasterization. skip is set on fully rendered (key) frames, where no
// prediction exists. A tile with no reprojected pixel has recorded depth 0;
// this design treats 0 as "no prediction" and lets its pairs pass.
// The tile's render bit and depth are looked up outside (lkp_tile out,
// lkp_render / lkp_dmax in, same cycle). Combinational valid/ready path.
module depth_truncation
  import ls_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        skip,
  input  logic        in_valid,
  output logic        in_ready,
  input  pair_t       in_pair,
  output tile_id_t    lkp_tile,
  input  logic        lkp_render,
  input  depth_t      lkp_dmax,
  output logic        out_valid,
  input  logic        out_ready,
  output pair_t       out_pair,
  output logic [31:0] n_cut_depth,     // pairs removed by the depth compare
  output logic [31:0] n_cut_interp     // pairs removed because the tile is interpolated
);
  logic deeper, pass;
  assign lkp_tile  = in_pair.tile;
  assign deeper    = (in_pair.g.depth > lkp_dmax) && (lkp_dmax != '0);
  assign pass      = lkp_render && (skip || !deeper);
  assign out_valid = in_valid && pass;
  assign out_pair  = in_pair;
  assign in_ready  = pass ? out_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cut_depth <= '0; n_cut_interp <= '0;
    end else if (in_valid && !pass) begin
      if (!lkp_render) n_cut_interp <= n_cut_interp + 1;
      else             n_cut_depth  <= n_cut_depth + 1;
    end
  end
endmodule
