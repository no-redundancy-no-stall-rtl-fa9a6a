// interp_unit -- Interpolation Unit for tiles that are not re-rendered.
// A tile whose reprojected pixels cover more than 5/6 of it keeps those
// pixels and has the rest filled in here. The 256 pixels of the tile arrive in
// raster order (in_valid/in_ready, each with its reprojection-valid flag and
// colour; in_tile is sampled with the first). While they arrive, the colours
// of the valid pixels are summed. Then one row per cycle is output:
// a valid pixel keeps its colour; a missing pixel takes the mean of the
// nearest valid pixels to its left and right in the row, or the one that
// exists, or the mean of all valid pixels of the tile when its row has none.
// Every filled pixel is flagged in out_interp: those flags are the paper's
// no-cumulative-error mask, so the next reprojection ignores these pixels.
// The paper does not say how pixels are interpolated; the row-wise nearest-
// neighbour rule is this design's. Timing: 256 cycles in, then 16 rows out
// (out_valid, no back-pressure), one tile at a time.
module interp_unit
  import ls_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  tile_id_t   in_tile,
  input  logic       in_pvalid,
  input  rgb_t       in_col,
  output logic       out_valid,
  output tile_id_t   out_tile,
  output logic [3:0] out_row,
  output rgb_t       out_col [TILE],
  output logic [TILE-1:0] out_interp,
  output logic       busy
);
  typedef enum logic [1:0] {S_LOAD, S_MEAN, S_OUT} state_e;
  state_e      state;
  rgb_t        col_a [TILE_PIX];
  logic [TILE_PIX-1:0] val_a;
  logic [7:0]  idx;
  logic [3:0]  row;
  logic [16:0] sum_r, sum_g, sum_b;
  logic [8:0]  nval;
  rgb_t        mean;
  tile_id_t    tile_r;

  assign in_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD) || (idx != 0);

  // one row, combinational fill
  always_comb begin
    int l, r;
    rgb_t cl, cr;
    logic [8:0] s;
    l = -1; r = -1; s = '0; cl = '0; cr = '0;
    for (int x = 0; x < TILE; x++) begin
      l = -1; r = -1; s = '0;
      for (int j = 0; j < TILE; j++) begin
        if (val_a[{row, 4'(j)}] && j < x) l = j;
      end
      for (int j = TILE-1; j >= 0; j--) begin
        if (val_a[{row, 4'(j)}] && j > x) r = j;
      end
      cl = (l >= 0) ? col_a[{row, 4'(l)}] : mean;
      cr = (r >= 0) ? col_a[{row, 4'(r)}] : mean;
      out_interp[x] = !val_a[{row, 4'(x)}];
      if (val_a[{row, 4'(x)}]) out_col[x] = col_a[{row, 4'(x)}];
      else if (l >= 0 && r < 0) out_col[x] = cl;
      else if (r >= 0 && l < 0) out_col[x] = cr;
      else if (l < 0 && r < 0)  out_col[x] = mean;
      else begin
        s = 9'(cl.r) + 9'(cr.r); out_col[x].r = s[8:1];
        s = 9'(cl.g) + 9'(cr.g); out_col[x].g = s[8:1];
        s = 9'(cl.b) + 9'(cr.b); out_col[x].b = s[8:1];
      end
    end
  end
  assign out_valid = (state == S_OUT);
  assign out_row   = row;
  assign out_tile  = tile_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; idx <= '0; row <= '0; sum_r <= '0; sum_g <= '0; sum_b <= '0;
      nval <= '0; mean <= '0; tile_r <= '0; val_a <= '0;
    end else begin
      case (state)
        S_LOAD: if (in_valid) begin
          if (idx == 0) begin
            tile_r <= in_tile;
            sum_r <= in_pvalid ? 17'(in_col.r) : '0;
            sum_g <= in_pvalid ? 17'(in_col.g) : '0;
            sum_b <= in_pvalid ? 17'(in_col.b) : '0;
            nval  <= in_pvalid ? 9'd1 : 9'd0;
          end else if (in_pvalid) begin
            sum_r <= sum_r + 17'(in_col.r); sum_g <= sum_g + 17'(in_col.g);
            sum_b <= sum_b + 17'(in_col.b); nval <= nval + 1'b1;
          end
          val_a[idx] <= in_pvalid;
          idx <= idx + 1'b1;
          if (idx == 8'd255) state <= S_MEAN;
        end
        S_MEAN: begin
          if (nval == 0) mean <= '0;
          else begin
            mean.r <= 8'(sum_r / 17'(nval));
            mean.g <= 8'(sum_g / 17'(nval));
            mean.b <= 8'(sum_b / 17'(nval));
          end
          row <= '0; state <= S_OUT;
        end
        S_OUT: begin
          row <= row + 1'b1;
          if (row == 4'd15) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end
  always_ff @(posedge clk) if (state == S_LOAD && in_valid) col_a[idx] <= in_col;
endmodule
