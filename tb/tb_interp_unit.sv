// tb_interp_unit -- Interpolation Unit. Each trial loads a 16x16 tile with a
// random valid mask (dense masks as in TWSR tiles, plus a tile with an empty
// row and a tile with no valid pixel at all) under random in_valid gaps, then
// compares all 16 output rows with a reference fill: valid pixels unchanged,
// holes = mean of nearest left/right valid neighbour, the one that exists, or
// the tile mean; out_interp must flag exactly the holes.
module tb_interp_unit;
  import ls_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, in_pvalid, out_valid, busy;
  tile_id_t in_tile, out_tile;
  rgb_t in_col, out_col [TILE];
  logic [3:0] out_row;
  logic [TILE-1:0] out_interp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  interp_unit dut (.*);

  bit   v [256];
  rgb_t c [256];
  rgb_t mean;
  int   nrow;
  tile_id_t cur;

  function automatic rgb_t expect_pix(int y, int x);
    int l, r; rgb_t e;
    if (v[y * 16 + x]) return c[y * 16 + x];
    l = -1; r = -1;
    for (int j = 0; j < x; j++) if (v[y * 16 + j]) l = j;
    for (int j = 15; j > x; j--) if (v[y * 16 + j]) r = j;
    if (l < 0 && r < 0) return mean;
    if (r < 0) return c[y * 16 + l];
    if (l < 0) return c[y * 16 + r];
    e.r = 8'((c[y*16+l].r + c[y*16+r].r) / 2);
    e.g = 8'((c[y*16+l].g + c[y*16+r].g) / 2);
    e.b = 8'((c[y*16+l].b + c[y*16+r].b) / 2);
    return e;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_row != 4'(nrow) || out_tile != cur) begin failures++; $display("FAIL row %0d exp %0d", out_row, nrow); end
    for (int x = 0; x < 16; x++) begin
      rgb_t e; e = expect_pix(nrow, x);
      checks++;
      if (out_col[x] != e || out_interp[x] != !v[nrow * 16 + x]) begin
        failures++; if (failures < 10) $display("FAIL (%0d,%0d) col %h exp %h interp %0d", x, nrow, out_col[x], e, out_interp[x]);
      end
    end
    nrow++;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int sr, sg, sb, n;
      sr = 0; sg = 0; sb = 0; n = 0;
      for (int i = 0; i < 256; i++) begin
        v[i] = ($urandom_range(0, 9) < ((trial % 3 == 0) ? 5 : 9));
        if (trial == 4 && i / 16 == 7) v[i] = 0;                  // empty row
        if (trial == 5) v[i] = 0;                                   // empty tile
        c[i] = 24'($urandom);
        if (v[i]) begin sr += c[i].r; sg += c[i].g; sb += c[i].b; n++; end
      end
      mean = (n == 0) ? '0 : {8'(sr / n), 8'(sg / n), 8'(sb / n)};
      cur = tile_id_t'($urandom_range(0, 8000)); nrow = 0;
      for (int i = 0; i < 256; i++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_pvalid = v[i]; in_col = c[i]; in_tile = (i == 0) ? cur : tile_id_t'($urandom);
        #1; if (!in_ready) begin failures++; $display("FAIL not ready while loading"); end
      end
      @(negedge clk); in_valid = 0;
      while (busy) @(negedge clk);
      checks++; if (nrow != 16) begin failures++; $display("FAIL %0d rows out", nrow); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
