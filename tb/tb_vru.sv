// tb_vru -- Volume Rendering Unit, 16 lanes, tiles of a 4-tile-wide image.
// Scene A: random semi-transparent Gaussians on a tile; the output colour and
//   depth are compared with a floating-point alpha blend (exact exp, alpha
//   skipped below 1/255, stop when T < 1e-4) within a tolerance that covers the
//   16-entry exp table and Q0.8 alpha; the mean colour error is bounded too.
// Scene B: nearly flat opaque Gaussians: every pixel stops after the second
//   one, so the remaining Gaussians must be consumed as skips, the colour must
//   equal the exact fixed-point result and dmax must be the second depth.
// Rate: each applied Gaussian costs 256/LANES + 1 cycles; a skipped one, 1.
module tb_vru;
  import ls_pkg::*;
  localparam int TX = 4, LANES = 16, GROUPS = 256 / LANES;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, busy, tile_done;
  vru_cmd_t in_cmd;
  tile_id_t out_tile;
  logic [7:0] out_base;
  rgb_t out_col [LANES];
  depth_t out_depth [LANES], out_dmax [LANES];
  logic [31:0] n_gauss_work, n_gauss_skip;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vru #(.TILES_X(TX), .LANES(LANES)) dut (.*);

  gauss2d_t gs [$];
  rgb_t   got_col [256];
  depth_t got_dep [256], got_dmx [256];
  int n_out;
  tile_id_t cur_tile;

  always @(posedge clk) if (out_valid) begin
    checks++;
    if (out_tile != cur_tile || out_base != 8'(n_out * LANES)) begin
      failures++; $display("FAIL output tile %0d base %0d", out_tile, out_base);
    end
    for (int l = 0; l < LANES; l++) begin
      got_col[out_base + l] = out_col[l]; got_dep[out_base + l] = out_depth[l]; got_dmx[out_base + l] = out_dmax[l];
    end
    n_out++;
  end

  task automatic send(input vru_cmd_t c);
    @(negedge clk); in_cmd = c; in_valid = 1;
    #1; while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic render(input tile_id_t t);
    vru_cmd_t c;
    c = '0; c.kind = Q_HDR; c.tile = t; cur_tile = t; send(c);
    foreach (gs[i]) begin c.kind = Q_GAUSS; c.g = gs[i]; send(c); end
    n_out = 0;
    c.kind = Q_END; send(c);
    while (!tile_done) @(negedge clk);
    checks++; if (n_out != GROUPS) begin failures++; $display("FAIL %0d output groups", n_out); end
  endtask

  task automatic reference(input tile_id_t t, input int p, output real r, output real g, output real b, output real d);
    real tt, px, py;
    tt = 1.0; r = 0; g = 0; b = 0; d = 0;
    px = (t % TX) * 16 + (p % 16) + 0.5; py = (t / TX) * 16 + (p / 16) + 0.5;
    foreach (gs[i]) begin
      real dx, dy, pw, a;
      dx = px - gs[i].mx / 16.0; dy = py - gs[i].my / 16.0;
      pw = 0.5 * (gs[i].qa * dx * dx + gs[i].qc * dy * dy) / 65536.0 + gs[i].qb * dx * dy / 65536.0;
      a = gs[i].op / 256.0 * $exp(-pw);
      if (a < 1.0 / 255.0) continue;
      r += gs[i].col.r * a * tt; g += gs[i].col.g * a * tt; b += gs[i].col.b * a * tt;
      d += gs[i].depth / 256.0 * a * tt;
      tt *= (1.0 - a);
      if (tt < 1e-4) break;
    end
  endtask

  initial begin
    real sum_err;
    int t0, w0, s0;
    repeat (2) @(negedge clk); rst_n = 1;
    // ---------------- scene A ----------------
    for (int trial = 0; trial < 6; trial++) begin
      tile_id_t t;
      t = tile_id_t'($urandom_range(0, 11));
      gs.delete();
      for (int i = 0; i < 10; i++) begin
        gauss2d_t g; real sx, sy, rho; int ri;
        sx = $urandom_range(2, 9); sy = $urandom_range(2, 9);
        g.mx = 16'(((t % TX) * 16 + int'($urandom_range(0, 20)) - 2) * 16 + $urandom_range(0, 15));
        g.my = 16'(((t / TX) * 16 + int'($urandom_range(0, 20)) - 2) * 16 + $urandom_range(0, 15));
        g.qa = 32'($rtoi(65536.0 / (sx * sx))); g.qc = 32'($rtoi(65536.0 / (sy * sy)));
        ri = $urandom_range(0, 40); rho = (ri - 20) / 100.0;
        g.qb = 32'($rtoi(rho * 65536.0 / (sx * sy)));
        g.op = 8'($urandom_range(60, 250)); g.col = 24'($urandom);
        g.depth = 16'(256 * (i + 1) + $urandom_range(0, 100));
        gs.push_back(g);
      end
      render(t);
      sum_err = 0;
      for (int p = 0; p < 256; p++) begin
        real r, g, b, d, e;
        reference(t, p, r, g, b, d);
        e = (got_col[p].r > r) ? got_col[p].r - r : r - got_col[p].r;
        if (((got_col[p].g > g) ? got_col[p].g - g : g - got_col[p].g) > e) e = (got_col[p].g > g) ? got_col[p].g - g : g - got_col[p].g;
        if (((got_col[p].b > b) ? got_col[p].b - b : b - got_col[p].b) > e) e = (got_col[p].b > b) ? got_col[p].b - b : b - got_col[p].b;
        sum_err += e;
        checks++;
        if (e > 14.0 || (got_dep[p] / 256.0 - d) > 0.6 || (d - got_dep[p] / 256.0) > 0.6) begin
          failures++;
          if (failures < 10) $display("FAIL A pix %0d col %0d %0d %0d exp %f %f %f depth %f exp %f", p,
            got_col[p].r, got_col[p].g, got_col[p].b, r, g, b, got_dep[p] / 256.0, d);
        end
      end
      checks++;
      if (sum_err / 256.0 > 4.0) begin failures++; $display("FAIL A mean colour error %f", sum_err / 256.0); end
    end
    // ---------------- scene B: early stop ----------------
    gs.delete();
    for (int i = 0; i < 8; i++) begin
      gauss2d_t g;
      g.mx = 16'((16 + 8) * 16); g.my = 16'((16 + 8) * 16);
      g.qa = 32'd10; g.qc = 32'd10; g.qb = 32'd0; g.op = 8'd255;
      g.col.r = 8'(30 * i); g.col.g = 8'(200 - 20 * i); g.col.b = 8'd100;
      g.depth = 16'(256 + 100 * i);
      gs.push_back(g);
    end
    w0 = n_gauss_work; s0 = n_gauss_skip;
    render(tile_id_t'(TX + 1));
    checks++;
    if (n_gauss_work - w0 != 2 || n_gauss_skip - s0 != 6) begin
      failures++; $display("FAIL B work %0d skip %0d", n_gauss_work - w0, n_gauss_skip - s0);
    end
    for (int p = 0; p < 256; p++) begin
      // exact fixed point: w1 = 255*65535>>8 = 65279, T = 256; w2 = 255*256>>8 = 255
      int er, eg;
      er = (0 * 65279 + 30 * 255) >> 16; eg = (200 * 65279 + 180 * 255) >> 16;
      checks++;
      if (got_col[p].r != 8'(er) || got_col[p].g != 8'(eg) || got_dmx[p] != 16'(356)) begin
        failures++; if (failures < 10) $display("FAIL B pix %0d col %0d %0d dmax %0d", p, got_col[p].r, got_col[p].g, got_dmx[p]);
      end
    end
    // ---------------- rate ----------------
    gs = gs[0:0];
    gs[0].op = 8'd20;
    @(negedge clk);
    begin
      vru_cmd_t c;
      c = '0; c.kind = Q_HDR; c.tile = 0; cur_tile = 0; send(c);
      t0 = $time;
      for (int i = 0; i < 10; i++) begin c.kind = Q_GAUSS; c.g = gs[0]; send(c); end
      while (busy) @(negedge clk);
      checks++;
      if (($time - t0) / 10 > 10 * (GROUPS + 1) + 12) begin failures++; $display("FAIL rate: %0d cycles for 10 Gaussians", ($time - t0) / 10); end
      n_out = 0; c.kind = Q_END; send(c);
      while (!tile_done) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
