// tb_ls_gaussian_top -- end-to-end test of the accelerator over a short video.
// The bench plays host and memory. A camera slides sideways past a scene of 3D
// Gaussians: a dense wall covering most of the image, occluders in front of
// it, hidden Gaussians behind it, long thin diagonal Gaussians and Gaussians
// that must be culled (behind the near plane, transparent, off screen).
// For every frame the bench projects the scene to screen space (mean, 2D
// covariance, opacity, colour, depth: the part of preprocessing that is done
// before the accelerator), streams it in in random order, and models memory:
//   - the previous output frame is streamed back as the reference frame and
//     the reprojected pixels are kept as the warped frame;
//   - interpolation requests get the warped pixels of the tile, and the rows
//     the interpolation unit returns go into the new frame;
//   - pairs are binned per tile and returned, in arrival order, when the
//     renderer fetches a tile; rendered pixels go into the new frame.
// All memory-side streams see random back-pressure and gaps.
// Checks: key frames against a floating-point render (per pixel on tiles
// whose list fits the sorter, on average elsewhere); every pixel of every
// frame written exactly once; no pair of an interpolated tile fetched; sparse
// frames close to the floating-point render on average (both on tiles whose
// list fits the sorter: longer lists are only sorted in runs); the key-frame
// cadence. Every mechanism of the design -- key and sparse frames,
// interpolation, the mask, culling, Stage II drops, depth and interpolation
// truncation, deferral, long lists, queue stalls, idle blocks, skipped
// Gaussians -- is counted, and one that never happens is a failure.
module tb_ls_gaussian_top;
  import ls_pkg::*;
  localparam int TX = 4, TY = 4, NB = 2, LN = 16, SN = 128, QD = 4, NW = 2;
  localparam int NFRAMES = 5;                // K S S K S
  localparam int CHECK_STRIDE = 1;           // key-frame pixels compared: every n-th
  localparam real FOC = 64.0;                // focal length in pixels
  localparam real DX  = 0.15;                // camera step per frame
  localparam int W = TX * 16, H = TY * 16, NT = TX * TY, NPIX = W * H;
  localparam real PCX = W / 2.0;             // principal point x
  localparam int WATCHDOG = 300_000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cam_t cam;
  logic frame_start = 0, frame_done, busy, key_frame;
  logic ref_valid = 0, ref_ready, ref_last = 0, tgt_valid, tgt_ready = 1;
  ref_pix_t ref_pix;
  tgt_pix_t tgt_pix;
  logic irq_valid, irq_ready = 1, ip_valid = 0, ip_ready, ip_pvalid = 0, io_valid;
  tile_id_t irq_tile, ip_tile, io_tile;
  rgb_t ip_col;
  logic [3:0] io_row;
  rgb_t io_col [TILE];
  logic [TILE-1:0] io_interp;
  logic g_valid = 0, g_ready, g_last = 0, pr_valid, pr_ready = 1;
  gauss_proj_t g_in;
  pair_t pr_pair;
  logic fr_valid, fr_ready = 1, fd_valid = 0, fd_ready;
  tile_id_t fr_tile;
  gauss2d_t fd_g;
  logic px_valid [NB];
  tile_id_t px_tile [NB];
  logic [7:0] px_base [NB];
  rgb_t px_col [NB][LN];
  depth_t px_depth [NB][LN], px_dmax [NB][LN];
  ls_stats_t stats;

  ls_gaussian_top #(.TILES_X(TX), .TILES_Y(TY), .CB_ENTRIES(NT), .NUM_VRU(NB), .LANES(LN), .SORT_N(SN), .QDEPTH(QD), .N_WIN(NW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // ---------------------------------------------------------------- scene
  typedef struct { real x, y, z, sxx, sxy, syy, o; rgb_t col; } g3_t;
  g3_t scene [$];
  gauss_proj_t gp [$];        // this frame's projected Gaussians
  real camx;

  function automatic rgb_t rcol();
    return 24'($urandom);
  endfunction

  task automatic build_scene();
    g3_t g; int jit;
    // the wall: dense and opaque, wider than the image over the whole video
    for (real x = -1.4; x < 2.25; x += 0.2)
      for (real y = -1.5; y < 1.55; y += 0.2) begin
        jit = $urandom_range(0, 20); g.x = x + (jit - 10) / 500.0; g.y = y; g.z = 3.0 + $urandom_range(0, 20) / 256.0;
        g.sxx = 0.06; g.syy = 0.06; g.sxy = 0.0; g.o = 0.99; g.col = rcol();
        scene.push_back(g);
      end
    // occluders in front
    for (int i = 0; i < 6; i++) begin
      g.x = -0.6 + 0.2 * i; g.y = -0.4 + 0.15 * i; g.z = 1.5 + 0.05 * i;
      g.sxx = 0.004; g.syy = 0.006; g.sxy = 0.001; g.o = 0.8; g.col = rcol();
      scene.push_back(g);
    end
    // hidden behind the wall
    for (int i = 0; i < 12; i++) begin
      g.x = -1.2 + 0.3 * i; g.y = -1.0 + 0.15 * i; g.z = 6.0 + 0.1 * i;
      g.sxx = 0.05; g.syy = 0.05; g.sxy = 0.0; g.o = 0.7; g.col = rcol();
      scene.push_back(g);
    end
    // long thin diagonal ones in front of the wall
    for (int i = 0; i < 3; i++) begin
      g.x = 1.0 + 0.15 * i; g.y = -0.5 + 0.5 * i; g.z = 2.5 + 0.01 * i;
      g.sxx = 0.05; g.syy = 0.05; g.sxy = 0.0495; g.o = 0.6; g.col = rcol();
      scene.push_back(g);
    end
    // to be culled: behind the near plane, transparent, off screen
    g.x = 0.0; g.y = 0.0; g.z = 0.1; g.sxx = 0.01; g.syy = 0.01; g.sxy = 0; g.o = 0.9; g.col = rcol(); scene.push_back(g);
    g.z = 2.0; g.o = 0.0; scene.push_back(g);
    g.x = -9.0; g.o = 0.9; scene.push_back(g);
    scene.shuffle();                     // one fixed, random input order
  endtask

  function automatic int clampi(real v, int lo, int hi);
    int r; r = $rtoi(v); if (v < 0) r = -$rtoi(-v);
    return (r < lo) ? lo : (r > hi) ? hi : r;
  endfunction

  task automatic project_scene();
    gp.delete();
    foreach (scene[i]) begin
      gauss_proj_t p; real s;
      s = FOC / scene[i].z;
      p.mx = 16'(clampi((FOC * (scene[i].x - camx) / scene[i].z + PCX) * 16.0, -32768, 32767));
      p.my = 16'(clampi((FOC * scene[i].y / scene[i].z + H / 2.0) * 16.0, -32768, 32767));
      p.ca = 32'(clampi(scene[i].sxx * s * s * 256.0, 0, 32'h7fffffff));
      p.cb = 32'(clampi(scene[i].sxy * s * s * 256.0, -32'sh7fffffff, 32'h7fffffff));
      p.cc = 32'(clampi(scene[i].syy * s * s * 256.0, 0, 32'h7fffffff));
      p.op = 8'(clampi(scene[i].o * 256.0, 0, 255));
      p.col = scene[i].col;
      p.depth = 16'(clampi(scene[i].z * 256.0, 0, 65535));
      gp.push_back(p);
    end
  endtask

  // floating-point reference render of one pixel from gp
  int order [$];
  task automatic sort_gp();
    order.delete();
    foreach (gp[i]) order.push_back(i);
    order.sort() with (gp[item].depth * 4096 + item);   // ties: arrival order (the sorter is stable)
  endtask

  task automatic ref_pixel(input int px, input int py, output real r, output real g, output real b);
    real tt, det, qa, qb, qc;
    tt = 1.0; r = 0; g = 0; b = 0;
    foreach (order[k]) begin
      gauss_proj_t p; real dx, dy, pw, a;
      p = gp[order[k]];
      if (p.op == 0 || p.depth < 16'd52) continue;
      det = (p.ca / 256.0) * (p.cc / 256.0) - (p.cb / 256.0) * (p.cb / 256.0);
      if (det <= 0) continue;
      qa = (p.cc / 256.0) / det; qc = (p.ca / 256.0) / det; qb = -(p.cb / 256.0) / det;
      dx = px + 0.5 - p.mx / 16.0; dy = py + 0.5 - p.my / 16.0;
      pw = 0.5 * (qa * dx * dx + qc * dy * dy) + qb * dx * dy;
      a = p.op / 256.0 * $exp(-pw);
      if (a < 1.0 / 255.0) continue;
      r += p.col.r * a * tt; g += p.col.g * a * tt; b += p.col.b * a * tt;
      tt *= (1.0 - a);
      if (tt < 1e-4) break;
    end
  endtask

  // ---------------------------------------------------------------- frame memory
  rgb_t   fb_col [NPIX], pv_col [NPIX];
  depth_t fb_dep [NPIX], pv_dep [NPIX];
  depth_t fb_dmx [NPIX], pv_dmx [NPIX];
  bit     fb_int [NPIX], pv_int [NPIX];
  int     fb_wr  [NPIX];
  bit     wp_v   [NPIX];
  tgt_pix_t wp   [NPIX];
  gauss2d_t pbin [NT][$];
  bit     tile_interp [NT];
  bit     tile_long [NT];
  int     n_masked_sent = 0, n_bp_pr = 0, n_bp_fd_gap = 0;

  // target pixels of the reprojection
  always @(posedge clk) if (rst_n && tgt_valid && tgt_ready) begin
    int idx; idx = int'(tgt_pix.y) * W + int'(tgt_pix.x);
    wp_v[idx] <= 1'b1; wp[idx] <= tgt_pix;
  end
  // pairs into pbin
  always @(posedge clk) if (rst_n) begin
    if (pr_valid && pr_ready) pbin[pr_pair.tile].push_back(pr_pair.g);
    if (pr_valid && !pr_ready) n_bp_pr++;
  end
  // rendered pixels
  always @(posedge clk) if (rst_n) for (int b = 0; b < NB; b++) if (px_valid[b]) begin
    for (int l = 0; l < LN; l++) begin
      int li, idx;
      li = int'(px_base[b]) + l;
      idx = ((int'(px_tile[b]) / TX) * 16 + li / 16) * W + (int'(px_tile[b]) % TX) * 16 + li % 16;
      fb_col[idx] = px_col[b][l]; fb_dep[idx] = px_depth[b][l]; fb_dmx[idx] = px_dmax[b][l];
      fb_int[idx] = 1'b0; fb_wr[idx]++;
    end
  end
  // interpolated rows
  int n_irq = 0, n_io_rows = 0;
  always @(posedge clk) if (rst_n && io_valid) begin
    tile_interp[io_tile] = 1'b1; n_io_rows++;
    for (int x = 0; x < 16; x++) begin
      int idx;
      idx = ((int'(io_tile) / TX) * 16 + int'(io_row)) * W + (int'(io_tile) % TX) * 16 + x;
      fb_col[idx] = io_col[x]; fb_int[idx] = io_interp[x]; fb_wr[idx]++;
      fb_dep[idx] = io_interp[x] ? 16'd0 : wp[idx].depth;
      fb_dmx[idx] = io_interp[x] ? 16'd0 : wp[idx].dmax;
    end
  end
  // random ready signals
  always @(negedge clk) begin
    tgt_ready <= ($urandom_range(0, 7) != 0);
    irq_ready <= ($urandom_range(0, 3) != 0);
    pr_ready  <= ($urandom_range(0, 5) != 0);
    fr_ready  <= ($urandom_range(0, 2) != 0);
  end

  // interpolation requests -> tile queue -> pixel feeder
  tile_id_t ipq [$];
  bit feeding = 0;
  always @(posedge clk) if (rst_n && irq_valid && irq_ready) begin ipq.push_back(irq_tile); n_irq++; end
  initial forever begin
    @(negedge clk);
    if (ipq.size() != 0) begin
      tile_id_t t; t = ipq.pop_front(); feeding = 1;
      for (int i = 0; i < 256; i++) begin
        int idx;
        idx = ((int'(t) / TX) * 16 + i / 16) * W + (int'(t) % TX) * 16 + i % 16;
        ip_valid = 1; ip_tile = t; ip_pvalid = wp_v[idx]; ip_col = wp[idx].col;
        #1; while (!ip_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        ip_valid = 0;
        if ($urandom_range(0, 9) == 0) @(negedge clk);
      end
      feeding = 0;
    end
  end

  // pair-list fetch
  gauss2d_t fdq [$];
  always @(posedge clk) if (rst_n && fr_valid && fr_ready) begin
    fdq = pbin[fr_tile];
    check(!tile_interp[fr_tile], $sformatf("pair list fetched for interpolated tile %0d", fr_tile));
  end
  initial forever begin
    @(negedge clk);
    if (fdq.size() != 0 && $urandom_range(0, 4) != 0) begin
      fd_valid = 1; fd_g = fdq[0];
      #1; while (!fd_ready) begin @(negedge clk); #1; end
      @(negedge clk); void'(fdq.pop_front()); fd_valid = 0;
    end else n_bp_fd_gap++;
  end

  // ---------------------------------------------------------------- streams in
  task automatic stream_ref();
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 15) == 0) begin ref_valid = 0; @(negedge clk); end
      ref_valid = 1; ref_last = (i == NPIX - 1);
      ref_pix.x = 12'(i % W); ref_pix.y = 12'(i / W); ref_pix.depth = pv_dep[i]; ref_pix.dmax = pv_dmx[i];
      ref_pix.col = pv_col[i]; ref_pix.masked = pv_int[i];
      if (pv_int[i]) n_masked_sent++;
      #1; while (!ref_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); ref_valid = 0; ref_last = 0;
  endtask

  task automatic stream_g();
    foreach (gp[i]) begin
      @(negedge clk);
      while ($urandom_range(0, 7) == 0) begin g_valid = 0; @(negedge clk); end
      g_valid = 1; g_in = gp[i]; g_last = (i == gp.size() - 1);
      #1; while (!g_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); g_valid = 0; g_last = 0;
  endtask

  function automatic logic signed [31:0] q16(real v); return $rtoi(v * 65536.0); endfunction

  // ---------------------------------------------------------------- main
  initial begin
    real err_sum, e, rr, rg, rb;
    int n_cmp;
    ls_stats_t s0;
    build_scene();
    for (int i = 0; i < NPIX; i++) begin
      pv_col[i] = '0; pv_dep[i] = '0; pv_dmx[i] = '0; pv_int[i] = 0; fb_wr[i] = 0; wp_v[i] = 0;
    end
    cam = '0;
    cam.kinv_ref[0] = q16(1.0 / FOC); cam.kinv_ref[2] = q16(-(PCX) / FOC);
    cam.kinv_ref[4] = q16(1.0 / FOC); cam.kinv_ref[5] = q16(-(H / 2.0) / FOC); cam.kinv_ref[8] = q16(1.0);
    cam.rt[0] = q16(1.0); cam.rt[5] = q16(1.0); cam.rt[10] = q16(1.0); cam.rt[3] = q16(-DX);
    cam.k_tgt[0] = q16(FOC); cam.k_tgt[2] = q16(PCX); cam.k_tgt[4] = q16(FOC); cam.k_tgt[5] = q16(H / 2.0);
    cam.k_tgt[8] = q16(1.0);
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < NFRAMES; f++) begin
      bit is_key;
      int t0;
      is_key = (f % (NW + 1) == 0);
      camx = f * DX;
      project_scene();
      sort_gp();
      for (int i = 0; i < NPIX; i++) begin fb_wr[i] = 0; wp_v[i] = 0; end
      for (int t = 0; t < NT; t++) begin pbin[t].delete(); tile_interp[t] = 0; end
      s0 = stats;
      t0 = $time / 10;
      @(negedge clk); frame_start = 1; @(negedge clk); frame_start = 0;
      @(negedge clk);
      check(key_frame == is_key, $sformatf("frame %0d key_frame %0d", f, key_frame));
      fork
        if (!is_key) stream_ref();
        stream_g();
      join
      while (!frame_done) @(negedge clk);
      while (ipq.size() != 0 || feeding || n_io_rows != 16 * n_irq) @(negedge clk);
      repeat (4) @(negedge clk);
      for (int t = 0; t < NT; t++) tile_long[t] = (pbin[t].size() > SN);
      // every pixel exactly once
      begin
        int bad; bad = 0;
        for (int i = 0; i < NPIX; i++) if (fb_wr[i] != 1) bad++;
        check(bad == 0, $sformatf("frame %0d: %0d pixels not written exactly once", f, bad));
      end
      // image quality against the floating-point render
      err_sum = 0; n_cmp = 1;
      for (int i = 0; i < NPIX; i += CHECK_STRIDE) begin
        int x, y, t;
        x = i % W; y = i / W; t = (y / 16) * TX + x / 16;
        ref_pixel(x, y, rr, rg, rb);
        e = (fb_col[i].r > rr) ? fb_col[i].r - rr : rr - fb_col[i].r;
        if (((fb_col[i].g > rg) ? fb_col[i].g - rg : rg - fb_col[i].g) > e) e = (fb_col[i].g > rg) ? fb_col[i].g - rg : rg - fb_col[i].g;
        if (((fb_col[i].b > rb) ? fb_col[i].b - rb : rb - fb_col[i].b) > e) e = (fb_col[i].b > rb) ? fb_col[i].b - rb : rb - fb_col[i].b;
        if (!tile_long[t]) begin err_sum += e; n_cmp++; end
        if (is_key && !tile_long[t])
          check(e <= 16.0, $sformatf("frame %0d pixel (%0d,%0d) = %0d %0d %0d, reference %f %f %f", f, x, y,
            fb_col[i].r, fb_col[i].g, fb_col[i].b, rr, rg, rb));
      end
      $display("frame %0d %s: %0d cycles, pairs %0d, render tiles %0d, interp tiles %0d, mean |err| %f",
        f, is_key ? "key" : "sparse", $time / 10 - t0, stats.pairs, stats.render_tiles - s0.render_tiles,
        stats.interp_tiles - s0.interp_tiles, err_sum / n_cmp);
      check(err_sum / n_cmp <= (is_key ? 3.0 : 12.0), $sformatf("frame %0d mean error %f", f, err_sum / n_cmp));
      pv_col = fb_col; pv_dep = fb_dep; pv_dmx = fb_dmx; pv_int = fb_int;
    end
    // ------------------------------------------------------------ mechanisms
    $display("mechanisms: key %0d sparse %0d render %0d interp %0d hit %0d miss %0d masked %0d culled %0d s2drop %0d",
      stats.key_frames, stats.sparse_frames, stats.render_tiles, stats.interp_tiles, stats.vtu_hit,
      stats.vtu_miss, n_masked_sent, stats.culled, stats.s2_drop);
    $display("mechanisms: cut_depth %0d cut_interp %0d defer %0d long %0d stall %0d bubble %0d work %0d skip %0d pr_bp %0d",
      stats.cut_depth, stats.cut_interp, stats.defer, stats.long_lists, stats.stall, stats.bubble,
      stats.gauss_work, stats.gauss_skip, n_bp_pr);
    check(stats.key_frames != 0,    "no key frame");
    check(stats.sparse_frames != 0, "no sparse frame");
    check(stats.render_tiles != 0,  "no rendered tile");
    check(stats.interp_tiles != 0,  "no interpolated tile");
    check(stats.vtu_hit != 0,       "no reprojected pixel");
    check(stats.vtu_miss != 0,      "no reprojection miss");
    check(n_masked_sent != 0,       "no masked reference pixel");
    check(stats.culled != 0,        "no culled Gaussian");
    check(stats.s2_drop != 0,       "no Stage II drop");
    check(stats.cut_depth != 0,     "no depth truncation");
    check(stats.cut_interp != 0,    "no pair removed for an interpolated tile");
    check(stats.defer != 0,         "no deferred tile");
    check(stats.long_lists != 0,    "no long pair list");
    check(stats.stall != 0,         "no queue stall");
    check(stats.bubble != 0,        "no idle block");
    check(stats.gauss_skip != 0,    "no skipped Gaussian");
    check(n_bp_pr != 0,             "no pair back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog: the test did not finish within %0d cycles", WATCHDOG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
