// tb_ccu -- drives projected Gaussians into the CCU and checks the emitted
// Gaussian-tile pairs against a floating-point model of the two-stage test:
// every tile that is certainly inside the tight box and the strip must be
// emitted, none that is certainly outside may be (tiles within 0.15 pixel of
// a boundary are not judged). Opacity codes are powers of two, where the log
// operator is exact. Also checks the conic, the culling rules, the
// counters and one pair per cycle when the output is always ready.
module tb_ccu;
  import ls_pkg::*;
  localparam int TX = 8, TY = 6;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  gauss_proj_t in_g;
  pair_t out_pair;
  logic [31:0] n_culled, n_dropped;
  int checks = 0, failures = 0, exp_culled = 0;
  always #5 clk = ~clk;
  ccu #(.TILES_X(TX), .TILES_Y(TY)) dut (.*);

  // 0: certainly out, 1: certainly in, 2: undecided
  function automatic int classify(gauss_proj_t g, int tx, int ty);
    real a, b, c, mx, my, kk, s, l2, hx, hy, ux, uy, ccx, ccy, dd, lim, m;
    a = g.ca / 256.0; b = g.cb / 256.0; c = g.cc / 256.0; mx = g.mx / 16.0; my = g.my / 16.0;
    kk = 2.0 * $ln(real'(g.op));
    s = $sqrt((a - c) * (a - c) / 4.0 + b * b); l2 = (a + c) / 2.0 - s;
    hx = $sqrt(kk * a); hy = $sqrt(kk * c);
    // box: tile tx is in when floor((mx-hx)/16) <= tx <= floor((mx+hx)/16)
    m = 0.15;
    if (tx * 16.0 > mx + hx + m || (tx + 1) * 16.0 < mx - hx - m) return 0;
    if (ty * 16.0 > my + hy + m || (ty + 1) * 16.0 < my - hy - m) return 0;
    if (tx * 16.0 > mx + hx - m || (tx + 1) * 16.0 < mx - hx + m) return 2;
    if (ty * 16.0 > my + hy - m || (ty + 1) * 16.0 < my - hy + m) return 2;
    if (a >= c) begin ux = b; uy = l2 - a; end else begin ux = l2 - c; uy = b; end
    ccx = tx * 16.0 + 8.0; ccy = ty * 16.0 + 8.0;
    if (ux * ux + uy * uy < 1e-9) return 1;
    dd = ((ccx - mx) * ux + (ccy - my) * uy) / $sqrt(ux * ux + uy * uy);
    if (dd < 0) dd = -dd;
    lim = $sqrt(kk * ((l2 > 0) ? l2 : 0)) + 8.0 * $sqrt(2.0);
    if (dd > lim + m) return 0;
    if (dd < lim - m) return 1;
    return 2;
  endfunction

  gauss_proj_t cur;
  logic [TX*TY-1:0] got;
  int npairs = 0;

  task automatic finish_gauss();
    for (int ty = 0; ty < TY; ty++)
      for (int tx = 0; tx < TX; tx++) begin
        int cl; cl = classify(cur, tx, ty);
        if (cl != 2) begin
          checks++;
          if (got[ty*TX+tx] != (cl == 1)) begin
            failures++; $display("FAIL gauss mx=%0d my=%0d tile (%0d,%0d): got %0d class %0d", cur.mx, cur.my, tx, ty, got[ty*TX+tx], cl);
          end
        end
      end
  endtask

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    real det, qa;
    got[out_pair.tile] <= 1'b1;
    npairs++;
    det = (cur.ca / 256.0) * (cur.cc / 256.0) - (cur.cb / 256.0) * (cur.cb / 256.0);
    qa  = (cur.cc / 256.0) / det;
    if (out_pair.g.mx !== cur.mx || out_pair.g.depth !== cur.depth || out_pair.g.col !== cur.col) begin
      failures++; $display("FAIL pair payload");
    end
    if ((out_pair.g.qa / 65536.0 - qa) > 0.01 * qa + 0.0001 || (qa - out_pair.g.qa / 65536.0) > 0.01 * qa + 0.0001) begin
      failures++; $display("FAIL conic %f exp %f", out_pair.g.qa / 65536.0, qa);
    end
  end

  task automatic send(gauss_proj_t g, bit expect_cull);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_g = g; in_valid = 1;
    @(negedge clk); in_valid = 0;
    cur = g; got = '0;
    if (expect_cull) exp_culled++;
    repeat (2) @(negedge clk);
    while (busy) @(negedge clk);
    @(negedge clk);
    if (!expect_cull) finish_gauss();
    else begin checks++; if (got != 0) begin failures++; $display("FAIL culled Gaussian produced pairs"); end end
  endtask

  initial begin
    gauss_proj_t g;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      real a, c, b;
      out_ready = 1;
      a = $urandom_range(4, 2400) / 8.0; c = $urandom_range(4, 2400) / 8.0;
      b = (($urandom_range(0, 1800) / 1000.0) - 0.9) * $sqrt(a * c);
      g.mx = 16'($urandom_range(0, TX * 256)); g.my = 16'($urandom_range(0, TY * 256));
      g.ca = $rtoi(a * 256); g.cb = $rtoi(b * 256); g.cc = $rtoi(c * 256);
      g.op = 8'(2 << $urandom_range(0, 6)); g.col = 24'($urandom); g.depth = 16'($urandom_range(100, 5000));
      send(g, 0);
    end
    // random back-pressure
    for (int i = 0; i < 20; i++) begin
      fork
        begin repeat (400) begin @(negedge clk); out_ready = ($urandom_range(0, 2) != 0); end end
      join_none
      g.mx = 16'($urandom_range(0, TX * 256)); g.my = 16'($urandom_range(0, TY * 256));
      g.ca = 32'(200 * 256); g.cb = 32'(120 * 256); g.cc = 32'(90 * 256);
      g.op = 8'd128; g.col = 24'($urandom); g.depth = 16'(1000);
      send(g, 0);
      disable fork; out_ready = 1;
    end
    // culling
    g.mx = 16'(300); g.my = 16'(300); g.ca = 32'(50 * 256); g.cb = 0; g.cc = 32'(50 * 256); g.col = 0; g.depth = 16'(1000);
    g.op = 0; send(g, 1);
    g.op = 64; g.depth = 16'(10); send(g, 1);
    g.depth = 16'(1000); g.cb = 32'(60 * 256); send(g, 1);                  // not positive definite
    g.cb = 0; g.mx = -16'sd2000; send(g, 1);                                 // left of the screen
    g.mx = 16'(300); g.my = 16'(TY * 256 + 2000); send(g, 1);                // below the screen
    checks++; if (n_culled != 32'(exp_culled)) begin failures++; $display("FAIL culled %0d exp %0d", n_culled, exp_culled); end
    checks++; if (n_dropped == 0) begin failures++; $display("FAIL Stage II never dropped a tile"); end
    // throughput: a round Gaussian over radius 23.5 px at (48,48): tiles 1..4 in x and y, all kept -> 16 pairs on 16 consecutive cycles
    begin
      int first, last, cnt;
      g.mx = 16'(3 * 256); g.my = 16'(3 * 256); g.ca = 32'(100 * 256); g.cb = 0; g.cc = 32'(100 * 256);
      g.op = 8'd16; g.depth = 16'(1000);
      cur = g;
      @(negedge clk); in_g = g; in_valid = 1; @(negedge clk); in_valid = 0;
      first = -1; cnt = 0;
      for (int cyc = 0; cyc < 40; cyc++) begin
        if (out_valid) begin if (first < 0) first = cyc; last = cyc; cnt++; end
        @(negedge clk);
      end
      checks++; if (cnt != 16 || last - first != 15) begin failures++; $display("FAIL rate: %0d pairs over %0d cycles", cnt, last - first + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
