// tb_reproj_unit -- reprojects random reference pixels through a rotated and
// translated camera and compares the target pixel, depth and truncated depth
// with a floating-point model; checks masked and off-screen pixels, order
// under random back-pressure, and the three-cycle latency.
module tb_reproj_unit;
  import ls_pkg::*;
  localparam int W = 128, H = 96;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 1, out_hit;
  cam_t cam;
  ref_pix_t in_pix;
  tgt_pix_t out_pix;
  int checks = 0, failures = 0;
  real f = 100.0, pcx = 64.0, pcy = 48.0, th = 0.03, tx = 0.1, ty = -0.05, tz = 0.08;
  always #5 clk = ~clk;
  reproj_unit #(.IMG_W(W), .IMG_H(H)) dut (.*);

  function automatic logic signed [31:0] q16(real v); return $rtoi(v * 65536.0); endfunction

  ref_pix_t sent [$];

  task automatic model(input ref_pix_t p, output bit hit, output bit judge, output int u, output int v, output real z, output real zm);
    real rx, ry, X, Y, Z, Xm, Ym, Zm, X2, Y2, Z2, Z2m, qx, qy, uf, vf;
    rx = (p.x + 0.5) * (q16(1/f) / 65536.0) + q16(-pcx/f) / 65536.0;
    ry = (p.y + 0.5) * (q16(1/f) / 65536.0) + q16(-pcy/f) / 65536.0;
    X = rx * p.depth / 256.0; Y = ry * p.depth / 256.0; Z = p.depth / 256.0;
    Xm = rx * p.dmax / 256.0; Zm = p.dmax / 256.0;
    X2 = $cos(th) * X + $sin(th) * Z + tx; Y2 = Y + ty; Z2 = -$sin(th) * X + $cos(th) * Z + tz;
    Z2m = -$sin(th) * Xm + $cos(th) * Zm + tz;
    uf = f * X2 / Z2 + pcx; vf = f * Y2 / Z2 + pcy;
    u = $floor(uf); v = $floor(vf); z = Z2; zm = Z2m;
    hit = !p.masked && Z2 > 0 && uf >= 0 && uf < W && vf >= 0 && vf < H;
    judge = (uf - $floor(uf) > 0.03) && (uf - $floor(uf) < 0.97) && (vf - $floor(vf) > 0.03) && (vf - $floor(vf) < 0.97);
  endtask

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    ref_pix_t p; bit hit, judge; int u, v; real z, zm;
    p = sent.pop_front();
    model(p, hit, judge, u, v, z, zm);
    if (judge) begin
      checks++;
      if (out_hit !== hit) begin failures++; $display("FAIL hit %0d exp %0d (x %0d y %0d)", out_hit, hit, p.x, p.y); end
      else if (hit) begin
        checks++;
        if (out_pix.x != 12'(u) || out_pix.y != 12'(v) || out_pix.col !== p.col ||
            (out_pix.depth / 256.0 - z) > 0.02 || (z - out_pix.depth / 256.0) > 0.02 ||
            (out_pix.dmax / 256.0 - zm) > 0.02 || (zm - out_pix.dmax / 256.0) > 0.02) begin
          failures++; $display("FAIL pix (%0d,%0d)->(%0d,%0d) exp (%0d,%0d) z %f exp %f zm %f exp %f", p.x, p.y,
            out_pix.x, out_pix.y, u, v, out_pix.depth/256.0, z, out_pix.dmax/256.0, zm);
        end
      end
    end
  end

  initial begin
    cam = '0;
    cam.kinv_ref[0] = q16(1/f); cam.kinv_ref[2] = q16(-pcx/f);
    cam.kinv_ref[4] = q16(1/f); cam.kinv_ref[5] = q16(-pcy/f); cam.kinv_ref[8] = q16(1);
    cam.rt[0] = q16($cos(th)); cam.rt[2] = q16($sin(th)); cam.rt[3] = q16(tx);
    cam.rt[5] = q16(1); cam.rt[7] = q16(ty);
    cam.rt[8] = q16(-$sin(th)); cam.rt[10] = q16($cos(th)); cam.rt[11] = q16(tz);
    cam.k_tgt[0] = q16(f); cam.k_tgt[2] = q16(pcx); cam.k_tgt[4] = q16(f); cam.k_tgt[5] = q16(pcy);
    cam.k_tgt[8] = q16(1);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      out_ready = (i < 300) ? 1'b1 : ($urandom_range(0, 2) != 0);
      in_pix.x = 12'($urandom_range(0, W - 1)); in_pix.y = 12'($urandom_range(0, H - 1));
      in_pix.depth = 16'($urandom_range(256, 2560)); in_pix.dmax = 16'(in_pix.depth + $urandom_range(0, 500));
      in_pix.col = 24'($urandom); in_pix.masked = ($urandom_range(0, 9) == 0);
      in_valid = 1;
      #1; if (in_ready) sent.push_back(in_pix);
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (6) @(negedge clk);
    checks++; if (sent.size() != 0) begin failures++; $display("FAIL %0d pixels never came out", sent.size()); end
    // latency: a single pixel appears three cycles after it is accepted
    begin
      int lat;
      @(negedge clk); in_pix.x = 10; in_pix.y = 10; in_pix.depth = 16'd512; in_pix.dmax = 16'd600; in_pix.masked = 0;
      in_valid = 1; sent.push_back(in_pix); @(negedge clk); in_valid = 0; lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++; if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
