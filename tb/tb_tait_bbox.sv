// tb_tait_bbox -- random 2D covariances and opacities against floating-point
// references: eigenvalues, k = 2 ln(o) (within the log approximation), R_minor,
// R_major, the tight-box half extents sqrt(k*Sxx), sqrt(k*Syy), and the
// direction of the minor-axis vector.
module tb_tait_bbox;
  logic signed [31:0] ca, cb, cc, lam1, lam2, ux, uy;
  logic [7:0] op;
  logic [15:0] k, rmajor, rminor, hx, hy;
  int checks = 0, failures = 0;
  tait_bbox dut (.*);
  function automatic bit near(real a, real b, real rel, real abst);
    real d; d = (a > b) ? a - b : b - a;
    return d <= abst + rel * ((b > 0) ? b : -b);
  endfunction
  initial begin
    for (int i = 0; i < 300; i++) begin
      real a, b, c, l1, l2, kr, s, vx, vy, nx, ny, cosang;
      a = $urandom_range(1, 4000) / 8.0;          // pixel^2
      c = $urandom_range(1, 4000) / 8.0;
      b = (($urandom_range(0, 1900) / 1000.0) - 0.95) * $sqrt(a * c);
      op = 8'($urandom_range(2, 255));
      ca = $rtoi(a * 256.0); cb = $rtoi(b * 256.0); cc = $rtoi(c * 256.0);
      #1;
      a = ca / 256.0; b = cb / 256.0; c = cc / 256.0;
      s  = $sqrt((a - c) * (a - c) / 4.0 + b * b);
      l1 = (a + c) / 2.0 + s; l2 = (a + c) / 2.0 - s;
      kr = 2.0 * $ln(real'(op));
      checks += 6;
      if (!near(lam1 / 256.0, l1, 0.001, 0.02)) begin failures++; $display("FAIL lam1 %f exp %f", lam1/256.0, l1); end
      if (!near(lam2 / 256.0, l2, 0.001, 0.02)) begin failures++; $display("FAIL lam2 %f exp %f", lam2/256.0, l2); end
      if (!near(k / 4096.0, kr, 0.0, 0.13)) begin failures++; $display("FAIL k %f exp %f (op %0d)", k/4096.0, kr, op); end
      // radii use the unit's own k to isolate the square-root path
      if (!near(rminor / 16.0, $sqrt((k/4096.0) * ((l2 > 0) ? l2 : 0)), 0.01, 0.13)) begin failures++; $display("FAIL rminor %f", rminor/16.0); end
      if (!near(hx / 16.0, $sqrt((k/4096.0) * a), 0.01, 0.13) || !near(hy / 16.0, $sqrt((k/4096.0) * c), 0.01, 0.13)) begin
        failures++; $display("FAIL box %f %f exp %f %f", hx/16.0, hy/16.0, $sqrt((k/4096.0)*a), $sqrt((k/4096.0)*c)); end
      if (!near(rmajor / 16.0, $sqrt((k/4096.0) * l1), 0.01, 0.13)) begin failures++; $display("FAIL rmajor %f", rmajor/16.0); end
      // minor axis: (cov - l2 I) u = 0  ->  u is orthogonal to the major axis direction
      if (s > 0.5) begin
        vx = b; vy = l1 - a;                 // major-axis vector
        if (vx == 0 && vy == 0) begin vx = l1 - c; vy = b; end
        nx = ux / 256.0; ny = uy / 256.0;
        cosang = (vx * nx + vy * ny) / ($sqrt(vx*vx + vy*vy) * $sqrt(nx*nx + ny*ny) + 1e-12);
        checks++;
        if (cosang > 0.02 || cosang < -0.02) begin failures++; $display("FAIL minor axis not orthogonal: cos %f", cosang); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
