// tb_tait_tile_test -- random tile/ellipse geometry against a floating-point
// strip test: keep the tile when |l . u|/|u| <= R_minor + 8*sqrt(2).
// Cases within 0.05 pixel of the boundary are not judged.
module tb_tait_tile_test;
  logic signed [15:0] cx, cy, mx, my;
  logic signed [31:0] ux, uy;
  logic [15:0] rminor;
  logic keep;
  int checks = 0, failures = 0, kept = 0;
  tait_tile_test dut (.*);
  initial begin
    for (int i = 0; i < 2000; i++) begin
      real dd, lim, ang;
      cx = 16'($urandom_range(0, 40) * 256 + 128);
      cy = 16'($urandom_range(0, 40) * 256 + 128);
      mx = 16'($urandom_range(0, 10000));
      my = 16'($urandom_range(0, 10000));
      ang = $urandom_range(0, 6283) / 1000.0;
      ux = $rtoi($cos(ang) * $urandom_range(1, 100000));
      uy = $rtoi($sin(ang) * $urandom_range(1, 100000));
      if (ux == 0 && uy == 0) ux = 1;
      rminor = 16'($urandom_range(0, 2000));
      #1;
      dd = ((cx - mx) / 16.0 * ux + (cy - my) / 16.0 * uy) / $sqrt(real'(ux) * ux + real'(uy) * uy);
      if (dd < 0) dd = -dd;
      lim = rminor / 16.0 + 181.0 / 16.0;
      if (dd - lim > 0.05 || lim - dd > 0.05) begin
        checks++;
        if (keep !== (dd <= lim)) begin failures++; $display("FAIL dd %f lim %f keep %0d", dd, lim, keep); end
        if (keep) kept++;
      end
    end
    checks++; if (kept == 0) begin failures++; $display("FAIL no tile kept"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
