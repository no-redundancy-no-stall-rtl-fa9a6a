// tait_bbox -- Stage I of the two-stage accurate intersection test (TAIT).
// From the 2D covariance [a b; b c] (8 fractional bits) and the opacity code it
// computes, combinationally:
//   lambda1,2 = (a+c)/2 +- sqrt(((a-c)/2)^2 + b^2)         eigenvalues
//   k         = 2 ln(o/tau)                                 (ln_unit)
//   R_major   = sqrt(k*lambda1), R_minor = sqrt(k*lambda2)  Eq. 4
//   hx = sqrt(k*a), hy = sqrt(k*c)                          half width / height of the tight box
//   u         = minor-axis eigenvector, not normalised, 8 fractional bits
// The paper's Eq. 6 gives W = 2 sqrt(Sx/l1) R_major, which is exactly 2 sqrt(k*a);
// its H uses sqrt(Sy/l2) R_major, which does not follow from the extrema of
// Eq. 5; the extrema give 2 sqrt(k*c), which is what is built (see README).
// Output radii and half extents are in pixels, Q.4. u is (b, l2-a) when a>=c and
// (l2-c, b) otherwise, whichever cannot vanish.
module tait_bbox (
  input  logic signed [31:0] ca,
  input  logic signed [31:0] cb,
  input  logic signed [31:0] cc,
  input  logic [7:0]         op,
  output logic [15:0]        k,        // Q4.12
  output logic signed [31:0] lam1,     // Q.8
  output logic signed [31:0] lam2,     // Q.8
  output logic [15:0]        rmajor,   // Q.4 pixels
  output logic [15:0]        rminor,   // Q.4 pixels
  output logic [15:0]        hx,       // Q.4 pixels
  output logic [15:0]        hy,       // Q.4 pixels
  output logic signed [31:0] ux,       // Q.8
  output logic signed [31:0] uy        // Q.8
);
  logic signed [31:0] half, mid;
  logic [63:0] disc;
  logic [31:0] s;
  logic [31:0] l1p, l2p, ap, cp;
  logic [31:0] q_maj, q_min, q_x, q_y;

  ln_unit u_ln (.op(op), .k(k));

  assign half = (ca - cc) >>> 1;
  assign mid  = (ca + cc) >>> 1;
  assign disc = 64'(half * half) + 64'(cb * cb);           // Q.16
  isqrt #(.W(64)) u_sq_disc (.x(disc), .y(s));             // Q.8
  assign lam1 = mid + $signed(s);
  assign lam2 = mid - $signed(s);
  assign l1p = lam1[31] ? 32'd0 : lam1;
  assign l2p = lam2[31] ? 32'd0 : lam2;
  assign ap  = ca[31] ? 32'd0 : ca;
  assign cp  = cc[31] ? 32'd0 : cc;
  // k (Q.12) * value (Q.8) = Q.20; >> 12 -> Q.8; sqrt -> Q.4
  function automatic logic [31:0] kmul(input logic [15:0] kk, input logic [31:0] v);
    logic [47:0] p;
    p = kk * v;
    return (p[47:44] != 4'd0) ? 32'hFFFF_FFFF : p[43:12];
  endfunction
  assign q_maj = kmul(k, l1p);
  assign q_min = kmul(k, l2p);
  assign q_x   = kmul(k, ap);
  assign q_y   = kmul(k, cp);
  isqrt #(.W(32)) u_sq_maj (.x(q_maj), .y(rmajor));
  isqrt #(.W(32)) u_sq_min (.x(q_min), .y(rminor));
  isqrt #(.W(32)) u_sq_x   (.x(q_x),   .y(hx));
  isqrt #(.W(32)) u_sq_y   (.x(q_y),   .y(hy));

  always_comb begin
    if (ca >= cc) begin
      ux = cb;
      uy = lam2 - ca;
    end else begin
      ux = lam2 - cc;
      uy = cb;
    end
  end
endmodule
