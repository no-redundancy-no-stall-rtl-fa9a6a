// tait_tile_test -- Stage II of the two-stage accurate intersection test.
// The vector l from the ellipse centre to the tile centre is projected on the
// minor axis; the tile is dropped when that distance exceeds R_minor by more
// than the tile's circumradius r = 8*sqrt(2) pixels, i.e. when the tile lies
// wholly outside the strip of half-width R_minor + r around the major axis.
// The paper prints the rule as |l|cos(theta) + r > R_minor; with "+r" it would
// drop tiles the ellipse does overlap, so this design uses |l|cos(theta) - r >
// R_minor, which is the strip drawn in the paper's figure (see README).
// No division or normalisation: with u the unnormalised minor-axis vector the
// test is (l.u)^2 > (R_minor + r)^2 |u|^2. Combinational.
module tait_tile_test (
  input  logic signed [15:0] cx,      // tile centre x, Q12.4
  input  logic signed [15:0] cy,      // tile centre y, Q12.4
  input  logic signed [15:0] mx,      // ellipse centre, Q12.4
  input  logic signed [15:0] my,
  input  logic signed [31:0] ux,      // minor-axis vector, Q.8
  input  logic signed [31:0] uy,
  input  logic [15:0]        rminor,  // Q.4
  output logic               keep
);
  localparam logic [15:0] R_TILE_Q4 = 16'd181;   // 8*sqrt(2) = 11.31 px in Q.4
  logic signed [16:0]  dx, dy;
  logic signed [49:0]  dot;          // Q.12
  logic [99:0]         lhs;          // Q.24
  logic [16:0]         rr;           // Q.4
  logic [33:0]         rr2;          // Q.8
  logic [64:0]         un2;          // Q.16
  logic [99:0]         rhs;          // Q.24
  assign dx  = 17'(cx) - 17'(mx);
  assign dy  = 17'(cy) - 17'(my);
  logic signed [49:0]  dxw, dyw, uxw, uyw;
  logic signed [99:0]  dotw;
  logic signed [64:0]  uxs, uys;
  assign dxw = 50'(dx); assign dyw = 50'(dy); assign uxw = 50'(ux); assign uyw = 50'(uy);
  assign dot  = dxw * uxw + dyw * uyw;
  assign dotw = 100'(dot);
  assign lhs  = $unsigned(dotw * dotw);
  assign rr  = 17'(rminor) + 17'(R_TILE_Q4);
  assign rr2 = rr * rr;
  assign uxs = 65'(ux); assign uys = 65'(uy);
  assign un2 = $unsigned(uxs * uxs + uys * uys);
  assign rhs = 100'(rr2) * 100'(un2);
  assign keep = (lhs <= rhs);
endmodule
