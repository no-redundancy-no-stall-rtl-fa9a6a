// isqrt -- combinational integer square root, floor(sqrt(x)).
// Digit-by-digit (restoring) method, one result bit per iteration of an
// unrolled loop. Used as the square-root operator the CCU gains for the
// two-stage intersection test. Interface: x (W bits, unsigned) -> y (W/2 bits).
// Purely combinational; callers register the result.
module isqrt #(
  parameter int W = 32            // input width, even
) (
  input  logic [W-1:0]   x,
  output logic [W/2-1:0] y
);
  always_comb begin
    logic [W-1:0]   rem;
    logic [W/2-1:0] root;
    logic [W+1:0]   trial;
    logic [W+1:0]   acc;
    rem  = x;
    root = '0;
    acc  = '0;
    for (int i = W/2-1; i >= 0; i--) begin
      acc   = {acc[W-1:0], rem[W-1:W-2]};
      rem   = {rem[W-3:0], 2'b00};
      trial = ({2'b00, {(W/2){1'b0}}, root} << 2) | 'd1;
      if (acc >= trial) begin
        acc  = acc - trial;
        root = {root[W/2-2:0], 1'b1};
      end else begin
        root = {root[W/2-2:0], 1'b0};
      end
    end
    y = root;
  end
endmodule
