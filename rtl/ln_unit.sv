// ln_unit -- natural-log operator for the CCU: k = 2*ln(o), o an 8-bit opacity code.
// With the alpha threshold tau = 1/255 mapped onto opacity code 1, the paper's
// factor 2*ln(o_i/tau) of Eq. 4 becomes 2*ln(o). The logarithm is Mitchell's
// approximation: log2(o) ~ p + (o - 2^p)/2^p with p the leading-one position,
// then scaled by 2*ln(2). The approximation (max error 0.086 in log2) is this
// design's choice; the paper only says a logarithm operator is added.
// Interface: op (8 bit, 0 gives 0) -> k, unsigned Q4.12. Combinational.
module ln_unit (
  input  logic [7:0]  op,
  output logic [15:0] k
);
  localparam logic [15:0] TWO_LN2_Q12 = 16'd5678;   // 2*ln(2) * 4096
  always_comb begin
    logic [2:0]  p;
    logic [7:0]  mant;      // (o - 2^p) / 2^p in Q.7
    logic [10:0] log2_q7;   // Q3.7
    logic [26:0] prod;
    p = '0;
    for (int i = 0; i < 8; i++) if (op[i]) p = 3'(i);
    mant    = 8'((op ^ (8'd1 << p)) << (3'd7 - p));
    log2_q7 = {1'b0, p, 7'd0} + {3'd0, mant};
    prod    = log2_q7 * TWO_LN2_Q12;            // Q.19
    k       = (op == 8'd0) ? 16'd0 : prod[22:7];
  end
endmodule
