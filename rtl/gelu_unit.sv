// gelu_unit: element-wise GELU activation between the MLP hidden and output layers.
//
// The source names a pointwise GELU on each hidden-layer value as it is passed from the
// hidden-layer MACs to the output-layer MACs; how it is computed is not given. This unit uses
// the integer second-order erf approximation known as i-GELU:
//   erf(u) ~ sgn(u) * (1 + a*(min(|u|, -b) + b)^2),  a = -0.2888, b = -1.769
//   GELU(x) = x/2 * (1 + erf(x/sqrt(2)))
// Inputs and outputs are int8 in Q4 fixed point (value/16, range -8 .. +7.94). Internally
// |x|/sqrt(2) is formed as |x|*181/256 (Q4), the bracket in Q8 with a ~ -74/256 and
// b ~ -28/16, and the result rounded back to Q4.
//
// Purely combinational, LANES independent lanes, no latency.
module gelu_unit
  import vita_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  int8_t x [LANES],
  output int8_t y [LANES]
);

  function automatic int8_t gelu_q4(input int8_t xi);
    logic [7:0]         ax;
    logic [15:0]        t;     // |x|/sqrt(2), Q4
    logic [15:0]        c;     // clipped
    logic [15:0]        d;     // 28 - c  (= -(c + b)), Q4
    logic [31:0]        e;     // erf(|u|), Q8
    logic signed [31:0] f;     // 1 + sgn*erf, Q8
    logic signed [31:0] p;
    ax = xi[7] ? 8'(-xi) : 8'(xi);
    if (xi == -8'sd128) ax = 8'd128;
    t  = (16'(ax) * 16'd181 + 16'd128) >> 8;
    c  = (t > 16'd28) ? 16'd28 : t;
    d  = 16'd28 - c;
    e  = 32'd256 - ((32'(d) * 32'(d) * 32'd74 + 32'd128) >> 8);
    f  = xi[7] ? (32'sd256 - $signed(e)) : (32'sd256 + $signed(e));
    p  = 32'(xi) * f;                     // Q4 * Q8 = Q12, halved below
    p  = (p + 32'sd256) >>> 9;
    return p[7:0];
  endfunction

  always_comb
    for (int l = 0; l < int'(LANES); l++) y[l] = gelu_q4(x[l]);

endmodule
