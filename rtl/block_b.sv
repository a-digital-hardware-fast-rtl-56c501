// block_b -- Block B of the fast algorithm: the odd part O of the transform.
//
// O has zeros in places that prevent a butterfly decomposition, so it is
// split as O = O' + S. Block C computes O' x; S has a single +1 or -1 per
// row, so S x costs one extra adder per output, fed by a bypass line from
// one Block B input:
//     y0 = c0 + x3    y1 = c1 + x5    y2 = c2 + x1    y3 = c3 + x7
//     y4 = c4 + x0    y5 = c5 - x6    y6 = c6 + x2    y7 = c7 - x4
// The outputs are the odd coefficients X1, X3, X5, ..., X15 in that order.
//
// Interface: x is 8 signed WI-bit values (outputs 8..15 of B_16), y is 8
// signed (WI+3)-bit values (largest magnitude 3.5*2^WI).
// Timing: purely combinational, four adder levels (three in Block C).
// S is the published correction matrix with its duplicated second row
// dropped (the 8-row version is the one for which O' + S equals O); widths
// are this implementation's choice.
module block_b #(
  parameter int unsigned WI = 9
) (
  input  logic signed [WI-1:0] x [8],
  output logic signed [WI+2:0] y [8]
);

  typedef logic signed [WI+2:0] acc_t;

  acc_t c [8];  // O' x from Block C
  acc_t s [8];  // sign-extended bypass inputs

  block_c #(.WI(WI)) u_block_c (.x(x), .y(c));

  always_comb begin
    for (int unsigned i = 0; i < 8; i++) s[i] = acc_t'(x[i]);
    y[0] = c[0] + s[3];
    y[1] = c[1] + s[5];
    y[2] = c[2] + s[1];
    y[3] = c[3] + s[7];
    y[4] = c[4] + s[0];
    y[5] = c[5] - s[6];
    y[6] = c[6] + s[2];
    y[7] = c[7] - s[4];
  end

endmodule
