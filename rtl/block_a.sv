// block_a -- Block A of the fast algorithm: the 4x4 "even-odd" matrix E.
//
//          [  0  1  1  1 ]
//     E =  [ -1 -1  0  1 ]      y = E x
//          [  1  0 -1  1 ]
//          [ -1  1 -1  0 ]
//
// Its inputs are outputs 4..7 of the B_8 butterfly; its outputs are the
// coefficients X2, X6, X10 and X14 (in that order). Each row has three
// nonzero entries, so each output is a three-term sum built as (a+b)+c with
// two adders: 8 adders in all, no multipliers or shifts.
//
// Interface: x is 4 signed WI-bit values, y is 4 signed (WI+2)-bit values,
// the smallest width that holds any sum of three inputs.
// Timing: purely combinational, two adder levels.
// The matrix is the published one; the adder order within a row and the
// word widths are this implementation's choice.
module block_a #(
  parameter int unsigned WI = 10
) (
  input  logic signed [WI-1:0] x [4],
  output logic signed [WI+1:0] y [4]
);

  typedef logic signed [WI+1:0] acc_t;

  acc_t a [4];  // sign-extended inputs

  always_comb begin
    for (int unsigned i = 0; i < 4; i++) a[i] = acc_t'(x[i]);
    y[0] =  a[1] + a[2] + a[3];   // X2
    y[1] = -a[0] - a[1] + a[3];   // X6
    y[2] =  a[0] - a[2] + a[3];   // X10
    y[3] = -a[0] + a[1] - a[2];   // X14
  end

endmodule
