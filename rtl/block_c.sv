// block_c -- Block C of the fast algorithm: the butterfly-friendly part O'
// of the odd matrix, O' = M x (I_4 kron B_2).
//
// First level: four 2-point butterflies on input pairs (0,1) (2,3) (4,5)
// (6,7), giving u0 = x0+x1, u1 = x0-x1, ..., u7 = x6-x7 (8 adders).
// Second level: the sparse 8x8 matrix M, three nonzero entries per row:
//     r0 =  u0 + u4 + u6        r4 = -u2 + u5 - u7
//     r1 = -u0 - u2 + u6        r5 = -u1 + u3 + u4
//     r2 =  u3 - u4 + u6        r6 =  u1 - u5 - u7
//     r3 = -u0 + u2 + u5        r7 = -u1 - u3 - u7
// (two adders per row, 16 adders). Block B adds the correction matrix S to
// these rows to obtain the odd part O of the transform.
//
// Interface: x is 8 signed WI-bit values (outputs 8..15 of B_16), y is 8
// signed (WI+3)-bit values; the largest magnitude is 3*2^WI.
// Timing: purely combinational, three adder levels.
// M and the butterflies are the published factorisation; widths and adder
// order within a row are this implementation's choice.
module block_c #(
  parameter int unsigned WI = 9
) (
  input  logic signed [WI-1:0] x [8],
  output logic signed [WI+2:0] y [8]
);

  typedef logic signed [WI+2:0] acc_t;

  logic signed [WI:0] u [8];  // I_4 kron B_2 outputs
  acc_t               e [8];  // the same, sign-extended

  butterfly #(.N(2), .WI(WI)) u_bf0 (.x(x[0:1]), .y(u[0:1]));
  butterfly #(.N(2), .WI(WI)) u_bf1 (.x(x[2:3]), .y(u[2:3]));
  butterfly #(.N(2), .WI(WI)) u_bf2 (.x(x[4:5]), .y(u[4:5]));
  butterfly #(.N(2), .WI(WI)) u_bf3 (.x(x[6:7]), .y(u[6:7]));

  always_comb begin
    for (int unsigned i = 0; i < 8; i++) e[i] = acc_t'(u[i]);
    y[0] =  e[0] + e[4] + e[6];
    y[1] = -e[0] - e[2] + e[6];
    y[2] =  e[3] - e[4] + e[6];
    y[3] = -e[0] + e[2] + e[5];
    y[4] = -e[2] + e[5] - e[7];
    y[5] = -e[1] + e[3] + e[4];
    y[6] =  e[1] - e[5] - e[7];
    y[7] = -e[1] - e[3] - e[7];
  end

endmodule
