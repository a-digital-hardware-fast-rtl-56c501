// butterfly -- one N-point butterfly stage B_N of the fast algorithm.
//
// B_N = [ I  Ibar ; Ibar  -I ] (blocks of size N/2, Ibar the anti-diagonal
// identity), so for i < N/2
//     y[i]       = x[i]       + x[N-1-i]
//     y[N/2 + i] = x[N/2-1-i] - x[N/2+i]
// With REVERSE_IN = 1 the input vector is reversed first, which realises
// B_N x Ibar_N; for N = 2 that is the matrix B-bar_2 = [1 1; -1 1] used for
// coefficients X4 and X12.
//
// Interface: x is N signed WI-bit samples, y is N signed (WI+1)-bit sums.
// Timing: purely combinational, N adders/subtractors in one level.
// The matrices come from the published factorisation; the one-bit growth
// per stage (no rounding, no saturation) is this implementation's choice.
module butterfly #(
  parameter int unsigned N          = 16,
  parameter int unsigned WI         = 8,
  parameter bit          REVERSE_IN = 1'b0
) (
  input  logic signed [WI-1:0] x [N],
  output logic signed [WI:0]   y [N]
);

  localparam int unsigned H = N / 2;

  logic signed [WI:0] v [N];  // sign-extended, optionally reversed inputs

  always_comb begin
    for (int unsigned i = 0; i < N; i++)
      v[i] = REVERSE_IN ? (WI+1)'(x[N-1-i]) : (WI+1)'(x[i]);
    for (int unsigned i = 0; i < H; i++) begin
      y[i]     = v[i]       + v[N-1-i];
      y[H + i] = v[H-1-i]   - v[H+i];
    end
  end

endmodule
