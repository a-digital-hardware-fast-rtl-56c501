// dct16_approx -- pipelined 16-point multiplication-free approximate DCT.
//
// Computes X = T x, where T is a 16x16 matrix of 0, +1 and -1 that
// approximates the 16-point DCT (the orthonormal approximation is D T with
// a diagonal D of 1/4, 1/sqrt(14) and 1/(2 sqrt(3)) entries; D is left to the
// quantiser of the codec and is not computed here). The fast algorithm
// factorises T as
//     T = P diag(B_2, B-bar_2, E, O) diag(B_4, I_12) diag(B_8, I_8) B_16
// and uses 72 additions and nothing else:
//     B_16      16 adders  all inputs
//     B_8        8 adders  B_16 outputs 0..7
//     B_4        4 adders  B_8 outputs 0..3
//     B_2        2 adders  -> X0, X8
//     B-bar_2    2 adders  -> X4, X12
//     Block A    8 adders  B_8 outputs 4..7  -> X2, X6, X10, X14
//     Block B   32 adders  B_16 outputs 8..15 -> X1, X3, ..., X15
// P only reorders wires; this module presents X in natural order X0..X15.
//
// Pipeline (this implementation's choice; the published prototype reports
// register counts but not their placement):
//     rank 0  input register            x, in_valid
//     rank 1  after B_16                 (one adder level)
//     rank 2  output register            (up to four adder levels: Block B)
// so a vector presented with in_valid at clock edge k appears on X with
// out_valid after edge k+3 (LATENCY = 3), and a new vector can be accepted
// on every clock.
//
// Interface: x is 16 signed W-bit samples x0..x15; X is 16 signed
// (W+4)-bit coefficients, wide enough for every row of T (at most 16 terms),
// so no result is ever rounded or saturated. rst_n (active low, synchronous)
// clears only the valid pipeline; data registers are not reset.
module dct16_approx
  import dct16_pkg::*;
#(
  parameter int unsigned W = W_DEFAULT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [W-1:0]       x [DCT_N],
  output logic                      out_valid,
  output logic signed [W+GROWTH-1:0] X [DCT_N]
);

  localparam int unsigned WO = W + GROWTH;

  // ---------------------------------------------------------------- rank 0
  logic signed [W-1:0] x_q [DCT_N];
  logic                v_q [LATENCY];  // valid bit of each rank

  always_ff @(posedge clk) begin
    if (in_valid) x_q <= x;
  end

  // --------------------------------------------------------- B_16, rank 1
  logic signed [W:0] s1   [DCT_N];
  logic signed [W:0] s1_q [DCT_N];

  butterfly #(.N(16), .WI(W)) u_b16 (.x(x_q), .y(s1));

  always_ff @(posedge clk) begin
    if (v_q[0]) s1_q <= s1;
  end

  // ------------------------------------------------ even half: B_8, B_4, B_2
  logic signed [W+1:0] s2 [8];  // B_8 outputs
  logic signed [W+2:0] s3 [4];  // B_4 outputs
  logic signed [WO-1:0] z [DCT_N];  // results in flow-graph order (OUT_INDEX)

  butterfly #(.N(8), .WI(W+1)) u_b8 (.x(s1_q[0:7]), .y(s2));
  butterfly #(.N(4), .WI(W+2)) u_b4 (.x(s2[0:3]),   .y(s3));
  butterfly #(.N(2), .WI(W+3)) u_b2 (.x(s3[0:1]),   .y(z[0:1]));
  butterfly #(.N(2), .WI(W+3), .REVERSE_IN(1'b1)) u_b2bar (.x(s3[2:3]), .y(z[2:3]));

  // ------------------------------------------------------ Block A, Block B
  block_a #(.WI(W+2)) u_block_a (.x(s2[4:7]),     .y(z[4:7]));
  block_b #(.WI(W+1)) u_block_b (.x(s1_q[8:15]),  .y(z[8:15]));

  // ------------------------------------------- permutation P, rank 2 (out)
  always_ff @(posedge clk) begin
    if (v_q[1])
      for (int unsigned p = 0; p < DCT_N; p++) X[OUT_INDEX[p]] <= z[p];
  end

  // ------------------------------------------------------ valid pipeline
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < LATENCY; r++) v_q[r] <= 1'b0;
    end else begin
      v_q[0] <= in_valid;
      for (int unsigned r = 1; r < LATENCY; r++) v_q[r] <= v_q[r-1];
    end
  end

  assign out_valid = v_q[LATENCY-1];

  // Every accepted vector leaves exactly LATENCY cycles later.
  a_latency : assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> ##LATENCY out_valid)
    else $error("vector accepted without out_valid %0d cycles later", LATENCY);

endmodule
