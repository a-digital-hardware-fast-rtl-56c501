// tb_butterfly -- self-checking test of the butterfly stage.
//
// Instantiates B_16, B_8 and B_4 on 8-bit inputs, B_2 and the input-reversed
// B-bar_2 on 11-bit inputs, drives random and extreme vectors and compares
// every output with a product by the matrix [I Ibar; Ibar -I] (times the
// anti-diagonal identity for B-bar_2) built from its block definition.
// The blocks are combinational: inputs change every 10 time units. A
// watchdog ends the run with a failure if it does not finish in time.
module tb_butterfly;
  import dct16_ref_pkg::*;

  localparam int W  = 8;
  localparam int W2 = 11;
  localparam int NVEC = 2000;

  logic signed [W-1:0]  x16 [16];
  logic signed [W:0]    y16 [16];
  logic signed [W-1:0]  x8  [8];
  logic signed [W:0]    y8  [8];
  logic signed [W-1:0]  x4  [4];
  logic signed [W:0]    y4  [4];
  logic signed [W2-1:0] x2  [2];
  logic signed [W2:0]   y2  [2];
  logic signed [W2:0]   y2r [2];

  butterfly #(.N(16), .WI(W))  dut16 (.x(x16), .y(y16));
  butterfly #(.N(8),  .WI(W))  dut8  (.x(x8),  .y(y8));
  butterfly #(.N(4),  .WI(W))  dut4  (.x(x4),  .y(y4));
  butterfly #(.N(2),  .WI(W2)) dut2  (.x(x2),  .y(y2));
  butterfly #(.N(2),  .WI(W2), .REVERSE_IN(1'b1)) dut2r (.x(x2), .y(y2r));

  int checks = 0, failures = 0;

  // Entry (r, c) of B_n = [I_{n/2} Ibar_{n/2}; Ibar_{n/2} -I_{n/2}].
  function automatic int bn(int n, int r, int c);
    int h = n / 2;
    int br = r % h, bc = c % h;
    bit diag = (br == bc), anti = (br + bc == h - 1);
    if (r < h && c < h)   return diag ? 1 : 0;
    if (r < h && c >= h)  return anti ? 1 : 0;
    if (r >= h && c < h)  return anti ? 1 : 0;
    return diag ? -1 : 0;
  endfunction

  task automatic check(string name, int n, int r, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s row %0d: got %0d expected %0d", name, r, got, exp);
    end
  endtask

  initial begin
    #(10 * (NVEC + 10));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xi [16];
    for (int v = 0; v < NVEC; v++) begin
      for (int i = 0; i < 16; i++) xi[i] = (v == 0) ? -(1 <<< (W-1)) :
                                           (v == 1) ? (1 <<< (W-1)) - 1 : rand_signed(W);
      for (int i = 0; i < 16; i++) x16[i] = W'(xi[i]);
      for (int i = 0; i < 8; i++)  x8[i]  = W'(xi[i]);
      for (int i = 0; i < 4; i++)  x4[i]  = W'(xi[15-i]);
      x2[0] = W2'(rand_signed(W2));
      x2[1] = W2'(rand_signed(W2));
      #10;
      for (int r = 0; r < 16; r++) begin
        automatic int e = 0;
        for (int c = 0; c < 16; c++) e += bn(16, r, c) * int'(x16[c]);
        check("B16", 16, r, int'(y16[r]), e);
      end
      for (int r = 0; r < 8; r++) begin
        automatic int e = 0;
        for (int c = 0; c < 8; c++) e += bn(8, r, c) * int'(x8[c]);
        check("B8", 8, r, int'(y8[r]), e);
      end
      for (int r = 0; r < 4; r++) begin
        automatic int e = 0;
        for (int c = 0; c < 4; c++) e += bn(4, r, c) * int'(x4[c]);
        check("B4", 4, r, int'(y4[r]), e);
      end
      // B_2 = [1 1; 1 -1]; B-bar_2 = B_2 Ibar_2 = [1 1; -1 1]
      check("B2",    2, 0, int'(y2[0]),  int'(x2[0]) + int'(x2[1]));
      check("B2",    2, 1, int'(y2[1]),  int'(x2[0]) - int'(x2[1]));
      check("B2bar", 2, 0, int'(y2r[0]), int'(x2[0]) + int'(x2[1]));
      check("B2bar", 2, 1, int'(y2r[1]), int'(x2[1]) - int'(x2[0]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
