// tb_dct16_2d -- image-block workload: the separable 2-D transform
// T K T^T of 16x16 blocks of an 8-bit greyscale image, computed with two
// instances of the 1-D core.
//
// A 512x512 test image is generated procedurally (smooth gradients, a
// sharp-edged disc and noise) and level-shifted by -128 so that pixels are
// signed 8-bit samples. For each of its 1024 blocks the 16 rows are
// streamed back-to-back through an 8-bit core (row pass, R = K T^T); the
// testbench transposes R and streams its 16 columns through a 12-bit core
// (column pass, 12 = 8 + 4 bits of growth from the first pass). The result
// T K T^T is compared coefficient by coefficient with the product of the
// matrix tables of the reference package. The transpose between the passes
// belongs to the testbench, not to the core. Counts: blocks, the number of
// full back-to-back bursts of 16 vectors; a watchdog stops a run that hangs.
module tb_dct16_2d;
  import dct16_pkg::*;
  import dct16_ref_pkg::*;

  localparam int W1 = W_DEFAULT;        // row pass input width
  localparam int W2 = W1 + GROWTH;      // column pass input width
  localparam int IMG = 512;
  localparam int NBLK = (IMG / 16) * (IMG / 16);

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid1 = 1'b0, in_valid2 = 1'b0;
  logic signed [W1-1:0]        x1 [16];
  logic signed [W2-1:0]        x2 [16];
  logic                        out_valid1, out_valid2;
  logic signed [W1+GROWTH-1:0] y1 [16];
  logic signed [W2+GROWTH-1:0] y2 [16];

  dct16_approx                    u_row (.clk, .rst_n, .in_valid(in_valid1), .x(x1),
                                         .out_valid(out_valid1), .X(y1));
  dct16_approx #(.W(W2))          u_col (.clk, .rst_n, .in_valid(in_valid2), .x(x2),
                                         .out_valid(out_valid2), .X(y2));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n1 = 0, n2 = 0;                 // vectors collected from each pass
  int R  [16][16];                    // row pass result, R[row][k]
  int Y  [16][16];                    // column pass result, Y[k][col]
  int n_bursts = 0;

  always @(posedge clk) begin
    if (out_valid1) begin
      for (int k = 0; k < 16; k++) R[n1][k] <= int'(y1[k]);
      n1 <= n1 + 1;
    end
    if (out_valid2) begin
      for (int k = 0; k < 16; k++) Y[k][n2] <= int'(y2[k]);
      n2 <= n2 + 1;
    end
  end

  initial begin
    repeat (NBLK * 60 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Procedural 8-bit test image.
  function automatic int pixel(int r, int c);
    int v = (r / 2 + c / 3 + 40);
    int dr = r - 200, dc = c - 300;
    if (dr * dr + dc * dc < 90 * 90) v = 230 - (r % 16);
    if (((r / 64) + (c / 64)) % 5 == 0) v = v ^ ((r * 7 + c * 13) & 31);
    v += int'($urandom % 9) - 4;
    if (v < 0) v = 0;
    if (v > 255) v = 255;
    return v;
  endfunction

  initial begin
    int K [16][16];
    int tmp [16][16];
    int ref2 [16][16];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++) begin
      automatic int br = (b / (IMG / 16)) * 16;
      automatic int bc = (b % (IMG / 16)) * 16;
      for (int r = 0; r < 16; r++)
        for (int c = 0; c < 16; c++) K[r][c] = pixel(br + r, bc + c) - 128;
      // reference: ref2 = T K T^T
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          tmp[i][j] = 0;
          for (int k = 0; k < 16; k++) tmp[i][j] += T_MAT[i][k] * K[k][j];
        end
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          ref2[i][j] = 0;
          for (int k = 0; k < 16; k++) ref2[i][j] += tmp[i][k] * T_MAT[j][k];
        end
      // row pass
      @(negedge clk);
      n1 = 0;
      for (int r = 0; r < 16; r++) begin
        in_valid1 = 1'b1;
        for (int c = 0; c < 16; c++) x1[c] = W1'(K[r][c]);
        @(negedge clk);
      end
      in_valid1 = 1'b0;
      while (n1 < 16) @(negedge clk);
      // column pass on the transposed row results
      n2 = 0;
      for (int col = 0; col < 16; col++) begin
        in_valid2 = 1'b1;
        for (int r = 0; r < 16; r++) x2[r] = W2'(R[r][col]);
        @(negedge clk);
      end
      in_valid2 = 1'b0;
      while (n2 < 16) @(negedge clk);
      n_bursts += 2;
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          checks++;
          if (Y[i][j] != ref2[i][j]) begin
            failures++;
            if (failures < 10)
              $display("FAIL block %0d coef (%0d,%0d): got %0d expected %0d",
                       b, i, j, Y[i][j], ref2[i][j]);
          end
        end
    end
    checks++;
    if (n_bursts != 2 * NBLK) failures++;
    $display("blocks %0d, 16-vector bursts %0d", NBLK, n_bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
