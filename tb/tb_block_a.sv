// tb_block_a -- self-checking test of Block A (matrix E).
//
// Drives random and extreme 10-bit vectors (the width Block A sees inside
// the 8-bit transform) and compares the four outputs with E x computed from
// the matrix table of the reference package. Combinational: one vector per
// 10 time units; a watchdog fails the run if it does not finish.
module tb_block_a;
  import dct16_ref_pkg::*;

  localparam int WI = 10;
  localparam int NVEC = 5000;

  logic signed [WI-1:0] x [4];
  logic signed [WI+1:0] y [4];

  block_a #(.WI(WI)) dut (.x(x), .y(y));

  int checks = 0, failures = 0;

  initial begin
    #(10 * (NVEC + 10));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xi [4], e [4];
    for (int v = 0; v < NVEC; v++) begin
      for (int i = 0; i < 4; i++) begin
        xi[i] = (v < 16) ? (((v >> i) & 1) != 0 ? (1 <<< (WI-1)) - 1 : -(1 <<< (WI-1)))
                         : rand_signed(WI);
        x[i] = WI'(xi[i]);
      end
      mul_e(xi, e);
      #10;
      for (int r = 0; r < 4; r++) begin
        checks++;
        if (int'(y[r]) != e[r]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d: got %0d expected %0d", r, y[r], e[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
