// tb_block_b -- self-checking test of Block B (odd part O).
//
// Drives random and extreme 9-bit vectors (the width the block sees inside
// the 8-bit transform), including all 256 corner vectors of +/- full scale,
// and compares the eight outputs with the product computed by the reference
// package (mul_o). Combinational: one vector per 10 time units; a watchdog
// fails the run if it does not finish.
module tb_block_b;
  import dct16_ref_pkg::*;

  localparam int WI = 9;
  localparam int NVEC = 5000;

  logic signed [WI-1:0] x [8];
  logic signed [WI+2:0] y [8];

  block_b #(.WI(WI)) dut (.x(x), .y(y));

  int checks = 0, failures = 0;

  initial begin
    #(10 * (NVEC + 10));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xi [8], e [8];
    for (int v = 0; v < NVEC; v++) begin
      for (int i = 0; i < 8; i++) begin
        xi[i] = (v < 256) ? (((v >> i) & 1) != 0 ? (1 <<< (WI-1)) - 1 : -(1 <<< (WI-1)))
                          : rand_signed(WI);
        x[i] = WI'(xi[i]);
      end
      mul_o(xi, e);
      #10;
      for (int r = 0; r < 8; r++) begin
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
