// dct16_width_checker -- test driver for one dct16_approx core of a given
// input word length W.
//
// After reset it streams NVEC vectors (random values and full-scale
// extremes, with an idle cycle now and then) into its own core instance,
// keeps the expected T x of every accepted vector in a queue, and compares
// each result that comes out, checking that it arrives exactly LATENCY
// cycles after it went in. checks and failures count the comparisons;
// done rises when every vector has come back. Used by tb_dct16_widths.
module dct16_width_checker
  import dct16_pkg::*;
  import dct16_ref_pkg::*;
#(
  parameter int W    = 8,
  parameter int NVEC = 2000
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int WO = W + GROWTH;

  typedef struct {
    int due;
    int coef [16];
  } exp_t;

  logic                 in_valid;
  logic signed [W-1:0]  x [16];
  logic                 out_valid;
  logic signed [WO-1:0] X [16];

  dct16_approx #(.W(W)) dut (.*);

  exp_t q [$];
  int   cycle;
  int   sent;

  // values are drawn as W-bit signed numbers; int holds them for W <= 31
  function automatic int draw(int mode, int r, int i);
    case (mode)
      0: return -(1 <<< (W-1));
      1: return (1 <<< (W-1)) - 1;
      2: return (T_MAT[r][i] < 0) ? -(1 <<< (W-1)) : (1 <<< (W-1)) - 1;
      default: return rand_signed(W);
    endcase
  endfunction

  initial begin
    int xi [16];
    int mode;
    exp_t e;
    exp_t got;
    in_valid = 1'b0;
    done     = 1'b0;
    checks   = 0;
    failures = 0;
    cycle    = 0;
    sent     = 0;
    foreach (x[i]) x[i] = '0;
    @(negedge clk);
    while (!rst_n) @(negedge clk);
    while (sent < NVEC || q.size() > 0) begin
      // check what is visible now
      checks++;
      if (q.size() > 0 && q[0].due == cycle) begin
        got = q.pop_front();
        if (!out_valid) failures++;
        for (int k = 0; k < 16; k++) begin
          checks++;
          if (int'(X[k]) != got.coef[k]) begin
            failures++;
            if (failures < 5)
              $display("W=%0d FAIL X%0d = %0d, expected %0d", W, k, X[k], got.coef[k]);
          end
        end
      end else if (out_valid) begin
        failures++;
      end
      // drive the next vector
      in_valid = (sent < NVEC) && ($urandom % 8 != 0);
      if (in_valid) begin
        mode = $urandom % 16;
        for (int i = 0; i < 16; i++) begin
          xi[i] = draw(mode, sent % 16, i);
          x[i]  = W'(xi[i]);
        end
        e.due = cycle + LATENCY;
        mul_t(xi, e.coef);
        q.push_back(e);
        sent++;
      end
      @(negedge clk);
      cycle++;
    end
    done = 1'b1;
  end

endmodule
