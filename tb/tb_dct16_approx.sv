// tb_dct16_approx -- end-to-end test of the pipelined 16-point approximate
// DCT at its default parameters (8-bit input).
//
// Streams random and extreme vectors into the core and compares every
// output vector with T x computed from the matrix of the reference package.
// A scoreboard records the cycle in which each vector was offered and
// requires it to come out exactly LATENCY = 3 cycles later, with out_valid
// low whenever nothing is due. The stimulus makes each behaviour of the
// core happen and counts it: back-to-back vectors (one per clock), idle
// bubbles, a reset that cancels vectors in flight, and inputs that drive a
// coefficient into the top bit of the output range (|X| >= 8 * 2^(W-1)).
// A behaviour that never happened counts as a failure. Inputs change at
// the falling edge, outputs are checked there too; a watchdog stops a run
// that hangs.
module tb_dct16_approx;
  import dct16_pkg::*;
  import dct16_ref_pkg::*;

  localparam int W  = W_DEFAULT;
  localparam int WO = W + GROWTH;
  localparam int NCYC = 40000;

  typedef struct {
    int due;          // cycle at which the result must be visible
    int coef [16];    // expected T x
  } exp_t;

  logic                  clk = 1'b0;
  logic                  rst_n = 1'b0;
  logic                  in_valid = 1'b0;
  logic signed [W-1:0]   x [16];
  logic                  out_valid;
  logic signed [WO-1:0]  X [16];

  dct16_approx dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  exp_t q [$];
  int n_b2b = 0, n_bubble = 0, n_flush = 0, n_fullscale = 0, n_out = 0;
  bit prev_valid = 1'b0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (NCYC + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("FAIL cycle %0d: %s", cycle, msg);
  endtask

  // Compare what is visible now against the scoreboard.
  task automatic check_outputs();
    checks++;
    if (q.size() > 0 && q[0].due == cycle) begin
      exp_t e = q.pop_front();
      n_out++;
      if (!out_valid) fail("out_valid low when a result was due");
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (int'(X[k]) != e.coef[k])
          fail($sformatf("X%0d = %0d, expected %0d", k, X[k], e.coef[k]));
      end
    end else if (out_valid) begin
      fail("out_valid high with no result due");
    end
  endtask

  initial begin
    int xi [16];
    int mode;
    exp_t e;
    foreach (x[i]) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      @(negedge clk);
      check_outputs();
      // Now and then, reset with vectors still in the pipeline.
      if (c > 100 && (c % 5000) == 2500) begin
        if (q.size() > 0) n_flush++;
        q.delete();
        rst_n = 1'b0;
        in_valid = 1'b0;
        prev_valid = 1'b0;
        @(negedge clk);
        check_outputs();
        rst_n = 1'b1;
        continue;
      end
      // Bursts of back-to-back vectors, separated by random idle gaps.
      in_valid = ((c / 64) % 4 == 3) ? ($urandom % 3 == 0) : 1'b1;
      if (in_valid) begin
        mode = $urandom % 32;
        for (int i = 0; i < 16; i++) begin
          case (mode)
            0: xi[i] = -(1 <<< (W-1));                                    // all minimum
            1: xi[i] = (1 <<< (W-1)) - 1;                                 // all maximum
            2: xi[i] = (T_MAT[c % 16][i] < 0) ? -(1 <<< (W-1)) : (1 <<< (W-1)) - 1;
            default: xi[i] = rand_signed(W);
          endcase
          x[i] = W'(xi[i]);
        end
        e.due = cycle + LATENCY;
        mul_t(xi, e.coef);
        for (int k = 0; k < 16; k++)
          if (e.coef[k] >= (1 <<< (WO-2)) || e.coef[k] < -(1 <<< (WO-2))) begin
            n_fullscale++;
            break;
          end
        q.push_back(e);
        if (prev_valid) n_b2b++;
      end else begin
        foreach (x[i]) x[i] = W'($urandom);  // must be ignored
        n_bubble++;
      end
      prev_valid = in_valid;
    end
    // drain
    repeat (LATENCY + 2) begin
      @(negedge clk);
      check_outputs();
      in_valid = 1'b0;
    end
    checks++;
    if (q.size() != 0) fail("results never delivered");
    $display("vectors out %0d, back-to-back %0d, bubbles %0d, flushes %0d, full-scale %0d",
             n_out, n_b2b, n_bubble, n_flush, n_fullscale);
    checks += 4;
    if (n_b2b == 0)       fail("no back-to-back vectors");
    if (n_bubble == 0)    fail("no idle cycles");
    if (n_flush == 0)     fail("no reset with vectors in flight");
    if (n_fullscale == 0) fail("no full-scale output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
