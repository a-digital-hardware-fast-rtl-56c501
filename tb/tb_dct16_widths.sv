// tb_dct16_widths -- the core at each input word length evaluated for the
// published FPGA prototypes: W = 4, 8, 12 and 16.
//
// One dct16_width_checker per width streams random and full-scale vectors
// through its own dct16_approx instance and compares every result with the
// matrix product T x, including the three-cycle latency. The test passes
// when all four have finished without a mismatch; a watchdog fails a run
// that does not finish.
module tb_dct16_widths;

  localparam int NVEC = 3000;
  localparam int NW   = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic done [NW];
  int   c    [NW];
  int   f    [NW];

  always #5 clk = ~clk;

  dct16_width_checker #(.W(4),  .NVEC(NVEC)) u_w4  (.clk, .rst_n, .done(done[0]), .checks(c[0]), .failures(f[0]));
  dct16_width_checker #(.W(8),  .NVEC(NVEC)) u_w8  (.clk, .rst_n, .done(done[1]), .checks(c[1]), .failures(f[1]));
  dct16_width_checker #(.W(12), .NVEC(NVEC)) u_w12 (.clk, .rst_n, .done(done[2]), .checks(c[2]), .failures(f[2]));
  dct16_width_checker #(.W(16), .NVEC(NVEC)) u_w16 (.clk, .rst_n, .done(done[3]), .checks(c[3]), .failures(f[3]));

  int checks = 0, failures = 0;

  task automatic report();
    checks = 0;
    failures = 0;
    for (int i = 0; i < NW; i++) begin
      checks   += c[i];
      failures += f[i];
    end
  endtask

  initial begin
    repeat (2 * NVEC + 100) @(posedge clk);
    report();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2] && done[3]);
    report();
    $display("widths 4, 8, 12, 16: checks %0d %0d %0d %0d", c[0], c[1], c[2], c[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
