// tb_bg_quality: the parameter settings of the denoising-quality sweep, full HD (1920 x 1080):
// r = 7 with sigma_s = 4, sigma_r = 50 (the point the three sweeps share), r = 5 with the same
// sigmas (from the sweep over r), and r = 7 with sigma_s = 10 (the end of the sweep over
// sigma_s, with the deepest grid of that sweep, gz = 9).  One bg_frame_run per setting runs a
// frame in parallel.
//
// These settings use odd window radii and other sigmas than the default build, so they check
// that the rounding of r/2, the run lengths, the LUTs and the Gaussian weights hold for them.
// Every output pixel is compared with the bit-exact reference model; the no-stall condition
// holds for all three (1104, 2316 and 2484 against about 3830), so the input must never be
// stalled and each frame must end within (h + 2r + round(r/2)) * w clocks.  The quality figure
// itself (MSSIM against a clean photograph) is not computed here.
module tb_bg_quality;

  localparam int W = 1920, H = 1080;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fin_a, fin_b, fin_c;
  bg_frame_run #(.W(W), .H(H), .R(7), .SR(50), .SS(4))  u_a (.clk, .rst_n, .finished(fin_a));
  bg_frame_run #(.W(W), .H(H), .R(5), .SR(50), .SS(4))  u_b (.clk, .rst_n, .finished(fin_b));
  bg_frame_run #(.W(W), .H(H), .R(7), .SR(50), .SS(10)) u_c (.clk, .rst_n, .finished(fin_c));

  int checks = 0, failures = 0;

  task automatic judge(string name, int r, bit no_stall, int c, int f, int st, int frame);
    int bound;
    bound = (H + 2 * r + (r + 1) / 2) * W;
    checks += c;
    failures += f;
    $display("%s: %0d pixel checks, %0d failures, %0d input stalls, %0d clocks/frame (bound %0d)",
             name, c, f, st, frame, bound);
    checks++;
    if (!no_stall) failures++;
    checks++;
    if (st != 0) failures++;
    checks++;
    if (frame > bound) failures++;
  endtask

  task automatic finish();
    judge("r=7 ss=4 sr=50",  7, u_a.NO_STALL, u_a.checks, u_a.failures, u_a.stalls, u_a.done_cyc - u_a.first);
    judge("r=5 ss=4 sr=50",  5, u_b.NO_STALL, u_b.checks, u_b.failures, u_b.stalls, u_b.done_cyc - u_b.first);
    judge("r=7 ss=10 sr=50", 7, u_c.NO_STALL, u_c.checks, u_c.failures, u_c.stalls, u_c.done_cyc - u_c.first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (fin_a && fin_b && fin_c);
    finish();
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog: finished a=%0d b=%0d c=%0d", fin_a, fin_b, fin_c);
    failures++;
    finish();
  end

endmodule
