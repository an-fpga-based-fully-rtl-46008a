// tb_bg_table1: the window-size sweep of the speed evaluation, full HD (1920 x 1080) with
// sigma_r = 70 and sigma_s = 8 at r = 4, 8 and 16 (r = 12 is the default and is run by
// tb_bg_full).  One bg_frame_run per size runs a frame in parallel.
//
// For each size every output pixel is checked against the reference model.  Where the no-stall
// condition holds (r = 8, 16) the input must never be stalled and the frame must end within
// (h + 2r + round(r/2)) * w clocks.  Where it fails (r = 4: gy*gz = 482*9 = 4338 is not below
// 3834) the grid creation must stall at least once, and the frame takes more than that many
// clocks.  The clocks per frame and the resulting frame rate at 214 MHz are printed for
// comparison with the measured 95.15 / 100.13 / 98.36 fps, which include the DMA's overhead.
module tb_bg_table1;

  localparam int W = 1920, H = 1080;
  localparam int RS [3] = '{4, 8, 16};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fin4, fin8, fin16;
  bg_frame_run #(.W(W), .H(H), .R(4))  u_r4  (.clk, .rst_n, .finished(fin4));
  bg_frame_run #(.W(W), .H(H), .R(8))  u_r8  (.clk, .rst_n, .finished(fin8));
  bg_frame_run #(.W(W), .H(H), .R(16)) u_r16 (.clk, .rst_n, .finished(fin16));

  int checks = 0, failures = 0;

  function automatic int bound(int r);
    return (H + 2 * r + (r + 1) / 2) * W;
  endfunction

  task automatic judge(int r, bit no_stall, int c, int f, int st, int frame);
    checks += c;
    failures += f;
    $display("r=%0d: %0d pixel checks, %0d failures, %0d input stalls, %0d clocks/frame (bound %0d), %0.2f fps at 214 MHz",
             r, c, f, st, frame, bound(r), 214.0e6 / real'(frame));
    checks++;
    if (no_stall) begin
      if (st != 0) failures++;
      checks++;
      if (frame > bound(r)) failures++;
    end else begin
      if (st == 0) failures++;
      checks++;
      if (frame <= bound(r)) failures++;
    end
  endtask

  task automatic finish();
    judge(4,  u_r4.NO_STALL,  u_r4.checks,  u_r4.failures,  u_r4.stalls,  u_r4.done_cyc - u_r4.first);
    judge(8,  u_r8.NO_STALL,  u_r8.checks,  u_r8.failures,  u_r8.stalls,  u_r8.done_cyc - u_r8.first);
    judge(16, u_r16.NO_STALL, u_r16.checks, u_r16.failures, u_r16.stalls, u_r16.done_cyc - u_r16.first);
    checks++;
    if (u_r4.NO_STALL || !u_r8.NO_STALL || !u_r16.NO_STALL) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (fin4 && fin8 && fin16);
    finish();
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog: finished r4=%0d r8=%0d r16=%0d", fin4, fin8, fin16);
    failures++;
    finish();
  end

endmodule
