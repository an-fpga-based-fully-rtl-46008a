// tb_bg_top: end-to-end test of the bilateral-grid pipeline at reduced image sizes.
//
// Two instances run side by side.  Instance A (r = 4, 64 x 48) violates the no-stall condition
// gy*gz < 2w - round(r/2) - r - (w mod r), so the GC must hold its input while the GF catches up;
// its output is randomly backpressured, and it runs two frames back to back (frame restart),
// the second a flat image whose output must equal the input.  Instance B (r = 8, 64 x 48)
// satisfies the condition: it must accept one pixel per clock with no stall, and finish its
// frame within (h + 2r + round(r/2)) * w clocks.  Every output pixel is compared with the
// bit-exact reference model bg_ref_pkg.  Mechanisms counted: GC input stall, output
// backpressure, TI waiting on the GF, frame restart.
module tb_bg_top;
  import bg_ref_pkg::*;

  localparam int W = 64, H = 48, SR = 70, SS = 8;
  localparam int RA = 4, RB = 8;
  localparam int NPIX = W * H;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- images
  byte unsigned img_a [];   // frame 1 of A
  byte unsigned img_b [];
  byte unsigned flat  [];   // frame 2 of A

  function automatic logic [7:0] pattern(int ix, int iy, int seed);
    int v;
    // two flat regions with a vertical edge, a ramp, and noise
    v = (iy < W / 2) ? 60 : 190;
    v += (ix * 2) - 40 + int'($urandom_range(0, 60)) - 30 + seed;
    if (v < 0) v = 0;
    if (v > 255) v = 255;
    return 8'(v);
  endfunction

  // ---------------------------------------------------------------- instance A
  logic       a_sv, a_sr, a_mv, a_mr, a_ml, a_fd;
  logic [7:0] a_sd, a_md;

  bg_top #(.W(W), .H(H), .R(RA), .SR(SR), .SS(SS)) u_a (
    .clk, .rst_n, .s_valid(a_sv), .s_ready(a_sr), .s_data(a_sd),
    .m_valid(a_mv), .m_ready(a_mr), .m_data(a_md), .m_last(a_ml), .frame_done(a_fd)
  );

  // ---------------------------------------------------------------- instance B
  logic       b_sv, b_sr, b_mv, b_mr, b_ml, b_fd;
  logic [7:0] b_sd, b_md;

  bg_top #(.W(W), .H(H), .R(RB), .SR(SR), .SS(SS)) u_b (
    .clk, .rst_n, .s_valid(b_sv), .s_ready(b_sr), .s_data(b_sd),
    .m_valid(b_mv), .m_ready(b_mr), .m_data(b_md), .m_last(b_ml), .frame_done(b_fd)
  );

  bg_ref #(W, H, RA, SR, SS) ref_a;
  bg_ref #(W, H, RB, SR, SS) ref_b;
  int exp_a1 [], exp_a2 [], exp_b [];

  // mechanism counters
  int stall_a = 0, stall_b = 0, bp_a = 0, tiwait_a = 0, restarts_a = 0;
  int b_first = -1, b_done_cyc = -1;

  // ---------------------------------------------------------------- drivers
  int a_in = 0, b_in = 0;       // pixels sent
  assign a_sv = rst_n && (a_in < 2 * NPIX);
  assign a_sd = (a_in < NPIX) ? img_a[a_in] : flat[(a_in - NPIX) % NPIX];
  assign b_sv = rst_n && (b_in < NPIX);
  assign b_sd = img_b[b_in % NPIX];
  assign b_mr = 1'b1;

  always @(posedge clk) begin
    if (rst_n) begin
      a_mr <= ($urandom_range(0, 7) != 0);
      if (a_sv && a_sr) a_in <= a_in + 1;
      if (a_sv && !a_sr) stall_a++;
      if (b_sv && b_sr) begin
        b_in <= b_in + 1;
        if (b_first < 0) b_first = cyc;
      end
      if (b_sv && !b_sr) stall_b++;
      if (a_mv && !a_mr) bp_a++;
      if (u_a.u_ti.lb_valid && !u_a.u_ti.issue && !u_a.u_ti.m_valid) tiwait_a++;
      if (a_fd) restarts_a++;
      if (b_fd && b_done_cyc < 0) b_done_cyc = cyc;
    end
  end

  // ---------------------------------------------------------------- monitors
  int a_out = 0, b_out = 0;
  always @(posedge clk) begin
    if (rst_n && a_mv && a_mr) begin
      int e;
      e = (a_out < NPIX) ? exp_a1[a_out] : exp_a2[a_out - NPIX];
      checks++;
      if (int'(a_md) != e) begin
        failures++;
        if (failures < 10) $display("A mismatch pixel %0d: got %0d expected %0d", a_out, a_md, e);
      end
      checks++;
      if (a_ml != ((a_out % NPIX) == NPIX - 1)) failures++;
      a_out <= a_out + 1;
    end
    if (rst_n && b_mv && b_mr) begin
      checks++;
      if (int'(b_md) != exp_b[b_out]) begin
        failures++;
        if (failures < 10) $display("B mismatch pixel %0d: got %0d expected %0d", b_out, b_md, exp_b[b_out]);
      end
      b_out <= b_out + 1;
    end
  end

  task automatic finish();
    $display("A: gc stalls %0d, output backpressure %0d, ti waits %0d, frame restarts %0d",
             stall_a, bp_a, tiwait_a, restarts_a);
    $display("B: gc stalls %0d, frame cycles %0d (bound %0d)", stall_b, b_done_cyc - b_first,
             (H + 2 * RB + (RB + 1) / 2) * W);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    img_a = new[NPIX]; img_b = new[NPIX]; flat = new[NPIX];
    for (int ix = 0; ix < H; ix++)
      for (int iy = 0; iy < W; iy++) begin
        img_a[ix * W + iy] = pattern(ix, iy, 0);
        img_b[ix * W + iy] = pattern(ix, iy, 5);
        flat[ix * W + iy]  = 8'd137;
      end
    ref_a = new(); ref_b = new();
    exp_a1 = new[NPIX]; exp_a2 = new[NPIX]; exp_b = new[NPIX];
    ref_a.build(img_a);
    for (int i = 0; i < NPIX; i++) exp_a1[i] = ref_a.pixel(i / W, i % W, int'(img_a[i]));
    ref_a.build(flat);
    for (int i = 0; i < NPIX; i++) exp_a2[i] = ref_a.pixel(i / W, i % W, int'(flat[i]));
    ref_b.build(img_b);
    for (int i = 0; i < NPIX; i++) exp_b[i] = ref_b.pixel(i / W, i % W, int'(img_b[i]));
    // a flat image must come out unchanged (independent of the model's arithmetic)
    for (int i = 0; i < NPIX; i++) begin
      checks++;
      if (exp_a2[i] != 137) failures++;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (a_out == 2 * NPIX && b_out == NPIX);
    repeat (200) @(posedge clk);
    // mechanisms
    checks++; if (stall_a == 0)    begin failures++; $display("no GC stall in A"); end
    checks++; if (bp_a == 0)       begin failures++; $display("no backpressure in A"); end
    checks++; if (tiwait_a == 0)   begin failures++; $display("TI never waited in A"); end
    checks++; if (restarts_a != 2) begin failures++; $display("A restarts %0d", restarts_a); end
    checks++; if (stall_b != 0)    begin failures++; $display("B stalled %0d", stall_b); end
    checks++;
    if (b_done_cyc < 0 || b_done_cyc - b_first > (H + 2 * RB + (RB + 1) / 2) * W) begin
      failures++; $display("B frame too slow");
    end
    finish();
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: a_out=%0d b_out=%0d a_in=%0d b_in=%0d", a_out, b_out, a_in, b_in);
    finish();
  end

endmodule
