// tb_bg_full: one full-HD frame through bg_top at its default parameters (1920 x 1080, r = 12,
// sigma_r = 70, sigma_s = 8, the paper's main configuration).
//
// The image is a synthetic noisy scene (flat regions, edges, a ramp, uniform noise), generated
// here.  Every output pixel is compared with the bit-exact reference model.  With these
// parameters the no-stall condition gy*gz < 2w - round(r/2) - r - (w mod r) holds
// (162*4 = 648 < 3822), so the input must never be stalled and the frame must finish within
// (h + 2r + round(r/2)) * w clocks; the frame rate this gives at the paper's 214 MHz is printed.
module tb_bg_full;
  import bg_ref_pkg::*;

  localparam int W = 1920, H = 1080, R = 12, SR = 70, SS = 8;
  localparam int NPIX = W * H;
  localparam int BOUND = (H + 2 * R + (R + 1) / 2) * W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic       sv, sr, mv, ml, fd;
  logic [7:0] sd, md;

  bg_top u_dut (
    .clk, .rst_n, .s_valid(sv), .s_ready(sr), .s_data(sd),
    .m_valid(mv), .m_ready(1'b1), .m_data(md), .m_last(ml), .frame_done(fd)
  );

  byte unsigned img [];
  int exp_px [];
  bg_ref #(W, H, R, SR, SS) rmod;

  int n_in = 0, n_out = 0, stalls = 0, first = -1, done_cyc = -1;
  assign sv = rst_n && (n_in < NPIX);
  assign sd = img[n_in % NPIX];

  always @(posedge clk) begin
    if (rst_n) begin
      if (sv && sr) begin
        n_in <= n_in + 1;
        if (first < 0) first = cyc;
      end
      if (sv && !sr) stalls++;
      if (fd && done_cyc < 0) done_cyc = cyc;
      if (mv) begin
        checks++;
        if (int'(md) != exp_px[n_out]) begin
          failures++;
          if (failures < 10) $display("mismatch pixel %0d: got %0d expected %0d", n_out, md, exp_px[n_out]);
        end
        if (ml != (n_out == NPIX - 1)) failures++;
        n_out <= n_out + 1;
      end
    end
  end

  task automatic finish();
    $display("input stalls %0d, frame cycles %0d (bound %0d), %0.2f fps at 214 MHz",
             stalls, done_cyc - first, BOUND, 214.0e6 / real'(done_cyc - first));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    img = new[NPIX];
    exp_px = new[NPIX];
    for (int ix = 0; ix < H; ix++)
      for (int iy = 0; iy < W; iy++) begin
        int v;
        v = ((ix / 270 + iy / 480) % 2 == 1) ? 200 : 50;
        v += (iy % 640) / 16 - 20 + int'($urandom_range(0, 80)) - 40;
        img[ix * W + iy] = 8'((v < 0) ? 0 : (v > 255) ? 255 : v);
      end
    rmod = new();
    rmod.build(img);
    for (int i = 0; i < NPIX; i++) exp_px[i] = rmod.pixel(i / W, i % W, int'(img[i]));
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (n_out == NPIX && done_cyc >= 0);
    checks++; if (stalls != 0) failures++;
    checks++; if (done_cyc - first > BOUND) failures++;
    finish();
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: in %0d out %0d", n_in, n_out);
    finish();
  end

endmodule
