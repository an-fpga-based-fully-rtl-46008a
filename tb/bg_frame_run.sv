// bg_frame_run: drives one synthetic frame through a bg_top of the given size and checks every
// output pixel against the bit-exact reference model.
//
// The image is a noisy scene of flat blocks, edges and a ramp generated here from $urandom.
// The input is offered on every clock and the output is always accepted, so the only thing
// that can hold the input back is the design's own interlock between grid creation and the
// Gaussian filter.  The runner counts those stalls and the clocks from the first accepted
// pixel to frame_done, and raises `finished` when the last pixel and frame_done have been
// seen.  It does not end the simulation: the enclosing testbench collects checks, failures,
// stalls and cycles from several runners and decides.  The no-stall condition of the design,
// gy*gz < 2w - round(r/2) - r - (w mod r), is evaluated here as NO_STALL so that the
// testbench can check that stalls appear exactly when it fails.
module bg_frame_run #(
  parameter int W  = 1920,
  parameter int H  = 1080,
  parameter int R  = 12,
  parameter int SR = 70,
  parameter int SS = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished
);
  import bg_pkg::*;
  import bg_ref_pkg::*;

  localparam int NPIX  = W * H;
  localparam int BOUND = (H + 2 * R + (R + 1) / 2) * W;
  localparam bit NO_STALL = grid_gy(W, R) * grid_gz(R, SR, SS) < 2 * W - (R + 1) / 2 - R - (W % R);

  int checks = 0, failures = 0, cyc = 0, stalls = 0, first = -1, done_cyc = -1;
  int n_in = 0, n_out = 0;
  bit ready = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic       sv, sr, mv, ml, fd;
  logic [7:0] sd, md;

  bg_top #(.W(W), .H(H), .R(R), .SR(SR), .SS(SS)) u_dut (
    .clk, .rst_n, .s_valid(sv), .s_ready(sr), .s_data(sd),
    .m_valid(mv), .m_ready(1'b1), .m_data(md), .m_last(ml), .frame_done(fd)
  );

  byte unsigned img [];
  int exp_px [];
  bg_ref #(W, H, R, SR, SS) rmod;

  assign sv = rst_n && ready && (n_in < NPIX);
  assign sd = (n_in < NPIX && ready) ? img[n_in] : 8'd0;
  assign finished = (n_out == NPIX) && (done_cyc >= 0);

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
        if (n_out >= NPIX || int'(md) != exp_px[n_out]) begin
          failures++;
          if (failures < 10) $display("r=%0d mismatch pixel %0d: got %0d", R, n_out, md);
        end
        if (ml != (n_out == NPIX - 1)) failures++;
        n_out <= n_out + 1;
      end
    end
  end

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
    ready = 1;
  end

endmodule
