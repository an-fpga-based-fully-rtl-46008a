// tb_bg_ti: trilinear interpolation of a random 20 x 14 image, r = 4.
//
// grid_f comes from the reference model of the same image.  The line buffer and grid_f^2D are
// modelled here with the RTL's one-clock read latency; a read returns plane q of the current
// row from partition q mod 2 and plane q+1 from the other one.  The GF progress inputs first
// allow only planes 0 and 1 (the TI must then stop at row r, which needs plane 2), then
// everything.  The output is randomly backpressured.  Every output pixel is compared with the
// reference model, m_last must mark the final pixel, and without backpressure or waiting the
// TI must deliver one pixel per clock.
module tb_bg_ti;
  import bg_pkg::*;
  import bg_ref_pkg::*;

  localparam int W = 20, H = 14, R = 4, SR = 70, SS = 8;
  localparam int GX = grid_gx(H, R), GY = grid_gy(W, R), GZ = grid_gz(R, SR, SS);
  localparam int FW = GZ * GF_W;
  localparam int XW = bits_for(longint'(GX)), YW = bits_for(longint'(GY)), AW = $clog2(GY);
  localparam int NPIX = W * H;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic lb_valid, lb_pop, rd_en, m_valid, m_ready, m_last, done;
  logic [7:0] lb_data, m_data;
  logic [AW-1:0] rd_addr;
  logic [FW-1:0] rd_data [2];
  logic [XW-1:0] gf_done_plane;
  logic [YW-1:0] gf_done_col, ti_cols;
  logic [15:0] ti_row;

  bg_ti #(.W(W), .H(H), .R(R), .SR(SR), .SS(SS)) dut (
    .clk, .rst_n, .frame_start(1'b0), .lb_valid, .lb_pop, .lb_data, .rd_en, .rd_addr,
    .rd_data, .gf_done_plane, .gf_done_col, .ti_row, .ti_cols, .m_valid, .m_ready, .m_data,
    .m_last, .done
  );

  byte unsigned img [];
  bg_ref #(W, H, R, SR, SS) rmod;

  function automatic logic [FW-1:0] word_of(int pl, int col);
    logic [FW-1:0] v;
    for (int z = 0; z < GZ; z++) v[z*GF_W +: GF_W] = GF_W'(rmod.gf[pl][col][z]);
    return v;
  endfunction

  int npop = 0, nout = 0, bp = 1;
  assign lb_valid = rst_n && (npop < NPIX);

  always @(posedge clk) begin
    if (rst_n) begin
      m_ready <= (bp == 0) || ($urandom_range(0, 3) != 0);
      if (lb_pop) begin
        lb_data <= img[npop];
        npop <= npop + 1;
      end
      if (rd_en) begin
        int q;
        q = (npop / W) / R;
        rd_data[q % 2]       <= word_of(q, int'(rd_addr));
        rd_data[(q + 1) % 2] <= word_of(q + 1, int'(rd_addr));
        checks++;
        if (q + 1 >= int'(gf_done_plane)) failures++;   // read of a plane not yet written
      end
      if (m_valid && m_ready) begin
        int e;
        e = rmod.pixel(nout / W, nout % W, int'(img[nout]));
        checks++;
        if (int'(m_data) != e) begin
          failures++;
          if (failures < 8) $display("pixel %0d: got %0d expected %0d", nout, m_data, e);
        end
        checks++;
        if (m_last != (nout == NPIX - 1)) failures++;
        nout <= nout + 1;
      end
    end
  end

  int t0, t1;
  initial begin
    img = new[NPIX];
    foreach (img[i]) img[i] = 8'($urandom_range(0, 255));
    rmod = new();
    rmod.build(img);
    gf_done_plane = XW'(2); gf_done_col = '0;
    m_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (400) @(posedge clk);
    checks++;
    if (npop != R * W) begin failures++; $display("TI did not stop at row r: %0d pops", npop); end
    gf_done_plane = XW'(GX);
    wait (nout == 8 * W);
    bp = 0;
    @(posedge clk);
    t0 = cyc;
    wait (nout == 12 * W);
    t1 = cyc;
    checks++;
    if (t1 - t0 > 4 * W + 2) begin failures++; $display("rate: %0d clocks for %0d pixels", t1 - t0, 4 * W); end
    wait (done);
    checks++; if (nout != NPIX) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
