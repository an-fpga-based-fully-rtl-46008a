// tb_bg_gc: grid creation on a 20 x 14 image with r = 4 (gx = 5, gy = 7, gz = 9).
//
// The GC is connected to a real grid^2D store.  Every store it makes is recorded against the
// grid column (round(ix/r), round(iy/r)) of the pixel being accepted; at the end the last store
// of each column must equal the (count, sum) pairs of the reference grid.  The GF progress
// inputs are first held at plane 0, so the GC must stop (s_ready low) at its first store into
// plane 2, whose partition still belongs to plane -1 ... 0 readers; they are then released.
// The line-buffer ready is toggled randomly, and the line-buffer push must carry every pixel.
module tb_bg_gc;
  import bg_pkg::*;
  import bg_ref_pkg::*;

  localparam int W = 20, H = 14, R = 4, SR = 70, SS = 8;
  localparam int GX = grid_gx(H, R), GY = grid_gy(W, R), GZ = grid_gz(R, SR, SS);
  localparam int CW = cnt_width(R), SW = sum_width(R), CELL = CW + SW, WORD = GZ * CELL;
  localparam int XW = bits_for(longint'(GX)), YW = bits_for(longint'(GY)), AW = $clog2(GY);
  localparam int NPIX = W * H;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_valid, s_ready, lb_ready, lb_push, mem_en, mem_we, done;
  logic [7:0] s_data, lb_data;
  logic [1:0] mem_slot;
  logic [AW-1:0] mem_addr;
  logic [WORD-1:0] mem_wdata, mem_rdata, b_rdata [3];
  logic [XW-1:0] fin_plane, gf_plane;
  logic [YW-1:0] fin_col, gf_loaded;

  bg_gc #(.W(W), .H(H), .R(R), .SR(SR), .SS(SS)) dut (
    .clk, .rst_n, .frame_start(1'b0), .s_valid, .s_ready, .s_data,
    .lb_ready, .lb_push, .lb_data, .mem_en, .mem_we, .mem_slot, .mem_addr, .mem_wdata,
    .mem_rdata, .fin_plane, .fin_col, .gf_plane, .gf_loaded, .done
  );

  bg_grid_mem #(.W(W), .R(R), .SR(SR), .SS(SS)) u_mem (
    .clk, .a_en(mem_en), .a_we(mem_we), .a_slot(mem_slot), .a_addr(mem_addr),
    .a_wdata(mem_wdata), .a_rdata(mem_rdata), .b_en(1'b0), .b_addr('0), .b_rdata(b_rdata)
  );

  byte unsigned img [];
  bg_ref #(W, H, R, SR, SS) rmod;
  logic [WORD-1:0] shadow [GX][GY];
  int n = 0, stalled_on_gf = 0, pushes = 0;
  logic hold;

  assign s_valid = rst_n && (n < NPIX);
  assign s_data  = img[n % NPIX];
  assign gf_plane  = hold ? '0 : XW'(GX);
  assign gf_loaded = '0;

  always @(posedge clk) begin
    if (rst_n) begin
      lb_ready <= ($urandom_range(0, 3) != 0);
      if (s_valid && s_ready) begin
        int ix, iy;
        ix = n / W; iy = n % W;
        if (mem_en && mem_we) shadow[(2 * ix + R) / (2 * R)][(2 * iy + R) / (2 * R)] = mem_wdata;
        checks++;
        if (!(lb_push && lb_data == s_data)) failures++;
        pushes++;
        n <= n + 1;
      end
      if (s_valid && !s_ready && lb_ready && hold) stalled_on_gf++;
      if (lb_push && !(s_valid && s_ready)) failures++;
    end
  end

  initial begin
    img = new[NPIX];
    foreach (img[i]) img[i] = 8'($urandom_range(0, 255));
    rmod = new();
    rmod.build(img);
    hold = 1'b1;
    lb_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // plane 2 begins at image row 6; the GC must be stopped before its first store there
    repeat (400) @(posedge clk);
    checks++;
    if (stalled_on_gf == 0 || n >= 6 * W + 3) begin
      failures++; $display("GC did not wait for the GF (n=%0d)", n);
    end
    hold = 1'b0;
    wait (done);
    repeat (3) @(posedge clk);
    for (int x = 0; x <= max_index(H, R); x++)
      for (int y = 0; y <= max_index(W, R); y++)
        for (int z = 0; z < GZ; z++) begin
          checks++;
          if (int'(shadow[x][y][z*CELL+SW +: CW]) != rmod.cnt[x][y][z] ||
              int'(shadow[x][y][z*CELL +: SW]) != rmod.sum[x][y][z]) begin
            failures++;
            if (failures < 8) $display("grid(%0d,%0d,%0d) = (%0d,%0d), expected (%0d,%0d)", x, y, z,
              shadow[x][y][z*CELL+SW +: CW], shadow[x][y][z*CELL +: SW], rmod.cnt[x][y][z], rmod.sum[x][y][z]);
          end
        end
    checks++; if (int'(fin_plane) != max_index(H, R) + 1) failures++;
    checks++; if (pushes != NPIX) failures++;
    $display("GC waited %0d clocks for the GF", stalled_on_gf);
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
