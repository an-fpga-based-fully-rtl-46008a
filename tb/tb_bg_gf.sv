// tb_bg_gf: Gaussian filter on the grid of a random 20 x 14 image, r = 4 (gx = 5, gy = 7,
// gz = 9).
//
// The grid^2D store is modelled here: a read returns the reference grid for the planes the
// filter is working on, and random garbage for planes or columns outside the image, which the
// filter must ignore.  The GC progress inputs advance one column every six clocks, and every
// read is checked to ask only for final columns.  The TI progress is held at row 0, so the
// filter must stop before it writes plane 2 (which would overwrite plane 0); it is then
// released.  Every written grid_f word is compared with the reference model, and once
// nothing holds it back a plane must take exactly gy*gz + 1 clocks.
module tb_bg_gf;
  import bg_pkg::*;
  import bg_ref_pkg::*;

  localparam int W = 20, H = 14, R = 4, SR = 70, SS = 8;
  localparam int GX = grid_gx(H, R), GY = grid_gy(W, R), GZ = grid_gz(R, SR, SS);
  localparam int CW = cnt_width(R), SW = sum_width(R), CELL = CW + SW, WORD = GZ * CELL;
  localparam int FW = GZ * GF_W;
  localparam int XW = bits_for(longint'(GX)), YW = bits_for(longint'(GY)), AW = $clog2(GY);
  localparam int XMAX = max_index(H, R), YMAX = max_index(W, R);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic rd_en, wr_en, wr_slot, done;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [WORD-1:0] rd_data [3];
  logic [XW-1:0] gc_fin_plane, gf_plane, done_plane;
  logic [YW-1:0] gc_fin_col, gf_loaded, done_col, ti_cols;
  logic [FW-1:0] wr_data;
  logic [15:0] ti_row;

  bg_gf #(.W(W), .H(H), .R(R), .SR(SR), .SS(SS)) dut (
    .clk, .rst_n, .frame_start(1'b0), .rd_en, .rd_addr, .rd_data, .gc_fin_plane, .gc_fin_col,
    .gf_plane, .gf_loaded, .wr_en, .wr_slot, .wr_addr, .wr_data, .done_plane, .done_col,
    .ti_row, .ti_cols, .done
  );

  byte unsigned img [];
  bg_ref #(W, H, R, SR, SS) rmod;

  function automatic logic [WORD-1:0] word_of(int pl, int col);
    logic [WORD-1:0] v;
    for (int z = 0; z < GZ; z++) begin
      v[z*CELL+SW +: CW] = CW'(rmod.cnt[pl][col][z]);
      v[z*CELL +: SW]    = SW'(rmod.sum[pl][col][z]);
    end
    return v;
  endfunction

  function automatic logic col_final(int pl, int col);
    return (pl < int'(gc_fin_plane)) || (pl == int'(gc_fin_plane) && col < int'(gc_fin_col));
  endfunction

  // grid^2D model and GC progress
  int tick = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      gc_fin_plane <= '0; gc_fin_col <= '0;
    end else begin
      tick <= tick + 1;
      if (tick % 6 == 5 && int'(gc_fin_plane) <= XMAX) begin
        if (int'(gc_fin_col) == YMAX) begin
          gc_fin_plane <= gc_fin_plane + 1'b1; gc_fin_col <= '0;
        end else gc_fin_col <= gc_fin_col + 1'b1;
      end
      if (rd_en) begin
        int p;
        p = int'(gf_plane);
        for (int k = 0; k < 3; k++) rd_data[k] <= {4{$urandom()}};
        for (int pl = p - 1; pl <= p + 1; pl++)
          if (pl >= 0 && pl <= XMAX) begin
            rd_data[pl % 3] <= word_of(pl, int'(rd_addr));
            checks++;
            if (!col_final(pl, int'(rd_addr))) begin
              failures++; $display("read of column (%0d,%0d) before it was final", pl, rd_addr);
            end
          end
      end
    end
  end

  // write checker
  int nwr = 0, plane_t [GX + 1];
  always @(posedge clk) begin
    if (rst_n && wr_en) begin
      int pl;
      pl = nwr / GY;
      checks++;
      if (int'(wr_addr) != nwr % GY || wr_slot != 1'(pl % 2)) failures++;
      for (int z = 0; z < GZ; z++) begin
        checks++;
        if (int'(wr_data[z*GF_W +: GF_W]) != rmod.gf[pl][int'(wr_addr)][z]) begin
          failures++;
          if (failures < 8) $display("grid_f(%0d,%0d,%0d) = %0d, expected %0d", pl, wr_addr, z,
                                     wr_data[z*GF_W +: GF_W], rmod.gf[pl][int'(wr_addr)][z]);
        end
      end
      if (nwr % GY == GY - 1) plane_t[pl] = cyc;
      nwr <= nwr + 1;
    end
  end

  initial begin
    img = new[W * H];
    foreach (img[i]) img[i] = 8'($urandom_range(0, 255));
    rmod = new();
    rmod.build(img);
    ti_row = 16'd0; ti_cols = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (int'(gc_fin_plane) == XMAX + 1);
    repeat (300) @(posedge clk);
    checks++;
    if (int'(done_plane) != 2) begin
      failures++; $display("filter did not wait for the TI: %0d planes written", done_plane);
    end
    ti_row = 16'(H);
    wait (done);
    repeat (3) @(posedge clk);
    checks++; if (nwr != GX * GY) failures++;
    checks++;
    if (plane_t[GX - 1] - plane_t[GX - 2] != GY * GZ + 1) begin
      failures++; $display("plane took %0d clocks", plane_t[GX - 1] - plane_t[GX - 2]);
    end
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
