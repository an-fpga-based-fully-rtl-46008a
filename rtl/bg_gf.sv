// bg_gf: Gaussian Filter (GF).  Blurs the grid with the 3x3x3 kernel g_sigma_g, sigma_g =
// sigma_s / r, and normalises by the blurred counts:
//     grid_f(v) = sum_w g(w) grid(v-w)[sum] / sum_w g(w) grid(v-w)[count]   (0 if no count).
//
// How it works (follows the paper's Figs. 11 and 14): for plane x the register window reg_GF
// holds three grid^2D columns (y-1, y, y+1) of the three planes x-1, x, x+1.  Each step loads
// column y+1 of all three planes with one read of each grid^2D partition and shifts the window,
// then the gz output elements of column y are produced one per clock.  For each element the 27
// neighbours are summed in four groups by squared distance 0, 1, 2, 3 (adder trees), each group
// is scaled by its fixed-point weight g(0), g(1), g(sqrt2), g(sqrt3) (2^GW_FRAC = 1.0),
// numerator (sums) and denominator (counts) are formed side by side and divided.  Grid elements
// outside the image's planes, columns or intensity range count as empty.  A plane takes
// gy*gz + 1 clocks.  The gz results of a column are written to grid_f^2D as one word.
//
// Pipeline: issue (BRAM read) -> window shift -> group adder trees -> weights -> divider ->
// column assembly -> write; the write of a column reaches grid_f^2D six clocks after the issue
// of its last element.
//
// Interlocks: a step that loads column y of plane x+1 waits until the GC reports that column
// final (gc_fin_plane/gc_fin_col).  Writing plane x overwrites plane x-2 in grid_f^2D, so a step
// that writes column y waits until the TI has loaded that column on the last row of gi(x-2,*)
// (ti_row/ti_cols).  gf_plane/gf_loaded report to the GC which grid^2D columns have been loaded;
// done_plane/done_col report to the TI which grid_f^2D columns are written.  The filter runs all
// gx planes of a frame, then waits for frame_start.
//
// Lint note: the token that travels with each element carries a few flags that only the early
// stages look at, so a strict lint reports some bits of the stage-2 token as unused; they cost
// nothing after synthesis.
module bg_gf
  import bg_pkg::*;
#(
  parameter int W  = 1920,
  parameter int H  = 1080,
  parameter int R  = 12,
  parameter int SR = 70,
  parameter int SS = 8,
  localparam int GX   = grid_gx(H, R),
  localparam int GY   = grid_gy(W, R),
  localparam int GZ   = grid_gz(R, SR, SS),
  localparam int CW   = cnt_width(R),
  localparam int SW   = sum_width(R),
  localparam int CELL = CW + SW,
  localparam int WORD = GZ * CELL,
  localparam int FW   = GZ * GF_W,
  localparam int XW   = bits_for(longint'(GX)),
  localparam int YW   = bits_for(longint'(GY)),
  localparam int AW   = $clog2(GY)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            frame_start,
  // grid^2D port B
  output logic            rd_en,
  output logic [AW-1:0]   rd_addr,
  input  logic [WORD-1:0] rd_data [3],
  // progress from / to the GC
  input  logic [XW-1:0]   gc_fin_plane,
  input  logic [YW-1:0]   gc_fin_col,
  output logic [XW-1:0]   gf_plane,
  output logic [YW-1:0]   gf_loaded,
  // grid_f^2D port A
  output logic            wr_en,
  output logic            wr_slot,
  output logic [AW-1:0]   wr_addr,
  output logic [FW-1:0]   wr_data,
  // progress to / from the TI
  output logic [XW-1:0]   done_plane,
  output logic [YW-1:0]   done_col,
  input  logic [15:0]     ti_row,
  input  logic [YW-1:0]   ti_cols,
  output logic            done
);

  localparam int XMAX = max_index(H, R);
  localparam int YMAX = max_index(W, R);
  localparam int WG0  = 1 << GW_FRAC;
  localparam int WG1  = gauss_weight(1, R, SS);
  localparam int WG2  = gauss_weight(2, R, SS);
  localparam int WG3  = gauss_weight(3, R, SS);
  localparam int GCW  = CW + 5;               // one group holds at most 12 elements
  localparam int GSW  = SW + 5;
  localparam int DNW  = GCW + GW_FRAC + 3;
  localparam int NMW  = GSW + GW_FRAC + 3;
  localparam int ZW   = $clog2(GZ + 1);

  // ------------------------------------------------------------------ sequencer
  logic [YW-1:0] s;           // step: loads column s, outputs column s-1
  logic [ZW-1:0] z;
  logic [1:0]    sl_m, sl_0, sl_p;   // partitions of planes p-1, p, p+1
  logic          seq_run;

  function automatic logic col_final(int pl, int col);
    return (pl < int'(gc_fin_plane)) || ((pl == int'(gc_fin_plane)) && (col < int'(gc_fin_col)));
  endfunction

  logic ok_read, ok_ti, issue, step_head;
  always_comb begin
    int p, need;
    p    = int'(gf_plane);
    need = (p + 1 <= XMAX) ? p + 1 : ((p <= XMAX) ? p : -1);
    ok_read = (int'(s) > YMAX) || (need < 0) || col_final(need, int'(s));
    ok_ti   = (s == '0) || (p < 2) || (int'(ti_row) > (p - 1) * R - 1) ||
              ((int'(ti_row) == (p - 1) * R - 1) && (int'(ti_cols) > int'(s) - 1));
  end

  assign step_head = (z == '0);
  assign issue     = seq_run && (!step_head || (ok_read && ok_ti));
  assign rd_en     = issue && step_head && (int'(s) <= YMAX);
  assign rd_addr   = AW'(s);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gf_plane <= '0; gf_loaded <= '0; s <= '0; z <= '0;
      sl_m <= 2'd2; sl_0 <= 2'd0; sl_p <= 2'd1; seq_run <= 1'b1;
    end else if (frame_start) begin
      gf_plane <= '0; gf_loaded <= '0; s <= '0; z <= '0;
      sl_m <= 2'd2; sl_0 <= 2'd0; sl_p <= 2'd1; seq_run <= 1'b1;
    end else if (issue) begin
      if (step_head) gf_loaded <= s + 1'b1;
      if (s == '0) begin
        s <= YW'(1);
      end else if (int'(z) == GZ - 1) begin
        z <= '0;
        if (int'(s) == GY) begin
          s         <= '0;
          gf_loaded <= '0;
          gf_plane  <= gf_plane + 1'b1;
          sl_m <= sl_0; sl_0 <= sl_p; sl_p <= sl_m;
          if (int'(gf_plane) == GX - 1) seq_run <= 1'b0;
        end else begin
          s <= s + 1'b1;
        end
      end else begin
        z <= z + 1'b1;
      end
    end
  end

  // ------------------------------------------------------------------ stage 1: window
  typedef struct packed {
    logic          valid;
    logic          head;
    logic          out;      // produces an element (step >= 1)
    logic          last_z;
    logic          slot2;    // grid_f partition of the output plane
    logic [AW-1:0] col;      // output column
    logic [ZW-1:0] z;
  } tok_t;

  // what the stages after the adder trees still need of a token
  typedef struct packed {
    logic          valid;
    logic          last_z;
    logic          slot2;
    logic [AW-1:0] col;
    logic [ZW-1:0] z;
  } wtok_t;

  tok_t t1, t2;
  wtok_t t3, t4, t5;
  logic [2:0] pv1;           // planes p-1, p, p+1 exist
  logic       cv1;           // column s exists
  logic       first1;        // step 0 of a plane
  logic [1:0] sl1 [3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t1 <= '0;
    else begin
      t1.valid  <= issue;
      t1.head   <= step_head;
      t1.out    <= (s != '0);
      t1.last_z <= (int'(z) == GZ - 1);
      t1.slot2  <= gf_plane[0];
      t1.col    <= AW'(s - 1'b1);
      t1.z      <= z;
    end
  end

  always_ff @(posedge clk) begin
    if (issue && step_head) begin
      pv1[0] <= (gf_plane != '0) && (int'(gf_plane) - 1 <= XMAX);
      pv1[1] <= (int'(gf_plane) <= XMAX);
      pv1[2] <= (int'(gf_plane) + 1 <= XMAX);
      cv1    <= (int'(s) <= YMAX);
      first1 <= (s == '0);
      sl1[0] <= sl_m; sl1[1] <= sl_0; sl1[2] <= sl_p;
    end
  end

  logic [WORD-1:0] win [3][3];   // [plane x-1, x, x+1][column y-1, y, y+1]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 3; k++) for (int j = 0; j < 3; j++) win[k][j] <= '0;
    end else if (t1.valid && t1.head) begin
      for (int k = 0; k < 3; k++) begin
        win[k][0] <= first1 ? '0 : win[k][1];
        win[k][1] <= first1 ? '0 : win[k][2];
        win[k][2] <= (cv1 && pv1[k]) ? rd_data[sl1[k]] : '0;
      end
    end
  end

  // ------------------------------------------------------------------ stage 2: adder trees
  logic [GCW-1:0] gcnt [4];
  logic [GSW-1:0] gsum [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t2 <= '0;
    else        t2 <= t1.out ? t1 : '0;
  end

  always_ff @(posedge clk) begin
    logic [GCW-1:0] c [4];
    logic [GSW-1:0] a [4];
    for (int g = 0; g < 4; g++) begin c[g] = '0; a[g] = '0; end
    for (int k = 0; k < 3; k++)
      for (int j = 0; j < 3; j++)
        for (int dz = -1; dz <= 1; dz++) begin
          int zz;
          logic [1:0] d2;
          zz = int'(t2.z) + dz;
          d2 = 2'((k - 1) * (k - 1) + (j - 1) * (j - 1) + dz * dz);
          if (zz >= 0 && zz < GZ) begin
            c[d2] = c[d2] + GCW'(win[k][j][zz*CELL+SW +: CW]);
            a[d2] = a[d2] + GSW'(win[k][j][zz*CELL    +: SW]);
          end
        end
    for (int g = 0; g < 4; g++) begin gcnt[g] <= c[g]; gsum[g] <= a[g]; end
  end

  // ------------------------------------------------------------------ stage 3: weights
  logic [NMW-1:0] numer;
  logic [DNW-1:0] denom;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t3 <= '0;
    else        t3 <= '{valid: t2.valid, last_z: t2.last_z, slot2: t2.slot2, col: t2.col, z: t2.z};
  end

  always_ff @(posedge clk) begin
    numer <= NMW'(gsum[0]) * NMW'(WG0) + NMW'(gsum[1]) * NMW'(WG1) +
             NMW'(gsum[2]) * NMW'(WG2) + NMW'(gsum[3]) * NMW'(WG3);
    denom <= DNW'(gcnt[0]) * DNW'(WG0) + DNW'(gcnt[1]) * DNW'(WG1) +
             DNW'(gcnt[2]) * DNW'(WG2) + DNW'(gcnt[3]) * DNW'(WG3);
  end

  // ------------------------------------------------------------------ stage 4: divider
  logic [GF_W-1:0] quot;

  bg_div #(.NW(NMW), .DW(DNW), .QW(GF_W), .FRAC(GF_FRAC)) u_div (
    .clk  (clk),
    .numer(numer),
    .denom(denom),
    .quot (quot)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t4 <= '0; t5 <= '0;
    end else begin
      t4 <= t3;
      t5 <= t4;
    end
  end

  // ------------------------------------------------------------------ stage 5: column write
  logic [FW-1:0] colbuf;
  logic [FW-1:0] colnext;

  always_comb begin
    colnext = colbuf;
    colnext[int'(t5.z)*GF_W +: GF_W] = quot;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      colbuf <= '0; wr_en <= 1'b0; wr_slot <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (t5.valid) begin
        colbuf <= colnext;
        if (t5.last_z) begin
          wr_en   <= 1'b1;
          wr_slot <= t5.slot2;
          wr_addr <= t5.col;
          wr_data <= colnext;
        end
      end
    end
  end

  // written-column progress, visible the clock after the write lands
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_plane <= '0; done_col <= '0;
    end else if (frame_start) begin
      done_plane <= '0; done_col <= '0;
    end else if (wr_en) begin
      if (int'(wr_addr) == GY - 1) begin
        done_plane <= done_plane + 1'b1;
        done_col   <= '0;
      end else begin
        done_col <= YW'(wr_addr) + 1'b1;
      end
    end
  end

  assign done = (int'(done_plane) == GX);

endmodule
