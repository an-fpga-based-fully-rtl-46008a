// bg_ti: Trilinear Interpolation (TI).  For each pixel it samples grid_f at the pixel's feature
// vector p = (ix/r, iy/r, f*sigma_s/(r*sigma_r)) from the eight surrounding elements and
// rounds to an 8-bit output pixel.
//
// How it works (follows the paper's Figs. 12, 13 and 15): pixels of row ix lie between grid_f
// planes q = floor(ix/r) and q+1.  The register window reg_TI holds columns Y0 and Y0+1
// (Y0 = floor(iy/r)) of both planes.  Column Y0+1 is loaded from both grid_f^2D partitions when
// iy crosses a multiple of r and shifted in; at the start of a row column 0 is loaded at iy=0
// and column 1 one clock later at iy=1, because the first pixel only needs column 0 (the trick
// of the paper's Fig. 9, note 2).  The fractional parts come from three tables built at
// elaboration: L2[ix mod r] and L3[iy mod r] give (ix mod r)/r and (iy mod r)/r, and a 256-entry
// table gives floor and fraction of the intensity coordinate.  The eight elements are first
// paired along z and weighted by the z coefficients, then weighted by the x*y coefficients and
// summed by an adder tree (Fig. 15).  Coefficients are Q0.CF_FRAC.  The weight of each corner
// is the standard trilinear one (1-dx or dx per axis).
//
// Interface: pops pixels from the line buffer (data arrives one clock after the pop); reads
// grid_f^2D (data one clock after the read); writes an output stream m_valid/m_ready/m_data with
// m_last on the frame's final pixel.  Output backpressure stalls the whole TI pipeline.
// A pixel is started only when the grid_f^2D column it loads has been written
// (gf_done_plane/gf_done_col); ti_row/ti_cols report to the GF which columns of which row the
// TI has already loaded.  Latency from pop to m_valid: four clocks.
//
// Lint note: the stage-2 token keeps the load flags and coordinates that only stages 1 and 2
// use, so a strict lint reports those bits of it as unused; they cost nothing after synthesis.
module bg_ti
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
  localparam int FW   = GZ * GF_W,
  localparam int XW   = bits_for(longint'(GX)),
  localparam int YW   = bits_for(longint'(GY)),
  localparam int AW   = $clog2(GY),
  localparam int RW   = $clog2(R) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          frame_start,
  // line buffer pop side
  input  logic          lb_valid,
  output logic          lb_pop,
  input  logic [7:0]    lb_data,
  // grid_f^2D port B
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [FW-1:0] rd_data [2],
  // progress from / to the GF
  input  logic [XW-1:0] gf_done_plane,
  input  logic [YW-1:0] gf_done_col,
  output logic [15:0]   ti_row,
  output logic [YW-1:0] ti_cols,
  // output pixel stream
  output logic          m_valid,
  input  logic          m_ready,
  output logic [7:0]    m_data,
  output logic          m_last,
  output logic          done
);

  localparam int ONE  = 1 << CF_FRAC;
  localparam int SH   = GF_FRAC + 3 * CF_FRAC;
  localparam int ACCW = GF_W + 3 * (CF_FRAC + 1) + 2;

  // L2 / L3: position inside a run of r pixels -> fraction of a grid step, (c / r) * 2^CF_FRAC
  logic [CF_FRAC:0] l2 [R];
  logic [CF_FRAC:0] l3 [R];
  // intensity -> floor and fraction of f * sigma_s / (r * sigma_r)
  logic [7:0]       lz_int [256];
  logic [CF_FRAC:0] lz_frac [256];

  initial begin
    for (int c = 0; c < R; c++) begin
      l2[c] = (CF_FRAC+1)'((c * ONE + R / 2) / R);
      l3[c] = (CF_FRAC+1)'((c * ONE + R / 2) / R);
    end
    for (int l = 0; l < 256; l++) begin
      lz_int[l]  = 8'((l * SS) / (R * SR));
      lz_frac[l] = (CF_FRAC+1)'((((l * SS) % (R * SR)) * ONE + (R * SR) / 2) / (R * SR));
    end
  end

  // ------------------------------------------------------------------ stage 0: issue
  logic [15:0]   ix, iy;
  logic [RW-1:0] cx, cy;
  logic [XW-1:0] q;
  logic [YW-1:0] y0;
  logic          sq;           // partition of plane q
  logic          adv;          // the pipeline moves this clock
  logic          need_rd;
  logic [YW-1:0] rd_col;
  logic          col_ok, issue;

  assign adv = !m_valid || m_ready;

  always_comb begin
    need_rd = 1'b0;
    rd_col  = y0 + 1'b1;
    if (iy == 16'd0) begin
      need_rd = 1'b1; rd_col = '0;
    end else if (iy == 16'd1) begin
      need_rd = 1'b1; rd_col = YW'(1);
    end else if (cy == '0) begin
      need_rd = 1'b1;
    end
    col_ok = (int'(q) + 1 < int'(gf_done_plane)) ||
             ((int'(q) + 1 == int'(gf_done_plane)) && (rd_col < gf_done_col));
  end

  assign issue   = adv && !done && (ix != 16'(H)) && lb_valid && (!need_rd || col_ok);
  assign lb_pop  = issue;
  assign rd_en   = issue && need_rd;
  assign rd_addr = AW'(rd_col);
  assign ti_row  = ix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ix <= '0; iy <= '0; cx <= '0; cy <= '0; q <= '0; y0 <= '0; sq <= 1'b0; ti_cols <= '0;
    end else if (frame_start) begin
      ix <= '0; iy <= '0; cx <= '0; cy <= '0; q <= '0; y0 <= '0; sq <= 1'b0; ti_cols <= '0;
    end else if (issue) begin
      if (need_rd) ti_cols <= rd_col + 1'b1;
      if (iy == 16'(W - 1)) begin
        iy <= '0; cy <= '0; y0 <= '0; ti_cols <= '0;
        ix <= ix + 1'b1;
        if (cx == RW'(R - 1)) begin
          cx <= '0; q <= q + 1'b1; sq <= !sq;
        end else begin
          cx <= cx + 1'b1;
        end
      end else begin
        iy <= iy + 1'b1;
        if (cy == RW'(R - 1)) begin
          cy <= '0; y0 <= y0 + 1'b1;
        end else begin
          cy <= cy + 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------------ stage 1: reg_TI
  typedef struct packed {
    logic          valid;
    logic          last;
    logic          first;    // iy == 0
    logic          second;   // iy == 1
    logic          shift;    // new column at a run boundary
    logic          sq;
    logic [RW-1:0] cx;
    logic [RW-1:0] cy;
  } tok_t;

  tok_t t1, t2;
  logic [FW-1:0] ra [2], rb [2];   // [plane q, q+1] columns Y0 (a) and Y0+1 (b)
  logic [7:0]    l2pix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t1 <= '0;
    else if (adv) begin
      t1.valid  <= issue;
      t1.last   <= (ix == 16'(H - 1)) && (iy == 16'(W - 1));
      t1.first  <= (iy == 16'd0);
      t1.second <= (iy == 16'd1);
      t1.shift  <= (iy > 16'd1) && (cy == '0);
      t1.sq     <= sq;
      t1.cx     <= cx;
      t1.cy     <= cy;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 2; k++) begin ra[k] <= '0; rb[k] <= '0; end
    end else if (adv && t1.valid) begin
      for (int k = 0; k < 2; k++) begin
        // plane q sits in partition sq, plane q+1 in the other one
        if (t1.first) begin
          ra[k] <= rd_data[1'(k) ^ t1.sq];
          rb[k] <= '0;
        end else if (t1.second) begin
          rb[k] <= rd_data[1'(k) ^ t1.sq];
        end else if (t1.shift) begin
          ra[k] <= rb[k];
          rb[k] <= rd_data[1'(k) ^ t1.sq];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t2 <= '0;
    else if (adv) t2 <= t1;
  end

  always_ff @(posedge clk) begin
    if (adv) l2pix <= lb_data;
  end

  // ------------------------------------------------------------------ stage 2: z pairs
  localparam int PW = GF_W + CF_FRAC + 1;
  logic [PW-1:0]    vz [2][2];     // [x corner][y corner]
  logic [CF_FRAC:0] wx, wy;
  logic             t3_valid, t3_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t3_valid <= 1'b0; t3_last <= 1'b0;
    end else if (adv) begin
      t3_valid <= t2.valid; t3_last <= t2.last;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      logic [7:0]       z0;
      logic [CF_FRAC:0] fz;
      z0 = lz_int[l2pix];
      fz = lz_frac[l2pix];
      for (int k = 0; k < 2; k++) begin
        vz[k][0] <= PW'(ra[k][int'(z0)*GF_W +: GF_W]) * PW'(ONE - int'(fz)) +
                    PW'(ra[k][(int'(z0)+1)*GF_W +: GF_W]) * PW'(fz);
        vz[k][1] <= PW'(rb[k][int'(z0)*GF_W +: GF_W]) * PW'(ONE - int'(fz)) +
                    PW'(rb[k][(int'(z0)+1)*GF_W +: GF_W]) * PW'(fz);
      end
      wx <= l2[t2.cx[RW-2:0]];
      wy <= l3[t2.cy[RW-2:0]];
    end
  end

  // ------------------------------------------------------------------ stage 3: xy weights
  logic [ACCW-1:0] acc;
  logic            t4_valid, t4_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t4_valid <= 1'b0; t4_last <= 1'b0;
    end else if (adv) begin
      t4_valid <= t3_valid; t4_last <= t3_last;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      logic [2*CF_FRAC+1:0] wxy [2][2];
      wxy[0][0] = (2*CF_FRAC+2)'(ONE - int'(wx)) * (2*CF_FRAC+2)'(ONE - int'(wy));
      wxy[0][1] = (2*CF_FRAC+2)'(ONE - int'(wx)) * (2*CF_FRAC+2)'(wy);
      wxy[1][0] = (2*CF_FRAC+2)'(wx) * (2*CF_FRAC+2)'(ONE - int'(wy));
      wxy[1][1] = (2*CF_FRAC+2)'(wx) * (2*CF_FRAC+2)'(wy);
      acc <= ACCW'(vz[0][0]) * ACCW'(wxy[0][0]) + ACCW'(vz[0][1]) * ACCW'(wxy[0][1]) +
             ACCW'(vz[1][0]) * ACCW'(wxy[1][0]) + ACCW'(vz[1][1]) * ACCW'(wxy[1][1]);
    end
  end

  // ------------------------------------------------------------------ stage 4: round, output
  logic [ACCW-1:0] rounded;
  assign rounded = (acc + (ACCW'(1) << (SH - 1))) >> SH;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_data <= '0; m_last <= 1'b0;
    end else if (adv) begin
      m_valid <= t4_valid;
      m_last  <= t4_valid && t4_last;
      m_data  <= (rounded > ACCW'(255)) ? 8'd255 : rounded[7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                done <= 1'b0;
    else if (frame_start)                      done <= 1'b0;
    else if (m_valid && m_ready && m_last)     done <= 1'b1;
  end

endmodule
