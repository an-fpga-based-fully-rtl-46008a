// bg_gc: Grid Creation (GC).  Projects each input pixel f(ix,iy) onto the grid element
// (round(ix/r), round(iy/r), round(f*sigma_s/(r*sigma_r))) and adds (1, f) to it.
//
// How it works (follows the paper's read-modify-write removal): the pixels of one image row
// that fall into the same grid column (x,y) are consecutive, so the whole column
// grid(x,y,*) is held in the register grid_z while they stream in.  At the first pixel of such
// a run grid_z is taken from the grid BRAM word (x,y), or cleared on the first image row of
// gg(x,*); at the last pixel the updated column is stored back.  The BRAM word for the next run
// is fetched at the first pixel of the current run, so the GC's BRAM port never sees a read
// and a write in the same clock (this needs runs of at least two pixels, checked at
// elaboration).  The z index comes from the LUT L1 (256 entries, computed at elaboration).
//
// Interface: pixels arrive on a valid/ready stream (s_valid, s_ready, s_data), raster order,
// one per clock when s_ready is high.  Every accepted pixel is also pushed into the line buffer.
// lb_data is s_data itself, unregistered; only lb_push depends on the GC's state.
// The GC drops s_ready (the paper's "GC is delayed by suspending the input") when the line
// buffer is full, or when the store would overwrite a grid^2D word that the Gaussian filter has
// not yet loaded: grid^2D keeps three planes, so plane x reuses the partition of plane x-3, which
// GF(x-2) still reads.  Progress outputs fin_plane/fin_col tell the GF which columns are final:
// every column of planes < fin_plane, and columns < fin_col of plane fin_plane.
// After the last pixel of a frame the GC waits for frame_start, which clears all counters.
module bg_gc
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
  localparam int XW   = bits_for(longint'(GX)),
  localparam int YW   = bits_for(longint'(GY)),
  localparam int AW   = $clog2(GY)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            frame_start,
  // input pixel stream
  input  logic            s_valid,
  output logic            s_ready,
  input  logic [7:0]      s_data,
  // line buffer push side
  input  logic            lb_ready,
  output logic            lb_push,
  output logic [7:0]      lb_data,
  // grid^2D port A
  output logic            mem_en,
  output logic            mem_we,
  output logic [1:0]      mem_slot,
  output logic [AW-1:0]   mem_addr,
  output logic [WORD-1:0] mem_wdata,
  input  logic [WORD-1:0] mem_rdata,
  // progress exchanged with the Gaussian filter
  output logic [XW-1:0]   fin_plane,
  output logic [YW-1:0]   fin_col,
  input  logic [XW-1:0]   gf_plane,
  input  logic [YW-1:0]   gf_loaded,
  output logic            done
);

  localparam int YMAX   = max_index(W, R);
  localparam int HALF   = R / 2;                  // first run is r - r/2 pixels long
  localparam int FIRSTL = R - HALF;               // length of the first run
  localparam int LASTL  = W - (YMAX * R - HALF);  // length of the last run of a row

  if (FIRSTL < 2 || LASTL < 2) begin : g_bad_size
    $error("bg_gc: every run of pixels in one grid column must be at least two pixels long");
  end

  // L1: intensity -> z index of the grid, round(l * sigma_s / (r * sigma_r))
  function automatic logic [7:0] l1_entry(int l);
    return 8'(round_div(l * SS, R * SR));
  endfunction

  logic [7:0] l1 [256];
  initial for (int i = 0; i < 256; i++) l1[i] = l1_entry(i);

  // position counters
  logic [15:0]         ix, iy;
  logic [$clog2(R):0]  rpos, cpos;   // position inside the current run (0 .. R-1)
  logic [XW-1:0]       gxi;          // round(ix / r)
  logic [YW-1:0]       gyi;          // round(iy / r)
  logic [1:0]          slot;         // gxi mod 3
  logic [WORD-1:0]     grid_z;

  logic first_row, last_row, first_col, last_col, last_px, accept, write_ok;
  logic [WORD-1:0] base, updated;
  logic [7:0] pz;

  assign first_row = (ix == 0) || (rpos == 0);
  assign last_row  = (ix == 16'(H - 1)) || (rpos == ($clog2(R)+1)'(R - 1));
  assign first_col = (iy == 0) || (cpos == 0);
  assign last_col  = (iy == 16'(W - 1)) || (cpos == ($clog2(R)+1)'(R - 1));
  assign last_px   = (ix == 16'(H - 1)) && (iy == 16'(W - 1));

  // storing column (gxi, gyi) overwrites plane gxi-3, which GF(gxi-2) must have loaded
  always_comb begin
    int p;
    p = int'(gxi) - 2;
    write_ok = (p < 0) || (int'(gf_plane) > p) ||
               ((int'(gf_plane) == p) && (int'(gf_loaded) > int'(gyi)));
  end

  assign s_ready = !done && lb_ready && (!last_col || write_ok);
  assign accept  = s_valid && s_ready;
  assign lb_push = accept;
  assign lb_data = s_data;
  assign pz      = l1[s_data];

  always_comb begin
    base = first_col ? (first_row ? '0 : mem_rdata) : grid_z;
    updated = base;
    for (int z = 0; z < GZ; z++) begin
      if (pz == 8'(z)) begin
        updated[z*CELL+SW +: CW] = base[z*CELL+SW +: CW] + CW'(1);
        updated[z*CELL    +: SW] = base[z*CELL    +: SW] + SW'(s_data);
      end
    end
  end

  // BRAM port A: store at the last pixel of a run, fetch the next run's word at the first
  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_slot  = slot;
    mem_addr  = AW'(gyi);
    mem_wdata = updated;
    if (accept && last_col) begin
      mem_en = 1'b1;
      mem_we = 1'b1;
    end else if (accept && first_col) begin
      if (int'(gyi) != YMAX) begin
        mem_en   = !first_row;
        mem_addr = AW'(gyi + 1'b1);
      end else begin
        // next run is the first of the next row, same plane unless this row ends gg(x,*)
        mem_en   = !last_row;
        mem_addr = '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ix <= '0; iy <= '0; rpos <= ($clog2(R)+1)'(HALF); cpos <= ($clog2(R)+1)'(HALF);
      gxi <= '0; gyi <= '0; slot <= '0; grid_z <= '0;
      fin_plane <= '0; fin_col <= '0; done <= 1'b0;
    end else if (frame_start) begin
      ix <= '0; iy <= '0; rpos <= ($clog2(R)+1)'(HALF); cpos <= ($clog2(R)+1)'(HALF);
      gxi <= '0; gyi <= '0; slot <= '0; grid_z <= '0;
      fin_plane <= '0; fin_col <= '0; done <= 1'b0;
    end else if (accept) begin
      grid_z <= updated;
      if (last_col && last_row) begin
        if (iy == 16'(W - 1)) begin
          fin_plane <= fin_plane + 1'b1;
          fin_col   <= '0;
        end else begin
          fin_col <= gyi + 1'b1;
        end
      end
      if (iy == 16'(W - 1)) begin
        iy   <= '0;
        cpos <= ($clog2(R)+1)'(HALF);
        gyi  <= '0;
        ix   <= ix + 1'b1;
        if (rpos == ($clog2(R)+1)'(R - 1)) begin
          rpos <= '0;
          gxi  <= gxi + 1'b1;
          slot <= (slot == 2'd2) ? 2'd0 : slot + 2'd1;
        end else begin
          rpos <= rpos + 1'b1;
        end
        if (last_px) done <= 1'b1;
      end else begin
        iy <= iy + 1'b1;
        if (cpos == ($clog2(R)+1)'(R - 1)) begin
          cpos <= '0;
          gyi  <= gyi + 1'b1;
        end else begin
          cpos <= cpos + 1'b1;
        end
      end
    end
  end

endmodule
