// bg_top: bilateral grid with a variable-sized window, fully pipelined.
//
// An 8-bit grayscale w x h image streams in one pixel per clock and the filtered image streams
// out one pixel per clock.  Inside, four processes run at once on different parts of the frame
// (the paper's macro pipeline): the GC builds grid plane x, the GF blurs plane x-1, and the TI
// interpolates the image rows of plane x-2, while the line buffer holds the input pixels the TI
// has not reached yet.  grid^2D keeps three planes and grid_f^2D two; the blocks hand planes
// over column by column through progress counters, so the pipeline runs without a stall when the
// paper's condition  gy*gz < 2w - round(r/2) - r - (w mod r)  holds, and otherwise the input is
// held (s_ready low) while the GF catches up.
//
// Interface: s_valid/s_ready/s_data is the input pixel stream in raster order and
// m_valid/m_ready/m_data/m_last the output stream (m_last on the frame's final pixel); these
// are the two AXI-Stream channels the DMA would connect to.  No frame marker is needed on the
// input: the design counts w*h pixels per frame.  When all three processes have finished a
// frame, frame_done pulses for one clock, every counter returns to the start of a frame and the
// next frame may begin, so a frame takes about (h + 2r + round(r/2)) * w clocks.
// Parameters: image size W x H, window radius R, range and spatial sigma SR, SS (integers).
module bg_top
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
  localparam int WORD = GZ * (cnt_width(R) + sum_width(R)),
  localparam int FW   = GZ * GF_W,
  localparam int XW   = bits_for(longint'(GX)),
  localparam int YW   = bits_for(longint'(GY)),
  localparam int AW   = $clog2(GY)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid,
  output logic       s_ready,
  input  logic [7:0] s_data,
  output logic       m_valid,
  input  logic       m_ready,
  output logic [7:0] m_data,
  output logic       m_last,
  output logic       frame_done
);

  logic gc_done, gf_done, ti_done;

  // all three processes have finished the frame: restart them together
  assign frame_done = gc_done && gf_done && ti_done;

  // line buffer
  logic       lb_push, lb_ready, lb_pop, lb_valid;
  logic [7:0] lb_wdata, lb_rdata;

  // grid^2D
  logic            ga_en, ga_we;
  logic [1:0]      ga_slot;
  logic [AW-1:0]   ga_addr, gb_addr;
  logic [WORD-1:0] ga_wdata, ga_rdata;
  logic            gb_en;
  logic [WORD-1:0] gb_rdata [3];

  // grid_f^2D
  logic          fa_we, fa_slot, fb_en;
  logic [AW-1:0] fa_addr, fb_addr;
  logic [FW-1:0] fa_wdata;
  logic [FW-1:0] fb_rdata [2];

  // progress
  logic [XW-1:0] gc_fin_plane, gf_plane, gf_done_plane;
  logic [YW-1:0] gc_fin_col, gf_loaded, gf_done_col, ti_cols;
  logic [15:0]   ti_row;

  bg_gc #(.W(W), .H(H), .R(R), .SR(SR), .SS(SS)) u_gc (
    .clk, .rst_n, .frame_start(frame_done),
    .s_valid, .s_ready, .s_data,
    .lb_ready, .lb_push, .lb_data(lb_wdata),
    .mem_en(ga_en), .mem_we(ga_we), .mem_slot(ga_slot), .mem_addr(ga_addr),
    .mem_wdata(ga_wdata), .mem_rdata(ga_rdata),
    .fin_plane(gc_fin_plane), .fin_col(gc_fin_col),
    .gf_plane, .gf_loaded,
    .done(gc_done)
  );

  bg_grid_mem #(.W(W), .R(R), .SR(SR), .SS(SS)) u_grid (
    .clk,
    .a_en(ga_en), .a_we(ga_we), .a_slot(ga_slot), .a_addr(ga_addr),
    .a_wdata(ga_wdata), .a_rdata(ga_rdata),
    .b_en(gb_en), .b_addr(gb_addr), .b_rdata(gb_rdata)
  );

  bg_gf #(.W(W), .H(H), .R(R), .SR(SR), .SS(SS)) u_gf (
    .clk, .rst_n, .frame_start(frame_done),
    .rd_en(gb_en), .rd_addr(gb_addr), .rd_data(gb_rdata),
    .gc_fin_plane, .gc_fin_col,
    .gf_plane, .gf_loaded,
    .wr_en(fa_we), .wr_slot(fa_slot), .wr_addr(fa_addr), .wr_data(fa_wdata),
    .done_plane(gf_done_plane), .done_col(gf_done_col),
    .ti_row, .ti_cols,
    .done(gf_done)
  );

  bg_gridf_mem #(.W(W), .R(R), .SR(SR), .SS(SS)) u_gridf (
    .clk,
    .a_we(fa_we), .a_slot(fa_slot), .a_addr(fa_addr), .a_wdata(fa_wdata),
    .b_en(fb_en), .b_addr(fb_addr), .b_rdata(fb_rdata)
  );

  bg_lb #(.W(W), .R(R)) u_lb (
    .clk, .rst_n, .clear(frame_done),
    .push(lb_push), .push_data(lb_wdata), .push_ready(lb_ready),
    .pop(lb_pop), .pop_valid(lb_valid), .pop_data(lb_rdata)
  );

  bg_ti #(.W(W), .H(H), .R(R), .SR(SR), .SS(SS)) u_ti (
    .clk, .rst_n, .frame_start(frame_done),
    .lb_valid, .lb_pop, .lb_data(lb_rdata),
    .rd_en(fb_en), .rd_addr(fb_addr), .rd_data(fb_rdata),
    .gf_done_plane, .gf_done_col,
    .ti_row, .ti_cols,
    .m_valid, .m_ready, .m_data, .m_last,
    .done(ti_done)
  );

endmodule
