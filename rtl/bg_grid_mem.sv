// bg_grid_mem: the grid^2D store.  One word per grid column (x,y) holds all gz elements
// {count, sum} of grid(x,y,*), element gz-1 in the top bits and element 0 in the bottom bits,
// with count above sum inside each element (the bit expression of the paper's Fig. 7).
//
// Only three planes x are kept, one per BRAM partition (slot = x mod 3), as in the paper:
// the GC works on plane x+1 while the GF reads planes x-1, x and x+1.  Port A belongs to the GC
// (one read or one write of the slot it names); port B belongs to the GF and reads the same
// column address from all three partitions at once.  Each partition therefore sees at most two
// accesses per clock.  Read data appears one clock after the request.
module bg_grid_mem
  import bg_pkg::*;
#(
  parameter int W  = 1920,
  parameter int R  = 12,
  parameter int SR = 70,
  parameter int SS = 8,
  localparam int GY   = grid_gy(W, R),
  localparam int GZ   = grid_gz(R, SR, SS),
  localparam int WORD = GZ * (cnt_width(R) + sum_width(R)),
  localparam int AW   = $clog2(GY)
) (
  input  logic            clk,
  // port A (GC)
  input  logic            a_en,
  input  logic            a_we,
  input  logic [1:0]      a_slot,
  input  logic [AW-1:0]   a_addr,
  input  logic [WORD-1:0] a_wdata,
  output logic [WORD-1:0] a_rdata,
  // port B (GF), one word per partition
  input  logic            b_en,
  input  logic [AW-1:0]   b_addr,
  output logic [WORD-1:0] b_rdata [3]
);

  logic [WORD-1:0] a_rd [3];
  logic [1:0]      a_slot_q;

  for (genvar k = 0; k < 3; k++) begin : g_part
    bg_ram #(.DW(WORD), .DEPTH(GY)) u_ram (
      .clk    (clk),
      .a_en   (a_en && (a_slot == 2'(k))),
      .a_we   (a_we),
      .a_addr (a_addr),
      .a_wdata(a_wdata),
      .a_rdata(a_rd[k]),
      .b_en   (b_en),
      .b_addr (b_addr),
      .b_rdata(b_rdata[k])
    );
  end

  // remember which partition port A last read
  always_ff @(posedge clk) begin
    if (a_en && !a_we) a_slot_q <= a_slot;
  end

  always_comb begin
    a_rdata = a_rd[0];
    if (a_slot_q == 2'd1) a_rdata = a_rd[1];
    if (a_slot_q == 2'd2) a_rdata = a_rd[2];
  end

endmodule
