// bg_gridf_mem: the grid_f^2D store, the blurred grid.  One word per column (x,y) holds the gz
// blurred values grid_f(x,y,*) (unsigned Q8.GF_FRAC each, element 0 in the bottom bits).
//
// Two planes are kept, one per BRAM partition (slot = x mod 2), as in the paper: the TI reads
// planes x and x+1 while the GF writes plane x+2 into the partition plane x frees.  Port A is
// the GF's write port; port B reads the same column address from both partitions for the TI.
// Read data appears one clock after the request.
module bg_gridf_mem
  import bg_pkg::*;
#(
  parameter int W  = 1920,
  parameter int R  = 12,
  parameter int SR = 70,
  parameter int SS = 8,
  localparam int GY   = grid_gy(W, R),
  localparam int GZ   = grid_gz(R, SR, SS),
  localparam int FW   = GZ * GF_W,
  localparam int AW   = $clog2(GY)
) (
  input  logic          clk,
  // port A (GF writes)
  input  logic          a_we,
  input  logic          a_slot,
  input  logic [AW-1:0] a_addr,
  input  logic [FW-1:0] a_wdata,
  // port B (TI reads both partitions)
  input  logic          b_en,
  input  logic [AW-1:0] b_addr,
  output logic [FW-1:0] b_rdata [2]
);

  for (genvar k = 0; k < 2; k++) begin : g_part
    logic [FW-1:0] unused_a_rdata;
    bg_ram #(.DW(FW), .DEPTH(GY)) u_ram (
      .clk    (clk),
      .a_en   (a_we && (a_slot == 1'(k))),
      .a_we   (1'b1),
      .a_addr (a_addr),
      .a_wdata(a_wdata),
      .a_rdata(unused_a_rdata),
      .b_en   (b_en),
      .b_addr (b_addr),
      .b_rdata(b_rdata[k])
    );
  end

endmodule
