// bg_ram: block RAM with two ports, the storage primitive of grid^2D and grid_f^2D.
//
// Port A reads or writes one word per clock, port B only reads.  Reads are synchronous: the word
// addressed in cycle t is on *_rdata in cycle t+1 and stays there until the next read on that
// port.  The paper allows at most two accesses per BRAM per clock; this two-port shape is how
// each partition meets that rule.  Contents are not reset (as in a real BRAM): users only read
// words they have written.
module bg_ram #(
  parameter int DW    = 96,
  parameter int DEPTH = 162,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  input  logic          b_en,
  input  logic [AW-1:0] b_addr,
  output logic [DW-1:0] b_rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
