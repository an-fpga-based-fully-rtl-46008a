// bg_lb: the line buffer lb, a FIFO of input pixels.  The GC pushes every pixel it accepts;
// the TI pops them in the same order when it interpolates the output pixel at that position.
// Because order is kept, the paper implements lb as a FIFO and so does this design.
//
// The depth default is (2r + round(r/2)) image rows, the amount the paper's Fig. 8 shows
// between the GC and the TI.  The storage is a single-port-per-side RAM; a pop returns its pixel
// on pop_data one clock later and pop_data holds it until the next pop (a BRAM read register).
// push_ready is low when full, pop_valid is high when not empty.  A push and a pop may happen in
// the same clock.
module bg_lb #(
  parameter int W     = 1920,
  parameter int R     = 12,
  parameter int DEPTH = (2 * R + (R + 1) / 2) * W,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       push,
  input  logic [7:0] push_data,
  output logic       push_ready,
  input  logic       pop,
  output logic       pop_valid,
  output logic [7:0] pop_data
);

  logic [7:0]    mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;

  assign push_ready = (count != (AW+1)'(DEPTH));
  assign pop_valid  = (count != '0);

  wire do_push = push && push_ready;
  wire do_pop  = pop && pop_valid;

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= push_data;
    if (do_pop)  pop_data  <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else if (clear) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

endmodule
