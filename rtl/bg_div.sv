// bg_div: the divider at the end of the Gaussian filter (the "/" unit of the paper's Fig. 14),
// numer / denom -> grid_f value.
//
// Computes q = round(numer * 2^FRAC / denom) as an unsigned QW-bit number by restoring
// division, one quotient bit per step, all steps in one clock; the result is registered, so the
// unit accepts a new division every clock with one clock of latency.  The caller guarantees the
// quotient fits in QW bits (a normalised weighted mean of 8-bit values always does).  A zero
// denominator gives 0, which is the paper's rule f_GF = 0 when k_GF = 0.
module bg_div #(
  parameter int NW   = 33,
  parameter int DW   = 25,
  parameter int QW   = 12,
  parameter int FRAC = 4
) (
  input  logic          clk,
  input  logic [NW-1:0] numer,
  input  logic [DW-1:0] denom,
  output logic [QW-1:0] quot
);

  localparam int XW = NW + FRAC + 1;

  logic [QW-1:0] q;
  logic [XW-1:0] rem;
  logic [XW+QW-1:0] trial;

  always_comb begin
    rem = (XW'(numer) << FRAC) + XW'(denom >> 1);
    q   = '0;
    for (int k = QW - 1; k >= 0; k--) begin
      trial = (XW+QW)'(denom) << k;
      if ((XW+QW)'(rem) >= trial) begin
        rem  = rem - XW'(trial);
        q[k] = 1'b1;
      end
    end
    if (denom == '0) q = '0;
  end

  always_ff @(posedge clk) quot <= q;

endmodule
