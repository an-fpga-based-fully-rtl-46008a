// tb_bg_gridf_mem: the two-partition grid_f^2D store (w = 40, r = 4: 12 words of 108 bits).
//
// Random writes to random partitions and addresses through port A, random port-B reads of
// both partitions at one address, checked one clock later against a shadow array; a write and
// a read in the same clock to different words must both take effect.
module tb_bg_gridf_mem;
  import bg_pkg::*;

  localparam int W = 40, R = 4, SR = 70, SS = 8;
  localparam int GY = grid_gy(W, R), GZ = grid_gz(R, SR, SS);
  localparam int FW = GZ * GF_W, AW = $clog2(GY);

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_we, a_slot, b_en;
  logic [AW-1:0] a_addr, b_addr;
  logic [FW-1:0] a_wdata, b_rdata [2];

  bg_gridf_mem #(.W(W), .R(R), .SR(SR), .SS(SS)) dut (.*);

  logic [FW-1:0] shadow [2][GY];

  function automatic logic [FW-1:0] rand_word();
    logic [FW-1:0] v;
    for (int i = 0; i < FW; i += 32) v[i +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    a_we = 0; b_en = 0; a_slot = 0; a_addr = 0; b_addr = 0; a_wdata = 0;
    for (int k = 0; k < 2; k++)
      for (int a = 0; a < GY; a++) begin
        @(negedge clk);
        a_we = 1; a_slot = 1'(k); a_addr = AW'(a); a_wdata = rand_word();
        shadow[k][a] = a_wdata;
      end
    for (int it = 0; it < 600; it++) begin
      logic [FW-1:0] eb [2];
      logic wr;
      @(negedge clk);
      wr = ($urandom_range(0, 1) == 1);
      a_slot = 1'($urandom_range(0, 1)); a_addr = AW'($urandom_range(0, GY - 1));
      b_addr = AW'($urandom_range(0, GY - 1));
      if (wr && a_addr == b_addr) b_addr = AW'((int'(a_addr) + 1) % GY);
      a_we = wr; a_wdata = rand_word(); b_en = 1;
      for (int k = 0; k < 2; k++) eb[k] = shadow[k][b_addr];
      if (wr) shadow[a_slot][a_addr] = a_wdata;
      @(negedge clk);
      a_we = 0; b_en = 0;
      for (int k = 0; k < 2; k++) begin checks++; if (b_rdata[k] != eb[k]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
