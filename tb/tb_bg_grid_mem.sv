// tb_bg_grid_mem: the three-partition grid^2D store (w = 40, r = 4: 12 words of 45 bits).
//
// Random writes go through port A to random partitions and addresses; a shadow array keeps
// the expected contents.  Random port-A reads of one partition and port-B reads of all three
// partitions at one address run in between; each read is checked one clock later, and read
// data must hold while no new read is made, even when the partition select changes.
module tb_bg_grid_mem;
  import bg_pkg::*;

  localparam int W = 40, R = 4, SR = 70, SS = 8;
  localparam int GY = grid_gy(W, R), GZ = grid_gz(R, SR, SS);
  localparam int WORD = GZ * (cnt_width(R) + sum_width(R)), AW = $clog2(GY);

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_en, a_we, b_en;
  logic [1:0] a_slot;
  logic [AW-1:0] a_addr, b_addr;
  logic [WORD-1:0] a_wdata, a_rdata, b_rdata [3];

  bg_grid_mem #(.W(W), .R(R), .SR(SR), .SS(SS)) dut (.*);

  logic [WORD-1:0] shadow [3][GY];

  function automatic logic [WORD-1:0] rand_word();
    logic [WORD-1:0] v;
    for (int i = 0; i < WORD; i += 32) v[i +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    a_en = 0; a_we = 0; b_en = 0; a_slot = 0; a_addr = 0; b_addr = 0; a_wdata = 0;
    // fill everything first
    for (int k = 0; k < 3; k++)
      for (int a = 0; a < GY; a++) begin
        @(negedge clk);
        a_en = 1; a_we = 1; a_slot = 2'(k); a_addr = AW'(a); a_wdata = rand_word();
        shadow[k][a] = a_wdata;
      end
    for (int it = 0; it < 600; it++) begin
      int op;
      logic [WORD-1:0] ea, eb [3];
      logic rd_a, rd_b;
      @(negedge clk);
      op = $urandom_range(0, 2);
      a_en = 0; a_we = 0; b_en = 0;
      a_slot = 2'($urandom_range(0, 2)); a_addr = AW'($urandom_range(0, GY - 1));
      b_addr = AW'($urandom_range(0, GY - 1));
      rd_a = 0; rd_b = ($urandom_range(0, 1) == 1);
      if (op == 0) begin
        a_en = 1; a_we = 1; a_wdata = rand_word();
      end else if (op == 1) begin
        a_en = 1; rd_a = 1; ea = shadow[a_slot][a_addr];
      end
      b_en = rd_b;
      for (int k = 0; k < 3; k++) eb[k] = shadow[k][b_addr];
      if (op == 0) shadow[a_slot][a_addr] = a_wdata;
      @(negedge clk);
      a_en = 0; b_en = 0;
      a_slot = 2'($urandom_range(0, 2));  // the slot may move on while the data is read
      #1;
      if (rd_a) begin checks++; if (a_rdata != ea) failures++; end
      if (rd_b) for (int k = 0; k < 3; k++) begin checks++; if (b_rdata[k] != eb[k]) failures++; end
      @(negedge clk);
      if (rd_a) begin checks++; if (a_rdata != ea) failures++; end
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
