// tb_bg_lb: the line-buffer FIFO with a small depth (37).  Random pushes and pops against a
// queue model: order and data are checked, push_ready must fall exactly when 37 pixels are
// held and pop_valid exactly when none are, and clear must empty it.
module tb_bg_lb;

  localparam int DEPTH = 37;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, push, push_ready, pop, pop_valid;
  logic [7:0] push_data, pop_data;

  bg_lb #(.W(8), .R(2), .DEPTH(DEPTH)) dut (.*);

  byte unsigned q [$];
  int fulls = 0, empties = 0;
  logic pend, acc_push, acc_pop;
  byte unsigned pend_v;

  initial begin
    clear = 0; push = 0; pop = 0; push_data = 0; pend = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      int bias;
      @(negedge clk);
      if (pend) begin
        checks++;
        if (pop_data != pend_v) failures++;
        pend = 0;
      end
      checks++;
      if (push_ready != (q.size() < DEPTH)) failures++;
      checks++;
      if (pop_valid != (q.size() > 0)) failures++;
      if (q.size() == DEPTH) fulls++;
      if (q.size() == 0) empties++;
      bias = ((it / 500) % 2 == 0) ? 3 : 1;    // alternate filling and draining phases
      push = ($urandom_range(0, 3) < bias);
      pop  = ($urandom_range(0, 3) >= bias);
      push_data = 8'($urandom());
      acc_push = push && (q.size() < DEPTH);
      acc_pop  = pop && (q.size() > 0);
      @(posedge clk);
      #1;
      if (acc_pop) begin pend = 1; pend_v = q.pop_front(); end
      if (acc_push) q.push_back(push_data);
    end
    @(negedge clk);
    push = 0; pop = 0; clear = 1;
    @(negedge clk);
    clear = 0;
    q.delete();
    checks++; if (pop_valid || !push_ready) failures++;
    checks++; if (fulls == 0 || empties == 0) failures++;
    $display("full %0d times, empty %0d times", fulls, empties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
