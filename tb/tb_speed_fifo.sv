// tb_speed_fifo: random push/pop against a queue model; checks data order,
// full/empty/count, and simultaneous push and pop.
module tb_speed_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [15:0] din, dout;
  logic [2:0] cnt;
  int checks = 0, failures = 0;
  logic [15:0] q [$];
  speed_fifo #(.WIDTH(16), .DEPTH(4)) dut (.clk_i (clk), .rst_ni (rst_n), .push_i (push), .data_i (din),
    .full_o (full), .pop_i (pop), .data_o (dout), .empty_o (empty), .count_o (cnt));
  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 4) || int'(cnt) != q.size()) begin
        failures++; $display("FAIL flags size=%0d cnt=%0d", q.size(), cnt);
      end
      if (q.size() > 0) begin checks++; if (dout != q[0]) begin failures++; $display("FAIL data"); end end
      pop  = !empty && ($urandom_range(2) != 0);
      push = (!full || pop) && ($urandom_range(2) != 0);
      din  = 16'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
