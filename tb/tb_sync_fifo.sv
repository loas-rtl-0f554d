// tb_sync_fifo: random push/pop traffic against a queue model, checking data
// order, full and empty.
//
// Depth 8 is the published FIFO depth; first-word fall-through is this
// design's choice.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0, full, empty;
  logic [7:0] wd, rd;
  logic [7:0] q[$];
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(8), .DEPTH(8)) dut (.clk, .rst_n, .clear, .push, .wr_data(wd), .pop,
    .rd_data(rd), .full, .empty);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      checks++;
      if (full != (q.size() == 8) || empty != (q.size() == 0)) failures++;
      if (q.size() > 0) begin checks++; if (rd != q[0]) failures++; end
      push = !full && ($urandom % 100 < ((n / 500) % 2 ? 70 : 30));
      pop  = !empty && ($urandom % 100 < ((n / 500) % 2 ? 30 : 70));
      wd   = 8'($urandom);
      @(posedge clk); #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wd);
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
