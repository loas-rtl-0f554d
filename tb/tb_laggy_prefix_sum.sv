// tb_laggy_prefix_sum: checks that ready rises exactly BM_LEN/ADDERS = 8
// cycles after start and that every stored offset equals the count of ones
// below its position; also checks that a new start drops ready.
//
// The 8-cycle latency (128 positions, 16 adders) is the published figure.
module tb_laggy_prefix_sum;
  localparam int BM = 128;
  logic clk = 0, rst_n = 0, start = 0, ready;
  logic [BM-1:0] bm;
  logic [6:0] lpos, loff;
  int checks = 0, failures = 0;

  laggy_prefix_sum #(.BM_LEN(BM), .ADDERS(16)) dut (.clk, .rst_n, .start, .bm_a(bm),
    .ready, .lookup_pos(lpos), .lookup_off(loff));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      int lat;
      for (int i = 0; i < BM; i++) bm[i] = ($urandom % 100) < (n * 2);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      bm = ~bm;   // the circuit must work on its own copy
      lat = 1;
      checks++; if (ready) failures++;
      while (!ready && lat < 40) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 8) begin failures++; $display("latency %0d, expected 8", lat); end
      bm = ~bm;
      for (int p = 0; p < BM; p++) begin
        int e;
        e = 0;
        for (int i = 0; i < p; i++) e += bm[i];
        lpos = 7'(p); #1;
        checks++;
        if (loff != 7'(e)) begin failures++; if (failures < 10) $display("pos %0d off %0d exp %0d", p, loff, e); end
      end
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
