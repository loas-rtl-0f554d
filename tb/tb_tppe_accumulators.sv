// tb_tppe_accumulators: random pseudo and correction updates against a model
// with 12-bit and 10-bit two's-complement wrap; x[t] = pseudo - correction[t].
//
// Widths are the published 12 and 10 bits; wrap on overflow is this
// design's choice.
module tb_tppe_accumulators;
  localparam int T = 4;
  logic clk = 0, rst_n = 0, clear = 0, p_en = 0;
  logic signed [7:0] p_w, c_w;
  logic [T-1:0] c_mask = '0;
  logic signed [11:0] x [T];
  logic signed [11:0] mp;
  logic signed [9:0]  mc [T];
  int checks = 0, failures = 0;

  tppe_accumulators #(.T(T)) dut (.clk, .rst_n, .clear, .p_en, .p_w, .c_mask, .c_w, .x);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    mp = 0; for (int t = 0; t < T; t++) mc[t] = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      for (int t = 0; t < T; t++) begin
        logic signed [11:0] e;
        e = mp - 12'(mc[t]);
        checks++;
        if (x[t] != e) begin failures++; if (failures < 10) $display("t%0d x=%0d exp=%0d", t, x[t], e); end
      end
      clear  = ($urandom % 200) == 0;
      p_en   = $urandom % 2;
      p_w    = 8'($urandom);
      c_mask = T'($urandom);
      c_w    = 8'($urandom);
      @(posedge clk); #1;
      if (clear) begin mp = 0; for (int t = 0; t < T; t++) mc[t] = 0; end
      else begin
        if (p_en) mp = mp + 12'(p_w);
        for (int t = 0; t < T; t++) if (c_mask[t]) mc[t] = mc[t] + 10'(c_w);
      end
      clear = 0; p_en = 0; c_mask = '0;
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
