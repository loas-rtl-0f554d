// tb_plif: random full sums, thresholds and leak shifts against a behavioural
// LIF recurrence (hard reset, tau = 2^-s), plus the one-cycle output latency.
//
// The recurrence and the hard reset follow the published LIF; the power-of-two
// leak is this design's choice.
module tb_plif;
  localparam int T = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [11:0] o [T];
  logic signed [11:0] vth;
  logic [2:0] ls;
  logic [T-1:0] spikes;
  int checks = 0, failures = 0;

  plif #(.T(T), .X_W(12)) dut (.clk, .rst_n, .in_valid, .o, .vth, .leak_shift(ls), .out_valid, .spikes);

  always #5 clk = ~clk;

  function automatic logic [T-1:0] ref_lif(input logic signed [11:0] oo [T], input int th, input int s);
    logic [T-1:0] r;
    int u = 0;
    for (int t = 0; t < T; t++) begin
      int xv = int'(oo[t]) + u;
      r[t] = xv > th;
      u = r[t] ? 0 : (xv >>> s);
    end
    return r;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic [T-1:0] e;
      @(negedge clk);
      for (int t = 0; t < T; t++) o[t] = (n % 3 == 0) ? 12'($urandom) : 12'(int'($urandom % 200) - 60);
      vth = 12'($urandom % 150);
      ls  = 3'($urandom % 4);
      in_valid = 1;
      e = ref_lif(o, int'(vth), int'(ls));
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || spikes != e) begin
        failures++;
        if (failures < 10) $display("spikes %b exp %b", spikes, e);
      end
      @(negedge clk);
      checks++; if (out_valid) failures++;
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
