// tb_inner_join_unit: loads random bitmask pairs, takes matches with random
// back-pressure and checks the match stream (ascending positions, fiber-B
// offsets, one match per cycle when taken every cycle), the laggy ready after
// 8 cycles and the fiber-A offset of every match.
//
// The one-match-per-cycle rate and the 8-cycle laggy latency are the
// published figures; ascending match order is this design's choice.
module tb_inner_join_unit;
  localparam int BM = 128;
  logic clk = 0, rst_n = 0, load = 0, m_valid, m_take = 0, m_done, a_ready;
  logic [BM-1:0] a, b;
  logic [6:0] m_pos, m_off_b, lpos, loff;
  int checks = 0, failures = 0;

  inner_join_unit #(.BM_LEN(BM), .ADDERS(16)) dut (.clk, .rst_n, .load, .bm_a(a), .bm_b(b),
    .m_valid, .m_pos, .m_off_b, .m_take, .m_done, .a_ready, .a_lookup_pos(lpos), .a_lookup_off(loff));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int exp_pos[$];
      int cyc, got, stall_mode;
      exp_pos.delete();
      stall_mode = n % 2;
      for (int i = 0; i < BM; i++) begin
        a[i] = ($urandom % 100) < 40;
        b[i] = ($urandom % 100) < (n % 50 + 5);
        if (a[i] && b[i]) exp_pos.push_back(i);
      end
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      cyc = 1; got = 0;
      while (got < exp_pos.size() && cyc < 1000) begin
        int eo;
        eo = 0;
        if (cyc == 8) begin checks++; if (!a_ready) failures++; end
        if (cyc < 8)  begin checks++; if (a_ready) failures++; end
        checks++;
        if (!m_valid || m_pos != 7'(exp_pos[got])) begin
          failures++;
          if (failures < 10) $display("match %0d: valid %0d pos %0d exp %0d", got, m_valid, m_pos, exp_pos[got]);
        end
        for (int i = 0; i < exp_pos[got]; i++) eo += b[i];
        checks++; if (m_off_b != 7'(eo)) failures++;
        m_take = stall_mode ? ($urandom % 2) : 1;
        if (m_take) got++;
        @(negedge clk); m_take = 0; cyc++;
      end
      if (!stall_mode) begin checks++; if (cyc != exp_pos.size() + 1) failures++; end
      checks++; if (!m_done) failures++;
      while (!a_ready) @(negedge clk);
      foreach (exp_pos[j]) begin
        int e;
        e = 0;
        for (int i = 0; i < exp_pos[j]; i++) e += a[i];
        lpos = 7'(exp_pos[j]); #1;
        checks++; if (loff != 7'(e)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
