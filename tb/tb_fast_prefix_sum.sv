// tb_fast_prefix_sum: random bitmask triples against a bit-by-bit reference of
// the first common position and the number of ones of bitmask B below it.
//
// Includes the worked join example with matches at positions 2 and 4.  The
// expected values follow the published definition of the fast prefix sum;
// the random mix and the watchdog length are this testbench's own.
module tb_fast_prefix_sum;
  localparam int BM = 128;
  logic [BM-1:0] a, b, r;
  logic          v;
  logic [6:0]    pos, off;
  int checks = 0, failures = 0;

  fast_prefix_sum #(.BM_LEN(BM)) dut (.bm_a(a), .bm_b(b), .remaining(r),
    .match_valid(v), .match_pos(pos), .off_b(off));

  function automatic logic [BM-1:0] rnd(int density);
    logic [BM-1:0] x;
    for (int i = 0; i < BM; i++) x[i] = ($urandom % 100) < density;
    return x;
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int ev, ep, eo;
      a = rnd($urandom % 101); b = rnd($urandom % 101); r = rnd(50 + $urandom % 51);
      if (n % 10 == 0) r = '1;
      #1;
      ev = 0; ep = 0; eo = 0;
      for (int i = 0; i < BM; i++)
        if (!ev && a[i] && b[i] && r[i]) begin ev = 1; ep = i; end
      for (int i = 0; i < ep; i++) eo += b[i];
      checks++;
      if (v !== ev[0] || (ev && (pos != ep || off != eo))) begin
        failures++;
        if (failures < 10) $display("mismatch: v=%0d/%0d pos=%0d/%0d off=%0d/%0d", v, ev, pos, ep, off, eo);
      end
    end
    // Fig. 10 example: bm-B 10101, bm-A 01101 (position 0 leftmost) -> matches 2 and 4
    a = '0; b = '0; a[1] = 1; a[2] = 1; a[4] = 1; b[0] = 1; b[2] = 1; b[4] = 1; r = '1; #1;
    checks++; if (!(v && pos == 2 && off == 1)) failures++;
    r[2] = 0; #1;
    checks++; if (!(v && pos == 4 && off == 2)) failures++;
    r[4] = 0; #1;
    checks++; if (v) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
