// tb_scheduler: drives the scheduler with a model of the TPPE array (busy for
// a random time after each start), a crossbar that grants a random subset of
// requests, and a compressor that stays busy for a random time after a flush.
// Checks the FTP loop order (row group, column, K chunk), every load address,
// that rows past M are not read, the P-LIF column index, the compressor slot
// addresses and the number of starts, fires, flushes and done pulses.
//
// The loop order is the published FTP order; the slot addresses and the
// flush every 128 columns are this design's own layout.
module tb_scheduler;
  import loas_pkg::*;
  localparam int NPE = 16, BM = 128;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] cfg_m, cfg_n, cfg_kc;
  logic [ADDR_W-1:0] a_base, b_base, c_base;
  logic busy, done, load_phase, phase_b, bm_a_clr, acc_clear, pe_start, fire, flush, comp_busy = 0;
  logic [NPE-1:0] req_valid, gnt, pe_busy = '0, pe_b_free = '1;
  logic [ADDR_W-1:0] req_addr [NPE];
  logic [ADDR_W-1:0] pe_a_base [NPE];
  logic [6:0] col;
  logic [ADDR_W-1:0] c_slot, c_stride;
  int checks = 0, failures = 0;
  int n_start = 0, n_fire = 0, n_flush = 0, n_done = 0, n_clear = 0, n_ovl = 0;
  int q_m0[$], q_n[$], q_kc[$];
  int cur_m0, cur_n, cur_kc, pe_timer, comp_timer, free_at;
  logic [NPE-1:0] served;

  scheduler #(.NPE(NPE), .BM(BM)) dut (.clk, .rst_n, .cfg_m, .cfg_n, .cfg_kc, .cfg_a_base(a_base),
    .cfg_b_base(b_base), .cfg_c_base(c_base), .start, .busy, .done, .load_phase, .phase_b,
    .req_valid, .req_addr, .gnt, .bm_a_clr, .acc_clear, .pe_start, .pe_a_base, .pe_busy, .pe_b_free,
    .fire, .col, .flush, .c_slot, .c_stride, .comp_busy);

  always #5 clk = ~clk;

  function automatic logic [ADDR_W-1:0] a_slot(int m, int kc);
    return a_base + ADDR_W'((m * int'(cfg_kc) + kc) * A_SLOT);
  endfunction

  // environment and checks, evaluated between clock edges
  always @(negedge clk) if (rst_n) begin
    gnt = req_valid & NPE'($urandom);
    if (load_phase && q_m0.size() > 0)
      for (int i = 0; i < NPE; i++) if (req_valid[i]) begin
        logic [ADDR_W-1:0] e;
        if (phase_b) e = b_base + ADDR_W'((q_n[0] * int'(cfg_kc) + q_kc[0]) * B_SLOT + i);
        else         e = a_slot(q_m0[0] + i, q_kc[0]);
        checks++;
        if (req_addr[i] != e) begin failures++; if (failures < 10) $display("port %0d addr %0d exp %0d", i, req_addr[i], e); end
        if (!phase_b) begin checks++; if (q_m0[0] + i >= int'(cfg_m)) failures++; end
        if (phase_b) begin checks++; if (i >= B_SLOT) failures++; end
      end
  end

  always @(posedge clk) if (rst_n) begin
    if (pe_start) begin
      checks++; if (pe_busy != '0) begin failures++; $display("start while the TPPEs are busy"); end
      n_start++;
      cur_m0 = q_m0.pop_front(); cur_n = q_n.pop_front(); cur_kc = q_kc.pop_front();
      for (int i = 0; i < NPE; i++) begin
        checks++; if (pe_a_base[i] != a_slot(cur_m0 + i, cur_kc)) failures++;
      end
      pe_timer = 1 + $urandom % 20;
      free_at  = $urandom % pe_timer;      // fast path ends before the checks
    end else if (pe_timer > 0) pe_timer--;
    pe_busy   <= (pe_start || pe_timer > 1) ? '1 : '0;
    pe_b_free <= (!pe_start && pe_timer <= free_at + 1) ? '1 : '0;
    if (load_phase && pe_busy != '0) n_ovl++;
    if (acc_clear) n_clear++;
    if (fire) begin
      n_fire++;
      checks++; if (int'(col) != cur_n % BM) failures++;
      checks++; if (cur_kc != int'(cfg_kc) - 1) failures++;
    end
    if (flush) begin
      int nc;
      n_flush++;
      nc = (int'(cfg_n) + BM - 1) / BM;
      checks++; if (c_slot != c_base + ADDR_W'((cur_m0 * nc + cur_n / BM) * A_SLOT)) failures++;
      checks++; if (c_stride != ADDR_W'(nc * A_SLOT)) failures++;
      comp_timer = 3 + $urandom % 30;
    end else if (comp_timer > 0) comp_timer--;
    comp_busy <= (flush || comp_timer > 1);
    if (done) n_done++;
  end

  task automatic run(input int m_, input int n_, input int kc_);
    int groups, nc;
    cfg_m = 16'(m_); cfg_n = 16'(n_); cfg_kc = 16'(kc_);
    a_base = ADDR_W'($urandom % 100); b_base = ADDR_W'(2000 + $urandom % 100); c_base = ADDR_W'(9000);
    groups = (m_ + NPE - 1) / NPE; nc = (n_ + BM - 1) / BM;
    q_m0.delete(); q_n.delete(); q_kc.delete();
    for (int g = 0; g < groups; g++)
      for (int n = 0; n < n_; n++)
        for (int kc = 0; kc < kc_; kc++) begin q_m0.push_back(g * NPE); q_n.push_back(n); q_kc.push_back(kc); end
    n_start = 0; n_fire = 0; n_flush = 0; n_done = 0; n_clear = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++; if (n_start != groups * n_ * kc_) failures++;
    checks++; if (n_fire != groups * n_) failures++;
    checks++; if (n_clear != groups * n_) failures++;
    checks++; if (n_flush != groups * nc) begin failures++; $display("flushes %0d exp %0d", n_flush, groups * nc); end
    checks++; if (n_done != 1) failures++;
    checks++; if (q_m0.size() != 0) failures++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    pe_timer = 0; comp_timer = 0;
    run(16, 3, 1);
    run(20, 130, 2);
    run(40, 5, 3);
    checks++; if (n_ovl == 0) begin failures++; $display("never: load overlapped with checking"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
