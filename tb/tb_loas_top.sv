// tb_loas_top: end-to-end test of the accelerator at its default sizes
// (16 TPPEs, T = 4, 128-bit bitmasks, 256 KB cache).
//
// Each run draws a random dual-sparse layer: input spikes A (M x K x T) with a
// chosen fraction of non-silent neurons, weights B (K x N) with a chosen
// density.  The testbench compresses A and B into fibers, writes them through
// the host port, runs the layer and reads the output fibers C back.  They are
// compared with a behavioural model: full sums with the accumulator widths,
// the LIF recurrence with hard reset, and the compression rule of the mode.
// The runs cover a partial group of rows, several K chunks, several output
// chunks and the fine-tuned mode, and the testbench counts how often each
// mechanism happened (speculative accumulation confirmed and corrected, FIFO
// stall, laggy wait, bank conflict, fetch-line reuse, fine-tuned drop,
// compressor flush, next fiber-B load overlapped with checking); one that
// never happens counts as a failure.
//
// Runs with every parameter at its default.  The layer sizes and densities
// are this testbench's own; the checked behaviour (packed spikes, bitmask
// fibers, LIF with hard reset, fine-tuned drop) follows the published design.
module tb_loas_top;
  import loas_pkg::*;
  localparam int TS = T, NPE = NUM_PE, BM = BM_LEN;
  localparam int MAXM = 32, MAXN = 160, MAXK = 3 * BM;

  logic clk = 0, rst_n = 0;
  logic host_wr_valid = 0, host_rd_valid = 0, host_rd_gnt, host_rd_rsp_valid;
  logic [ADDR_W-1:0] host_wr_addr, host_rd_addr;
  logic [LINE_W-1:0] host_wr_data, host_rd_data;
  logic [15:0] cfg_m, cfg_n, cfg_kc;
  logic [ADDR_W-1:0] cfg_a_base, cfg_b_base, cfg_c_base;
  logic signed [PACC_W-1:0] cfg_vth;
  logic [2:0] cfg_leak_shift;
  logic cfg_ft_mode = 0, start = 0, busy, done;
  perf_t perf;

  loas_top dut (.clk, .rst_n, .host_wr_valid, .host_wr_addr, .host_wr_data, .host_rd_valid,
    .host_rd_addr, .host_rd_gnt, .host_rd_rsp_valid, .host_rd_data, .cfg_m, .cfg_n, .cfg_kc,
    .cfg_a_base, .cfg_b_base, .cfg_c_base, .cfg_vth, .cfg_leak_shift, .cfg_ft_mode, .start,
    .busy, .done, .perf);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int tot_disc = 0, tot_corr = 0, tot_fifo = 0, tot_lag = 0, tot_bank = 0, tot_reuse = 0,
      tot_drop = 0, tot_flush = 0, tot_fire = 0, tot_ovl = 0;

  logic [TS-1:0]     a [MAXM][MAXK];
  logic signed [7:0] w [MAXK][MAXN];
  logic [TS-1:0]     c_ref [MAXM][MAXN];

  always @(posedge clk) begin
    if (dut.flush) tot_flush++;
    if (dut.load_phase && |dut.pe_busy) tot_ovl++;   // next chunk loads while checking
    if (dut.fire)  tot_fire++;
  end

  task automatic host_write(input logic [ADDR_W-1:0] addr, input logic [LINE_W-1:0] data);
    @(negedge clk);
    host_wr_valid = 1; host_wr_addr = addr; host_wr_data = data;
    @(negedge clk);
    host_wr_valid = 0;
  endtask

  task automatic host_read(input logic [ADDR_W-1:0] addr, output logic [LINE_W-1:0] data);
    @(negedge clk);
    host_rd_valid = 1; host_rd_addr = addr;
    while (!host_rd_gnt) @(negedge clk);
    @(negedge clk);
    host_rd_valid = 0;
    data = host_rd_data;
  endtask

  // write one spike fiber chunk (bitmask line + T data lines)
  task automatic put_spike_fiber(input logic [ADDR_W-1:0] slot, input logic [TS-1:0] v [BM]);
    logic [BM-1:0] bm;
    logic [BM*TS-1:0] pk;
    int cnt;
    bm = '0; pk = '0; cnt = 0;
    for (int j = 0; j < BM; j++)
      if (v[j] != 0) begin bm[j] = 1; pk[cnt*TS +: TS] = v[j]; cnt++; end
    host_write(slot, LINE_W'(bm));
    for (int l = 0; l < A_SLOT - 1; l++) host_write(slot + ADDR_W'(1 + l), pk[l*LINE_W +: LINE_W]);
  endtask

  task automatic put_weight_fiber(input logic [ADDR_W-1:0] slot, input logic signed [7:0] v [BM]);
    logic [BM-1:0] bm;
    logic [BM*8-1:0] pk;
    int cnt;
    bm = '0; pk = '0; cnt = 0;
    for (int j = 0; j < BM; j++)
      if (v[j] != 0) begin bm[j] = 1; pk[cnt*8 +: 8] = v[j]; cnt++; end
    host_write(slot, LINE_W'(bm));
    for (int l = 0; l < DB_LINES; l++) host_write(slot + ADDR_W'(1 + l), pk[l*LINE_W +: LINE_W]);
  endtask

  task automatic run_layer(input int m_, input int n_, input int kc_, input int pa, input int pb,
                           input int ft, input int vth, input int ls);
    int nc;
    logic [ADDR_W-1:0] ab, bb, cb;
    nc = (n_ + BM - 1) / BM;
    ab = 0; bb = ADDR_W'(m_ * kc_ * A_SLOT + 16); cb = bb + ADDR_W'(n_ * kc_ * B_SLOT + 16);
    // data
    for (int m = 0; m < m_; m++)
      for (int k = 0; k < kc_ * BM; k++)
        a[m][k] = (($urandom % 100) < pa) ? TS'($urandom % ((1 << TS) - 1) + 1) : '0;
    for (int m = 0; m < m_; m++)       // some neurons firing at every timestep
      for (int k = 0; k < kc_ * BM; k++)
        if (a[m][k] != 0 && ($urandom % 4 == 0)) a[m][k] = '1;
    for (int k = 0; k < kc_ * BM; k++)
      for (int n = 0; n < n_; n++)
        w[k][n] = (($urandom % 100) < pb) ? 8'(int'($urandom % 60) - 20) : 8'sd0;
    for (int k = 0; k < kc_ * BM; k++)
      for (int n = 0; n < n_; n++)
        if (w[k][n] == 0 && (($urandom % 100) < pb)) w[k][n] = 8'sd3;
    // reference
    for (int m = 0; m < m_; m++)
      for (int n = 0; n < n_; n++) begin
        logic signed [PACC_W-1:0] pacc, xt;
        logic signed [CACC_W-1:0] cacc [TS];
        int u, xv;
        logic [TS-1:0] s;
        pacc = 0; for (int t = 0; t < TS; t++) cacc[t] = 0;
        for (int k = 0; k < kc_ * BM; k++)
          if (a[m][k] != 0 && w[k][n] != 0) begin
            pacc = pacc + PACC_W'(w[k][n]);
            for (int t = 0; t < TS; t++) if (!a[m][k][t]) cacc[t] = cacc[t] + CACC_W'(w[k][n]);
          end
        u = 0; s = '0;
        for (int t = 0; t < TS; t++) begin
          xt = pacc - PACC_W'(cacc[t]);
          xv = int'(xt) + u;
          s[t] = xv > vth;
          u = s[t] ? 0 : (xv >>> ls);
        end
        c_ref[m][n] = s;
      end
    // load the cache
    for (int m = 0; m < m_; m++)
      for (int kc = 0; kc < kc_; kc++) begin
        logic [TS-1:0] v [BM];
        for (int j = 0; j < BM; j++) v[j] = a[m][kc * BM + j];
        put_spike_fiber(ab + ADDR_W'((m * kc_ + kc) * A_SLOT), v);
      end
    for (int n = 0; n < n_; n++)
      for (int kc = 0; kc < kc_; kc++) begin
        logic signed [7:0] v [BM];
        for (int j = 0; j < BM; j++) v[j] = w[kc * BM + j][n];
        put_weight_fiber(bb + ADDR_W'((n * kc_ + kc) * B_SLOT), v);
      end
    // run
    @(negedge clk);
    cfg_m = 16'(m_); cfg_n = 16'(n_); cfg_kc = 16'(kc_);
    cfg_a_base = ab; cfg_b_base = bb; cfg_c_base = cb;
    cfg_vth = PACC_W'(vth); cfg_leak_shift = 3'(ls); cfg_ft_mode = ft[0];
    start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    $display("layer M=%0d N=%0d K=%0d ft=%0d: %0d cycles, joins=%0d discards=%0d corrections=%0d fifo_stalls=%0d laggy_waits=%0d bank_stalls=%0d line_reuses=%0d dropped=%0d",
             m_, n_, kc_ * BM, ft, perf.cycles, perf.joins, perf.discards, perf.corrections,
             perf.fifo_stalls, perf.laggy_waits, perf.bank_stalls, perf.line_reuses, perf.dropped);
    tot_disc += perf.discards; tot_corr += perf.corrections; tot_fifo += perf.fifo_stalls;
    tot_lag += perf.laggy_waits; tot_bank += perf.bank_stalls; tot_reuse += perf.line_reuses;
    tot_drop += perf.dropped;
    // compare the output fibers
    for (int m = 0; m < m_; m++)
      for (int c = 0; c < nc; c++) begin
        logic [BM-1:0] ebm;
        logic [BM*TS-1:0] epk;
        int cnt;
        ebm = '0; epk = '0; cnt = 0;
        for (int j = 0; j < BM && c * BM + j < n_; j++) begin
          logic [TS-1:0] s;
          s = c_ref[m][c * BM + j];
          if (ft ? ($countones(s) >= 2) : (s != 0)) begin ebm[j] = 1; epk[cnt*TS +: TS] = s; cnt++; end
        end
        for (int l = 0; l < A_SLOT; l++) begin
          logic [LINE_W-1:0] got, e;
          host_read(cb + ADDR_W'((m * nc + c) * A_SLOT + l), got);
          e = (l == 0) ? LINE_W'(ebm) : epk[(l-1)*LINE_W +: LINE_W];
          checks++;
          if (got != e) begin
            failures++;
            if (failures < 10) $display("row %0d chunk %0d line %0d: got %h exp %h", m, c, l, got, e);
          end
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    //        M   N    KC  %A  %B  ft  vth  leak
    run_layer(20, 130, 2,  35, 25, 0,  40,  1);
    run_layer(20, 130, 2,  35, 25, 1,  40,  1);
    run_layer(16, 24,  3,  30, 3,  1,  5,   2);
    checks++; if (tot_disc == 0)  begin failures++; $display("never: prediction confirmed"); end
    checks++; if (tot_corr == 0)  begin failures++; $display("never: correction"); end
    checks++; if (tot_fifo == 0)  begin failures++; $display("never: FIFO stall"); end
    checks++; if (tot_lag == 0)   begin failures++; $display("never: laggy wait"); end
    checks++; if (tot_bank == 0)  begin failures++; $display("never: bank conflict"); end
    checks++; if (tot_reuse == 0) begin failures++; $display("never: fetch-line reuse"); end
    checks++; if (tot_drop == 0)  begin failures++; $display("never: fine-tuned drop"); end
    checks++; if (tot_flush < 4)  begin failures++; $display("too few compressor flushes"); end
    checks++; if (tot_ovl == 0)   begin failures++; $display("never: fiber-B load overlapped with checking"); end
    $display("mechanisms: confirmed=%0d corrected=%0d fifo_stalls=%0d laggy_waits=%0d bank_conflicts=%0d line_reuses=%0d ft_drops=%0d flushes=%0d fires=%0d overlap_cycles=%0d",
             tot_disc, tot_corr, tot_fifo, tot_lag, tot_bank, tot_reuse, tot_drop, tot_flush, tot_fire, tot_ovl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
