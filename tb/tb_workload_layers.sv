// tb_workload_layers: runs the single-layer workloads of the evaluation on the
// accelerator at its default sizes, with random operands drawn at the layer's
// published densities, and checks every output fiber against a behavioural
// model (same model as tb_loas_top).
//
//   layer   T  M    N     K     non-silent A   non-zero B   run here
//   V-L8    4  16   512   2304  13.2 %         3.2 %        whole layer
//   R-L19   4  16   512   2304  44.3 %         0.9 %        whole layer
//   A-L4    4  64   256   3456  30.3 %         1.1 %        whole layer
//   T-HFF   4  784  3072  3072  13.2 %         3.2 %        16 rows x 64 columns
// (non-silent A = 100 % minus the fine-tuned packed sparsity of the table.)
//
// The cache holds fixed-size fiber slots, so a whole layer does not fit at
// once; the testbench plays the host and streams the weight columns in tiles
// (all of A stays resident, one tile of B columns is loaded per run).
//
// Layer shapes and densities are the published ones; the tiling of B is
// this testbench's own, needed by the fixed-slot layout.
module tb_workload_layers;
  import loas_pkg::*;
  localparam int TS = T, BM = BM_LEN;
  localparam int MAXM = 64, MAXK = 3456, MAXN = 64;

  logic clk = 0, rst_n = 0;
  logic host_wr_valid = 0, host_rd_valid = 0, host_rd_gnt, host_rd_rsp_valid;
  logic [ADDR_W-1:0] host_wr_addr, host_rd_addr;
  logic [LINE_W-1:0] host_wr_data, host_rd_data;
  logic [15:0] cfg_m, cfg_n, cfg_kc;
  logic [ADDR_W-1:0] cfg_a_base, cfg_b_base, cfg_c_base;
  logic signed [PACC_W-1:0] cfg_vth;
  logic [2:0] cfg_leak_shift;
  logic cfg_ft_mode = 1, start = 0, busy, done;
  perf_t perf;

  loas_top dut (.clk, .rst_n, .host_wr_valid, .host_wr_addr, .host_wr_data, .host_rd_valid,
    .host_rd_addr, .host_rd_gnt, .host_rd_rsp_valid, .host_rd_data, .cfg_m, .cfg_n, .cfg_kc,
    .cfg_a_base, .cfg_b_base, .cfg_c_base, .cfg_vth, .cfg_leak_shift, .cfg_ft_mode, .start,
    .busy, .done, .perf);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [TS-1:0]     a [MAXM][MAXK];
  logic signed [7:0] w [MAXK][MAXN];

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

  // whole layer: A resident, B streamed in tiles of nt columns
  task automatic run_workload(input string name, input int m_, input int n_, input int k_,
                              input int pa10, input int pb10, input int nt);
    int kc_, ntiles, cycles, joins;
    logic [ADDR_W-1:0] ab, bb, cb;
    kc_ = k_ / BM; ntiles = (n_ + nt - 1) / nt; cycles = 0; joins = 0;
    ab = 0; bb = ADDR_W'(m_ * kc_ * A_SLOT); cb = bb + ADDR_W'(nt * kc_ * B_SLOT);
    cfg_m = 16'(m_); cfg_kc = 16'(kc_); cfg_a_base = ab; cfg_b_base = bb; cfg_c_base = cb;
    cfg_vth = 12'sd20; cfg_leak_shift = 3'd1; cfg_ft_mode = 1;
    for (int m = 0; m < m_; m++)
      for (int k = 0; k < k_; k++)
        a[m][k] = (($urandom % 1000) < pa10) ? TS'($urandom % ((1 << TS) - 1) + 1) : '0;
    for (int m = 0; m < m_; m++)
      for (int kc = 0; kc < kc_; kc++) begin
        logic [BM-1:0] bm;
        logic [BM*TS-1:0] pk;
        int cnt;
        bm = '0; pk = '0; cnt = 0;
        for (int j = 0; j < BM; j++)
          if (a[m][kc*BM + j] != 0) begin bm[j] = 1; pk[cnt*TS +: TS] = a[m][kc*BM + j]; cnt++; end
        host_write(ab + ADDR_W'((m * kc_ + kc) * A_SLOT), LINE_W'(bm));
        for (int l = 0; l < A_SLOT - 1; l++) host_write(ab + ADDR_W'((m * kc_ + kc) * A_SLOT + 1 + l), pk[l*LINE_W +: LINE_W]);
      end
    for (int tile = 0; tile < ntiles; tile++) begin
      int nw;
      nw = (n_ - tile * nt < nt) ? n_ - tile * nt : nt;
      for (int k = 0; k < k_; k++)
        for (int n = 0; n < nw; n++)
          w[k][n] = (($urandom % 1000) < pb10) ? 8'(int'($urandom % 100) + 1) : 8'sd0;
      for (int n = 0; n < nw; n++)
        for (int kc = 0; kc < kc_; kc++) begin
          logic [BM-1:0] bm;
          logic [BM*8-1:0] pk;
          int cnt;
          bm = '0; pk = '0; cnt = 0;
          for (int j = 0; j < BM; j++)
            if (w[kc*BM + j][n] != 0) begin bm[j] = 1; pk[cnt*8 +: 8] = w[kc*BM + j][n]; cnt++; end
          host_write(bb + ADDR_W'((n * kc_ + kc) * B_SLOT), LINE_W'(bm));
          for (int l = 0; l < DB_LINES; l++) host_write(bb + ADDR_W'((n * kc_ + kc) * B_SLOT + 1 + l), pk[l*LINE_W +: LINE_W]);
        end
      @(negedge clk);
      cfg_n = 16'(nw);
      start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      cycles += perf.cycles; joins += perf.joins;
      for (int m = 0; m < m_; m++) begin
        logic [BM-1:0] ebm;
        logic [BM*TS-1:0] epk;
        int cnt;
        ebm = '0; epk = '0; cnt = 0;
        for (int n = 0; n < nw; n++) begin
          logic signed [PACC_W-1:0] pacc, xt;
          logic signed [CACC_W-1:0] cacc [TS];
          int u, xv;
          logic [TS-1:0] s;
          pacc = 0; for (int t = 0; t < TS; t++) cacc[t] = 0;
          for (int k = 0; k < k_; k++)
            if (a[m][k] != 0 && w[k][n] != 0) begin
              pacc = pacc + PACC_W'(w[k][n]);
              for (int t = 0; t < TS; t++) if (!a[m][k][t]) cacc[t] = cacc[t] + CACC_W'(w[k][n]);
            end
          u = 0; s = '0;
          for (int t = 0; t < TS; t++) begin
            xt = pacc - PACC_W'(cacc[t]);
            xv = int'(xt) + u;
            s[t] = xv > 20;
            u = s[t] ? 0 : (xv >>> 1);
          end
          if ($countones(s) >= 2) begin ebm[n] = 1; epk[cnt*TS +: TS] = s; cnt++; end
        end
        for (int l = 0; l < A_SLOT; l++) begin
          logic [LINE_W-1:0] got, e;
          host_read(cb + ADDR_W'(m * A_SLOT + l), got);
          e = (l == 0) ? LINE_W'(ebm) : epk[(l-1)*LINE_W +: LINE_W];
          checks++;
          if (got != e) begin
            failures++;
            if (failures < 10) $display("%s tile %0d row %0d line %0d wrong", name, tile, m, l);
          end
        end
      end
    end
    $display("%s: T=%0d M=%0d N=%0d K=%0d  %0d accelerator cycles (%0d tiles), %0d matched pairs",
             name, TS, m_, n_, k_, cycles, ntiles, joins);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    //           name     M   N    K     A(1/1000) B(1/1000) tile
    run_workload("V-L8",  16, 512, 2304, 132,      32,       64);
    run_workload("R-L19", 16, 512, 2304, 443,      9,        64);
    run_workload("A-L4",  64, 256, 3456, 303,      11,       16);
    run_workload("T-HFF", 16, 64,  3072, 132,      32,       32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
