// tb_tppe: one TPPE against a behavioural model of the dual-sparse dot
// product.  For each output neuron it loads several random K chunks (bitmask
// A, bitmask B, 128-byte fiber-B), serves the fiber-A line fetches from a
// memory model with random grant and response delays, and compares the T full
// sums with sum_k A[k][t]*B[k] computed with the accumulators' wrap widths.
// It also checks that the first match is accumulated one cycle after start,
// that the first eight matches take one cycle each, and that prediction hits,
// corrections, FIFO stalls, laggy waits and fetch-line reuse all occur.
// When b_free rises during a chunk it checks that every match was taken and
// the laggy offsets are stored, then overwrites the input buffers with
// garbage, as an overlapped next load would; the sums must not change.
//
// The speculate-then-correct behaviour and the one-match-per-cycle rate
// follow the published TPPE; the fetch handshake is this design's own.
module tb_tppe;
  import loas_pkg::*;
  localparam int TS = 4, BM = 128, DBL = 8, VPL = LINE_W / TS;
  logic clk = 0, rst_n = 0;
  logic bm_a_we = 0, bm_b_we = 0, acc_clear = 0, start = 0, busy, b_free;
  int   nm, freed, n_free = 0;
  logic [BM-1:0] bm_a_in, bm_b_in;
  logic [DBL-1:0] db_we = '0;
  logic [LINE_W-1:0] db_line [DBL];
  logic [ADDR_W-1:0] a_base, rd_addr;
  logic rd_valid, rd_gnt = 0, rsp_valid = 0;
  logic [LINE_W-1:0] rsp_data;
  logic signed [PACC_W-1:0] x [TS];
  logic ev_match, ev_discard, ev_correct, ev_fifo_stall, ev_laggy_wait, ev_bank_stall, ev_line_reuse;
  logic [LINE_W-1:0] mem [logic [ADDR_W-1:0]];
  int checks = 0, failures = 0;
  int n_disc = 0, n_corr = 0, n_stall = 0, n_lag = 0, n_reuse = 0, n_bank = 0;

  tppe #(.T_STEPS(TS)) dut (.clk, .rst_n, .bm_a_we, .bm_a_in, .bm_b_we, .bm_b_in, .db_we, .db_line,
    .a_base, .acc_clear, .start, .busy, .b_free, .rd_valid, .rd_addr, .rd_gnt, .rsp_valid, .rsp_data, .x,
    .ev_match, .ev_discard, .ev_correct, .ev_fifo_stall, .ev_laggy_wait, .ev_bank_stall, .ev_line_reuse);

  always #5 clk = ~clk;

  // memory model: random grant, response 1..3 cycles later
  initial begin
    forever begin
      @(negedge clk);
      rsp_valid = 0;
      rd_gnt = rd_valid && ($urandom % 3 != 0);
      if (rd_gnt) begin
        logic [ADDR_W-1:0] a;
        int d;
        a = rd_addr;
        d = 1 + $urandom % 3;
        @(negedge clk); rd_gnt = 0;
        repeat (d - 1) @(negedge clk);
        rsp_valid = 1;
        rsp_data  = mem.exists(a) ? mem[a] : '0;
      end
    end
  end

  always @(posedge clk) begin
    n_disc  += int'(ev_discard);
    n_corr  += int'(ev_correct);
    n_stall += int'(ev_fifo_stall);
    n_lag   += int'(ev_laggy_wait);
    n_reuse += int'(ev_line_reuse);
    n_bank  += int'(ev_bank_stall);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int neuron = 0; neuron < 60; neuron++) begin
      logic signed [PACC_W-1:0] pacc;
      logic signed [CACC_W-1:0] cacc [TS];
      int nkc;
      pacc = 0; for (int t = 0; t < TS; t++) cacc[t] = 0;
      nkc = 1 + neuron % 3;
      @(negedge clk); acc_clear = 1;
      @(negedge clk); acc_clear = 0;
      for (int kc = 0; kc < nkc; kc++) begin
        logic [TS-1:0] aval [BM];
        logic signed [7:0] wval [BM];
        logic [BM*TS-1:0] apack;
        logic [BM*8-1:0]  bpack;
        int na, nb, nmatch, da, db, cyc, first, consec;
        da = 10 + (neuron * 7) % 80; db = 5 + (neuron * 13) % 90;
        na = 0; nb = 0; nmatch = 0; apack = '0; bpack = '0;
        for (int k = 0; k < BM; k++) begin
          bm_a_in[k] = ($urandom % 100) < da;
          bm_b_in[k] = ($urandom % 100) < db;
          aval[k] = ($urandom % 3 == 0) ? '1 : TS'($urandom % 15 + 1);
          wval[k] = 8'($urandom);
          if (bm_a_in[k]) begin apack[na*TS +: TS] = aval[k]; na++; end
          if (bm_b_in[k]) begin bpack[nb*8 +: 8] = wval[k]; nb++; end
          if (bm_a_in[k] && bm_b_in[k]) begin
            nmatch++;
            pacc = pacc + PACC_W'(wval[k]);
            for (int t = 0; t < TS; t++) if (!aval[k][t]) cacc[t] = cacc[t] + CACC_W'(wval[k]);
          end
        end
        a_base = ADDR_W'($urandom % 1000);
        mem.delete();
        for (int l = 0; l < TS; l++) mem[a_base + 1 + l] = apack[l*LINE_W +: LINE_W];
        for (int l = 0; l < DBL; l++) db_line[l] = bpack[l*LINE_W +: LINE_W];
        bm_a_we = 1; bm_b_we = 1; db_we = '1;
        @(negedge clk); bm_a_we = 0; bm_b_we = 0; db_we = '0;
        bm_a_in = ~bm_a_in; bm_b_in = ~bm_b_in;   // buffers must hold the loaded copy
        start = 1;
        @(negedge clk); start = 0;
        cyc = 1; first = -1; consec = 0; nm = 0; freed = 0;
        while ((busy || cyc == 1) && cyc < 5000) begin
          if (ev_match && first < 0) first = cyc;
          if (ev_match && first >= 0 && cyc - first == consec) consec++;
          if (ev_match) nm++;
          bm_a_we = 0; bm_b_we = 0; db_we = '0;
          if (b_free && busy && !freed) begin
            // inputs released: every match taken, laggy offsets stored
            freed = 1; n_free++;
            checks++; if (nm != nmatch) begin failures++; $display("b_free after %0d of %0d matches", nm, nmatch); end
            checks++; if (cyc < 8) begin failures++; $display("b_free before the laggy offsets, cycle %0d", cyc); end
            // load garbage as the next chunk would; this chunk must not notice
            bm_a_in = {4{$urandom}}; bm_b_in = {4{$urandom}};
            for (int l = 0; l < DBL; l++) db_line[l] = {4{$urandom}};
            bm_a_we = 1; bm_b_we = 1; db_we = '1;
          end
          @(negedge clk); cyc++;
        end
        bm_a_we = 0; bm_b_we = 0; db_we = '0;
        checks++; if (busy) failures++;
        if (nmatch > 0) begin
          checks++; if (first != 1) begin failures++; $display("first match at cycle %0d", first); end
          checks++; if (consec < ((nmatch < 8) ? nmatch : 8)) begin failures++; $display("only %0d back-to-back matches", consec); end
        end
      end
      for (int t = 0; t < TS; t++) begin
        logic signed [PACC_W-1:0] e;
        e = pacc - PACC_W'(cacc[t]);
        checks++;
        if (x[t] != e) begin failures++; if (failures < 10) $display("neuron %0d t%0d x=%0d exp=%0d", neuron, t, x[t], e); end
      end
    end
    checks++; if (n_free == 0)  begin failures++; $display("inputs never released early"); end
    checks++; if (n_disc == 0)  begin failures++; $display("no correct prediction seen"); end
    checks++; if (n_corr == 0)  begin failures++; $display("no correction seen"); end
    checks++; if (n_stall == 0) begin failures++; $display("no fifo stall seen"); end
    checks++; if (n_lag == 0)   begin failures++; $display("no laggy wait seen"); end
    checks++; if (n_reuse == 0) begin failures++; $display("no line reuse seen"); end
    checks++; if (n_bank == 0)  begin failures++; $display("no fetch wait seen"); end
    $display("discards=%0d corrections=%0d fifo_stalls=%0d laggy_waits=%0d reuses=%0d fetch_waits=%0d",
             n_disc, n_corr, n_stall, n_lag, n_reuse, n_bank);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
