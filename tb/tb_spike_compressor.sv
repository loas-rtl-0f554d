// tb_spike_compressor: fills the column buffer with random spike words of
// varied density, flushes, captures the cache writes and compares each row's
// bitmask line and packed data lines with a reference compaction, in both the
// normal mode (drop silent neurons) and the fine-tuned mode (also drop
// neurons with a single spike).  Also checks the scan time of 8 cycles per row
// plus 1+T write cycles, and that a second flush starts from a cleared buffer.
//
// The keep rules follow the published compressor; the slot layout and the
// write timing are this design's own.
module tb_spike_compressor;
  import loas_pkg::*;
  localparam int TS = 4, ROWS = 16, BM = 128, DL = BM * TS / LINE_W;
  logic clk = 0, rst_n = 0, ft_mode = 0, in_valid = 0, flush = 0, busy, wr_valid;
  logic [6:0] in_col;
  logic [TS-1:0] in_spikes [ROWS];
  logic [ADDR_W-1:0] c_base, row_stride, wr_addr;
  logic [LINE_W-1:0] wr_data;
  logic [4:0] dropped;
  logic [LINE_W-1:0] got [logic [ADDR_W-1:0]];
  int checks = 0, failures = 0, ndrop = 0;

  spike_compressor #(.TS(TS), .ROWS(ROWS), .BM(BM), .ADDERS(16)) dut (.clk, .rst_n, .ft_mode,
    .in_valid, .in_col, .in_spikes, .flush, .c_base, .row_stride, .busy, .wr_valid, .wr_addr,
    .wr_data, .dropped);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (wr_valid) got[wr_addr] = wr_data;
    ndrop += int'(dropped);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      logic [TS-1:0] sp [ROWS][BM];
      int ncols, cyc, edrop;
      ft_mode = round % 2;
      ncols = (round == 3) ? 37 : BM;       // a partial chunk
      c_base = ADDR_W'(round * 700);
      row_stride = ADDR_W'(5 + round);
      got.delete();
      edrop = 0;
      for (int c = 0; c < BM; c++)
        for (int r = 0; r < ROWS; r++) begin
          sp[r][c] = (c < ncols && ($urandom % 100) < (10 + r * 5)) ? TS'($urandom) : '0;
          if (ft_mode && $countones(sp[r][c]) == 1) edrop++;
        end
      for (int c = 0; c < ncols; c++) begin
        @(negedge clk);
        in_valid = 1; in_col = 7'(c);
        for (int r = 0; r < ROWS; r++) in_spikes[r] = sp[r][c];
      end
      @(negedge clk); in_valid = 0; ndrop = 0;
      flush = 1;
      @(negedge clk); flush = 0;
      cyc = 1;
      while (busy && cyc < 10000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 1 + ROWS * (BM / 16 + 1 + DL)) begin
        failures++; $display("flush took %0d cycles", cyc);
      end
      checks++; if (ndrop != edrop) begin failures++; $display("dropped %0d exp %0d", ndrop, edrop); end
      for (int r = 0; r < ROWS; r++) begin
        logic [BM-1:0] ebm;
        logic [BM*TS-1:0] epk;
        int cnt;
        ebm = '0; epk = '0; cnt = 0;
        for (int c = 0; c < BM; c++)
          if (ft_mode ? ($countones(sp[r][c]) >= 2) : (sp[r][c] != 0)) begin
            ebm[c] = 1; epk[cnt*TS +: TS] = sp[r][c]; cnt++;
          end
        for (int l = 0; l <= DL; l++) begin
          logic [ADDR_W-1:0] a;
          logic [LINE_W-1:0] e;
          a = c_base + ADDR_W'(r) * row_stride + ADDR_W'(l);
          e = (l == 0) ? LINE_W'(ebm) : epk[(l-1)*LINE_W +: LINE_W];
          checks++;
          if (!got.exists(a) || got[a] != e) begin
            failures++;
            if (failures < 10) $display("round %0d row %0d line %0d wrong", round, r, l);
          end
        end
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
