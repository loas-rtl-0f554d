// tb_swizzle_crossbar: 16 requesters issue random line reads against 16
// banks whose data is a known function of the address.  Checks that each bank
// grants at most one requester, that every grant returns the right line on the
// right port one cycle later, that a waiting requester is served within 16
// grants of its bank (no starvation) and that bank conflicts do occur.
//
// The 16x16 size is the published one; the arbitration fairness bound
// checked here belongs to this design's rotating-priority choice.
module tb_swizzle_crossbar;
  import loas_pkg::*;
  localparam int NR = 16, NB = 16, AW = 14;
  logic clk = 0, rst_n = 0;
  logic [NR-1:0] req_valid = '0, gnt, rsp_valid;
  logic [AW-1:0] req_addr [NR];
  logic [NB-1:0] bank_en;
  logic [AW-5:0] bank_idx [NB];
  logic [LINE_W-1:0] bank_data [NB];
  logic [LINE_W-1:0] rsp_data [NR];
  int checks = 0, failures = 0, conflicts = 0;
  int wait_cnt [NR];
  logic [AW-1:0] granted_addr [NR];
  logic [NR-1:0] granted_q = '0;

  swizzle_crossbar #(.NR(NR), .NB(NB), .AW(AW)) dut (.clk, .rst_n, .req_valid, .req_addr, .gnt,
    .bank_en, .bank_idx, .bank_data, .rsp_valid, .rsp_data);

  function automatic logic [LINE_W-1:0] content(logic [AW-1:0] a);
    return {4{32'(a) * 32'h9E3779B1}};
  endfunction

  // bank model, one cycle latency
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (bank_en[b]) bank_data[b] <= content({bank_idx[b], 4'(b)});

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NR; i++) wait_cnt[i] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // responses for last cycle's grants
      for (int i = 0; i < NR; i++) begin
        checks++;
        if (rsp_valid[i] != granted_q[i]) failures++;
        if (granted_q[i]) begin checks++; if (rsp_data[i] != content(granted_addr[i])) failures++; end
      end
      // new requests where idle; keep ungranted ones
      for (int i = 0; i < NR; i++)
        if (!req_valid[i] && ($urandom % 100) < 60) begin
          req_valid[i] = 1;
          req_addr[i]  = (n % 4 == 0) ? {10'($urandom), 4'd3} : AW'($urandom);
          wait_cnt[i]  = 0;
        end
      #1;
      for (int b = 0; b < NB; b++) begin
        int c;
        c = 0;
        for (int i = 0; i < NR; i++) if (gnt[i] && req_addr[i][3:0] == 4'(b)) c++;
        checks++; if (c > 1) failures++;
      end
      for (int i = 0; i < NR; i++) begin
        checks++; if (gnt[i] && !req_valid[i]) failures++;
        if (req_valid[i] && !gnt[i]) begin
          conflicts++; wait_cnt[i]++;
          checks++; if (wait_cnt[i] > NR) failures++;
        end
      end
      granted_q = gnt;
      for (int i = 0; i < NR; i++) granted_addr[i] = req_addr[i];
      @(posedge clk); #1;
      for (int i = 0; i < NR; i++) if (granted_q[i]) req_valid[i] = 0;
    end
    checks++; if (conflicts == 0) failures++;
    $display("bank conflicts seen: %0d", conflicts);
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
