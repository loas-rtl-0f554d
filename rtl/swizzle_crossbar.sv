// swizzle_crossbar: the request and response crossbars between the
// requesters (the TPPEs' fiber-A fetchers, or the scheduler while it loads
// fibers) and the banks of the global cache.
//
// Request side: each requester i offers one line address (req_valid/req_addr).
// The bank of the address is its low BW bits.  Every bank grants one of the
// requesters that want it this cycle, by rotating priority starting after the
// requester it granted last, and drives its read port; gnt[i] tells the
// requester that its request was taken.  A requester that loses keeps its
// request up (bank conflict).
// Response side: one cycle after a grant the bank's read data is routed back,
// rsp_valid[i]/rsp_data[i] on the granted requester's port.
//
// Sizes (16x16 both ways) follow the paper.  The swizzle-switch itself is a
// circuit technique; only its logical function, a full crossbar with fair
// per-output arbitration, is built here, and rotating priority stands in for
// the least-recently-granted order of a swizzle switch.
module swizzle_crossbar
  import loas_pkg::*;
#(
  parameter int NR = loas_pkg::NUM_PE,
  parameter int NB = loas_pkg::NUM_BANKS,
  parameter int AW = loas_pkg::ADDR_W,
  localparam int BW  = $clog2(NB),
  localparam int RW  = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NR-1:0]     req_valid,
  input  logic [AW-1:0]     req_addr  [NR],
  output logic [NR-1:0]     gnt,
  output logic [NB-1:0]     bank_en,
  output logic [AW-BW-1:0]  bank_idx  [NB],
  input  logic [LINE_W-1:0] bank_data [NB],
  output logic [NR-1:0]     rsp_valid,
  output logic [LINE_W-1:0] rsp_data  [NR]
);

  logic [RW-1:0] last_q  [NB];   // requester granted last by each bank
  logic [RW-1:0] winner  [NB];
  logic [RW-1:0] owner_q [NB];   // requester served in the previous cycle
  logic [NB-1:0] served_q;

  // arbitration, one rotating-priority arbiter per bank
  always_comb begin
    gnt = '0;
    for (int b = 0; b < NB; b++) begin
      bank_en[b]  = 1'b0;
      winner[b]   = '0;
      bank_idx[b] = '0;
      // requester (last_q + k) mod NR has priority k, k = 1..NR
      for (int k = 1; k <= NR; k++)
        if (!bank_en[b] && req_valid[(int'(last_q[b]) + k) % NR]
            && int'(req_addr[(int'(last_q[b]) + k) % NR][BW-1:0]) == b) begin
          bank_en[b]  = 1'b1;
          winner[b]   = RW'((int'(last_q[b]) + k) % NR);
          bank_idx[b] = req_addr[(int'(last_q[b]) + k) % NR][AW-1:BW];
        end
      if (bank_en[b]) gnt[winner[b]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      served_q <= '0;
      for (int b = 0; b < NB; b++) begin
        last_q[b]  <= RW'(NR - 1);
        owner_q[b] <= '0;
      end
    end else begin
      served_q <= bank_en;
      for (int b = 0; b < NB; b++)
        if (bank_en[b]) begin
          last_q[b]  <= winner[b];
          owner_q[b] <= winner[b];
        end
    end
  end

  // response routing
  always_comb begin
    rsp_valid = '0;
    for (int i = 0; i < NR; i++) rsp_data[i] = '0;
    for (int b = 0; b < NB; b++)
      if (served_q[b]) begin
        rsp_valid[owner_q[b]] = 1'b1;
        rsp_data[owner_q[b]]  = bank_data[b];
      end
  end

  one_grant_per_requester: assert property (@(posedge clk) disable iff (!rst_n)
    (gnt & ~req_valid) == '0) else $error("swizzle_crossbar: grant without request");

endmodule
