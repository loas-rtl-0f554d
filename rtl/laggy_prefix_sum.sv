// laggy_prefix_sum: low-cost offset generator for fiber-A.
//
// On start it takes a copy of bitmask A and, over BM_LEN/ADDERS cycles
// (8 cycles for 128 bits and 16 adders, the first one being the start cycle
// itself), computes for every position k the
// number of ones of bitmask A below k, i.e. the offset of neuron k inside the
// compressed fiber-A.  Each cycle the ADDERS adders form a chain over ADDERS
// consecutive positions on top of the running count carried from the previous
// group, and the results are written into an offset buffer.  ready rises with
// the clock edge that stores the last group, 8 edges after the start edge, and
// stays high until the next start; while ready the buffer answers any position
// combinationally through lookup_pos/lookup_off.
//
// The adder count and the 8-cycle latency follow the paper.  The chained
// grouping and the BM_LEN x POS_W offset buffer (the paper quotes a 128-bit
// buffer) are this design's choices.
module laggy_prefix_sum #(
  parameter int BM_LEN = loas_pkg::BM_LEN,
  parameter int ADDERS = loas_pkg::LAG_ADDERS,
  localparam int POS_W = $clog2(BM_LEN),
  localparam int STEPS = BM_LEN / ADDERS,
  localparam int CNT_W = (STEPS > 1) ? $clog2(STEPS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [BM_LEN-1:0] bm_a,
  output logic              ready,
  input  logic [POS_W-1:0]  lookup_pos,
  output logic [POS_W-1:0]  lookup_off
);

  logic [BM_LEN-1:0] bm_q;
  logic [POS_W-1:0]  offs [BM_LEN];
  logic [POS_W-1:0]  run_q;      // ones counted in the groups already done
  logic [CNT_W-1:0]  step_q;
  logic              busy_q;
  logic [POS_W-1:0]  chain [ADDERS+1];
  logic [ADDERS-1:0] grp;

  initial assert (BM_LEN % ADDERS == 0) else $error("BM_LEN must be a multiple of ADDERS");

  // the adder chain for the current group
  // the group of the start cycle comes straight from the bm_a input
  logic [CNT_W-1:0] step;
  assign step = start ? '0 : step_q;

  always_comb begin
    grp      = start ? bm_a[ADDERS-1:0] : bm_q[step_q*ADDERS +: ADDERS];
    chain[0] = start ? '0 : run_q;
    for (int j = 0; j < ADDERS; j++)
      chain[j+1] = chain[j] + POS_W'(grp[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bm_q   <= '0;
      run_q  <= '0;
      step_q <= '0;
      busy_q <= 1'b0;
      ready  <= 1'b0;
    end else if (start || busy_q) begin
      if (start) bm_q <= bm_a;
      run_q  <= chain[ADDERS];
      step_q <= step + CNT_W'(1);
      if (int'(step) == STEPS - 1) begin
        busy_q <= 1'b0;
        ready  <= 1'b1;
      end else begin
        busy_q <= 1'b1;
        ready  <= 1'b0;
      end
    end
  end

  // offset buffer, one group written per cycle
  always_ff @(posedge clk) begin
    if (start || busy_q)
      for (int j = 0; j < ADDERS; j++)
        offs[int'(step)*ADDERS + j] <= chain[j];
  end

  assign lookup_off = offs[lookup_pos];

endmodule
