// inner_join_unit: FTP-friendly inner join of one TPPE.
//
// It pairs one fast and one laggy prefix-sum circuit.  bm_a and bm_b come
// from the TPPE's bitmask buffers and must stay stable while a chunk runs.
// On load the AND result is latched and the laggy circuit is started.  The fast circuit then
// offers one match per cycle on the m_* stream (position and offset into
// fiber-B); when the consumer asserts m_take the position is cleared from the
// remaining AND result and the next match appears in the following cycle.
// The laggy side raises a_ready BM_LEN/ADDERS cycles after load; from then on
// a_lookup_pos -> a_lookup_off gives the offset of a matched position inside
// fiber-A.  m_done is high once every match has been taken.
//
// Structure (one fast, one laggy prefix sum, fast side for B only) follows
// the paper; the take/clear handshake is this design's choice.
module inner_join_unit #(
  parameter int BM_LEN = loas_pkg::BM_LEN,
  parameter int ADDERS = loas_pkg::LAG_ADDERS,
  localparam int POS_W = $clog2(BM_LEN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [BM_LEN-1:0] bm_a,
  input  logic [BM_LEN-1:0] bm_b,
  output logic              m_valid,
  output logic [POS_W-1:0]  m_pos,
  output logic [POS_W-1:0]  m_off_b,
  input  logic              m_take,
  output logic              m_done,
  output logic              a_ready,
  input  logic [POS_W-1:0]  a_lookup_pos,
  output logic [POS_W-1:0]  a_lookup_off
);

  logic [BM_LEN-1:0] remaining_q;   // AND result minus the matches taken

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining_q <= '0;
    end else if (load) begin
      remaining_q <= bm_a & bm_b;
    end else if (m_take && m_valid) begin
      remaining_q[m_pos] <= 1'b0;
    end
  end

  fast_prefix_sum #(.BM_LEN(BM_LEN)) u_fast (
    .bm_a       (bm_a),
    .bm_b       (bm_b),
    .remaining  (remaining_q),
    .match_valid(m_valid),
    .match_pos  (m_pos),
    .off_b      (m_off_b)
  );

  laggy_prefix_sum #(.BM_LEN(BM_LEN), .ADDERS(ADDERS)) u_laggy (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (load),
    .bm_a      (bm_a),
    .ready     (a_ready),
    .lookup_pos(a_lookup_pos),
    .lookup_off(a_lookup_off)
  );

  assign m_done = ~m_valid;

  take_valid: assert property (@(posedge clk) disable iff (!rst_n) m_take |-> m_valid)
    else $error("inner_join_unit: m_take without a valid match");

endmodule
