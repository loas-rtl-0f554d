// tppe: temporal-parallel processing element.  It computes the full sums of
// one output neuron for all T timesteps at once (the parallel-for over t of
// the FTP dataflow), one K chunk of BM_LEN positions per start.
//
// Before a chunk, the broadcast bus writes bitmask B and the 128-byte fiber-B
// data buffer (db_we, one enable per line of 16 weights, any
// number of lines per cycle), and this TPPE's own bitmask A.
// start then launches the inner join:
//   * fast path: each cycle the fast prefix-sum yields one match (position,
//     offset into fiber-B); the weight goes straight into the
//     pseudo-accumulator, which assumes the pre-synaptic neuron fired at every
//     timestep, and the position and weight are pushed into FIFO-mp/FIFO-B.
//     A full FIFO holds the fast path (fifo stall).
//   * check path: once the laggy prefix-sum is ready (8 cycles after start)
//     the oldest FIFO entry is checked.  Its fiber-A offset selects a cache
//     line of packed spike values; the fetcher reads that line through the
//     crossbar (rd_* handshake, one line in flight, the last line kept for
//     reuse).  An all-ones value means the prediction was right and the weight
//     is discarded; otherwise the weight is added to the correction
//     accumulator of every timestep whose spike bit is 0.
// busy falls when all matches are taken, both FIFOs are empty and no fetch is
// pending.  b_free rises earlier, once all matches are taken and the laggy
// offsets are stored: from then on the bitmask and fiber-B buffers are no
// longer read, so the next chunk may be loaded while the checks finish.
// acc_clear (new output neuron) clears the accumulators; x[t] holds
// pseudo - correction[t] for the P-LIF.
//
// Timing: start at cycle 0, first match accumulated in cycle 1, one match per
// cycle after that, checks from cycle 8 on.  rd_valid is held until rd_gnt;
// rsp_valid arrives with the line in the cycle after the grant.
//
// The split into fast/laggy/correction and loading the next fiber-B during
// the correction phase follow the paper.  The line-based fiber-A fetch and the
// one-line fetcher buffer are this design's choices.
module tppe
  import loas_pkg::*;
#(
  parameter int T_STEPS = loas_pkg::T,
  parameter int BM      = loas_pkg::BM_LEN,
  parameter int FDEPTH  = loas_pkg::FIFO_DEPTH,
  localparam int PW     = $clog2(BM),
  localparam int VPL    = LINE_W / T_STEPS,
  localparam int DBL    = BM * W_BITS / LINE_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // loading over the broadcast bus
  input  logic                     bm_a_we,
  input  logic [BM-1:0]            bm_a_in,
  input  logic                     bm_b_we,
  input  logic [BM-1:0]            bm_b_in,
  input  logic [DBL-1:0]           db_we,      // one enable per buffer line
  input  logic [LINE_W-1:0]        db_line [DBL],
  // control
  input  logic [ADDR_W-1:0]        a_base,     // slot address of this fiber-A chunk
  input  logic                     acc_clear,
  input  logic                     start,
  output logic                     busy,
  output logic                     b_free,   // bitmask and fiber-B buffers no longer read
  // fiber-A fetch port
  output logic                     rd_valid,
  output logic [ADDR_W-1:0]        rd_addr,
  input  logic                     rd_gnt,
  input  logic                     rsp_valid,
  input  logic [LINE_W-1:0]        rsp_data,
  // full sums
  output logic signed [PACC_W-1:0] x [T_STEPS],
  // activity pulses
  output logic                     ev_match,
  output logic                     ev_discard,
  output logic                     ev_correct,
  output logic                     ev_fifo_stall,
  output logic                     ev_laggy_wait,
  output logic                     ev_bank_stall,
  output logic                     ev_line_reuse
);

  typedef enum logic [1:0] {CK_IDLE, CK_REQ, CK_WAIT} ck_state_e;

  // buffers
  logic [BM-1:0]     bm_a_q, bm_b_q;
  logic [LINE_W-1:0] db_q [DBL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bm_a_q <= '0;
      bm_b_q <= '0;
    end else begin
      if (bm_a_we) bm_a_q <= bm_a_in;
      if (bm_b_we) bm_b_q <= bm_b_in;
    end
  end

  always_ff @(posedge clk)
    for (int l = 0; l < DBL; l++)
      if (db_we[l]) db_q[l] <= db_line[l];

  // inner join
  logic          m_valid, m_take, m_done, a_ready;
  logic [PW-1:0] m_pos, m_off_b, lk_pos, lk_off;

  inner_join_unit #(.BM_LEN(BM)) u_ij (
    .clk, .rst_n,
    .load        (start),
    .bm_a        (bm_a_q),
    .bm_b        (bm_b_q),
    .m_valid, .m_pos, .m_off_b, .m_take, .m_done, .a_ready,
    .a_lookup_pos(lk_pos),
    .a_lookup_off(lk_off)
  );

  logic signed [W_BITS-1:0] w_match;
  localparam int WPL = LINE_W / W_BITS;   // weights per buffer line
  assign w_match = W_BITS'(db_q[int'(m_off_b) / WPL] >> ((int'(m_off_b) % WPL) * W_BITS));

  // correction FIFOs
  logic                run_q;
  logic                fifo_full, fifo_empty, fifo_b_full, fifo_b_empty, pop;
  logic [W_BITS-1:0]   fifo_w;

  assign m_take = run_q && m_valid && !fifo_full;

  sync_fifo #(.WIDTH(PW), .DEPTH(FDEPTH)) u_fifo_mp (
    .clk, .rst_n, .clear(start),
    .push(m_take), .wr_data(m_pos), .pop,
    .rd_data(lk_pos), .full(fifo_full), .empty(fifo_empty)
  );

  sync_fifo #(.WIDTH(W_BITS), .DEPTH(FDEPTH)) u_fifo_b (
    .clk, .rst_n, .clear(start),
    .push(m_take), .wr_data(w_match), .pop,
    .rd_data(fifo_w), .full(fifo_b_full), .empty(fifo_b_empty)
  );

  // fetcher A and checker
  ck_state_e         ck_q;
  logic [LINE_W-1:0] line_q;
  logic [PW-1:0]     line_idx_q;
  logic              line_valid_q, fetched_q;
  logic [ADDR_W-1:0] a_base_q;
  logic [PW-1:0]     need_idx;
  logic              hit;
  logic [T_STEPS-1:0] spikes;
  logic [T_STEPS-1:0] c_mask;
  logic              check_now;

  assign need_idx  = PW'(int'(lk_off) / VPL);
  assign check_now = run_q && a_ready && !fifo_empty && (ck_q == CK_IDLE);
  assign hit       = line_valid_q && (line_idx_q == need_idx);
  assign spikes    = T_STEPS'(line_q >> ((int'(lk_off) % VPL) * T_STEPS));
  assign pop       = check_now && hit;
  assign c_mask    = (pop && !(&spikes)) ? ~spikes : '0;

  assign rd_valid = (ck_q == CK_REQ);
  assign rd_addr  = a_base_q + ADDR_W'(1) + ADDR_W'(line_idx_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ck_q         <= CK_IDLE;
      line_q       <= '0;
      line_idx_q   <= '0;
      line_valid_q <= 1'b0;
      fetched_q    <= 1'b0;
      a_base_q     <= '0;
      run_q        <= 1'b0;
    end else if (start) begin
      ck_q         <= CK_IDLE;
      line_valid_q <= 1'b0;
      fetched_q    <= 1'b0;
      a_base_q     <= a_base;
      run_q        <= 1'b1;
    end else begin
      unique case (ck_q)
        CK_IDLE: if (check_now) begin
          if (hit) fetched_q <= 1'b0;
          else begin
            line_idx_q   <= need_idx;
            line_valid_q <= 1'b0;
            ck_q         <= CK_REQ;
          end
        end
        CK_REQ:  if (rd_gnt) ck_q <= CK_WAIT;
        CK_WAIT: if (rsp_valid) begin
          line_q       <= rsp_data;
          line_valid_q <= 1'b1;
          fetched_q    <= 1'b1;
          ck_q         <= CK_IDLE;
        end
        default: ck_q <= CK_IDLE;
      endcase
      if (run_q && m_done && fifo_empty && a_ready && ck_q == CK_IDLE)
        run_q <= 1'b0;
    end
  end

  assign busy = run_q;
  // all matches taken and the laggy offsets stored: the chunk's inputs have
  // moved into the FIFOs and the offset table, so the next chunk may load
  assign b_free = !run_q || (m_done && a_ready);

  tppe_accumulators #(.T(T_STEPS)) u_acc (
    .clk, .rst_n,
    .clear (acc_clear),
    .p_en  (m_take),
    .p_w   (w_match),
    .c_mask(c_mask),
    .c_w   (fifo_w),
    .x
  );

  assign ev_match      = m_take;
  assign ev_discard    = pop && (&spikes);
  assign ev_correct    = pop && !(&spikes);
  assign ev_fifo_stall = run_q && m_valid && fifo_full;
  assign ev_laggy_wait = run_q && m_done && !fifo_empty && !a_ready;
  assign ev_bank_stall = rd_valid && !rd_gnt;
  assign ev_line_reuse = pop && !fetched_q;

  fifos_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    (fifo_full == fifo_b_full) && (fifo_empty == fifo_b_empty))
    else $error("tppe: FIFO-mp and FIFO-B out of step");

endmodule
