// loas_top: LoAS, a low-latency inference accelerator for dual-sparse spiking
// neural networks (sparse spikes and sparse weights) built around the fully
// temporal-parallel (FTP) dataflow.
//
// One layer computes C = LIF(A x B) for an input spike tensor A (M x K x T),
// a weight matrix B (K x N) and output spikes C (M x N x T).  Spikes are kept
// as compressed fibers: per row chunk of 128 neurons a bitmask of the
// non-silent neurons followed by their packed T-bit spike words; weights as
// per-column chunks of a bitmask and the non-zero 8-bit weights.
//
//   host port --> global_cache (16 banks) <--> swizzle_crossbar <--> requesters
//   scheduler: loads fiber-B over the broadcast bus into all NPE TPPEs and
//              one bitmask-A per TPPE, starts them, fires the P-LIFs and
//              flushes the compressor
//   tppe[i]  : full sums of output neuron (m0+i, n) for all timesteps
//   plif[i]  : spikes of that neuron for all timesteps in one shot
//   spike_compressor: packs and compresses the output rows into the cache
//
// Interface: the host fills the cache through host_wr_* (one line per cycle,
// only while busy is low), sets cfg_*, pulses start and waits for done; then
// reads results with host_rd_* (request held until host_rd_gnt, data one
// cycle after the grant, only while busy is low).  perf counts the activity
// of the run.  The cache holds operands and results; the off-chip memory is
// outside this block.
//
// The composition follows the paper's architecture figure.  The host port in
// place of the off-chip memory path, the operand layout and the counters are
// this design's choices.  A crossbar port is shared by its TPPE's fiber-A
// fetches (first) and the scheduler's loads, which overlap while the TPPEs
// finish the checks of a chunk.
module loas_top
  import loas_pkg::*;
#(
  parameter int NPE = loas_pkg::NUM_PE,
  parameter int TS  = loas_pkg::T
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side of the global cache
  input  logic              host_wr_valid,
  input  logic [ADDR_W-1:0] host_wr_addr,
  input  logic [LINE_W-1:0] host_wr_data,
  input  logic              host_rd_valid,
  input  logic [ADDR_W-1:0] host_rd_addr,
  output logic              host_rd_gnt,
  output logic              host_rd_rsp_valid,
  output logic [LINE_W-1:0] host_rd_data,
  // layer configuration
  input  logic [15:0]       cfg_m,
  input  logic [15:0]       cfg_n,
  input  logic [15:0]       cfg_kc,
  input  logic [ADDR_W-1:0] cfg_a_base,
  input  logic [ADDR_W-1:0] cfg_b_base,
  input  logic [ADDR_W-1:0] cfg_c_base,
  input  logic signed [PACC_W-1:0] cfg_vth,
  input  logic [2:0]        cfg_leak_shift,
  input  logic              cfg_ft_mode,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output perf_t             perf
);

  localparam int PW = $clog2(BM_LEN);

  // ---------------------------------------------------------------- scheduler
  logic              load_phase, phase_b, bm_a_clr, acc_clear, pe_start;
  logic              fire, flush, comp_busy;
  logic [NPE-1:0]    s_req_valid, s_gnt, gnt, pe_busy, pe_b_free;
  logic [ADDR_W-1:0] s_req_addr [NPE];
  logic [ADDR_W-1:0] pe_a_base [NPE];
  logic [PW-1:0]     col;
  logic [ADDR_W-1:0] c_slot, c_stride;

  scheduler #(.NPE(NPE)) u_sched (
    .clk, .rst_n,
    .cfg_m, .cfg_n, .cfg_kc, .cfg_a_base, .cfg_b_base, .cfg_c_base,
    .start, .busy, .done,
    .load_phase, .phase_b,
    .req_valid(s_req_valid), .req_addr(s_req_addr), .gnt(s_gnt),
    .bm_a_clr, .acc_clear, .pe_start, .pe_a_base, .pe_busy, .pe_b_free,
    .fire, .col, .flush, .c_slot, .c_stride, .comp_busy
  );

  // ------------------------------------------------- crossbar requester ports
  logic [NPE-1:0]    pe_rd_valid, req_valid, rsp_valid;
  logic [ADDR_W-1:0] pe_rd_addr [NPE];
  logic [ADDR_W-1:0] req_addr   [NPE];
  logic [LINE_W-1:0] rsp_data   [NPE];

  // A port serves its TPPE's fiber-A fetch first and the scheduler's loads
  // otherwise (the two overlap while the TPPEs finish checking a chunk); the
  // host uses port 0 while the accelerator is idle.  to_pe_q/to_sched_q/
  // to_b_q remember who was granted, to route the response a cycle later.
  logic [NPE-1:0] pe_own, to_pe_q, to_sched_q, to_b_q;

  always_comb begin
    for (int i = 0; i < NPE; i++) begin
      pe_own[i] = busy && pe_rd_valid[i];
      if (pe_own[i]) begin
        req_valid[i] = 1'b1;
        req_addr[i]  = pe_rd_addr[i];
      end else if (busy) begin
        req_valid[i] = load_phase && s_req_valid[i];
        req_addr[i]  = s_req_addr[i];
      end else begin
        req_valid[i] = (i == 0) && host_rd_valid;
        req_addr[i]  = host_rd_addr;
      end
    end
  end

  assign s_gnt = gnt & ~pe_own & {NPE{busy && load_phase}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      to_pe_q    <= '0;
      to_sched_q <= '0;
      to_b_q     <= '0;
    end else begin
      to_pe_q    <= gnt & pe_own;
      to_sched_q <= s_gnt;
      to_b_q     <= {NPE{phase_b}};
    end
  end

  assign host_rd_gnt       = !busy && gnt[0];
  assign host_rd_rsp_valid = !busy && rsp_valid[0];
  assign host_rd_data      = rsp_data[0];

  // --------------------------------------------------- crossbar and cache
  logic [NUM_BANKS-1:0] bank_en;
  logic [IDX_W-1:0]     bank_idx  [NUM_BANKS];
  logic [LINE_W-1:0]    bank_data [NUM_BANKS];
  logic                 c_wr_valid;
  logic [ADDR_W-1:0]    c_wr_addr;
  logic [LINE_W-1:0]    c_wr_data;

  swizzle_crossbar #(.NR(NPE)) u_xbar (
    .clk, .rst_n,
    .req_valid, .req_addr, .gnt,
    .bank_en, .bank_idx, .bank_data,
    .rsp_valid, .rsp_data
  );

  global_cache u_cache (
    .clk,
    .rd_en   (bank_en),
    .rd_idx  (bank_idx),
    .rd_data (bank_data),
    .wr_valid(comp_busy ? c_wr_valid : (host_wr_valid && !busy)),
    .wr_addr (comp_busy ? c_wr_addr  : host_wr_addr),
    .wr_data (comp_busy ? c_wr_data  : host_wr_data)
  );

  // ------------------------------------- broadcast bus and the TPPE array
  logic [DB_LINES-1:0] db_we;
  logic [LINE_W-1:0]   db_line [DB_LINES];
  logic                bm_b_we;

  assign bm_b_we = to_sched_q[0] && to_b_q[0] && rsp_valid[0];
  always_comb
    for (int l = 0; l < DB_LINES; l++) begin
      db_we[l]   = to_sched_q[l+1] && to_b_q[l+1] && rsp_valid[l+1];
      db_line[l] = rsp_data[l+1];
    end

  logic signed [PACC_W-1:0] x [NPE][TS];
  logic [TS-1:0]            spikes [NPE];
  logic [NPE-1:0]           spk_valid;
  logic [NPE-1:0]           ev_match, ev_discard, ev_correct, ev_fifo_stall;
  logic [NPE-1:0]           ev_laggy_wait, ev_bank_stall, ev_line_reuse;

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    logic              bm_a_we;
    logic [BM_LEN-1:0] bm_a_in;
    assign bm_a_we = bm_a_clr || (to_sched_q[i] && !to_b_q[i] && rsp_valid[i]);
    assign bm_a_in = bm_a_clr ? '0 : rsp_data[i][BM_LEN-1:0];

    tppe #(.T_STEPS(TS)) u_tppe (
      .clk, .rst_n,
      .bm_a_we, .bm_a_in,
      .bm_b_we, .bm_b_in(rsp_data[0][BM_LEN-1:0]),
      .db_we, .db_line,
      .a_base   (pe_a_base[i]),
      .acc_clear(acc_clear),
      .start    (pe_start),
      .busy     (pe_busy[i]),
      .b_free   (pe_b_free[i]),
      .rd_valid (pe_rd_valid[i]),
      .rd_addr  (pe_rd_addr[i]),
      .rd_gnt   (gnt[i] && pe_own[i]),
      .rsp_valid(rsp_valid[i] && to_pe_q[i]),
      .rsp_data (rsp_data[i]),
      .x        (x[i]),
      .ev_match     (ev_match[i]),
      .ev_discard   (ev_discard[i]),
      .ev_correct   (ev_correct[i]),
      .ev_fifo_stall(ev_fifo_stall[i]),
      .ev_laggy_wait(ev_laggy_wait[i]),
      .ev_bank_stall(ev_bank_stall[i]),
      .ev_line_reuse(ev_line_reuse[i])
    );

    plif #(.T(TS)) u_plif (
      .clk, .rst_n,
      .in_valid  (fire),
      .o         (x[i]),
      .vth       (cfg_vth),
      .leak_shift(cfg_leak_shift),
      .out_valid (spk_valid[i]),
      .spikes    (spikes[i])
    );
  end

  // ---------------------------------------------------------- compressor
  logic [$clog2(LAG_ADDERS+1)-1:0] dropped;

  spike_compressor #(.TS(TS), .ROWS(NPE)) u_comp (
    .clk, .rst_n,
    .ft_mode   (cfg_ft_mode),
    .in_valid  (spk_valid[0]),
    .in_col    (col),
    .in_spikes (spikes),
    .flush,
    .c_base    (c_slot),
    .row_stride(c_stride),
    .busy      (comp_busy),
    .wr_valid  (c_wr_valid),
    .wr_addr   (c_wr_addr),
    .wr_data   (c_wr_data),
    .dropped
  );

  // ------------------------------------------------------------ counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) perf <= '0;
    else if (start && !busy) perf <= '0;
    else if (busy) begin
      perf.cycles      <= perf.cycles + 32'd1;
      perf.joins       <= perf.joins + 32'($countones(ev_match));
      perf.discards    <= perf.discards + 32'($countones(ev_discard));
      perf.corrections <= perf.corrections + 32'($countones(ev_correct));
      perf.fifo_stalls <= perf.fifo_stalls + 32'($countones(ev_fifo_stall));
      perf.laggy_waits <= perf.laggy_waits + 32'($countones(ev_laggy_wait));
      perf.bank_stalls <= perf.bank_stalls + 32'($countones(ev_bank_stall));
      perf.line_reuses <= perf.line_reuses + 32'($countones(ev_line_reuse));
      perf.dropped     <= perf.dropped + 32'(dropped);
    end
  end

endmodule
