// scheduler: walks the fully temporal-parallel (FTP) loop nest of one layer
// and keeps the TPPEs, P-LIFs and compressor fed.
//
// Loop order (the timestep loop is innermost and fully parallel inside the
// TPPEs and P-LIFs):
//   for each group of NPE output rows m0..m0+NPE-1      (one row per TPPE)
//     for each output column n                          (same n on every TPPE)
//       clear the accumulators
//       for each K chunk kc of BM_LEN positions
//         LOAD_B : read the fiber-B chunk of (n,kc), bitmask line and the
//                  DB_LINES data lines, and broadcast it to all TPPEs
//         LOAD_A : read the bitmask line of fiber-A chunk (m0+i,kc) for TPPE i
//         RUN    : start all TPPEs (once none is busy); for all but the
//                  last chunk, go on to the next LOAD_B as soon as every
//                  TPPE has taken its matches (pe_b_free), so the load
//                  overlaps the TPPEs' checks and corrections; after the
//                  last chunk wait until none is busy
//       FIRE     : the P-LIFs turn the full sums into spikes; one cycle later
//                  the compressor takes the column
//       after the last column of a BM_LEN chunk (or of the layer): FLUSH the
//       compressor and wait for it
// A load phase presents one read per requester port (req_valid/req_addr) on
// the crossbar and re-presents those not granted until all are served.
// Rows at or above cfg_m get an all-zero bitmask (bm_a_clr) and no read.
//
// Layout of the operands (line addresses, see loas_pkg):
//   fiber-A chunk (m,kc) at a_base + (m*KC + kc)*A_SLOT
//   fiber-B chunk (n,kc) at b_base + (n*KC + kc)*B_SLOT
//   fiber-C chunk (m,nc) at c_base + (m*NC + nc)*A_SLOT, NC = ceil(N/BM_LEN)
//
// The loop order, the broadcast of one fiber-B to all TPPEs and the overlap
// of the next fiber-B load with the correction phase follow the paper; the operand layout, the phases and their handshakes are this
// design's choices.
module scheduler
  import loas_pkg::*;
#(
  parameter int NPE = loas_pkg::NUM_PE,
  parameter int BM  = loas_pkg::BM_LEN,
  localparam int PW = $clog2(BM)
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer configuration, held stable while busy
  input  logic [15:0]       cfg_m,        // output rows M
  input  logic [15:0]       cfg_n,        // output columns N
  input  logic [15:0]       cfg_kc,       // K chunks, K = cfg_kc * BM_LEN
  input  logic [ADDR_W-1:0] cfg_a_base,
  input  logic [ADDR_W-1:0] cfg_b_base,
  input  logic [ADDR_W-1:0] cfg_c_base,
  input  logic              start,
  output logic              busy,
  output logic              done,         // one-cycle pulse at the end
  // crossbar requests during load phases
  output logic              load_phase,
  output logic              phase_b,      // responses are fiber-B lines
  output logic [NPE-1:0]    req_valid,
  output logic [ADDR_W-1:0] req_addr [NPE],
  input  logic [NPE-1:0]    gnt,
  // TPPE control
  output logic              bm_a_clr,
  output logic              acc_clear,
  output logic              pe_start,
  output logic [ADDR_W-1:0] pe_a_base [NPE],
  input  logic [NPE-1:0]    pe_busy,
  input  logic [NPE-1:0]    pe_b_free,
  // P-LIF and compressor
  output logic              fire,
  output logic [PW-1:0]     col,
  output logic              flush,
  output logic [ADDR_W-1:0] c_slot,
  output logic [ADDR_W-1:0] c_stride,
  input  logic              comp_busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_NEURON, S_LOADB, S_LOADA, S_START, S_RUN, S_FIRE, S_TAKE,
    S_FLUSH, S_FLUSH_WAIT, S_NEXT
  } state_e;

  state_e        st_q;
  logic [15:0]   m0_q, n_q, kc_q;
  logic [NPE-1:0] pend_q;
  logic          inflight_q, wait_q;
  int            nchunks;

  assign nchunks = (int'(cfg_n) + BM - 1) / BM;

  function automatic logic [ADDR_W-1:0] a_slot(int m, int kc);
    return cfg_a_base + ADDR_W'((m * int'(cfg_kc) + kc) * A_SLOT);
  endfunction

  // request addresses of the current load phase
  always_comb begin
    for (int i = 0; i < NPE; i++) begin
      if (st_q == S_LOADB)
        req_addr[i] = cfg_b_base + ADDR_W'((int'(n_q) * int'(cfg_kc) + int'(kc_q)) * B_SLOT + i);
      else
        req_addr[i] = a_slot(int'(m0_q) + i, int'(kc_q));
      pe_a_base[i] = a_slot(int'(m0_q) + i, int'(kc_q));
    end
  end

  assign load_phase = (st_q == S_LOADB) || (st_q == S_LOADA);
  assign phase_b    = (st_q == S_LOADB);
  assign req_valid  = load_phase ? pend_q : '0;
  assign busy       = (st_q != S_IDLE);
  assign col        = PW'(n_q);
  assign c_stride   = ADDR_W'(nchunks * A_SLOT);
  assign c_slot     = cfg_c_base + ADDR_W'((int'(m0_q) * nchunks + int'(n_q) / BM) * A_SLOT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      m0_q       <= '0;
      n_q        <= '0;
      kc_q       <= '0;
      pend_q     <= '0;
      inflight_q <= 1'b0;
      wait_q     <= 1'b0;
      done       <= 1'b0;
      bm_a_clr   <= 1'b0;
      acc_clear  <= 1'b0;
      pe_start   <= 1'b0;
      fire       <= 1'b0;
      flush      <= 1'b0;
    end else begin
      done      <= 1'b0;
      bm_a_clr  <= 1'b0;
      acc_clear <= 1'b0;
      pe_start  <= 1'b0;
      fire      <= 1'b0;
      flush     <= 1'b0;
      unique case (st_q)
        S_IDLE: if (start) begin
          m0_q <= '0;
          n_q  <= '0;
          st_q <= S_NEURON;
        end
        S_NEURON: begin
          acc_clear <= 1'b1;
          kc_q      <= '0;
          pend_q    <= NPE'((1 << B_SLOT) - 1);
          st_q      <= S_LOADB;
        end
        S_LOADB, S_LOADA: begin
          pend_q     <= pend_q & ~gnt;
          inflight_q <= |gnt;
          if ((pend_q & ~gnt) == '0 && !(|gnt) && !inflight_q) begin
            if (st_q == S_LOADB) begin
              bm_a_clr <= 1'b1;
              for (int i = 0; i < NPE; i++)
                pend_q[i] <= (int'(m0_q) + i) < int'(cfg_m);
              st_q <= S_LOADA;
            end else begin
              st_q <= S_START;
            end
          end
        end
        S_START: if (pe_busy == '0) begin   // previous chunk fully checked
          pe_start <= 1'b1;
          wait_q   <= 1'b1;
          st_q     <= S_RUN;
        end
        S_RUN: begin
          wait_q <= 1'b0;
          if (!wait_q) begin
            if (int'(kc_q) == int'(cfg_kc) - 1) begin
              if (pe_busy == '0) begin
                fire <= 1'b1;
                st_q <= S_FIRE;
              end
            end else if (&pe_b_free) begin   // overlap the next load with checking
              kc_q   <= kc_q + 16'd1;
              pend_q <= NPE'((1 << B_SLOT) - 1);
              st_q   <= S_LOADB;
            end
          end
        end
        S_FIRE: st_q <= S_TAKE;        // P-LIF output register
        S_TAKE: begin                  // compressor takes the column now
          if (int'(n_q) % BM == BM - 1 || int'(n_q) == int'(cfg_n) - 1) st_q <= S_FLUSH;
          else st_q <= S_NEXT;
        end
        S_FLUSH: begin
          flush  <= 1'b1;
          wait_q <= 1'b1;
          st_q   <= S_FLUSH_WAIT;
        end
        S_FLUSH_WAIT: begin
          wait_q <= 1'b0;
          if (!wait_q && !comp_busy) st_q <= S_NEXT;
        end
        S_NEXT: begin
          if (int'(n_q) == int'(cfg_n) - 1) begin
            n_q <= '0;
            if (int'(m0_q) + NPE >= int'(cfg_m)) begin
              done <= 1'b1;
              st_q <= S_IDLE;
            end else begin
              m0_q <= m0_q + 16'(NPE);
              st_q <= S_NEURON;
            end
          end else begin
            n_q  <= n_q + 16'd1;
            st_q <= S_NEURON;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  b_fits_ports: assert property (@(posedge clk) B_SLOT <= NPE)
    else $error("scheduler: a fiber-B chunk needs more lines than requester ports");

endmodule
