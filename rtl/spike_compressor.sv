// spike_compressor: turns the output spikes of the P-LIFs into compressed
// spike fibers in the global cache, in the same format the TPPEs read.
//
// Collect: every in_valid delivers one output column (index in_col within the
// current chunk of BM_LEN columns) holding the T-bit packed spike word of each
// of the ROWS output neurons, bit t = spike at timestep t.
// Flush: for each row in turn, an inverted laggy prefix-sum walks the BM_LEN
// buffered words, ADDERS per cycle (8 cycles for 128 words and 16 adders).  A
// word is kept if the neuron is non-silent (fired at least once) or, with
// ft_mode set, if it fired at least twice; a kept word sets its bitmask bit.
// Within a group an adder chain numbers the kept words, the group is
// compacted to its low slots and shifted in at the running count of kept
// words of the row.  Then the row is written
// out, one line per cycle: the bitmask line at row_addr, then the T data lines
// (VPL words each) at row_addr+1..T, with row_addr = c_base + r*row_stride.
// busy is high from flush until the last write; the buffer is cleared for the
// next chunk.  dropped counts the firing neurons removed by ft_mode in each
// cycle.
//
// Following the paper: the packing of all timesteps of a neuron into one word,
// silent-neuron removal with a bitmask, the inverted laggy prefix-sum and the
// drop of neurons with only one spike in the fine-tuned mode.  The slot layout
// (bitmask line then data lines, no pointer) is this design's choice.
module spike_compressor
  import loas_pkg::*;
#(
  parameter int TS     = loas_pkg::T,
  parameter int ROWS   = loas_pkg::NUM_PE,
  parameter int BM     = loas_pkg::BM_LEN,
  parameter int ADDERS = loas_pkg::LAG_ADDERS,
  localparam int PW    = $clog2(BM),
  localparam int RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int STEPS = BM / ADDERS,
  localparam int SW    = (STEPS > 1) ? $clog2(STEPS) : 1,
  localparam int DL    = BM * TS / LINE_W,          // data lines per fiber
  localparam int LW    = $clog2(DL + 1) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ft_mode,
  input  logic              in_valid,
  input  logic [PW-1:0]     in_col,
  input  logic [TS-1:0]     in_spikes [ROWS],
  input  logic              flush,
  input  logic [ADDR_W-1:0] c_base,
  input  logic [ADDR_W-1:0] row_stride,
  output logic              busy,
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [LINE_W-1:0] wr_data,
  output logic [$clog2(ADDERS+1)-1:0] dropped
);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_WRITE} state_e;

  localparam int GW = ADDERS * TS;                  // bits of one scan group

  logic [BM*TS-1:0]   rowbuf_q [ROWS];              // word k of row r at k*TS
  state_e             st_q;
  logic [RW-1:0]      row_q;
  logic [SW-1:0]      step_q;
  logic [LW-1:0]      line_q;
  logic [PW:0]        run_q;
  logic [BM-1:0]      bm_q;
  logic [BM*TS-1:0]   pack_q;
  logic [ADDR_W-1:0]  base_q, stride_q;
  logic               ft_q;

  // one group of the inverted prefix sum: keep flags, the adder chain giving
  // each kept word its slot, and the group compacted to its low slots
  logic [BM*TS-1:0]   cur_row;
  logic [GW-1:0]      grp, packed_grp;
  logic [ADDERS-1:0]  keep, drop;
  logic [PW:0]        chain [ADDERS+1];
  logic [BM*TS-1:0]   placed;

  assign cur_row = rowbuf_q[row_q];
  assign grp     = cur_row[int'(step_q)*GW +: GW];

  always_comb begin
    chain[0]   = '0;
    packed_grp = '0;
    for (int j = 0; j < ADDERS; j++) begin
      keep[j] = ft_q ? ($countones(grp[j*TS +: TS]) >= 2) : (grp[j*TS +: TS] != '0);
      drop[j] = ft_q && ($countones(grp[j*TS +: TS]) == 1);
      chain[j+1] = chain[j] + (PW+1)'(keep[j]);
    end
    for (int s = 0; s < ADDERS; s++)
      for (int j = s; j < ADDERS; j++)
        if (keep[j] && int'(chain[j]) == s) packed_grp[s*TS +: TS] = grp[j*TS +: TS];
  end

  assign placed = (BM*TS)'(packed_grp) << (int'(run_q) * TS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= S_IDLE;
      row_q    <= '0;
      step_q   <= '0;
      line_q   <= '0;
      run_q    <= '0;
      bm_q     <= '0;
      pack_q   <= '0;
      base_q   <= '0;
      stride_q <= '0;
      ft_q     <= 1'b0;
      for (int r = 0; r < ROWS; r++) rowbuf_q[r] <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: begin
          if (in_valid)
            for (int r = 0; r < ROWS; r++) rowbuf_q[r][int'(in_col)*TS +: TS] <= in_spikes[r];
          if (flush) begin
            st_q     <= S_SCAN;
            row_q    <= '0;
            step_q   <= '0;
            run_q    <= '0;
            bm_q     <= '0;
            pack_q   <= '0;
            base_q   <= c_base;
            stride_q <= row_stride;
            ft_q     <= ft_mode;
          end
        end
        S_SCAN: begin
          bm_q[int'(step_q)*ADDERS +: ADDERS] <= keep;
          pack_q <= pack_q | placed;
          run_q  <= run_q + chain[ADDERS];
          step_q <= step_q + SW'(1);
          if (int'(step_q) == STEPS - 1) begin
            st_q   <= S_WRITE;
            line_q <= '0;
          end
        end
        S_WRITE: begin
          line_q <= line_q + LW'(1);
          if (int'(line_q) == DL) begin
            rowbuf_q[row_q] <= '0;
            bm_q   <= '0;
            pack_q <= '0;
            run_q  <= '0;
            step_q <= '0;
            if (int'(row_q) == ROWS - 1) st_q <= S_IDLE;
            else begin
              row_q <= row_q + RW'(1);
              st_q  <= S_SCAN;
            end
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign busy     = (st_q != S_IDLE);
  assign wr_valid = (st_q == S_WRITE);
  assign wr_addr  = base_q + ADDR_W'(int'(row_q) * int'(stride_q)) + ADDR_W'(line_q);
  assign wr_data  = (line_q == '0) ? LINE_W'(bm_q) : LINE_W'(pack_q >> ((int'(line_q) - 1) * LINE_W));
  assign dropped  = (st_q == S_SCAN) ? $bits(dropped)'($countones(drop)) : '0;

  no_input_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !in_valid)
    else $error("spike_compressor: column delivered during a flush");

endmodule
