// loas_pkg: sizes, data layout helpers and shared types of the LoAS
// dual-sparse spiking-network accelerator.
//
// Sizes that come from the published configuration: 4 timesteps, 16
// temporal-parallel PEs (TPPEs), 128-bit bitmasks, 8-bit weights, a 12-bit
// pseudo-accumulator and 10-bit correction accumulators, 16 adders in the
// laggy prefix-sum, depth-8 correction FIFOs, and a 256 KB global cache in
// 16 banks.  The 128-bit cache line and the fixed-slot fiber layout below are
// this design's own choices.
//
// Fiber layout in the global cache (line addresses, LINE_W bits per line):
//   spike fiber (A or C) chunk : 1 bitmask line + T data lines; value j sits in
//                                data line j / VPL_A, bits (j % VPL_A)*T +: T,
//                                and bit t of a value is the spike at timestep t.
//   weight fiber (B) chunk     : 1 bitmask line + DB_LINES data lines; weight j
//                                sits in data line j / 16, byte j % 16.
// Line address bits [BANK_W-1:0] select the bank (low-order interleaving).
package loas_pkg;

  parameter int T          = 4;     // timesteps processed in parallel
  parameter int NUM_PE     = 16;    // TPPEs and P-LIFs
  parameter int BM_LEN     = 128;   // bitmask length = K (or N) chunk
  parameter int W_BITS     = 8;     // weight width
  parameter int PACC_W     = 12;    // pseudo-accumulator width
  parameter int CACC_W     = 10;    // correction accumulator width
  parameter int LAG_ADDERS = 16;    // adders in the laggy prefix-sum
  parameter int FIFO_DEPTH = 8;     // FIFO-mp and FIFO-B depth
  parameter int NUM_BANKS  = 16;    // global cache banks
  parameter int BANK_LINES = 1024;  // lines per bank: 256 KB / 16 / 16 B
  parameter int LINE_W     = 128;   // cache line width in bits

  localparam int POS_W    = $clog2(BM_LEN);            // 7
  localparam int BANK_W   = $clog2(NUM_BANKS);         // 4
  localparam int IDX_W    = $clog2(BANK_LINES);        // 10
  localparam int ADDR_W   = BANK_W + IDX_W;            // 14
  localparam int VPL_A    = LINE_W / T;                // spike values per line
  localparam int WPL_B    = LINE_W / W_BITS;           // weights per line
  localparam int DB_LINES = BM_LEN * W_BITS / LINE_W;  // 8 lines = 128 bytes
  localparam int A_SLOT   = 1 + BM_LEN / VPL_A;        // lines per spike fiber chunk
  localparam int B_SLOT   = 1 + DB_LINES;              // lines per weight fiber chunk

  typedef logic [LINE_W-1:0] line_t;
  typedef logic [ADDR_W-1:0] laddr_t;
  typedef logic [T-1:0]      spk_t;

  // one cache line read request
  typedef struct packed {
    logic   valid;
    laddr_t addr;
  } rd_req_t;

  // one cache line write
  typedef struct packed {
    logic   valid;
    laddr_t addr;
    line_t  data;
  } wr_req_t;

  // activity counters of the whole accelerator
  typedef struct packed {
    logic [31:0] cycles;        // cycles spent busy on a layer
    logic [31:0] joins;         // matched (A,B) pairs accumulated speculatively
    logic [31:0] discards;      // predictions found correct (value all ones)
    logic [31:0] corrections;   // predictions found wrong (correction applied)
    logic [31:0] fifo_stalls;   // fast prefix-sum held by a full FIFO
    logic [31:0] laggy_waits;   // fast side done, waiting for the laggy side
    logic [31:0] bank_stalls;   // fetch requests that lost bank arbitration
    logic [31:0] line_reuses;   // fiber-A checks served by the fetcher's line
    logic [31:0] dropped;       // fired neurons dropped by the compressor (FT)
  } perf_t;

endpackage
