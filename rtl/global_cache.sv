// global_cache: the unified on-chip buffer that holds the compressed fibers of
// the input spikes (A), the weights (B) and the output spikes (C).
//
// NUM_BANKS banks of BANK_LINES lines of LINE_W bits (256 KB in 16 banks by
// default).  A line address is {index, bank}: the low bits pick the bank, so
// consecutive lines of a fiber sit in different banks and can be read in the
// same cycle.  Every bank has one read port (rd_en/rd_idx, data on rd_data one
// cycle later) driven through the crossbar, and the whole cache has one write
// port (wr) taking one line per cycle.  A write and a read of the same line in
// the same cycle return the old line.
//
// Size and banking follow the paper.  The paper's cache is a tagged, 16-way
// set-associative FiberCache with a replacement policy; this design uses it as
// a directly addressed scratchpad that the host fills and drains, so tags,
// associativity, replacement and double buffering are not built.
module global_cache
  import loas_pkg::*;
#(
  parameter int NB = loas_pkg::NUM_BANKS,
  parameter int BL = loas_pkg::BANK_LINES,
  localparam int BW = $clog2(NB),
  localparam int IW = $clog2(BL)
) (
  input  logic              clk,
  input  logic [NB-1:0]     rd_en,
  input  logic [IW-1:0]     rd_idx  [NB],
  output logic [LINE_W-1:0] rd_data [NB],
  input  logic              wr_valid,
  input  logic [BW+IW-1:0]  wr_addr,
  input  logic [LINE_W-1:0] wr_data
);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [LINE_W-1:0] mem [BL];
    always_ff @(posedge clk) begin
      if (rd_en[b]) rd_data[b] <= mem[rd_idx[b]];
      if (wr_valid && int'(wr_addr[BW-1:0]) == b)
        mem[wr_addr[BW+IW-1:BW]] <= wr_data;
    end
  end

endmodule
