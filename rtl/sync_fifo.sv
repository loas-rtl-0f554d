// sync_fifo: small synchronous FIFO, used as FIFO-mp (matched positions) and
// FIFO-B (matched weights) inside a TPPE.
//
// First-word-fall-through: rd_data shows the oldest entry whenever empty is
// low.  push and pop may happen in the same cycle.  Pushing when full or
// popping when empty is a protocol error and is asserted against.  Depth 8
// follows the paper; the rest is ordinary FIFO design.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = loas_pkg::FIFO_DEPTH,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             full,
  output logic             empty
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;

  assign full    = (cnt == (AW+1)'(DEPTH));
  assign empty   = (cnt == '0);
  assign rd_data = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else if (clear) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + AW'(1);
      if (pop)  rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + AW'(1);
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk)
    if (push && !clear) mem[wp] <= wr_data;

  no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("sync_fifo: push when full");
  no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("sync_fifo: pop when empty");

endmodule
