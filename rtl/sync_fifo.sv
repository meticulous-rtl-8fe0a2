// sync_fifo: small synchronous first-in first-out queue (helper).
//
// A circular buffer of DEPTH entries of W bits with a show-ahead output: the
// oldest entry is on rd_data whenever empty is low. Push and pop may happen in
// the same cycle, also when the queue is full (the pop frees the slot).
// Reset empties the queue; the storage itself is not reset.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         full,
  output logic         empty
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  assign full    = (cnt == (AW+1)'(DEPTH));
  assign empty   = (cnt == '0);
  assign rd_data = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push && (!full || pop)) wp <= inc(wp);
      if (pop && !empty)          rp <= inc(rp);
      cnt <= cnt + (AW+1)'(push && (!full || pop)) - (AW+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (push && (!full || pop)) mem[wp] <= wr_data;
  end

  // A pop of an empty queue or a push into a full one (without a pop) is a caller bug.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
endmodule
