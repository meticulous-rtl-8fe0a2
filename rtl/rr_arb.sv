// rr_arb: round-robin arbiter (helper).
//
// Grants one of N requesters per cycle, combinationally. The search starts
// just after the requester granted last (recorded when `advance` is high), so
// every requester that keeps requesting is served within N grants.
module rr_arb #(
  parameter int unsigned N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,   // the current grant was used; move the pointer
  output logic [N-1:0] gnt,
  output logic [(N>1?$clog2(N):1)-1:0] gnt_idx
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    // Later iterations win, so k = 1 (the requester after `last`) has priority.
    for (int k = N; k >= 1; k--) begin
      logic [IW:0] i;
      i = (IW+1)'(last) + (IW+1)'(k);
      if (i >= (IW+1)'(N)) i = i - (IW+1)'(N);
      if (req[IW'(i)]) begin
        gnt          = '0;
        gnt[IW'(i)]  = 1'b1;
        gnt_idx      = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 last <= IW'(N-1);
    else if (advance && |req)   last <= gnt_idx;
  end
endmodule
