// token_bucket: bandwidth throttling stage.
//
// A combinational gate on a valid/ready stream governed by a token bucket
// counted in bytes. On every 100-ns `tick` the bucket gains `rate` bytes
// (rate is in 10 MB/s units, and 10 MB/s is one byte per 100 ns), up to
// BUCKET_BYTES. A beat may pass only when the bucket holds at least
// BEAT_BYTES; passing it removes BEAT_BYTES. rate = 0 means no limit: the gate
// is open and the bucket is kept full. Over any long interval the bytes passed
// are at most rate * ticks + BUCKET_BYTES.
//
// The token bucket algorithm and the 100-ns refill pulse follow the emulator's
// description; the bucket size and the unlimited setting are this design's
// choices.
module token_bucket
  import mc_pkg::*;
#(
  parameter int unsigned W            = 131,
  parameter int unsigned BEAT_BYTES   = 16,
  parameter int unsigned BUCKET_BYTES = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tick,
  input  logic [THPT_W-1:0] rate,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [W-1:0]      in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [W-1:0]      out_data
);
  localparam int unsigned TW = $clog2(BUCKET_BYTES + (1 << THPT_W)) + 1;

  logic [TW-1:0] tokens, next;
  logic          allow, pass;

  assign allow     = (rate == '0) || (tokens >= TW'(BEAT_BYTES));
  assign out_valid = in_valid && allow;
  assign in_ready  = out_ready && allow;
  assign out_data  = in_data;
  assign pass      = out_valid && out_ready;

  always_comb begin
    next = tokens;
    if (pass && rate != '0) next = next - TW'(BEAT_BYTES);
    if (tick)               next = next + TW'(rate);
    if (rate == '0 || next > TW'(BUCKET_BYTES)) next = TW'(BUCKET_BYTES);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tokens <= TW'(BUCKET_BYTES);
    else        tokens <= next;
  end
endmodule
