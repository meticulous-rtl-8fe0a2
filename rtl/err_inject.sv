// err_inject: bit-flip error injection stage.
//
// One register stage of a valid/ready stream. As a beat is accepted, each of
// its W data bits is flipped independently with probability rate / 2^32: bit i
// is flipped when the 32-bit pseudo-random number of lane i is below `rate`.
// Each lane has its own 32-bit xorshift register (shifts 13, 17, 5), a linear
// feedback shift register whose every step mixes all 32 bits, seeded
// differently per lane and advanced once per accepted beat; its period is
// 2^32 - 1 and it never reaches zero. `bit_en` limits flips to bits that matter (for write data: bytes whose
// strobe is set). Flips travel with the beat; `flips` gives the number of bits
// flipped in the beat accepted this cycle, for the error counters.
// Side-band bits (ID, last, strobes) pass through untouched.
//
// Flipping each bit with a per-bit probability and using LFSRs follows the
// description of the emulator; the 32-bit rate encoding, the per-lane
// generators and their shift constants are this design's choices.
module err_inject #(
  parameter int unsigned W      = 128,
  parameter int unsigned SIDE_W = 8,
  parameter logic [31:0] SEED   = 32'h1234_5678
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       rate,
  // input stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [W-1:0]      in_data,
  input  logic [W-1:0]      bit_en,
  input  logic [SIDE_W-1:0] in_side,
  // output stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [W-1:0]      out_data,
  output logic [SIDE_W-1:0] out_side,
  // statistics
  output logic [$clog2(W+1)-1:0] flips
);
  function automatic logic [31:0] lfsr32(input logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  logic [31:0]  lane [W];
  logic [W-1:0] mask;
  logic         take;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  always_comb begin
    for (int i = 0; i < W; i++) mask[i] = bit_en[i] && (lane[i] < rate);
  end

  always_comb begin
    flips = '0;
    if (take)
      for (int i = 0; i < W; i++) flips = flips + ($clog2(W+1))'(mask[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < W; i++)
        lane[i] <= (SEED ^ (32'h9E37_79B9 * (i + 1))) | 32'h1;   // never all-zero
      out_valid <= 1'b0;
      out_data  <= '0;
      out_side  <= '0;
    end else begin
      if (take) begin
        for (int i = 0; i < W; i++) lane[i] <= lfsr32(lane[i]);
        out_data <= in_data ^ mask;
        out_side <= in_side;
      end
      if (in_ready) out_valid <= in_valid;
    end
  end
endmodule
