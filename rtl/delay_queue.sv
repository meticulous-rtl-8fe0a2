// delay_queue: latency insertion stage.
//
// A FIFO of DEPTH beats. Each beat is written together with the current time
// (100-ns ticks from mc_timer) and the latency that applies to it. The beat at
// the head is released once `now - stamp >= lat`, so every beat spends at
// least `lat - 1` and at most `lat` full ticks in the queue beyond one cycle
// (the stamp is taken at an arbitrary point within a tick); lat = 0 passes a
// beat on in the cycle after it arrives. Beats leave strictly in arrival
// order, which keeps the AXI ordering rules intact even when the latency
// setting changes while beats are queued. The time comparison is modular, so
// the counter may wrap. When the queue is full the input is back-pressured.
//
// Queueing beats and releasing them after the latency has passed follows the
// emulator's description; stamping per beat, the depth and the tick-level
// resolution are this design's choices.
module delay_queue
  import mc_pkg::*;
#(
  parameter int unsigned W     = 131,
  parameter int unsigned DEPTH = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TIME_W-1:0] now,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [W-1:0]      in_data,
  input  logic [LAT_W-1:0]  in_lat,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [W-1:0]      out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]      data_q  [DEPTH];
  logic [TIME_W-1:0] stamp_q [DEPTH];
  logic [LAT_W-1:0]  lat_q   [DEPTH];
  logic [AW-1:0]     wp, rp;
  logic [AW:0]       cnt;
  logic              push, pop;
  logic [TIME_W-1:0] elapsed;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign elapsed   = now - stamp_q[rp];
  assign out_valid = (cnt != '0) && (elapsed >= TIME_W'(lat_q[rp]));
  assign out_data  = data_q[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      data_q[wp]  <= in_data;
      stamp_q[wp] <= now;
      lat_q[wp]   <= in_lat;
    end
  end
endmodule
