// mc_timer: time base of the emulator.
//
// Divides the fabric clock down to a one-cycle pulse every TICK_NS
// nanoseconds (100 ns: 30 cycles at 300 MHz). The pulse refills the token
// buckets of every rate controller. A free-running counter of these pulses is
// the "current time" that the delay queues stamp on each data beat and compare
// against the inserted latency, so both latency and bandwidth settings share
// the 100-ns unit of the configuration interface. Both outputs are registered;
// `now` increments in the same cycle that `tick` is high.
module mc_timer
  import mc_pkg::*;
#(
  parameter int unsigned CLK_MHZ = 300,
  parameter int unsigned TICK_NS = 100
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              tick,
  output logic [TIME_W-1:0] now
);
  localparam int unsigned DIV = CLK_MHZ * TICK_NS / 1000;
  localparam int unsigned DW  = (DIV > 1) ? $clog2(DIV) : 1;

  logic [DW-1:0] div_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt <= '0;
      tick    <= 1'b0;
      now     <= '0;
    end else begin
      tick <= 1'b0;
      if (div_cnt == DW'(DIV - 1)) begin
        div_cnt <= '0;
        tick    <= 1'b1;
        now     <= now + 1'b1;
      end else begin
        div_cnt <= div_cnt + 1'b1;
      end
    end
  end
endmodule
