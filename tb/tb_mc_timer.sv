// tb_mc_timer: checks that the timer pulses once every 100 ns (30 cycles at
// 300 MHz) and that the current time advances by one per pulse.
module tb_mc_timer;
  import mc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tick;
  logic [TIME_W-1:0] now;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  mc_timer #(.CLK_MHZ(300), .TICK_NS(100)) dut (.clk, .rst_n, .tick, .now);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_tick, ticks;
    logic [TIME_W-1:0] last_now;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    last_tick = -1;
    ticks = 0;
    last_now = 0;
    for (int c = 0; c < 3100; c++) begin
      @(posedge clk); #0;
      if (tick) begin
        if (last_tick >= 0) begin
          checks++;
          if (c - last_tick != 30) begin
            failures++;
            $display("tick spacing %0d cycles, expected 30", c - last_tick);
          end
        end
        checks++;
        if (now != last_now + 1) begin
          failures++;
          $display("now=%0d after %0d, expected +1", now, last_now);
        end
        last_now = now;
        last_tick = c;
        ticks++;
      end else begin
        checks++;
        if (now != last_now) begin
          failures++;
          $display("now changed without a tick");
        end
      end
    end
    checks++;
    if (ticks != 103 && ticks != 104) begin
      failures++;
      $display("%0d ticks in 3100 cycles, expected 103", ticks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
