// tb_delay_queue: checks latency insertion against a reference queue.
// Every cycle the model decides whether the head beat is due (its latency in
// ticks has elapsed since it was queued) and the DUT's out_valid must agree;
// beats must leave in order with their data intact, the queue must refuse
// beats when full, and each beat must have waited at least its latency.
// The time base ticks every 3 cycles here, to keep the run short.
module tb_delay_queue;
  import mc_pkg::*;
  localparam int W = 16, DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [TIME_W-1:0] now;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [LAT_W-1:0] in_lat;
  int checks = 0, failures = 0;

  typedef struct { logic [W-1:0] d; logic [TIME_W-1:0] t; logic [LAT_W-1:0] lat; } ent_t;
  ent_t q[$];

  always #1 clk = ~clk;

  delay_queue #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int div;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin now <= 32'hFFFF_FFF0; div <= 0; end   // start near the wrap
    else begin
      div <= (div == 2) ? 0 : div + 1;
      if (div == 2) now <= now + 1;
    end

  initial begin
    int full_seen = 0, delayed = 0, zero_lat = 0;
    in_valid = 0; in_data = 0; in_lat = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 20000; c++) begin
      logic do_push, do_pop;
      logic due;
      @(negedge clk);
      in_valid  = ($urandom_range(3) == 0);
      in_data   = W'($urandom);
      in_lat    = LAT_W'($urandom_range(0, 12));
      out_ready = (c % 4000 < 3000) ? ($urandom_range(3) != 0) : 1'b0;  // stretches of no draining
      #0;
      due = (q.size() != 0) && (TIME_W'(now - q[0].t) >= TIME_W'(q[0].lat));
      checks++;
      if (out_valid != due) begin
        failures++; $display("cycle %0d: out_valid=%0b expected %0b", c, out_valid, due);
      end
      if (out_valid && due) begin
        checks++;
        if (out_data != q[0].d) begin failures++; $display("data %h expected %h", out_data, q[0].d); end
      end
      checks++;
      if (in_ready != (q.size() < DEPTH)) begin failures++; $display("in_ready wrong"); end
      if (!in_ready) full_seen++;
      do_push = in_valid && in_ready;
      do_pop  = out_valid && out_ready;
      @(posedge clk);
      if (do_pop) begin
        if (q[0].lat > 2) delayed++;
        if (q[0].lat == 0) zero_lat++;
        void'(q.pop_front());
      end
      if (do_push) q.push_back('{in_data, now, in_lat});
    end
    checks++;
    if (full_seen == 0 || delayed == 0 || zero_lat == 0) begin
      failures++; $display("coverage: full %0d delayed %0d zero %0d", full_seen, delayed, zero_lat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
