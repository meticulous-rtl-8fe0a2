// tb_token_bucket: checks bandwidth throttling.
// A source always offers 16-byte beats and the sink is always ready. With a
// rate of R bytes per 100-ns tick (tick every 30 cycles, as at 300 MHz), the
// beats passed in T ticks after the initial full bucket has been spent must
// equal R*T/16 within one beat; rate 0 must pass one beat every cycle; the
// bucket must allow at most BUCKET bytes of burst after an idle period.
module tb_token_bucket;
  import mc_pkg::*;
  localparam int W = 8, BEAT = 16, BUCKET = 256;
  logic clk = 1'b0, rst_n = 1'b0, tick;
  logic [THPT_W-1:0] rate;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  int passed;

  always #1 clk = ~clk;

  token_bucket #(.W(W), .BEAT_BYTES(BEAT), .BUCKET_BYTES(BUCKET)) dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int div;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin div <= 0; tick <= 0; end
    else begin
      div  <= (div == 29) ? 0 : div + 1;
      tick <= (div == 29);
    end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    passed++;
    checks++;
    if (out_data != in_data) begin failures++; $display("data changed"); end
  end

  task automatic measure(input int r, input int ticks_n);
    int expected;
    rate = THPT_W'(r);
    in_valid = 1'b1;
    repeat (BUCKET / BEAT * 30 + 600) @(posedge clk);   // drain the bucket and settle
    passed = 0;
    repeat (ticks_n * 30) @(posedge clk);
    expected = r * ticks_n / BEAT;
    checks++;
    if (passed < expected - 1 || passed > expected + 1) begin
      failures++; $display("rate %0d: %0d beats in %0d ticks, expected %0d", r, passed, ticks_n, expected);
    end
  endtask

  initial begin
    rate = 0; in_valid = 0; in_data = 8'h5A; out_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // unlimited
    in_valid = 1'b1;
    passed = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (passed != 100) begin failures++; $display("unlimited passed %0d of 100", passed); end
    measure(10, 400);    // 100 MB/s
    measure(40, 400);    // 400 MB/s
    measure(3, 800);     // 30 MB/s: less than a beat per tick
    // burst after idle: the bucket fills to BUCKET and no further
    in_valid = 1'b0;
    rate = 16'd40;
    repeat (40 * 30) @(posedge clk);
    in_valid = 1'b1;
    passed = 0;
    repeat (BUCKET / BEAT + 4) @(posedge clk);
    checks++;
    if (passed < BUCKET / BEAT || passed > BUCKET / BEAT + 1) begin
      failures++; $display("burst after idle %0d beats, expected %0d", passed, BUCKET / BEAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
