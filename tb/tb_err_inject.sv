// tb_err_inject: checks the bit-flip stage.
//   - rate 0 never flips, and data and side-band pass through unchanged
//   - rate 2^32-1 flips every enabled bit and none of the disabled ones
//   - rate 2^32/10 flips about 10 % of bits (between 9 % and 11 % over 400
//     beats of 128 bits)
//   - the reported flip count equals the Hamming distance of in and out
//   - a stalled output holds its beat (random back-pressure)
module tb_err_inject;
  localparam int W = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] rate;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, bit_en, out_data;
  logic [7:0] in_side, out_side;
  logic [$clog2(W+1)-1:0] flips;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  err_inject #(.W(W), .SIDE_W(8)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected stream: what went in, with the mask of enabled bits and the count.
  typedef struct { logic [W-1:0] d; logic [W-1:0] en; logic [7:0] s; int fl; } beat_t;
  beat_t sent[$];
  longint flipped_total, enabled_total;
  int     mode;   // 0: rate 0, 1: rate max, 2: rate 10 %

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) sent.push_back('{in_data, bit_en, in_side, int'(flips)});
    if (out_valid && out_ready) begin
      beat_t b;
      logic [W-1:0] diff;
      b = sent.pop_front();
      diff = b.d ^ out_data;
      checks++;
      if (out_side != b.s) begin failures++; $display("side-band changed"); end
      checks++;
      if ($countones(diff) != b.fl) begin
        failures++; $display("flips reported %0d, actual %0d", b.fl, $countones(diff));
      end
      checks++;
      if ((diff & ~b.en) != '0) begin failures++; $display("disabled bit flipped"); end
      if (mode == 0) begin
        checks++;
        if (diff != '0) begin failures++; $display("flip at rate 0"); end
      end
      if (mode == 1) begin
        checks++;
        if (diff != b.en) begin failures++; $display("not all bits flipped at max rate"); end
      end
      flipped_total += $countones(diff);
      enabled_total += $countones(b.en);
    end
  end

  always @(posedge clk) out_ready <= ($urandom_range(3) != 0);

  task automatic run(input int n, input logic full_en);
    int sent_n = 0;
    while (sent_n < n) begin
      in_valid <= 1'b1;
      in_data  <= {$urandom, $urandom, $urandom, $urandom};
      bit_en   <= full_en ? '1 : {$urandom, $urandom, $urandom, $urandom};
      in_side  <= 8'($urandom);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sent_n++;
    end
    in_valid <= 1'b0;
    repeat (10) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; in_data = 0; bit_en = '1; in_side = 0; rate = 0; mode = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    mode = 0; rate = 32'd0;          run(50, 1'b0);
    mode = 1; rate = 32'hFFFF_FFFF;  run(50, 1'b0);
    mode = 2; rate = 32'd429496730; flipped_total = 0; enabled_total = 0;
    run(400, 1'b1);
    checks++;
    if (flipped_total * 100 < enabled_total * 9 || flipped_total * 100 > enabled_total * 11) begin
      failures++;
      $display("10%% rate gave %0d of %0d bits", flipped_total, enabled_total);
    end
    checks++;
    if (sent.size() != 0) begin failures++; $display("%0d beats lost", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
