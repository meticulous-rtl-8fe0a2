// tb_microbench: the emulator's accuracy sweeps, run on the full-size design.
// A CPU model stands in for the benchmark programs that characterise the
// emulator on a real board; the settings swept are those of the board-level
// experiments, and each result is compared with what the setting asks for:
//   read latency   inserted read delay 0, 400, ..., 2800 ns: a dependent
//                  chain of single 64-byte reads (pointer chasing) takes
//                  base + delay (+/- 100 ns) each, and write latency is unchanged
//   write latency  inserted write delay 0, 400, ..., 2800 ns: AW-to-B time of
//                  a 64-byte write-back grows by the delay, reads unchanged
//   both latencies read delay d and write delay 2800 - d set together: each
//                  direction shows its own delay
//   read bandwidth limit 100 ... 700 MB/s with many reads outstanding: the
//                  measured rate matches the limit within 3 %
//   write bandwidth limit 100 ... 400 MB/s, likewise
//   bit errors     read and write error rates 0, 10, ..., 100 %: the fraction
//                  of flipped bits in 256 lines of zeros matches within 1.5 points
// Memory is a controller model with a 40-cycle latency.
module tb_microbench;
  import mc_pkg::*;
  localparam int MID_W = ID_W + 1;
  localparam logic [ADDR_W-1:0] BASE = 40'h10_0000_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic csr_awvalid, csr_awready, csr_wvalid, csr_wready, csr_bvalid, csr_bready;
  logic csr_arvalid, csr_arready, csr_rvalid, csr_rready;
  logic [CSR_ADDR_W-1:0] csr_awaddr, csr_araddr;
  logic [31:0] csr_wdata, csr_rdata;
  logic [3:0]  csr_wstrb;
  logic [1:0]  csr_bresp, csr_rresp;
  logic s_arvalid, s_arready, s_rvalid, s_rready, s_awvalid, s_awready;
  logic s_wvalid, s_wready, s_bvalid, s_bready;
  logic [ID_W-1:0] s_arid, s_rid, s_awid, s_bid;
  ax_t s_ar, s_aw;
  r_t  s_r;
  w_t  s_w;
  logic [1:0] s_bresp;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_awvalid, m_awready;
  logic m_wvalid, m_wready, m_bvalid, m_bready;
  logic [MID_W-1:0] m_arid, m_rid, m_awid, m_bid;
  ax_t m_ar, m_aw;
  r_t  m_r;
  w_t  m_w;
  logic [1:0] m_bresp;

  always #1 clk = ~clk;

  meticulous_top dut (.*);

  axi_mem_model #(.IDW(MID_W), .LAT(40), .STALL(1'b0)) u_mem (
    .clk, .rst_n,
    .arvalid (m_arvalid), .arready (m_arready), .arid (m_arid), .ar (m_ar),
    .rvalid  (m_rvalid),  .rready  (m_rready),  .rid  (m_rid),  .r  (m_r),
    .awvalid (m_awvalid), .awready (m_awready), .awid (m_awid), .aw (m_aw),
    .wvalid  (m_wvalid),  .wready  (m_wready),  .w    (m_w),
    .bvalid  (m_bvalid),  .bready  (m_bready),  .bid  (m_bid),  .bresp (m_bresp)
  );

  initial begin : watchdog
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic csr_wr(input int off, input logic [31:0] d);
    @(negedge clk);
    csr_awvalid = 1; csr_awaddr = CSR_ADDR_W'(off); csr_wvalid = 1; csr_wdata = d; csr_wstrb = 4'hF;
    @(posedge clk);
    while (!(csr_awready && csr_wready)) @(posedge clk);
    @(negedge clk);
    csr_awvalid = 0; csr_wvalid = 0;
    while (!csr_bvalid) @(posedge clk);
    @(posedge clk);
  endtask

  // ---------------------------------------------------------------- CPU model
  int ar_left, aw_left, w_left, rd_out, wr_out, r_beats, w_beats, bits_on;
  logic [ADDR_W-1:0] ar_addr, aw_addr;
  longint cyc, ar_t, aw_t, rd_lat, wr_lat;
  logic [DATA_W-1:0] wdata;

  always @(posedge clk) cyc <= rst_n ? cyc + 1 : 0;

  always_comb begin
    s_arvalid = ar_left != 0;
    s_arid    = ID_W'(ar_left % 4);
    s_ar      = '0;
    s_ar.addr = ar_addr;
    s_ar.len  = 8'd3;
    s_ar.size = 3'd4;
    s_ar.burst = 2'b01;
    s_awvalid = aw_left != 0;
    s_awid    = ID_W'(aw_left % 4);
    s_aw      = '0;
    s_aw.addr = aw_addr;
    s_aw.len  = 8'd3;
    s_aw.size = 3'd4;
    s_aw.burst = 2'b01;
    s_wvalid  = w_left != 0;
    s_w.data  = wdata;
    s_w.strb  = '1;
    s_w.last  = (w_left % 4) == 1;
  end
  assign s_rready = 1'b1;
  assign s_bready = 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (s_arvalid && s_arready) begin
      ar_left <= ar_left - 1; rd_out++; ar_t = cyc;
      ar_addr <= BASE + ((ar_addr - BASE + 64) & 40'hFFFF);
    end
    if (s_awvalid && s_awready) begin
      aw_left <= aw_left - 1; wr_out++; aw_t = cyc;
      aw_addr <= BASE + ((aw_addr - BASE + 64) & 40'hFFFF);
    end
    if (s_wvalid && s_wready) w_left <= w_left - 1;
    if (m_wvalid && m_wready) w_beats++;
    if (s_rvalid && s_rready) begin
      r_beats++;
      bits_on += $countones(s_r.data);
      if (s_r.last) begin rd_out--; rd_lat = cyc - ar_t; end
    end
    if (s_bvalid && s_bready) begin wr_out--; wr_lat = cyc - aw_t; end
  end

  task automatic wait_idle();
    int g = 0;
    do begin @(posedge clk); g++; end
    while ((ar_left || aw_left || w_left || rd_out || wr_out) && g < 1000000);
    repeat (5) @(posedge clk);
  endtask
  // one dependent read: the next is issued only after this one returned
  task automatic chase_read(output longint lat);
    @(negedge clk); ar_left = 1;
    wait_idle();
    lat = rd_lat;
  endtask
  task automatic writeback(output longint lat);
    @(negedge clk); aw_left = 1; w_left = 4;
    wait_idle();
    lat = wr_lat;
  endtask

  initial begin
    longint base_r, base_w, l, s;
    int b0, n_lines;
    csr_awvalid = 0; csr_wvalid = 0; csr_arvalid = 0; csr_awaddr = 0; csr_araddr = 0;
    csr_wdata = 0; csr_wstrb = 0; csr_bready = 1; csr_rready = 1;
    ar_left = 0; aw_left = 0; w_left = 0; rd_out = 0; wr_out = 0; r_beats = 0; w_beats = 0;
    bits_on = 0; ar_addr = BASE; aw_addr = BASE; wdata = '0; ar_t = 0; aw_t = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // zero-fill the 64-KB buffer
    @(negedge clk); aw_left = 1024; w_left = 4096;
    wait_idle();
    chase_read(base_r);
    writeback(base_w);
    $display("bare latency: read %0d ns, write %0d ns", base_r * 10 / 3, base_w * 10 / 3);

    // read latency sweep
    for (int d = 0; d <= 2800; d += 400) begin
      csr_wr(32'h04, d / 100);
      s = 0;
      for (int k = 0; k < 4; k++) begin chase_read(l); s += l; end
      writeback(l);
      $display("read delay %4d ns: read %0d ns, write %0d ns", d, (s / 4) * 10 / 3, l * 10 / 3);
      check((s / 4) - base_r >= d * 3 / 10 - 30 && (s / 4) - base_r <= d * 3 / 10 + 30,
            $sformatf("read delay %0d ns", d));
      check(l <= base_w + 2, $sformatf("write unaffected by read delay %0d ns", d));
    end
    csr_wr(32'h04, 0);
    // write latency sweep
    for (int d = 0; d <= 2800; d += 400) begin
      csr_wr(32'h08, d / 100);
      s = 0;
      for (int k = 0; k < 4; k++) begin writeback(l); s += l; end
      chase_read(l);
      $display("write delay %4d ns: write %0d ns, read %0d ns", d, (s / 4) * 10 / 3, l * 10 / 3);
      check((s / 4) - base_w >= d * 3 / 10 - 30 && (s / 4) - base_w <= d * 3 / 10 + 30,
            $sformatf("write delay %0d ns", d));
      check(l <= base_r + 2, $sformatf("read unaffected by write delay %0d ns", d));
    end
    // both delays set together: each direction gets its own
    for (int d = 0; d <= 2800; d += 400) begin
      longint lr, lw;
      csr_wr(32'h04, d / 100);
      csr_wr(32'h08, (2800 - d) / 100);
      chase_read(lr);
      writeback(lw);
      $display("read delay %4d ns, write delay %4d ns: read %0d ns, write %0d ns",
               d, 2800 - d, lr * 10 / 3, lw * 10 / 3);
      check(lr - base_r >= d * 3 / 10 - 30 && lr - base_r <= d * 3 / 10 + 30,
            $sformatf("read delay %0d ns with write delay set", d));
      check(lw - base_w >= (2800 - d) * 3 / 10 - 30 && lw - base_w <= (2800 - d) * 3 / 10 + 30,
            $sformatf("write delay %0d ns with read delay set", 2800 - d));
    end
    csr_wr(32'h04, 0);
    csr_wr(32'h08, 0);

    // read bandwidth sweep: 100 .. 700 MB/s
    for (int mbps = 100; mbps <= 700; mbps += 100) begin
      int got;
      csr_wr(32'h0C, mbps / 10);
      n_lines = 100000;
      @(negedge clk); ar_left = n_lines;
      repeat (150 * 30) @(posedge clk);             // spend the bucket
      b0 = r_beats;
      repeat (600 * 30) @(posedge clk);             // 60 us
      got = (r_beats - b0) * 16 * 10 / 600;         // MB/s: bytes per 100 ns * 10
      $display("read limit %0d MB/s: measured %0d MB/s", mbps, got);
      check(got * 100 >= mbps * 97 && got * 100 <= mbps * 103, $sformatf("read limit %0d MB/s", mbps));
      @(negedge clk); ar_left = 0;
      wait_idle();
    end
    csr_wr(32'h0C, 0);
    // write bandwidth sweep: 100 .. 400 MB/s
    for (int mbps = 100; mbps <= 400; mbps += 100) begin
      int got;
      csr_wr(32'h10, mbps / 10);
      @(negedge clk); aw_left = 100000; w_left = 400000;
      repeat (150 * 30) @(posedge clk);
      b0 = w_beats;
      repeat (600 * 30) @(posedge clk);
      got = (w_beats - b0) * 16 * 10 / 600;
      $display("write limit %0d MB/s: measured %0d MB/s", mbps, got);
      check(got * 100 >= mbps * 97 && got * 100 <= mbps * 103, $sformatf("write limit %0d MB/s", mbps));
      @(negedge clk); aw_left = 0; w_left = w_left % 4;
      wait_idle();
    end
    csr_wr(32'h10, 0);

    // read error sweep over zero-filled lines
    for (int pct = 0; pct <= 100; pct += 10) begin
      longint rate;
      int meas;
      rate = (pct == 100) ? 64'hFFFF_FFFF : (64'(pct) << 32) / 100;
      csr_wr(32'h14, 32'(rate));
      bits_on = 0;
      @(negedge clk); ar_left = 256;
      wait_idle();
      meas = bits_on * 1000 / (256 * 512);          // per mille
      $display("read error rate %0d %%: measured %0d.%0d %%", pct, meas / 10, meas % 10);
      check(meas >= pct * 10 - 15 && meas <= pct * 10 + 15, $sformatf("read error rate %0d %%", pct));
    end
    csr_wr(32'h14, 0);
    // write error sweep: write zeros with errors, read back without
    for (int pct = 0; pct <= 100; pct += 10) begin
      longint rate;
      int meas;
      rate = (pct == 100) ? 64'hFFFF_FFFF : (64'(pct) << 32) / 100;
      csr_wr(32'h18, 32'(rate));
      @(negedge clk); aw_addr = BASE; aw_left = 256; w_left = 1024;
      wait_idle();
      csr_wr(32'h18, 0);
      bits_on = 0;
      @(negedge clk); ar_addr = BASE; ar_left = 256;
      wait_idle();
      meas = bits_on * 1000 / (256 * 512);
      $display("write error rate %0d %%: measured %0d.%0d %%", pct, meas / 10, meas % 10);
      check(meas >= pct * 10 - 15 && meas <= pct * 10 + 15, $sformatf("write error rate %0d %%", pct));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
