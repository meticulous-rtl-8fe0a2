// tb_meticulous_top: end-to-end test of the emulator at its default size
// (two regions of 2 GB at 64 GB, 300 MHz, 128-bit bus), with a CPU master
// model, software-style CSR accesses over AXI4-Lite, and a DDR4 controller
// model (axi_mem_model, 40-cycle latency, random back-pressure).
//
// Sequence, each step checked against values worked out here:
//   1. fill lines in both regions, read back (region routing, data path)
//   2. region 1 read latency 2000 ns: its reads take 600 cycles (+/- 30)
//      longer than region 0's, region 0 unchanged
//   3. region 1 write latency 1000 ns: its writes take 300 cycles longer
//   4. same ID to region 1 then region 0: the region-0 read must wait (the
//      demux holds it) and data comes back in issue order
//   5. region 0 read bandwidth 960 MB/s and write bandwidth 320 MB/s:
//      beats per 100 ticks as set
//   6. read/write bit errors at the maximum rate invert the data, and the
//      error counters read through the CSR agree
//   7. the byte counters read through the CSR agree with the beats seen
//   8. moving the region boundary through the CSR moves the slow addresses
// Each mechanism (read delay, write delay, read throttle, write throttle,
// read error, write error, same-ID hold, boundary move) is counted and must
// have happened at least once.
module tb_meticulous_top;
  import mc_pkg::*;
  localparam int MID_W = ID_W + 1;
  localparam logic [ADDR_W-1:0] BASE = 40'h10_0000_0000;
  localparam logic [ADDR_W-1:0] R1   = BASE + 40'h8000_0000;   // region 1 at 2 GB
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

  axi_mem_model #(.IDW(MID_W), .LAT(40), .STALL(1'b1)) u_mem (
    .clk, .rst_n,
    .arvalid (m_arvalid), .arready (m_arready), .arid (m_arid), .ar (m_ar),
    .rvalid  (m_rvalid),  .rready  (m_rready),  .rid  (m_rid),  .r  (m_r),
    .awvalid (m_awvalid), .awready (m_awready), .awid (m_awid), .aw (m_aw),
    .wvalid  (m_wvalid),  .wready  (m_wready),  .w    (m_w),
    .bvalid  (m_bvalid),  .bready  (m_bready),  .bid  (m_bid),  .bresp (m_bresp)
  );

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- CSR access
  task automatic csr_wr(input int bank, input int off, input logic [31:0] d);
    @(negedge clk);
    csr_awvalid = 1; csr_awaddr = CSR_ADDR_W'(bank * 64 + off); csr_wvalid = 1; csr_wdata = d;
    csr_wstrb = 4'hF;
    @(posedge clk);
    while (!(csr_awready && csr_wready)) @(posedge clk);
    @(negedge clk);
    csr_awvalid = 0; csr_wvalid = 0;
    while (!csr_bvalid) @(posedge clk);
    @(posedge clk);
  endtask
  task automatic csr_rd(input int bank, input int off, output logic [31:0] d);
    @(negedge clk);
    csr_arvalid = 1; csr_araddr = CSR_ADDR_W'(bank * 64 + off);
    @(posedge clk);
    while (!csr_arready) @(posedge clk);
    @(negedge clk);
    csr_arvalid = 0;
    while (!csr_rvalid) @(negedge clk);
    d = csr_rdata;
    @(posedge clk);
  endtask
  task automatic csr_rd64(input int bank, input int off, output longint v);
    logic [31:0] lo, hi;
    csr_rd(bank, off, lo);
    csr_rd(bank, off + 4, hi);
    v = {hi, lo};
  endtask

  // ---------------------------------------------------------------- CPU model
  function automatic logic [DATA_W-1:0] pattern(input logic [ADDR_W-1:0] a, input int beat);
    return {a + ADDR_W'(beat * 16), 24'hC0FFEE, ~(a + ADDR_W'(beat * 16)), 24'(beat)};
  endfunction
  function automatic int region_of(input logic [ADDR_W-1:0] a);
    return (((a - BASE) >> 12) >= bnd1) ? 1 : 0;
  endfunction

  typedef struct { logic [ID_W-1:0] id; logic [ADDR_W-1:0] addr; longint t; } req_t;
  // Beats on the bus are held in registers updated with nonblocking
  // assignments, so the design samples them race-free at the clock edge.
  logic ar_v = 1'b0, aw_v = 1'b0, w_v = 1'b0, w_cur_last = 1'b0;
  req_t ar_cur = '{default: 0}, aw_cur = '{default: 0};
  logic [DATA_W-1:0] w_cur = '0;
  int w_sent = 0;
  req_t ar_q[$], aw_q[$];
  req_t rd_out[1 << ID_W][$], wr_out[1 << ID_W][$];
  logic [DATA_W-1:0] w_beats[$];
  longint cyc, last_rd_lat, last_wr_lat;
  int rd_done, wr_done, rbeat_no [1 << ID_W];
  longint r_beats_reg [2], w_beats_reg [2];
  int r_beats, m_w_beats;
  logic rd_invert [2];
  logic [31:0] bnd1;
  int order_log[$];
  // mechanism counters
  int n_rd_delay, n_wr_delay, n_rd_throttle, n_wr_throttle, n_rd_err, n_wr_err, n_id_hold, n_bnd_move;

  always @(posedge clk) cyc <= rst_n ? cyc + 1 : 0;

  always_comb begin
    s_arvalid = ar_v;
    s_arid    = ar_cur.id;
    s_ar      = '0;
    s_ar.addr = ar_cur.addr;
    s_ar.len  = 8'd3;
    s_ar.size = 3'd4;
    s_ar.burst = 2'b01;
    s_awvalid = aw_v;
    s_awid    = aw_cur.id;
    s_aw      = '0;
    s_aw.addr = aw_cur.addr;
    s_aw.len  = 8'd3;
    s_aw.size = 3'd4;
    s_aw.burst = 2'b01;
    s_wvalid  = w_v;
    s_w.data  = w_cur;
    s_w.strb  = '1;
    s_w.last  = w_cur_last;
  end
  assign s_rready = 1'b1;
  assign s_bready = 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (s_arvalid && !s_arready && !dut.u_demux.ar_ok) n_id_hold++;
    if (dut.g_rc[0].u_rc.rq_valid && !dut.g_rc[0].u_rc.u_rtb.allow) n_rd_throttle++;
    if (dut.g_rc[0].u_rc.wq_valid && !dut.g_rc[0].u_rc.u_wtb.allow) n_wr_throttle++;
    if (m_wvalid && m_wready) m_w_beats++;
    if (s_arvalid && s_arready) begin
      req_t q;
      q = ar_cur;
      q.t = cyc;
      rd_out[q.id].push_back(q);
    end
    if (!ar_v || s_arready) begin
      if (ar_q.size() != 0) begin ar_v <= 1'b1; ar_cur <= ar_q.pop_front(); end
      else ar_v <= 1'b0;
    end
    if (s_awvalid && s_awready) begin
      req_t q;
      q = aw_cur;
      q.t = cyc;
      wr_out[q.id].push_back(q);
    end
    if (!aw_v || s_awready) begin
      if (aw_q.size() != 0) begin aw_v <= 1'b1; aw_cur <= aw_q.pop_front(); end
      else aw_v <= 1'b0;
    end
    if (!w_v || s_wready) begin
      if (w_beats.size() != 0) begin
        w_v <= 1'b1;
        w_cur <= w_beats.pop_front();
        w_cur_last <= (w_sent % 4) == 3;
        w_sent <= w_sent + 1;
      end else w_v <= 1'b0;
    end
    if (s_rvalid && s_rready) begin
      r_beats++;
      if (rd_out[s_rid].size() == 0) begin
        checks++; failures++; $display("read data for idle ID %0d", s_rid);
      end else begin
        logic [DATA_W-1:0] e;
        int rg;
        rg = region_of(rd_out[s_rid][0].addr);
        e = pattern(rd_out[s_rid][0].addr, rbeat_no[s_rid]);
        if (rd_invert[rg]) e = ~e;
        checks++;
        if (s_r.data != e) begin
          failures++; $display("id %0d addr %h beat %0d: %h expected %h", s_rid,
                               rd_out[s_rid][0].addr, rbeat_no[s_rid], s_r.data, e);
        end
        r_beats_reg[rg]++;
        if (s_r.last) begin
          last_rd_lat = cyc - rd_out[s_rid][0].t;
          order_log.push_back(int'(rd_out[s_rid][0].addr[15:0]));
          void'(rd_out[s_rid].pop_front());
          rbeat_no[s_rid] = 0;
          rd_done++;
        end else rbeat_no[s_rid]++;
      end
    end
    if (s_bvalid && s_bready) begin
      checks++;
      if (wr_out[s_bid].size() == 0) begin failures++; $display("B for idle ID"); end
      else begin
        last_wr_lat = cyc - wr_out[s_bid][0].t;
        w_beats_reg[region_of(wr_out[s_bid][0].addr)] += 4;
        void'(wr_out[s_bid].pop_front());
        wr_done++;
      end
    end
  end

  task automatic write_line(input logic [ADDR_W-1:0] a, input logic [ID_W-1:0] id);
    aw_q.push_back('{id, a, 0});
    for (int b = 0; b < 4; b++) w_beats.push_back(pattern(a, b));
  endtask
  task automatic read_line(input logic [ADDR_W-1:0] a, input logic [ID_W-1:0] id);
    ar_q.push_back('{id, a, 0});
  endtask
  function automatic bit busy();
    if (ar_q.size() != 0 || aw_q.size() != 0 || w_beats.size() != 0 || ar_v || aw_v || w_v) return 1;
    for (int i = 0; i < (1 << ID_W); i++) if (rd_out[i].size() != 0 || wr_out[i].size() != 0) return 1;
    return 0;
  endfunction
  task automatic wait_idle();
    int g = 0;
    do begin @(posedge clk); g++; end while (busy() && g < 1000000);
    repeat (5) @(posedge clk);
  endtask
  task automatic rd_latency(input logic [ADDR_W-1:0] base, output longint avg);
    longint sum = 0;
    for (int i = 0; i < 8; i++) begin
      read_line(base + ADDR_W'(i * 64), ID_W'(i));
      wait_idle();
      sum += last_rd_lat;
    end
    avg = sum / 8;
  endtask
  task automatic wr_latency(input logic [ADDR_W-1:0] base, output longint avg);
    longint sum = 0;
    for (int i = 0; i < 8; i++) begin
      write_line(base + ADDR_W'(i * 64), ID_W'(i));
      wait_idle();
      sum += last_wr_lat;
    end
    avg = sum / 8;
  endtask

  initial begin
    longint l0, l1, l0b, l1b, v;
    int beats0;
    logic [31:0] d;
    csr_awvalid = 0; csr_wvalid = 0; csr_arvalid = 0; csr_awaddr = 0; csr_araddr = 0;
    csr_wdata = 0; csr_wstrb = 0; csr_bready = 1; csr_rready = 1;
    rd_done = 0; wr_done = 0; r_beats = 0; m_w_beats = 0; bnd1 = 32'h0008_0000;
    for (int i = 0; i < (1 << ID_W); i++) rbeat_no[i] = 0;
    for (int g = 0; g < 2; g++) begin r_beats_reg[g] = 0; w_beats_reg[g] = 0; rd_invert[g] = 0; end
    n_rd_delay = 0; n_wr_delay = 0; n_rd_throttle = 0; n_wr_throttle = 0;
    n_rd_err = 0; n_wr_err = 0; n_id_hold = 0; n_bnd_move = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // 1. routing and data
    csr_rd(1, 0, d);
    check(d == 32'h0008_0000, "region 1 starts at 2 GB after reset");
    for (int i = 0; i < 32; i++) begin
      write_line(BASE + ADDR_W'(i * 64), ID_W'(i % 4));
      write_line(R1 + ADDR_W'(i * 64), ID_W'(i % 4));
    end
    wait_idle();
    for (int i = 0; i < 32; i++) begin
      read_line(BASE + ADDR_W'(i * 64), ID_W'(i % 8));
      read_line(R1 + ADDR_W'(i * 64), ID_W'(8 + i % 8));
    end
    wait_idle();
    check(rd_done == 64 && wr_done == 64, "fill and read back both regions");

    // 2. read latency on region 1
    rd_latency(BASE, l0);
    rd_latency(R1, l1);
    csr_wr(1, 32'h04, 20);                  // 2000 ns
    rd_latency(BASE, l0b);
    rd_latency(R1, l1b);
    $display("read latency region0 %0d -> %0d, region1 %0d -> %0d cycles", l0, l0b, l1, l1b);
    check(l1b - l1 >= 570 && l1b - l1 <= 630, "region 1 read delay of 2000 ns");
    check(l0b - l0 <= 3 && l0 - l0b <= 3, "region 0 read latency unchanged");
    if (l1b - l1 >= 570) n_rd_delay++;

    // 3. write latency on region 1
    wr_latency(R1, l1);
    csr_wr(1, 32'h08, 10);                  // 1000 ns
    wr_latency(R1, l1b);
    wr_latency(BASE, l0b);
    $display("write latency region1 %0d -> %0d, region0 %0d cycles", l1, l1b, l0b);
    check(l1b - l1 >= 270 && l1b - l1 <= 330, "region 1 write delay of 1000 ns");
    check(l0b < l1, "region 0 writes not delayed");
    if (l1b - l1 >= 270) n_wr_delay++;

    // 4. same ID to the slow region, then to the fast one
    order_log.delete();
    read_line(R1 + 40'h40, ID_W'(5));
    read_line(BASE + 40'h80, ID_W'(5));
    read_line(BASE + 40'hC0, ID_W'(6));      // other ID: allowed past (but queued behind on AR)
    wait_idle();
    check(order_log.size() == 3 && order_log[0] == 16'h0040 && order_log[1] == 16'h0080,
          "same-ID reads complete in issue order across regions");
    check(n_id_hold > 0, "demux held the same-ID request");

    // 5. bandwidth on region 0
    csr_wr(0, 32'h0C, 96);                  // 960 MB/s = 6 beats per tick
    for (int k = 0; k < 32; k++) for (int i = 0; i < 32; i++) read_line(BASE + ADDR_W'(i * 64), ID_W'(i % 8));
    repeat (8000) @(posedge clk);           // the 4-KB bucket is spent by now
    beats0 = r_beats;
    repeat (3000) @(posedge clk);
    check(r_beats - beats0 >= 590 && r_beats - beats0 <= 610,
          $sformatf("region 0 read rate %0d beats per 100 ticks, expected 600", r_beats - beats0));
    wait_idle();
    csr_wr(0, 32'h0C, 0);
    csr_wr(0, 32'h10, 32);                  // 320 MB/s = 2 beats per tick
    for (int k = 0; k < 8; k++) for (int i = 0; i < 32; i++) write_line(BASE + ADDR_W'(i * 64), ID_W'(i % 8));
    repeat (8000) @(posedge clk);
    beats0 = m_w_beats;
    repeat (3000) @(posedge clk);
    check(m_w_beats - beats0 >= 198 && m_w_beats - beats0 <= 202,
          $sformatf("region 0 write rate %0d beats per 100 ticks, expected 200", m_w_beats - beats0));
    wait_idle();
    csr_wr(0, 32'h10, 0);

    // 6. bit errors: region 1 reads inverted, region 0 writes inverted
    csr_wr(1, 32'h04, 0);
    csr_wr(1, 32'h08, 0);
    csr_wr(1, 32'h14, 32'hFFFF_FFFF);
    rd_invert[1] = 1;
    for (int i = 0; i < 8; i++) read_line(R1 + ADDR_W'(i * 64), ID_W'(i));
    wait_idle();
    rd_invert[1] = 0;
    csr_wr(1, 32'h14, 0);
    csr_rd64(1, 32'h30, v);
    check(v == 8 * 4 * 128, $sformatf("region 1 read bit errors %0d", v));
    if (v != 0) n_rd_err++;
    csr_wr(0, 32'h18, 32'hFFFF_FFFF);
    for (int i = 0; i < 4; i++) write_line(BASE + 40'h1000 + ADDR_W'(i * 64), ID_W'(i));
    wait_idle();
    csr_wr(0, 32'h18, 0);
    csr_rd64(0, 32'h38, v);
    check(v == 4 * 4 * 128, $sformatf("region 0 write bit errors %0d", v));
    if (v != 0) n_wr_err++;
    rd_invert[0] = 1;
    for (int i = 0; i < 4; i++) read_line(BASE + 40'h1000 + ADDR_W'(i * 64), ID_W'(i));
    wait_idle();
    rd_invert[0] = 0;

    // 7. byte counters
    for (int g = 0; g < 2; g++) begin
      csr_rd64(g, 32'h20, v);
      check(v == r_beats_reg[g] * 16, $sformatf("region %0d read bytes %0d expected %0d", g, v, r_beats_reg[g] * 16));
      csr_rd64(g, 32'h28, v);
      check(v == w_beats_reg[g] * 16, $sformatf("region %0d write bytes %0d expected %0d", g, v, w_beats_reg[g] * 16));
    end

    // 8. move the boundary of region 1 down to 1 GB and make it slow again
    csr_wr(1, 32'h04, 20);
    csr_wr(1, 32'h00, 32'h0004_0000);
    bnd1 = 32'h0004_0000;
    for (int i = 0; i < 8; i++) write_line(BASE + 40'h4000_0000 + ADDR_W'(i * 64), ID_W'(i));
    wait_idle();
    rd_latency(BASE + 40'h4000_0000, l1b);
    check(l1b >= l0 + 570, $sformatf("address at 1 GB now slow: %0d cycles", l1b));
    if (l1b >= l0 + 570) n_bnd_move++;

    $display("mechanisms: rd_delay %0d wr_delay %0d rd_throttle %0d wr_throttle %0d rd_err %0d wr_err %0d id_hold %0d boundary_move %0d",
             n_rd_delay, n_wr_delay, n_rd_throttle, n_wr_throttle, n_rd_err, n_wr_err, n_id_hold, n_bnd_move);
    check(n_rd_delay > 0, "read delay happened");
    check(n_wr_delay > 0, "write delay happened");
    check(n_rd_throttle > 0, "read throttling happened");
    check(n_wr_throttle > 0, "write throttling happened");
    check(n_rd_err > 0, "read error injection happened");
    check(n_wr_err > 0, "write error injection happened");
    check(n_id_hold > 0, "same-ID hold happened");
    check(n_bnd_move > 0, "boundary move happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
