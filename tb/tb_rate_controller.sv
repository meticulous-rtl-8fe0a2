// tb_rate_controller: one rate controller between an AXI4 master model and a
// memory model (axi_mem_model, 20-cycle latency, random back-pressure).
// Time base: 300 MHz clock, 100-ns tick every 30 cycles, as in the real set-up.
// Checks, each against values worked out here:
//   data       written lines read back intact, per-ID order kept with 4 IDs
//              and up to 16 bursts outstanding
//   latency    read latency grows by rd_lat * 30 cycles (+/- one tick);
//              write latency (AW to B) grows by wr_lat * 30 cycles; a read
//              delay leaves writes alone and a write delay leaves reads alone
//   bandwidth  read and write beats per tick match the set byte rate
//   errors     read and write error rates of 2^32-1 invert the data (write
//              only in strobed bytes) and the flip counts reported agree
//   statistics transferred byte counts match the beats seen
//   changes    latency and bandwidth settings changed with bursts in flight:
//              all complete, in per-ID order, with intact data
module tb_rate_controller;
  import mc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tick;
  logic [TIME_W-1:0] now;
  region_cfg_t  cfg;
  region_stat_t stat;
  int checks = 0, failures = 0;

  logic s_arvalid, s_arready, s_rvalid, s_rready, s_awvalid, s_awready;
  logic s_wvalid, s_wready, s_bvalid, s_bready;
  logic [ID_W-1:0] s_arid, s_rid, s_awid, s_bid;
  ax_t s_ar, s_aw;
  r_t  s_r;
  w_t  s_w;
  logic [1:0] s_bresp;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_awvalid, m_awready;
  logic m_wvalid, m_wready, m_bvalid, m_bready;
  logic [ID_W-1:0] m_arid, m_rid, m_awid, m_bid;
  ax_t m_ar, m_aw;
  r_t  m_r;
  w_t  m_w;
  logic [1:0] m_bresp;

  always #1 clk = ~clk;

  mc_timer u_timer (.clk, .rst_n, .tick, .now);

  rate_controller #(.BUCKET_BYTES(256)) dut (.*);

  axi_mem_model #(.IDW(ID_W), .LAT(20), .STALL(1'b1)) u_mem (
    .clk, .rst_n,
    .arvalid (m_arvalid), .arready (m_arready), .arid (m_arid), .ar (m_ar),
    .rvalid  (m_rvalid),  .rready  (m_rready),  .rid  (m_rid),  .r  (m_r),
    .awvalid (m_awvalid), .awready (m_awready), .awid (m_awid), .aw (m_aw),
    .wvalid  (m_wvalid),  .wready  (m_wready),  .w    (m_w),
    .bvalid  (m_bvalid),  .bready  (m_bready),  .bid  (m_bid),  .bresp (m_bresp)
  );

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- master model
  function automatic logic [DATA_W-1:0] pattern(input logic [ADDR_W-1:0] a, input int beat);
    return {a + ADDR_W'(beat), 24'hC0FFEE, ~(a + ADDR_W'(beat)), 24'h5EED00 ^ 24'(beat)};
  endfunction

  typedef struct { logic [ID_W-1:0] id; logic [ADDR_W-1:0] addr; longint t; } req_t;
  // Beats on the bus are held in registers updated with nonblocking
  // assignments, so the design samples them race-free at the clock edge.
  logic ar_v = 1'b0, aw_v = 1'b0, w_v = 1'b0, w_cur_last = 1'b0;
  req_t ar_cur = '{default: 0}, aw_cur = '{default: 0};
  logic [DATA_W-1:0] w_cur = '0;
  logic [STRB_W-1:0] w_cur_strb = '0;
  int w_sent = 0;
  req_t ar_q[$], aw_q[$];                  // to be issued
  req_t rd_out[1 << ID_W][$];              // outstanding reads per ID
  req_t wr_out[1 << ID_W][$];
  logic [DATA_W-1:0] w_beats[$];
  logic [STRB_W-1:0] w_strbs[$];
  longint cyc, last_rd_lat, last_wr_lat;
  int rd_done, wr_done, r_beats, w_beats_out, rbeat_no [1 << ID_W];
  logic rd_invert;                          // expect inverted read data
  logic [STRB_W-1:0] inv_strb;              // bytes expected inverted
  logic check_data;
  longint stat_rd_bytes, stat_wr_bytes, stat_rd_flips, stat_wr_flips;

  always @(posedge clk) cyc <= rst_n ? cyc + 1 : 0;

  // AR and AW/W drivers
  always @(posedge clk) if (rst_n) begin
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
        w_cur_strb <= w_strbs.pop_front();
        w_cur_last <= (w_sent % 4) == 3;
        w_sent <= w_sent + 1;
      end else w_v <= 1'b0;
    end
  end
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
    s_w.strb  = w_cur_strb;
    s_w.last  = w_cur_last;
  end
  assign s_rready = 1'b1;
  assign s_bready = 1'b1;

  // R and B receivers
  always @(posedge clk) if (rst_n) begin
    stat_rd_bytes += stat.rd_bytes;
    stat_wr_bytes += stat.wr_bytes;
    stat_rd_flips += stat.rd_flips;
    stat_wr_flips += stat.wr_flips;
    if (m_wvalid && m_wready) w_beats_out++;
    if (s_rvalid && s_rready) begin
      r_beats++;
      if (rd_out[s_rid].size() == 0) begin
        checks++; failures++; $display("read data for idle ID %0d", s_rid);
      end else begin
        logic [DATA_W-1:0] e, inv;
        e = pattern(rd_out[s_rid][0].addr, rbeat_no[s_rid]);
        for (int b = 0; b < STRB_W; b++) inv[8*b +: 8] = inv_strb[b] ? 8'hFF : 8'h00;
        if (rd_invert) e = ~e;
        e = e ^ inv;
        if (check_data) begin
          checks++;
          if (s_r.data != e) begin
            failures++; $display("id %0d addr %h beat %0d: %h expected %h", s_rid,
                                 rd_out[s_rid][0].addr, rbeat_no[s_rid], s_r.data, e);
          end
        end
        checks++;
        if (s_r.last != (rbeat_no[s_rid] == 3)) begin failures++; $display("RLAST misplaced"); end
        if (s_r.last) begin
          last_rd_lat = cyc - rd_out[s_rid][0].t;
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
        void'(wr_out[s_bid].pop_front());
        wr_done++;
      end
    end
  end

  task automatic write_line(input logic [ADDR_W-1:0] a, input logic [ID_W-1:0] id,
                            input logic [STRB_W-1:0] strb = '1);
    aw_q.push_back('{id, a, 0});
    for (int b = 0; b < 4; b++) begin
      w_beats.push_back(pattern(a, b));
      w_strbs.push_back(strb);
    end
  endtask

  task automatic read_line(input logic [ADDR_W-1:0] a, input logic [ID_W-1:0] id);
    ar_q.push_back('{id, a, 0});
  endtask

  task automatic wait_idle();
    int guard = 0;
    do begin
      @(posedge clk);
      guard++;
    end while ((ar_q.size() != 0 || aw_q.size() != 0 || w_beats.size() != 0 || ar_v || aw_v || w_v ||
                rd_done_pending() || wr_done_pending()) && guard < 500000);
    repeat (5) @(posedge clk);
  endtask

  function automatic bit rd_done_pending();
    for (int i = 0; i < (1 << ID_W); i++) if (rd_out[i].size() != 0) return 1;
    return 0;
  endfunction
  function automatic bit wr_done_pending();
    for (int i = 0; i < (1 << ID_W); i++) if (wr_out[i].size() != 0) return 1;
    return 0;
  endfunction

  // single read latency, averaged over n lines
  task automatic rd_latency(output longint avg, input int n);
    longint sum = 0;
    for (int i = 0; i < n; i++) begin
      read_line(ADDR_W'(i * 64), ID_W'(i % 4));
      wait_idle();
      sum += last_rd_lat;
    end
    avg = sum / n;
  endtask
  task automatic wr_latency(output longint avg, input int n);
    longint sum = 0;
    for (int i = 0; i < n; i++) begin
      write_line(ADDR_W'(i * 64), ID_W'(i % 4));
      wait_idle();
      sum += last_wr_lat;
    end
    avg = sum / n;
  endtask

  initial begin
    longint base_rd, base_wr, lat_rd, lat_wr, lat_x, t0;
    int beats0;
    cfg = '0;
    rd_invert = 0; inv_strb = '0; check_data = 1;
    stat_rd_bytes = 0; stat_wr_bytes = 0; stat_rd_flips = 0; stat_wr_flips = 0;
    rd_done = 0; wr_done = 0; r_beats = 0; w_beats_out = 0;
    for (int i = 0; i < (1 << ID_W); i++) rbeat_no[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // data: fill 64 lines, read them back with 4 IDs and many outstanding
    for (int i = 0; i < 64; i++) write_line(ADDR_W'(i * 64), ID_W'(i % 4));
    wait_idle();
    for (int i = 0; i < 64; i++) read_line(ADDR_W'(i * 64), ID_W'((i * 7) % 4));
    wait_idle();
    check(rd_done == 64 && wr_done == 64, "all 64 writes and reads completed");
    check(stat_rd_bytes == 64 * 64 && stat_wr_bytes == 64 * 64, "transferred-byte statistics");

    // latency
    rd_latency(base_rd, 8);
    wr_latency(base_wr, 8);
    cfg.rd_lat = 16'd20;                    // 2000 ns
    rd_latency(lat_rd, 8);
    wr_latency(lat_x, 8);
    check(lat_rd - base_rd >= 19 * 30 && lat_rd - base_rd <= 21 * 30, "read delay of 2000 ns");
    check(lat_x - base_wr <= 2 && base_wr - lat_x <= 2, "read delay leaves writes alone");
    $display("read latency %0d -> %0d cycles, write %0d -> %0d", base_rd, lat_rd, base_wr, lat_x);
    cfg.rd_lat = 16'd0;
    cfg.wr_lat = 16'd10;                    // 1000 ns
    wr_latency(lat_wr, 8);
    rd_latency(lat_x, 8);
    check(lat_wr - base_wr >= 9 * 30 && lat_wr - base_wr <= 11 * 30, "write delay of 1000 ns");
    check(lat_x - base_rd <= 2 && base_rd - lat_x <= 2, "write delay leaves reads alone");
    $display("write latency %0d -> %0d cycles", base_wr, lat_wr);
    cfg.wr_lat = 16'd0;

    // read bandwidth: 96 bytes per tick (960 MB/s) = 6 beats per 30 cycles
    cfg.rd_thpt = 16'd96;
    for (int i = 0; i < 16; i++) read_line(ADDR_W'(i * 64), ID_W'(i % 4));
    wait_idle();                            // drains the 256-byte bucket
    for (int k = 0; k < 16; k++) for (int i = 0; i < 16; i++) read_line(ADDR_W'(i * 64), ID_W'(i % 4));
    repeat (600) @(posedge clk);
    beats0 = r_beats; t0 = cyc;
    repeat (3000) @(posedge clk);           // 100 ticks
    check(r_beats - beats0 >= 590 && r_beats - beats0 <= 610, $sformatf("read rate: %0d beats in 100 ticks, expected 600", r_beats - beats0));
    wait_idle();
    cfg.rd_thpt = 16'd0;

    // write bandwidth: 32 bytes per tick = 2 beats per tick
    cfg.wr_thpt = 16'd32;
    for (int k = 0; k < 8; k++) for (int i = 0; i < 16; i++) write_line(ADDR_W'(i * 64), ID_W'(i % 4));
    repeat (1200) @(posedge clk);
    beats0 = w_beats_out;
    repeat (3000) @(posedge clk);
    check(w_beats_out - beats0 >= 198 && w_beats_out - beats0 <= 202, $sformatf("write rate: %0d beats in 100 ticks, expected 200", w_beats_out - beats0));
    wait_idle();
    cfg.wr_thpt = 16'd0;

    // read errors at the maximum rate invert everything
    stat_rd_flips = 0;
    cfg.rd_err = 32'hFFFF_FFFF;
    rd_invert = 1;
    for (int i = 0; i < 8; i++) read_line(ADDR_W'(i * 64), ID_W'(i % 4));
    wait_idle();
    check(stat_rd_flips == 8 * 4 * DATA_W, $sformatf("read flips counted %0d", stat_rd_flips));
    rd_invert = 0;
    cfg.rd_err = 32'd0;
    // write errors in strobed bytes only; reading back shows them
    stat_wr_flips = 0;
    cfg.wr_err = 32'hFFFF_FFFF;
    for (int i = 0; i < 4; i++) write_line(ADDR_W'(i * 64), ID_W'(i), 16'h00FF);
    wait_idle();
    cfg.wr_err = 32'd0;
    check(stat_wr_flips == 4 * 4 * 64, $sformatf("write flips counted %0d", stat_wr_flips));
    inv_strb = 16'h00FF;
    for (int i = 0; i < 4; i++) read_line(ADDR_W'(i * 64), ID_W'(i));
    wait_idle();
    inv_strb = '0;

    // settings changed while traffic is in flight: every burst still
    // completes, in per-ID order, with intact data
    begin
      int rd0, wr0;
      rd0 = rd_done; wr0 = wr_done;
      cfg.rd_lat = 16'd30; cfg.wr_lat = 16'd5; cfg.rd_thpt = 16'd64;
      for (int i = 0; i < 32; i++) begin
        read_line(ADDR_W'((4 + i) * 64), ID_W'(i % 4));    // lines 0-3 hold flipped bits
        write_line(ADDR_W'((64 + i) * 64), ID_W'((i + 1) % 4));
      end
      repeat (400) @(posedge clk);
      cfg.rd_lat = 16'd2; cfg.wr_lat = 16'd20; cfg.rd_thpt = 16'd0; cfg.wr_thpt = 16'd48;
      for (int i = 0; i < 32; i++) read_line(ADDR_W'((64 + i) * 64), ID_W'(i % 4));
      repeat (300) @(posedge clk);
      cfg.wr_thpt = 16'd0; cfg.rd_lat = 16'd7;
      wait_idle();
      check(rd_done - rd0 == 64 && wr_done - wr0 == 32,
            $sformatf("in-flight changes: %0d reads, %0d writes completed", rd_done - rd0, wr_done - wr0));
      cfg = '0;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
