// tb_region_demux: two regions behind the demux, served by memory models of
// very different latency (region 0: 200 cycles, region 1: 5 cycles). Region 1
// starts at page 0x100 (1 MB into the emulated DRAM at MEM_BASE).
// Checks: every AR/AW reaches the region its address belongs to (decoded
// here independently); data written through the demux reads back; responses
// with the same ID come back in issue order although they alternate between
// the slow and the fast region; responses with different IDs do overtake
// each other (counted, must happen); after the boundary is moved, addresses
// follow it.
module tb_region_demux;
  import mc_pkg::*;
  localparam int N = 2;
  localparam logic [ADDR_W-1:0] BASE = 40'h10_0000_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] boundary [N];
  int checks = 0, failures = 0;

  logic s_arvalid, s_arready, s_rvalid, s_rready, s_awvalid, s_awready;
  logic s_wvalid, s_wready, s_bvalid, s_bready;
  logic [ID_W-1:0] s_arid, s_rid, s_awid, s_bid;
  ax_t s_ar, s_aw;
  r_t  s_r;
  w_t  s_w;
  logic [1:0] s_bresp;
  logic m_arvalid [N], m_arready [N], m_rvalid [N], m_rready [N], m_awvalid [N], m_awready [N];
  logic m_wvalid [N], m_wready [N], m_bvalid [N], m_bready [N];
  logic [ID_W-1:0] m_arid [N], m_rid [N], m_awid [N], m_bid [N];
  ax_t m_ar [N], m_aw [N];
  r_t  m_r [N];
  w_t  m_w [N];
  logic [1:0] m_bresp [N];

  always #1 clk = ~clk;

  region_demux #(.NUM_REGIONS(N), .MEM_BASE(BASE)) dut (.*);

  for (genvar g = 0; g < N; g++) begin : g_mem
    axi_mem_model #(.IDW(ID_W), .LAT(g == 0 ? 200 : 5), .STALL(1'b1)) u_mem (
      .clk, .rst_n,
      .arvalid (m_arvalid[g]), .arready (m_arready[g]), .arid (m_arid[g]), .ar (m_ar[g]),
      .rvalid  (m_rvalid[g]),  .rready  (m_rready[g]),  .rid  (m_rid[g]),  .r  (m_r[g]),
      .awvalid (m_awvalid[g]), .awready (m_awready[g]), .awid (m_awid[g]), .aw (m_aw[g]),
      .wvalid  (m_wvalid[g]),  .wready  (m_wready[g]),  .w    (m_w[g]),
      .bvalid  (m_bvalid[g]),  .bready  (m_bready[g]),  .bid  (m_bid[g]),  .bresp (m_bresp[g])
    );
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int region_of(input logic [ADDR_W-1:0] a);
    return (((a - BASE) >> 12) >= boundary[1]) ? 1 : 0;
  endfunction

  // routing monitor
  always @(posedge clk) if (rst_n) for (int i = 0; i < N; i++) begin
    if (m_arvalid[i] && m_arready[i]) begin
      checks++;
      if (region_of(m_ar[i].addr) != i) begin failures++; $display("AR %h sent to region %0d", m_ar[i].addr, i); end
    end
    if (m_awvalid[i] && m_awready[i]) begin
      checks++;
      if (region_of(m_aw[i].addr) != i) begin failures++; $display("AW %h sent to region %0d", m_aw[i].addr, i); end
    end
  end

  typedef struct { logic [ID_W-1:0] id; logic [ADDR_W-1:0] addr; int seq; } req_t;
  req_t ar_q[$], aw_q[$], rd_out[$];
  logic [DATA_W-1:0] w_q[$];
  int seq_no, overtakes, rd_done, wr_done, rbeat;

  always_comb begin
    s_arvalid = ar_q.size() != 0;
    s_arid    = s_arvalid ? ar_q[0].id : '0;
    s_ar      = '0;
    s_ar.addr = s_arvalid ? ar_q[0].addr : '0;
    s_ar.len  = 8'd1;
    s_ar.burst = 2'b01;
    s_awvalid = aw_q.size() != 0;
    s_awid    = s_awvalid ? aw_q[0].id : '0;
    s_aw      = '0;
    s_aw.addr = s_awvalid ? aw_q[0].addr : '0;
    s_aw.len  = 8'd1;
    s_aw.burst = 2'b01;
    s_wvalid  = w_q.size() != 0;
    s_w.data  = s_wvalid ? w_q[0] : '0;
    s_w.strb  = '1;
    s_w.last  = (w_q.size() % 2) == 1;
  end
  assign s_rready = 1'b1;
  assign s_bready = 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (s_arvalid && s_arready) begin
      req_t q;
      q = ar_q.pop_front();
      rd_out.push_back(q);
    end
    if (s_awvalid && s_awready) void'(aw_q.pop_front());
    if (s_wvalid && s_wready) void'(w_q.pop_front());
    if (s_bvalid && s_bready) wr_done++;
    if (s_rvalid && s_rready) begin
      int k;
      k = -1;
      for (int i = 0; i < rd_out.size(); i++) if (rd_out[i].id == s_rid) begin k = i; break; end
      checks++;
      if (k < 0) begin failures++; $display("unexpected read data id %0d", s_rid); end
      else begin
        checks++;
        if (s_r.data != {rd_out[k].addr, 88'(rbeat)}) begin
          failures++; $display("data %h for addr %h", s_r.data, rd_out[k].addr);
        end
        if (s_r.last) begin
          if (k > 0) overtakes++;
          rd_out.delete(k);
          rd_done++;
          rbeat = 0;
        end else rbeat++;
      end
    end
  end

  task automatic wait_idle();
    int g = 0;
    do begin @(posedge clk); g++; end
    while ((ar_q.size() || aw_q.size() || w_q.size() || rd_out.size()) && g < 50000);
    repeat (300) @(posedge clk);
  endtask

  logic [ADDR_W-1:0] addrs [16];

  initial begin
    boundary[0] = 32'h0; boundary[1] = 32'h100;
    seq_no = 0; overtakes = 0; rd_done = 0; wr_done = 0; rbeat = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // lines alternating between the regions
    for (int i = 0; i < 16; i++) addrs[i] = BASE + ((i % 2) ? 40'h10_0000 : 40'h0) + ADDR_W'(i * 32);
    for (int i = 0; i < 16; i++) begin
      aw_q.push_back('{ID_W'(i % 3), addrs[i], 0});
      w_q.push_back({addrs[i], 88'd0});
      w_q.push_back({addrs[i], 88'd1});
    end
    wait_idle();
    check_eq(wr_done, 16, "writes completed");
    // same ID alternating slow/fast, plus a second ID on the fast region only
    for (int k = 0; k < 4; k++) begin
      for (int i = 0; i < 16; i++) begin
        ar_q.push_back('{ID_W'(1), addrs[i], seq_no++});
        ar_q.push_back('{ID_W'(2), addrs[2*(i%8)+1], seq_no++});
      end
    end
    wait_idle();
    check_eq(rd_done, 128, "reads completed");
    checks++;
    if (overtakes == 0) begin failures++; $display("different IDs never overtook each other"); end
    // move the boundary: everything at or above 512 KB is now region 1
    boundary[1] = 32'h80;
    for (int i = 0; i < 8; i++) begin
      logic [ADDR_W-1:0] a;
      a = BASE + 40'h8_0000 + ADDR_W'(i * 32);
      aw_q.push_back('{ID_W'(3), a, 0});
      w_q.push_back({a, 88'd0});
      w_q.push_back({a, 88'd1});
    end
    wait_idle();
    for (int i = 0; i < 8; i++) ar_q.push_back('{ID_W'(4), BASE + 40'h8_0000 + ADDR_W'(i * 32), seq_no++});
    wait_idle();
    check_eq(wr_done, 24, "writes after boundary move");
    $display("overtakes between IDs: %0d", overtakes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d expected %0d", what, got, exp); end
  endtask
endmodule
