// tb_mem_mux: two AXI4 masters share one memory model through the mux.
// Each master writes its own lines with its own IDs (both use the same ID
// values, which the mux must keep apart) and reads them back. Checks: the
// ID seen by memory carries the source in its top bit, every response goes
// back to the master that issued the request with its original ID, read
// data matches what that master wrote, and both masters are granted while
// competing (round-robin: neither waits more than one grant).
module tb_mem_mux;
  import mc_pkg::*;
  localparam int N = 2, MID_W = ID_W + 1;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  logic s_arvalid [N], s_arready [N], s_rvalid [N], s_rready [N], s_awvalid [N], s_awready [N];
  logic s_wvalid [N], s_wready [N], s_bvalid [N], s_bready [N];
  logic [ID_W-1:0] s_arid [N], s_rid [N], s_awid [N], s_bid [N];
  ax_t s_ar [N], s_aw [N];
  r_t  s_r [N];
  w_t  s_w [N];
  logic [1:0] s_bresp [N];
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_awvalid, m_awready;
  logic m_wvalid, m_wready, m_bvalid, m_bready;
  logic [MID_W-1:0] m_arid, m_rid, m_awid, m_bid;
  ax_t m_ar, m_aw;
  r_t  m_r;
  w_t  m_w;
  logic [1:0] m_bresp;

  always #1 clk = ~clk;

  mem_mux #(.NUM_REGIONS(N)) dut (.*);

  axi_mem_model #(.IDW(MID_W), .LAT(10), .STALL(1'b1)) u_mem (
    .clk, .rst_n,
    .arvalid (m_arvalid), .arready (m_arready), .arid (m_arid), .ar (m_ar),
    .rvalid  (m_rvalid),  .rready  (m_rready),  .rid  (m_rid),  .r  (m_r),
    .awvalid (m_awvalid), .awready (m_awready), .awid (m_awid), .aw (m_aw),
    .wvalid  (m_wvalid),  .wready  (m_wready),  .w    (m_w),
    .bvalid  (m_bvalid),  .bready  (m_bready),  .bid  (m_bid),  .bresp (m_bresp)
  );

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] line_addr(input int src, input int i);
    return ADDR_W'(src * 32'h10000 + i * 64);
  endfunction

  typedef struct { logic [ID_W-1:0] id; logic [ADDR_W-1:0] addr; } req_t;
  req_t ar_q [N][$], aw_q [N][$], rd_out [N][$];
  logic [DATA_W-1:0] w_q [N][$];
  int rd_done [N], wr_done [N], rbeat [N], ar_wait [N], max_wait;

  for (genvar g = 0; g < N; g++) begin : g_m
    always_comb begin
      s_arvalid[g] = ar_q[g].size() != 0;
      s_arid[g]    = s_arvalid[g] ? ar_q[g][0].id : '0;
      s_ar[g]      = '0;
      s_ar[g].addr = s_arvalid[g] ? ar_q[g][0].addr : '0;
      s_ar[g].len  = 8'd1;
      s_awvalid[g] = aw_q[g].size() != 0;
      s_awid[g]    = s_awvalid[g] ? aw_q[g][0].id : '0;
      s_aw[g]      = '0;
      s_aw[g].addr = s_awvalid[g] ? aw_q[g][0].addr : '0;
      s_aw[g].len  = 8'd1;
      s_wvalid[g]  = w_q[g].size() != 0;
      s_w[g].data  = s_wvalid[g] ? w_q[g][0] : '0;
      s_w[g].strb  = '1;
      s_w[g].last  = (w_q[g].size() % 2) == 1;
      s_rready[g]  = 1'b1;
      s_bready[g]  = 1'b1;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (m_arvalid && m_arready) begin
      checks++;
      if (m_arid[MID_W-1] != m_ar.addr[16]) begin failures++; $display("AR id %h for addr %h", m_arid, m_ar.addr); end
    end
    if (m_awvalid && m_awready) begin
      checks++;
      if (m_awid[MID_W-1] != m_aw.addr[16]) begin failures++; $display("AW id %h for addr %h", m_awid, m_aw.addr); end
    end
    for (int g = 0; g < N; g++) begin
      if (s_arvalid[g] && !s_arready[g]) ar_wait[g]++; else ar_wait[g] = 0;
      if (ar_wait[g] > max_wait) max_wait = ar_wait[g];
      if (s_arvalid[g] && s_arready[g]) rd_out[g].push_back(ar_q[g].pop_front());
      if (s_awvalid[g] && s_awready[g]) void'(aw_q[g].pop_front());
      if (s_wvalid[g] && s_wready[g]) void'(w_q[g].pop_front());
      if (s_bvalid[g] && s_bready[g]) wr_done[g]++;
      if (s_rvalid[g] && s_rready[g]) begin
        checks++;
        if (rd_out[g].size() == 0 || rd_out[g][0].id != s_rid[g]) begin
          failures++; $display("master %0d got data for id %0d", g, s_rid[g]);
        end else begin
          checks++;
          if (s_r[g].data != {rd_out[g][0].addr, 88'(rbeat[g])}) begin
            failures++; $display("master %0d data %h", g, s_r[g].data);
          end
          if (s_r[g].last) begin void'(rd_out[g].pop_front()); rd_done[g]++; rbeat[g] = 0; end
          else rbeat[g]++;
        end
      end
    end
  end

  initial begin
    max_wait = 0;
    for (int g = 0; g < N; g++) begin rd_done[g] = 0; wr_done[g] = 0; rbeat[g] = 0; ar_wait[g] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < N; g++)
      for (int i = 0; i < 20; i++) begin
        aw_q[g].push_back('{ID_W'(i % 2), line_addr(g, i)});
        w_q[g].push_back({line_addr(g, i), 88'd0});
        w_q[g].push_back({line_addr(g, i), 88'd1});
      end
    repeat (2000) @(posedge clk);
    for (int g = 0; g < N; g++)
      for (int i = 0; i < 20; i++) ar_q[g].push_back('{ID_W'(i % 2), line_addr(g, i)});
    repeat (3000) @(posedge clk);
    for (int g = 0; g < N; g++) begin
      checks++;
      if (wr_done[g] != 20 || rd_done[g] != 20) begin
        failures++; $display("master %0d: %0d writes %0d reads done", g, wr_done[g], rd_done[g]);
      end
    end
    checks++;
    if (max_wait > 8) begin failures++; $display("a master waited %0d cycles for AR", max_wait); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
