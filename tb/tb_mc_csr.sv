// tb_mc_csr: checks the register file over AXI4-Lite.
// Reset values (no delay, no limit, no errors, 2-GB regions), write/read-back
// of every parameter register of both banks, byte strobes, that the values
// reach the cfg/boundary outputs, and that the 64-bit statistics counters
// accumulate the per-cycle increments (including a carry into the high word,
// read through the latched high half).
module tb_mc_csr;
  import mc_pkg::*;
  localparam int N = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [CSR_ADDR_W-1:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  region_cfg_t  cfg [N];
  logic [31:0]  boundary [N];
  region_stat_t stat [N];
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  mc_csr #(.NUM_REGIONS(N)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int addr, input logic [31:0] d, input logic [3:0] strb = 4'hF);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = CSR_ADDR_W'(addr); s_wvalid = 1; s_wdata = d; s_wstrb = strb;
    @(posedge clk);
    while (!(s_awready && s_wready)) @(posedge clk);
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(posedge clk);
    @(posedge clk);
  endtask

  task automatic rd(input int addr, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = CSR_ADDR_W'(addr);
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(posedge clk);
  endtask

  task automatic expect_rd(input int addr, input logic [31:0] e, input string what);
    logic [31:0] d;
    rd(addr, d);
    checks++;
    if (d !== e) begin failures++; $display("%s: read %h expected %h", what, d, e); end
  endtask

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_awaddr = 0; s_araddr = 0;
    s_wdata = 0; s_wstrb = 0; s_bready = 1; s_rready = 1;
    for (int i = 0; i < N; i++) stat[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // reset values
    expect_rd(32'h000, 32'h0, "bank0 boundary");
    expect_rd(32'h040, 32'h0008_0000, "bank1 boundary (2 GB)");
    expect_rd(32'h004, 0, "rd_lat reset");
    expect_rd(32'h050, 0, "bank1 wr_err reset");
    // parameter registers, both banks
    for (int b = 0; b < N; b++) begin
      wr(b*64 + 32'h00, 32'h0001_0000 + b);
      wr(b*64 + 32'h04, 20 + b);            // 2000 ns
      wr(b*64 + 32'h08, 4 + b);
      wr(b*64 + 32'h0C, 10 + b);            // 100 MB/s
      wr(b*64 + 32'h10, 40 + b);
      wr(b*64 + 32'h14, 32'h1999_999A + b);
      wr(b*64 + 32'h18, 32'h0000_0100 + b);
    end
    for (int b = 0; b < N; b++) begin
      expect_rd(b*64 + 32'h00, 32'h0001_0000 + b, "boundary");
      expect_rd(b*64 + 32'h04, 20 + b, "rd_lat");
      expect_rd(b*64 + 32'h08, 4 + b, "wr_lat");
      expect_rd(b*64 + 32'h0C, 10 + b, "rd_thpt");
      expect_rd(b*64 + 32'h10, 40 + b, "wr_thpt");
      expect_rd(b*64 + 32'h14, 32'h1999_999A + b, "rd_err");
      expect_rd(b*64 + 32'h18, 32'h0000_0100 + b, "wr_err");
      check(boundary[b] == 32'h0001_0000 + b, "boundary output");
      check(cfg[b].rd_lat == 16'(20 + b) && cfg[b].wr_lat == 16'(4 + b), "latency outputs");
      check(cfg[b].rd_thpt == 16'(10 + b) && cfg[b].wr_thpt == 16'(40 + b), "throughput outputs");
      check(cfg[b].rd_err == 32'h1999_999A + b && cfg[b].wr_err == 32'h100 + b, "error outputs");
    end
    // byte strobes
    wr(32'h044, 32'hAAAA_BBCC, 4'b0001);
    expect_rd(32'h044, 32'h0000_00CC, "strobed rd_lat");
    // counters: bank 1 gets 16 bytes read and 3 read flips per cycle for 1000 cycles
    @(negedge clk);
    stat[1].rd_bytes = 16; stat[1].rd_flips = 3; stat[0].wr_bytes = 16; stat[0].wr_flips = 1;
    repeat (1000) @(negedge clk);
    stat[1] = '0; stat[0] = '0;
    repeat (2) @(posedge clk);
    expect_rd(32'h060, 32'd16000, "bank1 rd bytes");
    expect_rd(32'h064, 32'd0, "bank1 rd bytes hi");
    expect_rd(32'h070, 32'd3000, "bank1 rd flips");
    expect_rd(32'h028, 32'd16000, "bank0 wr bytes");
    expect_rd(32'h038, 32'd1000, "bank0 wr flips");
    expect_rd(32'h020, 32'd0, "bank0 rd bytes untouched");
    // carry into the high word: 65535 bytes per cycle for 70000 cycles
    @(negedge clk);
    stat[0].rd_bytes = 16'hFFFF;
    repeat (70000) @(negedge clk);
    stat[0] = '0;
    repeat (2) @(posedge clk);
    expect_rd(32'h020, 32'(64'd65535 * 70000), "bank0 rd bytes lo");
    expect_rd(32'h024, 32'((64'd65535 * 70000) >> 32), "bank0 rd bytes hi");
    // undefined offsets read 0
    expect_rd(32'h01C, 32'd0, "hole");
    expect_rd(32'h0C0, 32'd0, "bank beyond NUM_REGIONS");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
