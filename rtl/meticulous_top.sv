// meticulous_top: FPGA side of the main-memory emulator.
//
// Sits between the CPU and the DDR4 memory controller of an FPGA SoC and
// makes the FPGA-side DRAM behave like a hybrid main memory made of
// NUM_REGIONS devices, each with its own read/write latency, bandwidth and
// bit error rate:
//
//   CPU AXI4 ---> region_demux ---> rate_controller[0] ---> mem_mux ---> DDR4
//   (s_*)         (by address)      rate_controller[1]      (IDs        controller
//                                   ...                      widened)    (m_*)
//   CPU AXI4-Lite ---> mc_csr  (region offsets, emulation parameters, counters)
//                      mc_timer (100-ns pulse and current time for all regions)
//
// Interface: one AXI4 slave port for the CPU's memory traffic (128-bit data,
// 6-bit IDs, 40-bit addresses), one AXI4-Lite slave port for the registers,
// and one AXI4 master port to the DDR4 memory controller whose IDs carry the
// region number in their upper bit(s). One clock (300 MHz in the intended
// set-up) and an active-low asynchronous reset.
//
// The blocks and their roles follow the emulator's published structure; the
// address decoder in front of the rate controllers and the port-sharing mux
// behind them are this design's way of attaching one CPU port and one memory
// port to several regions.
module meticulous_top
  import mc_pkg::*;
#(
  parameter int unsigned       NUM_REGIONS  = 2,
  parameter logic [ADDR_W-1:0] MEM_BASE     = 40'h10_0000_0000,
  parameter int unsigned       CLK_MHZ      = 300,
  parameter int unsigned       REGION_PAGES = 32'h0008_0000,
  parameter int unsigned       DLY_DEPTH    = 256,
  parameter int unsigned       MAP_DEPTH    = 8,
  localparam int unsigned      RW    = (NUM_REGIONS > 1) ? $clog2(NUM_REGIONS) : 1,
  localparam int unsigned      MID_W = ID_W + RW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // CSR port (AXI4-Lite slave)
  input  logic                  csr_awvalid,
  output logic                  csr_awready,
  input  logic [CSR_ADDR_W-1:0] csr_awaddr,
  input  logic                  csr_wvalid,
  output logic                  csr_wready,
  input  logic [31:0]           csr_wdata,
  input  logic [3:0]            csr_wstrb,
  output logic                  csr_bvalid,
  input  logic                  csr_bready,
  output logic [1:0]            csr_bresp,
  input  logic                  csr_arvalid,
  output logic                  csr_arready,
  input  logic [CSR_ADDR_W-1:0] csr_araddr,
  output logic                  csr_rvalid,
  input  logic                  csr_rready,
  output logic [31:0]           csr_rdata,
  output logic [1:0]            csr_rresp,
  // CPU memory port (AXI4 slave)
  input  logic                  s_arvalid,
  output logic                  s_arready,
  input  logic [ID_W-1:0]       s_arid,
  input  ax_t                   s_ar,
  output logic                  s_rvalid,
  input  logic                  s_rready,
  output logic [ID_W-1:0]       s_rid,
  output r_t                    s_r,
  input  logic                  s_awvalid,
  output logic                  s_awready,
  input  logic [ID_W-1:0]       s_awid,
  input  ax_t                   s_aw,
  input  logic                  s_wvalid,
  output logic                  s_wready,
  input  w_t                    s_w,
  output logic                  s_bvalid,
  input  logic                  s_bready,
  output logic [ID_W-1:0]       s_bid,
  output logic [1:0]            s_bresp,
  // DDR4 memory controller port (AXI4 master)
  output logic                  m_arvalid,
  input  logic                  m_arready,
  output logic [MID_W-1:0]      m_arid,
  output ax_t                   m_ar,
  input  logic                  m_rvalid,
  output logic                  m_rready,
  input  logic [MID_W-1:0]      m_rid,
  input  r_t                    m_r,
  output logic                  m_awvalid,
  input  logic                  m_awready,
  output logic [MID_W-1:0]      m_awid,
  output ax_t                   m_aw,
  output logic                  m_wvalid,
  input  logic                  m_wready,
  output w_t                    m_w,
  input  logic                  m_bvalid,
  output logic                  m_bready,
  input  logic [MID_W-1:0]      m_bid,
  input  logic [1:0]            m_bresp
);
  logic              tick;
  logic [TIME_W-1:0] now;
  region_cfg_t       cfg      [NUM_REGIONS];
  region_stat_t      stat     [NUM_REGIONS];
  logic [31:0]       boundary [NUM_REGIONS];

  mc_timer #(.CLK_MHZ(CLK_MHZ), .TICK_NS(100)) u_timer (.clk, .rst_n, .tick, .now);

  mc_csr #(.NUM_REGIONS(NUM_REGIONS), .REGION_PAGES(REGION_PAGES)) u_csr (
    .clk, .rst_n,
    .s_awvalid (csr_awvalid), .s_awready (csr_awready), .s_awaddr (csr_awaddr),
    .s_wvalid  (csr_wvalid),  .s_wready  (csr_wready),  .s_wdata  (csr_wdata), .s_wstrb (csr_wstrb),
    .s_bvalid  (csr_bvalid),  .s_bready  (csr_bready),  .s_bresp  (csr_bresp),
    .s_arvalid (csr_arvalid), .s_arready (csr_arready), .s_araddr (csr_araddr),
    .s_rvalid  (csr_rvalid),  .s_rready  (csr_rready),  .s_rdata  (csr_rdata), .s_rresp (csr_rresp),
    .cfg, .boundary, .stat
  );

  // CPU side of each rate controller
  logic            c_arvalid [NUM_REGIONS], c_arready [NUM_REGIONS];
  logic [ID_W-1:0] c_arid    [NUM_REGIONS];
  ax_t             c_ar      [NUM_REGIONS];
  logic            c_rvalid  [NUM_REGIONS], c_rready  [NUM_REGIONS];
  logic [ID_W-1:0] c_rid     [NUM_REGIONS];
  r_t              c_r       [NUM_REGIONS];
  logic            c_awvalid [NUM_REGIONS], c_awready [NUM_REGIONS];
  logic [ID_W-1:0] c_awid    [NUM_REGIONS];
  ax_t             c_aw      [NUM_REGIONS];
  logic            c_wvalid  [NUM_REGIONS], c_wready  [NUM_REGIONS];
  w_t              c_w       [NUM_REGIONS];
  logic            c_bvalid  [NUM_REGIONS], c_bready  [NUM_REGIONS];
  logic [ID_W-1:0] c_bid     [NUM_REGIONS];
  logic [1:0]      c_bresp   [NUM_REGIONS];
  // memory side of each rate controller
  logic            d_arvalid [NUM_REGIONS], d_arready [NUM_REGIONS];
  logic [ID_W-1:0] d_arid    [NUM_REGIONS];
  ax_t             d_ar      [NUM_REGIONS];
  logic            d_rvalid  [NUM_REGIONS], d_rready  [NUM_REGIONS];
  logic [ID_W-1:0] d_rid     [NUM_REGIONS];
  r_t              d_r       [NUM_REGIONS];
  logic            d_awvalid [NUM_REGIONS], d_awready [NUM_REGIONS];
  logic [ID_W-1:0] d_awid    [NUM_REGIONS];
  ax_t             d_aw      [NUM_REGIONS];
  logic            d_wvalid  [NUM_REGIONS], d_wready  [NUM_REGIONS];
  w_t              d_w       [NUM_REGIONS];
  logic            d_bvalid  [NUM_REGIONS], d_bready  [NUM_REGIONS];
  logic [ID_W-1:0] d_bid     [NUM_REGIONS];
  logic [1:0]      d_bresp   [NUM_REGIONS];

  region_demux #(.NUM_REGIONS(NUM_REGIONS), .MEM_BASE(MEM_BASE)) u_demux (
    .clk, .rst_n, .boundary,
    .s_arvalid, .s_arready, .s_arid, .s_ar, .s_rvalid, .s_rready, .s_rid, .s_r,
    .s_awvalid, .s_awready, .s_awid, .s_aw, .s_wvalid, .s_wready, .s_w,
    .s_bvalid, .s_bready, .s_bid, .s_bresp,
    .m_arvalid (c_arvalid), .m_arready (c_arready), .m_arid (c_arid), .m_ar (c_ar),
    .m_rvalid  (c_rvalid),  .m_rready  (c_rready),  .m_rid  (c_rid),  .m_r  (c_r),
    .m_awvalid (c_awvalid), .m_awready (c_awready), .m_awid (c_awid), .m_aw (c_aw),
    .m_wvalid  (c_wvalid),  .m_wready  (c_wready),  .m_w    (c_w),
    .m_bvalid  (c_bvalid),  .m_bready  (c_bready),  .m_bid  (c_bid),  .m_bresp (c_bresp)
  );

  for (genvar g = 0; g < NUM_REGIONS; g++) begin : g_rc
    rate_controller #(
      .MAP_DEPTH (MAP_DEPTH),
      .DLY_DEPTH (DLY_DEPTH),
      .SEED      (32'hACE1_0000 + 32'(g) * 32'h0101_3579)
    ) u_rc (
      .clk, .rst_n, .tick, .now,
      .cfg  (cfg[g]),
      .stat (stat[g]),
      .s_arvalid (c_arvalid[g]), .s_arready (c_arready[g]), .s_arid (c_arid[g]), .s_ar (c_ar[g]),
      .s_rvalid  (c_rvalid[g]),  .s_rready  (c_rready[g]),  .s_rid  (c_rid[g]),  .s_r  (c_r[g]),
      .s_awvalid (c_awvalid[g]), .s_awready (c_awready[g]), .s_awid (c_awid[g]), .s_aw (c_aw[g]),
      .s_wvalid  (c_wvalid[g]),  .s_wready  (c_wready[g]),  .s_w    (c_w[g]),
      .s_bvalid  (c_bvalid[g]),  .s_bready  (c_bready[g]),  .s_bid  (c_bid[g]),  .s_bresp (c_bresp[g]),
      .m_arvalid (d_arvalid[g]), .m_arready (d_arready[g]), .m_arid (d_arid[g]), .m_ar (d_ar[g]),
      .m_rvalid  (d_rvalid[g]),  .m_rready  (d_rready[g]),  .m_rid  (d_rid[g]),  .m_r  (d_r[g]),
      .m_awvalid (d_awvalid[g]), .m_awready (d_awready[g]), .m_awid (d_awid[g]), .m_aw (d_aw[g]),
      .m_wvalid  (d_wvalid[g]),  .m_wready  (d_wready[g]),  .m_w    (d_w[g]),
      .m_bvalid  (d_bvalid[g]),  .m_bready  (d_bready[g]),  .m_bid  (d_bid[g]),  .m_bresp (d_bresp[g])
    );
  end

  mem_mux #(.NUM_REGIONS(NUM_REGIONS)) u_mux (
    .clk, .rst_n,
    .s_arvalid (d_arvalid), .s_arready (d_arready), .s_arid (d_arid), .s_ar (d_ar),
    .s_rvalid  (d_rvalid),  .s_rready  (d_rready),  .s_rid  (d_rid),  .s_r  (d_r),
    .s_awvalid (d_awvalid), .s_awready (d_awready), .s_awid (d_awid), .s_aw (d_aw),
    .s_wvalid  (d_wvalid),  .s_wready  (d_wready),  .s_w    (d_w),
    .s_bvalid  (d_bvalid),  .s_bready  (d_bready),  .s_bid  (d_bid),  .s_bresp (d_bresp),
    .m_arvalid, .m_arready, .m_arid, .m_ar, .m_rvalid, .m_rready, .m_rid, .m_r,
    .m_awvalid, .m_awready, .m_awid, .m_aw, .m_wvalid, .m_wready, .m_w,
    .m_bvalid, .m_bready, .m_bid, .m_bresp
  );
endmodule
