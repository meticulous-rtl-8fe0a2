// mc_csr: control and status registers of the emulator (AXI4-Lite slave).
//
// Software sets, per memory region ("bank"), the region's start offset in
// the emulated DRAM, the read and write latencies, bandwidth limits and bit
// error rates, and reads back the bytes transferred and bits flipped. The
// register map is given in mc_pkg. Settings take effect in the cycle after the
// write and may be changed at any time, also while traffic is flowing: the
// rate controllers latch the latency per request. The 64-bit counters add the
// per-cycle increments reported by each rate controller; reading a low word
// latches the high word so that a low/high pair is consistent. Writes to
// counters and to undefined offsets are ignored and return OKAY; reads of
// undefined offsets return 0.
//
// Interface: a 32-bit AXI4-Lite slave that takes a write when address and data
// are both present (one outstanding write and one outstanding read; responses
// are registered). Reset: no latency, no bandwidth limit, no errors, and the
// emulated DRAM split into equal regions of REGION_PAGES 4-KB pages (2 GB each
// by default, the split of the two-node NUMA set-up the emulator was shown with).
// Which parameters exist follows the emulator's configuration interface; the
// register layout, units and reset values are this design's choices.
module mc_csr
  import mc_pkg::*;
#(
  parameter int unsigned NUM_REGIONS  = 2,
  parameter int unsigned REGION_PAGES = 32'h0008_0000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite slave
  input  logic                  s_awvalid,
  output logic                  s_awready,
  input  logic [CSR_ADDR_W-1:0] s_awaddr,
  input  logic                  s_wvalid,
  output logic                  s_wready,
  input  logic [31:0]           s_wdata,
  input  logic [3:0]            s_wstrb,
  output logic                  s_bvalid,
  input  logic                  s_bready,
  output logic [1:0]            s_bresp,
  input  logic                  s_arvalid,
  output logic                  s_arready,
  input  logic [CSR_ADDR_W-1:0] s_araddr,
  output logic                  s_rvalid,
  input  logic                  s_rready,
  output logic [31:0]           s_rdata,
  output logic [1:0]            s_rresp,
  // to and from the regions
  output region_cfg_t           cfg      [NUM_REGIONS],
  output logic [31:0]           boundary [NUM_REGIONS],
  input  region_stat_t          stat     [NUM_REGIONS]
);
  localparam int unsigned BW = (NUM_REGIONS > 1) ? $clog2(NUM_REGIONS) : 1;

  logic [CNT_W-1:0] rd_bytes [NUM_REGIONS];
  logic [CNT_W-1:0] wr_bytes [NUM_REGIONS];
  logic [CNT_W-1:0] rd_berr  [NUM_REGIONS];
  logic [CNT_W-1:0] wr_berr  [NUM_REGIONS];
  logic [31:0]      hi_shadow;

  // ---------------------------------------------------------------- decode
  logic        wr_en;
  logic [BW-1:0] wbank, rbank;
  csr_reg_e    wreg, rreg;
  logic        wbank_ok, rbank_ok;

  assign wr_en     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_en;
  assign s_wready  = wr_en;
  assign wbank     = BW'(s_awaddr >> BANK_SH);
  assign rbank     = BW'(s_araddr >> BANK_SH);
  assign wbank_ok  = (32'(s_awaddr >> BANK_SH) < NUM_REGIONS);
  assign rbank_ok  = (32'(s_araddr >> BANK_SH) < NUM_REGIONS);
  assign wreg      = csr_reg_e'(s_awaddr[5:2]);
  assign rreg      = csr_reg_e'(s_araddr[5:2]);
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = strb[b] ? d[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  // ---------------------------------------------------------------- write side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      for (int i = 0; i < NUM_REGIONS; i++) begin
        cfg[i]      <= '0;
        boundary[i] <= 32'(i * REGION_PAGES);
      end
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_en) begin
        s_bvalid <= 1'b1;
        if (wbank_ok) begin
          unique case (wreg)
            REG_BOUNDARY: boundary[wbank]    <= merge(boundary[wbank], s_wdata, s_wstrb);
            REG_RD_LAT:   cfg[wbank].rd_lat  <= LAT_W'(merge(32'(cfg[wbank].rd_lat), s_wdata, s_wstrb));
            REG_WR_LAT:   cfg[wbank].wr_lat  <= LAT_W'(merge(32'(cfg[wbank].wr_lat), s_wdata, s_wstrb));
            REG_RD_THPT:  cfg[wbank].rd_thpt <= THPT_W'(merge(32'(cfg[wbank].rd_thpt), s_wdata, s_wstrb));
            REG_WR_THPT:  cfg[wbank].wr_thpt <= THPT_W'(merge(32'(cfg[wbank].wr_thpt), s_wdata, s_wstrb));
            REG_RD_ERR:   cfg[wbank].rd_err  <= merge(cfg[wbank].rd_err, s_wdata, s_wstrb);
            REG_WR_ERR:   cfg[wbank].wr_err  <= merge(cfg[wbank].wr_err, s_wdata, s_wstrb);
            default: ;
          endcase
        end
      end
    end
  end

  // ---------------------------------------------------------------- counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_REGIONS; i++) begin
        rd_bytes[i] <= '0;
        wr_bytes[i] <= '0;
        rd_berr[i]  <= '0;
        wr_berr[i]  <= '0;
      end
    end else begin
      for (int i = 0; i < NUM_REGIONS; i++) begin
        rd_bytes[i] <= rd_bytes[i] + CNT_W'(stat[i].rd_bytes);
        wr_bytes[i] <= wr_bytes[i] + CNT_W'(stat[i].wr_bytes);
        rd_berr[i]  <= rd_berr[i]  + CNT_W'(stat[i].rd_flips);
        wr_berr[i]  <= wr_berr[i]  + CNT_W'(stat[i].wr_flips);
      end
    end
  end

  // ---------------------------------------------------------------- read side
  logic [31:0] rword;
  logic [31:0] rhi;

  always_comb begin
    rword = '0;
    rhi   = '0;
    if (rbank_ok) begin
      unique case (rreg)
        REG_BOUNDARY:    rword = boundary[rbank];
        REG_RD_LAT:      rword = 32'(cfg[rbank].rd_lat);
        REG_WR_LAT:      rword = 32'(cfg[rbank].wr_lat);
        REG_RD_THPT:     rword = 32'(cfg[rbank].rd_thpt);
        REG_WR_THPT:     rword = 32'(cfg[rbank].wr_thpt);
        REG_RD_ERR:      rword = cfg[rbank].rd_err;
        REG_WR_ERR:      rword = cfg[rbank].wr_err;
        REG_RD_BYTES_LO: {rhi, rword} = rd_bytes[rbank];
        REG_WR_BYTES_LO: {rhi, rword} = wr_bytes[rbank];
        REG_RD_BERR_LO:  {rhi, rword} = rd_berr[rbank];
        REG_WR_BERR_LO:  {rhi, rword} = wr_berr[rbank];
        REG_RD_BYTES_HI, REG_WR_BYTES_HI,
        REG_RD_BERR_HI,  REG_WR_BERR_HI: rword = hi_shadow;
        default:         rword = '0;
      endcase
    end
  end

  assign s_arready = !s_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
      hi_shadow <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rword;
        if (rbank_ok && rreg inside {REG_RD_BYTES_LO, REG_WR_BYTES_LO,
                                     REG_RD_BERR_LO, REG_WR_BERR_LO})
          hi_shadow <= rhi;
      end
    end
  end
endmodule
