// mem_mux: joins the rate controllers onto the memory controller's AXI4 port.
//
// Each rate controller is an AXI4 master for its region; the DDR4 memory
// controller has one slave port. AR and AW requests are taken round-robin
// and their IDs are widened by the number of the region they came from, so
// the memory controller sees distinct IDs per region and its R and B
// responses are steered back by those upper ID bits. Write data is passed
// from the region whose AW was granted, in AW order, using a queue of region
// numbers. Nothing is buffered besides that queue: AR and AW are
// combinational, R and B are routed combinationally.
//
// The figure of the emulator shows the rate controllers connected to the one
// memory controller; how they share its port is this design's choice.
module mem_mux
  import mc_pkg::*;
#(
  parameter int unsigned NUM_REGIONS = 2,
  parameter int unsigned WQ_DEPTH    = 32,
  localparam int unsigned RW   = (NUM_REGIONS > 1) ? $clog2(NUM_REGIONS) : 1,
  localparam int unsigned MID_W = ID_W + RW
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the rate controllers
  input  logic              s_arvalid [NUM_REGIONS],
  output logic              s_arready [NUM_REGIONS],
  input  logic [ID_W-1:0]   s_arid    [NUM_REGIONS],
  input  ax_t               s_ar      [NUM_REGIONS],
  output logic              s_rvalid  [NUM_REGIONS],
  input  logic              s_rready  [NUM_REGIONS],
  output logic [ID_W-1:0]   s_rid     [NUM_REGIONS],
  output r_t                s_r       [NUM_REGIONS],
  input  logic              s_awvalid [NUM_REGIONS],
  output logic              s_awready [NUM_REGIONS],
  input  logic [ID_W-1:0]   s_awid    [NUM_REGIONS],
  input  ax_t               s_aw      [NUM_REGIONS],
  input  logic              s_wvalid  [NUM_REGIONS],
  output logic              s_wready  [NUM_REGIONS],
  input  w_t                s_w       [NUM_REGIONS],
  output logic              s_bvalid  [NUM_REGIONS],
  input  logic              s_bready  [NUM_REGIONS],
  output logic [ID_W-1:0]   s_bid     [NUM_REGIONS],
  output logic [1:0]        s_bresp   [NUM_REGIONS],
  // to the memory controller
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [MID_W-1:0]  m_arid,
  output ax_t               m_ar,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [MID_W-1:0]  m_rid,
  input  r_t                m_r,
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [MID_W-1:0]  m_awid,
  output ax_t               m_aw,
  output logic              m_wvalid,
  input  logic              m_wready,
  output w_t                m_w,
  input  logic              m_bvalid,
  output logic              m_bready,
  input  logic [MID_W-1:0]  m_bid,
  input  logic [1:0]        m_bresp
);
  // ---------------------------------------------------------------- AR
  logic [NUM_REGIONS-1:0] ar_req, ar_gnt;
  logic [RW-1:0]          ar_idx;

  always_comb for (int i = 0; i < NUM_REGIONS; i++) ar_req[i] = s_arvalid[i];

  rr_arb #(.N(NUM_REGIONS)) u_ararb (
    .clk, .rst_n, .req(ar_req), .advance(m_arvalid && m_arready), .gnt(ar_gnt), .gnt_idx(ar_idx)
  );

  assign m_arvalid = |ar_req;
  assign m_arid    = {ar_idx, s_arid[ar_idx]};
  assign m_ar      = s_ar[ar_idx];
  always_comb for (int i = 0; i < NUM_REGIONS; i++) s_arready[i] = m_arready && ar_gnt[i];

  // ---------------------------------------------------------------- R
  logic [RW-1:0] r_dst;
  assign r_dst    = m_rid[MID_W-1 -: RW];
  assign m_rready = s_rready[r_dst];
  always_comb begin
    for (int i = 0; i < NUM_REGIONS; i++) begin
      s_rvalid[i] = m_rvalid && (r_dst == RW'(i));
      s_rid[i]    = m_rid[ID_W-1:0];
      s_r[i]      = m_r;
    end
  end

  // ---------------------------------------------------------------- AW / W
  logic [NUM_REGIONS-1:0] aw_req, aw_gnt;
  logic [RW-1:0]          aw_idx, wq_head;
  logic                   wq_full, wq_empty;

  always_comb for (int i = 0; i < NUM_REGIONS; i++) aw_req[i] = s_awvalid[i];

  rr_arb #(.N(NUM_REGIONS)) u_awarb (
    .clk, .rst_n, .req(aw_req), .advance(m_awvalid && m_awready), .gnt(aw_gnt), .gnt_idx(aw_idx)
  );

  assign m_awvalid = |aw_req && !wq_full;
  assign m_awid    = {aw_idx, s_awid[aw_idx]};
  assign m_aw      = s_aw[aw_idx];
  always_comb for (int i = 0; i < NUM_REGIONS; i++) s_awready[i] = m_awready && !wq_full && aw_gnt[i];

  sync_fifo #(.W(RW), .DEPTH(WQ_DEPTH)) u_wq (
    .clk, .rst_n,
    .push (m_awvalid && m_awready), .wr_data (aw_idx),
    .pop  (m_wvalid && m_wready && m_w.last), .rd_data (wq_head),
    .full (wq_full), .empty (wq_empty)
  );

  assign m_wvalid = !wq_empty && s_wvalid[wq_head];
  assign m_w      = s_w[wq_head];
  always_comb for (int i = 0; i < NUM_REGIONS; i++) s_wready[i] = m_wready && !wq_empty && (wq_head == RW'(i));

  // ---------------------------------------------------------------- B
  logic [RW-1:0] b_dst;
  assign b_dst    = m_bid[MID_W-1 -: RW];
  assign m_bready = s_bready[b_dst];
  always_comb begin
    for (int i = 0; i < NUM_REGIONS; i++) begin
      s_bvalid[i] = m_bvalid && (b_dst == RW'(i));
      s_bid[i]    = m_bid[ID_W-1:0];
      s_bresp[i]  = m_bresp;
    end
  end
endmodule
