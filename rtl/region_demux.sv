// region_demux: splits the CPU's AXI4 traffic over the memory regions.
//
// The emulated DRAM appears at MEM_BASE in the CPU's physical address space
// and is cut into NUM_REGIONS regions by the start offsets held in the CSR
// (`boundary`, in 4-KB pages). A request goes to the region with the highest
// start offset not above the request's offset; offsets below every start go
// to region 0. Each region has its own rate controller behind a master port.
//
// Ordering: AXI lets requests with different IDs complete in any order, but
// requests with the same ID must complete in issue order. Since regions add
// different latencies, a request to a fast region could overtake an earlier
// one with the same ID to a slow region. The demux therefore tracks, per ID
// and per direction, the number of outstanding requests and the region they
// went to, and holds a request whose ID is outstanding at another region until
// those have completed (counted at RLAST and at B). Write data follows its AW
// through a queue of region numbers. R and B responses are merged by
// round-robin arbiters; an R burst keeps the grant until its last beat.
//
// Address decoding by per-region start offsets and the same-ID ordering rule
// follow the emulator's description; the per-ID counters, limits and
// arbitration are this design's choices. AR/AW are combinational to the
// selected master; R and B are combinational from the granted master.
module region_demux
  import mc_pkg::*;
#(
  parameter int unsigned       NUM_REGIONS = 2,
  parameter logic [ADDR_W-1:0] MEM_BASE    = 40'h10_0000_0000,
  parameter int unsigned       MAX_OUT     = 63,   // outstanding per ID and direction
  parameter int unsigned       WQ_DEPTH    = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [31:0]         boundary [NUM_REGIONS],
  // CPU side
  input  logic                s_arvalid,
  output logic                s_arready,
  input  logic [ID_W-1:0]     s_arid,
  input  ax_t                 s_ar,
  output logic                s_rvalid,
  input  logic                s_rready,
  output logic [ID_W-1:0]     s_rid,
  output r_t                  s_r,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [ID_W-1:0]     s_awid,
  input  ax_t                 s_aw,
  input  logic                s_wvalid,
  output logic                s_wready,
  input  w_t                  s_w,
  output logic                s_bvalid,
  input  logic                s_bready,
  output logic [ID_W-1:0]     s_bid,
  output logic [1:0]          s_bresp,
  // region side, one port per region
  output logic                m_arvalid [NUM_REGIONS],
  input  logic                m_arready [NUM_REGIONS],
  output logic [ID_W-1:0]     m_arid    [NUM_REGIONS],
  output ax_t                 m_ar      [NUM_REGIONS],
  input  logic                m_rvalid  [NUM_REGIONS],
  output logic                m_rready  [NUM_REGIONS],
  input  logic [ID_W-1:0]     m_rid     [NUM_REGIONS],
  input  r_t                  m_r       [NUM_REGIONS],
  output logic                m_awvalid [NUM_REGIONS],
  input  logic                m_awready [NUM_REGIONS],
  output logic [ID_W-1:0]     m_awid    [NUM_REGIONS],
  output ax_t                 m_aw      [NUM_REGIONS],
  output logic                m_wvalid  [NUM_REGIONS],
  input  logic                m_wready  [NUM_REGIONS],
  output w_t                  m_w       [NUM_REGIONS],
  input  logic                m_bvalid  [NUM_REGIONS],
  output logic                m_bready  [NUM_REGIONS],
  input  logic [ID_W-1:0]     m_bid     [NUM_REGIONS],
  input  logic [1:0]          m_bresp   [NUM_REGIONS]
);
  localparam int unsigned RW  = (NUM_REGIONS > 1) ? $clog2(NUM_REGIONS) : 1;
  localparam int unsigned NID = 1 << ID_W;
  localparam int unsigned OW  = $clog2(MAX_OUT + 1);

  function automatic logic [RW-1:0] decode(input logic [ADDR_W-1:0] addr,
                                           input logic [31:0] bnd [NUM_REGIONS]);
    logic [ADDR_W-1:0] page;
    logic [RW-1:0]     r;
    logic              found;
    page  = (addr - MEM_BASE) >> PAGE_SH;
    r     = '0;
    found = 1'b0;
    for (int i = 0; i < NUM_REGIONS; i++)
      if (page >= ADDR_W'(bnd[i]) && (!found || bnd[i] >= bnd[r])) begin
        r     = RW'(i);
        found = 1'b1;
      end
    return r;
  endfunction

  // ---------------------------------------------------------------- read
  logic [OW-1:0] rd_cnt [NID];
  logic [RW-1:0] rd_reg [NID];
  logic [RW-1:0] ar_sel;
  logic          ar_ok, ar_fire;

  assign ar_sel    = decode(s_ar.addr, boundary);
  assign ar_ok     = (rd_cnt[s_arid] == '0) ||
                     (rd_reg[s_arid] == ar_sel && rd_cnt[s_arid] != OW'(MAX_OUT));
  assign s_arready = ar_ok && m_arready[ar_sel];
  assign ar_fire   = s_arvalid && s_arready;

  always_comb begin
    for (int i = 0; i < NUM_REGIONS; i++) begin
      m_arvalid[i] = s_arvalid && ar_ok && (ar_sel == RW'(i));
      m_arid[i]    = s_arid;
      m_ar[i]      = s_ar;
    end
  end

  // R merge: round-robin, locked for the length of a burst
  logic [NUM_REGIONS-1:0] r_req, r_gnt_v;
  logic [RW-1:0]          r_gnt, r_lock_idx, r_idx;
  logic                   r_locked, r_fire, r_last_fire;

  always_comb for (int i = 0; i < NUM_REGIONS; i++) r_req[i] = m_rvalid[i];

  rr_arb #(.N(NUM_REGIONS)) u_rarb (
    .clk, .rst_n, .req(r_req), .advance(r_last_fire), .gnt(r_gnt_v), .gnt_idx(r_gnt)
  );

  assign r_idx       = r_locked ? r_lock_idx : r_gnt;
  assign s_rvalid    = m_rvalid[r_idx];
  assign s_rid       = m_rid[r_idx];
  assign s_r         = m_r[r_idx];
  assign r_fire      = s_rvalid && s_rready;
  assign r_last_fire = r_fire && s_r.last;

  always_comb for (int i = 0; i < NUM_REGIONS; i++) m_rready[i] = s_rready && (r_idx == RW'(i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_locked   <= 1'b0;
      r_lock_idx <= '0;
    end else if (r_fire) begin
      r_locked   <= !s_r.last;
      r_lock_idx <= r_idx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NID; i++) begin
        rd_cnt[i] <= '0;
        rd_reg[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NID; i++)
        rd_cnt[i] <= rd_cnt[i] + OW'(ar_fire && s_arid == ID_W'(i))
                               - OW'(r_last_fire && s_rid == ID_W'(i));
      if (ar_fire) rd_reg[s_arid] <= ar_sel;
    end
  end

  // ---------------------------------------------------------------- write
  logic [OW-1:0] wr_cnt [NID];
  logic [RW-1:0] wr_reg [NID];
  logic [RW-1:0] aw_sel, wq_head;
  logic          aw_ok, aw_fire, wq_full, wq_empty, w_fire;

  assign aw_sel    = decode(s_aw.addr, boundary);
  assign aw_ok     = !wq_full && ((wr_cnt[s_awid] == '0) ||
                     (wr_reg[s_awid] == aw_sel && wr_cnt[s_awid] != OW'(MAX_OUT)));
  assign s_awready = aw_ok && m_awready[aw_sel];
  assign aw_fire   = s_awvalid && s_awready;

  always_comb begin
    for (int i = 0; i < NUM_REGIONS; i++) begin
      m_awvalid[i] = s_awvalid && aw_ok && (aw_sel == RW'(i));
      m_awid[i]    = s_awid;
      m_aw[i]      = s_aw;
      m_wvalid[i]  = s_wvalid && !wq_empty && (wq_head == RW'(i));
      m_w[i]       = s_w;
    end
  end

  sync_fifo #(.W(RW), .DEPTH(WQ_DEPTH)) u_wq (
    .clk, .rst_n,
    .push (aw_fire), .wr_data (aw_sel),
    .pop  (w_fire && s_w.last), .rd_data (wq_head),
    .full (wq_full), .empty (wq_empty)
  );

  assign s_wready = !wq_empty && m_wready[wq_head];
  assign w_fire   = s_wvalid && s_wready;

  // B merge
  logic [NUM_REGIONS-1:0] b_req, b_gnt_v;
  logic [RW-1:0]          b_idx;
  logic                   b_fire;

  always_comb for (int i = 0; i < NUM_REGIONS; i++) b_req[i] = m_bvalid[i];

  rr_arb #(.N(NUM_REGIONS)) u_barb (
    .clk, .rst_n, .req(b_req), .advance(b_fire), .gnt(b_gnt_v), .gnt_idx(b_idx)
  );

  assign s_bvalid = m_bvalid[b_idx];
  assign s_bid    = m_bid[b_idx];
  assign s_bresp  = m_bresp[b_idx];
  assign b_fire   = s_bvalid && s_bready;

  always_comb for (int i = 0; i < NUM_REGIONS; i++) m_bready[i] = s_bready && (b_idx == RW'(i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NID; i++) begin
        wr_cnt[i] <= '0;
        wr_reg[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NID; i++)
        wr_cnt[i] <= wr_cnt[i] + OW'(aw_fire && s_awid == ID_W'(i))
                               - OW'(b_fire && s_bid == ID_W'(i));
      if (aw_fire) wr_reg[s_awid] <= aw_sel;
    end
  end

  // Same-ID responses must come from the region the ID is bound to.
  a_r_from_bound_region: assert property (@(posedge clk) disable iff (!rst_n)
      r_fire |-> (rd_cnt[s_rid] != '0 && rd_reg[s_rid] == r_idx));
  a_b_from_bound_region: assert property (@(posedge clk) disable iff (!rst_n)
      b_fire |-> (wr_cnt[s_bid] != '0 && wr_reg[s_bid] == b_idx));
  // The response arbiters grant at most one region, and only one that requests.
  a_r_gnt_onehot: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0(r_gnt_v) && (r_gnt_v & ~r_req) == '0);
  a_b_gnt_onehot: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0(b_gnt_v) && (b_gnt_v & ~b_req) == '0);
endmodule
