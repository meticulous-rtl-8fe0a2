// rate_controller: performance emulation for one memory region.
//
// An AXI4 stage between the CPU (slave port s_*) and the memory controller
// (master port m_*) that makes the region look like a slower device:
//
//   AR  s -> m   passed on at once; the burst length and the read latency in
//                force are recorded under the request's ID in an id_map.
//   R   m -> s   err_inject (read error rate) -> lookup of the id_map by RID
//                -> delay_queue (the recorded latency) -> token_bucket (read
//                bandwidth) -> CPU. The record is removed with the last beat.
//   AW  s -> m   passed on at once; latency and length recorded in order of
//                arrival (write data carries no ID in AXI4 and follows AW order).
//   W   s -> m   err_inject (write error rate, only strobed bytes) -> delay_queue
//                (latency recorded with the matching AW) -> token_bucket (write
//                bandwidth) -> memory.
//   B   m -> s   passed through.
//
// Read and write paths are independent, each with its own latency, bandwidth
// and error rate taken from `cfg`. Because latency is recorded when a request
// is accepted, changing the CSR while traffic is in flight never breaks a
// burst. Nothing here reorders beats, so the AXI rules on ID ordering,
// outstanding requests, bursts and interleaving are kept without further
// logic. `stat` reports per-cycle increments of the transferred-byte and
// flipped-bit counters (bytes are counted as whole 16-byte bus beats).
//
// Timing: AR, AW and B add no cycle; R and W add one register cycle (the
// error-injection stage) plus one cycle in the delay queue when the latency is
// zero. The structure and the order of the stages follow the emulator's
// description; queue depths and the W-path bookkeeping are this design's choices.
module rate_controller
  import mc_pkg::*;
#(
  parameter int unsigned MAP_DEPTH   = 8,     // outstanding read bursts per ID
  parameter int unsigned AW_DEPTH    = 32,    // outstanding write bursts
  parameter int unsigned DLY_DEPTH   = 256,   // beats held by each delay queue
  parameter int unsigned BUCKET_BYTES = 4096,
  parameter logic [31:0] SEED        = 32'h1234_5678
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tick,
  input  logic [TIME_W-1:0] now,
  input  region_cfg_t       cfg,
  output region_stat_t      stat,
  // CPU side (AXI4 slave)
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [ID_W-1:0]   s_arid,
  input  ax_t               s_ar,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [ID_W-1:0]   s_rid,
  output r_t                s_r,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [ID_W-1:0]   s_awid,
  input  ax_t               s_aw,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  w_t                s_w,
  output logic              s_bvalid,
  input  logic              s_bready,
  output logic [ID_W-1:0]   s_bid,
  output logic [1:0]        s_bresp,
  // memory side (AXI4 master)
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [ID_W-1:0]   m_arid,
  output ax_t               m_ar,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [ID_W-1:0]   m_rid,
  input  r_t                m_r,
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [ID_W-1:0]   m_awid,
  output ax_t               m_aw,
  output logic              m_wvalid,
  input  logic              m_wready,
  output w_t                m_w,
  input  logic              m_bvalid,
  output logic              m_bready,
  input  logic [ID_W-1:0]   m_bid,
  input  logic [1:0]        m_bresp
);
  localparam int unsigned E_W    = LAT_W + 8;             // {latency, len}
  localparam int unsigned RSIDE  = ID_W + 2 + 1;          // {id, resp, last}
  localparam int unsigned RBEAT  = ID_W + $bits(r_t);
  localparam int unsigned FW     = $clog2(DATA_W + 1);

  // ---------------------------------------------------------------- AR
  logic           map_push_ready;
  assign m_arvalid = s_arvalid && map_push_ready;
  assign s_arready = m_arready && map_push_ready;
  assign m_arid    = s_arid;
  assign m_ar      = s_ar;

  logic [ID_W-1:0] ri_id;      // ID of the beat leaving the error stage
  logic [E_W-1:0]  map_entry;
  logic            map_valid, map_pop;

  id_map #(.ID_W(ID_W), .E_W(E_W), .DEPTH(MAP_DEPTH)) u_rmap (
    .clk, .rst_n,
    .push       (s_arvalid && s_arready),
    .push_id    (s_arid),
    .push_entry ({cfg.rd_lat, s_ar.len}),
    .push_ready (map_push_ready),
    .look_id    (ri_id),
    .look_entry (map_entry),
    .look_valid (map_valid),
    .pop        (map_pop)
  );

  // ---------------------------------------------------------------- R
  logic              ri_valid, ri_ready;
  logic [DATA_W-1:0] ri_data;
  logic [RSIDE-1:0]  ri_side;
  logic [FW-1:0]     r_flips;

  err_inject #(.W(DATA_W), .SIDE_W(RSIDE), .SEED(SEED)) u_rerr (
    .clk, .rst_n,
    .rate      (cfg.rd_err),
    .in_valid  (m_rvalid),
    .in_ready  (m_rready),
    .in_data   (m_r.data),
    .bit_en    ('1),
    .in_side   ({m_rid, m_r.resp, m_r.last}),
    .out_valid (ri_valid),
    .out_ready (ri_ready),
    .out_data  (ri_data),
    .out_side  (ri_side),
    .flips     (r_flips)
  );
  assign ri_id = ri_side[RSIDE-1 -: ID_W];

  // Beats are counted per ID so that the recorded burst length can be checked.
  logic [7:0] rbeat_cnt [1 << ID_W];
  logic       rq_in_ready, rq_push;
  assign rq_push  = ri_valid && map_valid && rq_in_ready;
  assign ri_ready = map_valid && rq_in_ready;
  assign map_pop  = rq_push && ri_side[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < (1 << ID_W); i++) rbeat_cnt[i] <= '0;
    end else if (rq_push) begin
      rbeat_cnt[ri_id] <= ri_side[0] ? 8'd0 : rbeat_cnt[ri_id] + 8'd1;
    end
  end

  a_rlast_matches_len: assert property (@(posedge clk) disable iff (!rst_n)
      rq_push |-> (ri_side[0] == (rbeat_cnt[ri_id] == map_entry[7:0])));

  logic             rq_valid, rq_ready;
  logic [RBEAT-1:0] rq_data;

  delay_queue #(.W(RBEAT), .DEPTH(DLY_DEPTH)) u_rdly (
    .clk, .rst_n, .now,
    .in_valid  (ri_valid && map_valid),
    .in_ready  (rq_in_ready),
    .in_data   ({ri_side[RSIDE-1 -: ID_W], ri_data, ri_side[2:1], ri_side[0]}),
    .in_lat    (map_entry[E_W-1 -: LAT_W]),
    .out_valid (rq_valid),
    .out_ready (rq_ready),
    .out_data  (rq_data)
  );

  logic [RBEAT-1:0] rt_data;
  token_bucket #(.W(RBEAT), .BEAT_BYTES(STRB_W), .BUCKET_BYTES(BUCKET_BYTES)) u_rtb (
    .clk, .rst_n, .tick,
    .rate      (cfg.rd_thpt),
    .in_valid  (rq_valid),
    .in_ready  (rq_ready),
    .in_data   (rq_data),
    .out_valid (s_rvalid),
    .out_ready (s_rready),
    .out_data  (rt_data)
  );
  assign {s_rid, s_r} = rt_data;

  // ---------------------------------------------------------------- AW
  logic           awq_full, awq_empty, awq_pop;
  logic [E_W-1:0] awq_head;
  assign m_awvalid = s_awvalid && !awq_full;
  assign s_awready = m_awready && !awq_full;
  assign m_awid    = s_awid;
  assign m_aw      = s_aw;

  sync_fifo #(.W(E_W), .DEPTH(AW_DEPTH)) u_awq (
    .clk, .rst_n,
    .push    (s_awvalid && s_awready),
    .wr_data ({cfg.wr_lat, s_aw.len}),
    .pop     (awq_pop),
    .rd_data (awq_head),
    .full    (awq_full),
    .empty   (awq_empty)
  );

  // ---------------------------------------------------------------- W
  logic              wi_valid, wi_ready;
  logic [DATA_W-1:0] wi_data, w_en;
  logic [STRB_W:0]   wi_side;      // {strb, last}
  logic [FW-1:0]     w_flips;

  always_comb begin
    for (int i = 0; i < DATA_W; i++) w_en[i] = s_w.strb[i / 8];
  end

  err_inject #(.W(DATA_W), .SIDE_W(STRB_W + 1), .SEED(~SEED)) u_werr (
    .clk, .rst_n,
    .rate      (cfg.wr_err),
    .in_valid  (s_wvalid),
    .in_ready  (s_wready),
    .in_data   (s_w.data),
    .bit_en    (w_en),
    .in_side   ({s_w.strb, s_w.last}),
    .out_valid (wi_valid),
    .out_ready (wi_ready),
    .out_data  (wi_data),
    .out_side  (wi_side),
    .flips     (w_flips)
  );

  logic wq_in_ready, wq_push;
  logic [7:0] wbeat_cnt;
  assign wq_push  = wi_valid && !awq_empty && wq_in_ready;
  assign wi_ready = !awq_empty && wq_in_ready;
  assign awq_pop  = wq_push && wi_side[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       wbeat_cnt <= '0;
    else if (wq_push) wbeat_cnt <= wi_side[0] ? 8'd0 : wbeat_cnt + 8'd1;
  end

  a_wlast_matches_len: assert property (@(posedge clk) disable iff (!rst_n)
      wq_push |-> (wi_side[0] == (wbeat_cnt == awq_head[7:0])));

  logic                 wq_valid, wq_ready;
  logic [$bits(w_t)-1:0] wq_data, wt_data;

  delay_queue #(.W($bits(w_t)), .DEPTH(DLY_DEPTH)) u_wdly (
    .clk, .rst_n, .now,
    .in_valid  (wi_valid && !awq_empty),
    .in_ready  (wq_in_ready),
    .in_data   ({wi_data, wi_side}),
    .in_lat    (awq_head[E_W-1 -: LAT_W]),
    .out_valid (wq_valid),
    .out_ready (wq_ready),
    .out_data  (wq_data)
  );

  token_bucket #(.W($bits(w_t)), .BEAT_BYTES(STRB_W), .BUCKET_BYTES(BUCKET_BYTES)) u_wtb (
    .clk, .rst_n, .tick,
    .rate      (cfg.wr_thpt),
    .in_valid  (wq_valid),
    .in_ready  (wq_ready),
    .in_data   (wq_data),
    .out_valid (m_wvalid),
    .out_ready (m_wready),
    .out_data  (wt_data)
  );
  assign m_w = wt_data;

  // ---------------------------------------------------------------- B
  assign s_bvalid = m_bvalid;
  assign m_bready = s_bready;
  assign s_bid    = m_bid;
  assign s_bresp  = m_bresp;

  // ---------------------------------------------------------------- statistics
  assign stat.rd_bytes = (s_rvalid && s_rready) ? 16'(STRB_W) : 16'd0;
  assign stat.wr_bytes = (m_wvalid && m_wready) ? 16'(STRB_W) : 16'd0;
  assign stat.rd_flips = 16'(r_flips);
  assign stat.wr_flips = 16'(w_flips);
endmodule
