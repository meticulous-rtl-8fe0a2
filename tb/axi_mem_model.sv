// axi_mem_model: behavioural stand-in for a DDR4 memory controller with DRAM.
//
// Not synthesizable. An AXI4 slave holding 128-bit words in a sparse array
// (unwritten words read as zero). INCR bursts only. Read bursts are answered
// in request order, each no earlier than LAT cycles after its AR; write
// responses follow the last W beat after LAT cycles. Ready signals are
// randomly withheld when STALL is set, to exercise back-pressure.
module axi_mem_model
  import mc_pkg::*;
#(
  parameter int unsigned IDW   = 7,
  parameter int unsigned LAT   = 20,
  parameter bit          STALL = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            arvalid,
  output logic            arready,
  input  logic [IDW-1:0]  arid,
  input  ax_t             ar,
  output logic            rvalid,
  input  logic            rready,
  output logic [IDW-1:0]  rid,
  output r_t              r,
  input  logic            awvalid,
  output logic            awready,
  input  logic [IDW-1:0]  awid,
  input  ax_t             aw,
  input  logic            wvalid,
  output logic            wready,
  input  w_t              w,
  output logic            bvalid,
  input  logic            bready,
  output logic [IDW-1:0]  bid,
  output logic [1:0]      bresp
);
  typedef struct {
    logic [IDW-1:0]    id;
    logic [ADDR_W-1:0] addr;
    int unsigned       len;
    longint unsigned   due;
  } req_t;

  logic [DATA_W-1:0] mem [logic [ADDR_W-1:0]];
  req_t              rq[$], awq[$], bq[$];
  longint unsigned   cyc;
  int unsigned       rbeat, wbeat;
  logic              w_rdy;

  assign wready = w_rdy && (awq.size() != 0);

  function automatic logic [ADDR_W-1:0] key(input logic [ADDR_W-1:0] a);
    return a >> 4;
  endfunction

  // Read data for the current beat of the head read burst.
  always_comb begin
    rvalid = 1'b0;
    rid    = '0;
    r      = '0;
    if (rq.size() != 0 && rq[0].due <= cyc) begin
      logic [ADDR_W-1:0] k;
      k      = key(rq[0].addr) + ADDR_W'(rbeat);
      rvalid = 1'b1;
      rid    = rq[0].id;
      r.data = mem.exists(k) ? mem[k] : '0;
      r.resp = 2'b00;
      r.last = (rbeat == rq[0].len);
    end
    bvalid = 1'b0;
    bid    = '0;
    bresp  = 2'b00;
    if (bq.size() != 0 && bq[0].due <= cyc) begin
      bvalid = 1'b1;
      bid    = bq[0].id;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc     <= 0;
      rbeat   <= 0;
      wbeat   <= 0;
      arready <= 1'b0;
      awready <= 1'b0;
      w_rdy   <= 1'b0;
      rq.delete();
      awq.delete();
      bq.delete();
    end else begin
      cyc <= cyc + 1;
      if (arvalid && arready) rq.push_back('{arid, ar.addr, ar.len, cyc + LAT});
      if (awvalid && awready) awq.push_back('{awid, aw.addr, aw.len, 0});
      if (rvalid && rready) begin
        if (r.last) begin
          void'(rq.pop_front());
          rbeat <= 0;
        end else begin
          rbeat <= rbeat + 1;
        end
      end
      if (wvalid && wready) begin
        logic [ADDR_W-1:0] k;
        k = key(awq[0].addr) + ADDR_W'(wbeat);
        if (!mem.exists(k)) mem[k] = '0;
        for (int b = 0; b < STRB_W; b++) if (w.strb[b]) mem[k][8*b +: 8] = w.data[8*b +: 8];
        if (w.last) begin
          bq.push_back('{awq[0].id, awq[0].addr, awq[0].len, cyc + LAT});
          void'(awq.pop_front());
          wbeat <= 0;
        end else begin
          wbeat <= wbeat + 1;
        end
      end
      if (bvalid && bready) void'(bq.pop_front());
      arready <= STALL ? ($urandom_range(3) != 0) : 1'b1;
      awready <= STALL ? ($urandom_range(3) != 0) : 1'b1;
      w_rdy   <= STALL ? ($urandom_range(3) != 0) : 1'b1;
    end
  end

endmodule
