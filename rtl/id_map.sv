// id_map: per-transaction-ID record of outstanding read bursts.
//
// An "ordered map" keyed by AXI ID: for each of the 2^ID_W IDs it keeps a FIFO
// of DEPTH records, one per outstanding burst, in request order. The address
// side pushes a record (inserted latency and burst length) under the request's
// ID; the data side looks up the oldest record of the returning beat's ID and
// pops it when the burst's last beat has been taken. Because AXI keeps the
// bursts of one ID in order, the head of an ID's FIFO always describes the
// burst whose beats are arriving for that ID, however bursts of different IDs
// are reordered or interleaved. A push to an ID whose FIFO is full is refused
// (`push_ready` low) and the address channel is stalled.
//
// The map keyed by ID holding one FIFO per ID follows the emulator's
// description; DEPTH and the flat storage are this design's choices. Lookup is
// combinational; push and pop take effect at the clock edge and may coincide.
module id_map #(
  parameter int unsigned ID_W  = 6,
  parameter int unsigned E_W   = 24,
  parameter int unsigned DEPTH = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            push,
  input  logic [ID_W-1:0] push_id,
  input  logic [E_W-1:0]  push_entry,
  output logic            push_ready,
  input  logic [ID_W-1:0] look_id,
  output logic [E_W-1:0]  look_entry,
  output logic            look_valid,
  input  logic            pop        // pop the head of look_id
);
  localparam int unsigned NID = 1 << ID_W;
  localparam int unsigned PW  = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [E_W-1:0] mem [NID * DEPTH];
  logic [PW-1:0]  wp  [NID];
  logic [PW-1:0]  rp  [NID];
  logic [PW:0]    cnt [NID];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  assign push_ready = (cnt[push_id] != (PW+1)'(DEPTH));
  assign look_valid = (cnt[look_id] != '0);
  assign look_entry = mem[int'(look_id) * DEPTH + int'(rp[look_id])];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NID; i++) begin
        wp[i]  <= '0;
        rp[i]  <= '0;
        cnt[i] <= '0;
      end
    end else begin
      if (push && push_ready) wp[push_id] <= inc(wp[push_id]);
      if (pop && look_valid)  rp[look_id] <= inc(rp[look_id]);
      for (int i = 0; i < NID; i++)
        cnt[i] <= cnt[i] + (PW+1)'(push && push_ready && push_id == ID_W'(i))
                         - (PW+1)'(pop && look_valid && look_id == ID_W'(i));
    end
  end

  always_ff @(posedge clk) begin
    if (push && push_ready) mem[int'(push_id) * DEPTH + int'(wp[push_id])] <= push_entry;
  end

  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) pop |-> look_valid);
endmodule
