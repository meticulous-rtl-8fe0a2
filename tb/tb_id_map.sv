// tb_id_map: checks the per-ID record FIFOs against a reference model made of
// one SystemVerilog queue per ID: random pushes and pops over 16 IDs, lookups
// of random IDs, refusal of a push to a full ID, and that IDs do not disturb
// each other.
module tb_id_map;
  localparam int ID_W = 4, E_W = 24, DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic push, push_ready, look_valid, pop;
  logic [ID_W-1:0] push_id, look_id;
  logic [E_W-1:0] push_entry, look_entry;
  int checks = 0, failures = 0;
  logic [E_W-1:0] ref_q [1 << ID_W][$];

  always #1 clk = ~clk;

  id_map #(.ID_W(ID_W), .E_W(E_W), .DEPTH(DEPTH)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int full_seen = 0;
    push = 0; pop = 0; push_id = 0; look_id = 0; push_entry = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 5000; c++) begin
      logic do_push;
      @(negedge clk);
      push_id    = ID_W'($urandom_range(3) == 0 ? 0 : $urandom);
      push_entry = E_W'($urandom);
      push       = ($urandom_range(2) != 0);
      look_id    = ID_W'($urandom_range(3) == 0 ? 0 : $urandom);
      #0;
      // combinational outputs against the model
      checks++;
      if (push_ready != (ref_q[push_id].size() < DEPTH)) begin
        failures++; $display("push_ready=%0b with %0d entries", push_ready, ref_q[push_id].size());
      end
      if (push_ready == 1'b0) full_seen++;
      checks++;
      if (look_valid != (ref_q[look_id].size() != 0)) begin
        failures++; $display("look_valid wrong for id %0d", look_id);
      end else if (look_valid) begin
        checks++;
        if (look_entry != ref_q[look_id][0]) begin
          failures++; $display("id %0d head %h expected %h", look_id, look_entry, ref_q[look_id][0]);
        end
      end
      pop = look_valid && ($urandom_range(2) == 0);
      do_push = push && push_ready;
      @(posedge clk);
      if (pop) void'(ref_q[look_id].pop_front());
      if (do_push) ref_q[push_id].push_back(push_entry);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("no ID ever filled up"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
