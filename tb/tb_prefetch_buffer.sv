// tb_prefetch_buffer: random pushes and pops against a queue model of a
// 32-entry FIFO that drops pushes when full (unless the head leaves in the
// same cycle). Checks head, valid and the drop pulse every cycle, that the
// buffer really holds 32 entries, and that drops happen.
module tb_prefetch_buffer;
  import deer_pkg::*;

  localparam int DEPTH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       push_valid, drop, pf_valid, pf_ready;
  line_addr_t push_addr, pf_addr;
  logic [5:0] occupancy;

  prefetch_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_drop = 0, max_occ = 0;
  line_addr_t model[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; push_addr = '0; pf_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      bit pop, e_drop;
      int pr;
      @(negedge clk);
      pr = ((i / 300) % 2) ? 20 : 80;   // alternate slow and fast consumer
      push_valid = ($urandom % 2) != 0;
      push_addr  = {$urandom, $urandom};
      pf_ready   = ($urandom % 100) < pr;
      #1;
      check(pf_valid == (model.size() != 0), "pf_valid");
      if (model.size() != 0) check(pf_addr == model[0], "head");
      check(occupancy == model.size(), "occupancy");
      pop    = pf_ready && model.size() != 0;
      e_drop = push_valid && model.size() == DEPTH && !pop;
      check(drop == e_drop, "drop pulse");
      n_drop += e_drop;
      if (pop) void'(model.pop_front());
      if (push_valid && !e_drop) model.push_back(push_addr);
      if (model.size() > max_occ) max_occ = model.size();
    end
    check(n_drop > 0 && max_occ == DEPTH, "full and drop exercised");
    $display("drops=%0d max_occupancy=%0d", n_drop, max_occ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
