// tb_ras: random pushes and pops against a queue model of a 16-entry return
// address stack that drops its oldest entry on overflow and ignores pops
// when empty. Checks top, top_valid and the overflow/underflow pulses every
// cycle, and that overflow and underflow both occur.
module tb_ras;
  import deer_pkg::*;

  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push, pop, top_valid, overflow, underflow;
  va_t  push_addr, top;

  ras #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_ovf = 0, n_unf = 0;
  va_t model[$];

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
    bit e_ovf, e_unf;
    push = 0; pop = 0; push_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int bias;
      @(negedge clk);
      // phases that fill the stack and phases that drain it
      bias = ((i / 200) % 2) ? 70 : 30;
      push = 0; pop = 0;
      case ($urandom % 100 < bias)
        1: push = ($urandom % 4) != 0;
        0: pop  = ($urandom % 4) != 0;
      endcase
      push_addr = {$urandom, $urandom};
      e_ovf = 0; e_unf = 0;
      if (push) begin
        if (model.size() == DEPTH) begin void'(model.pop_front()); e_ovf = 1; end
        model.push_back(push_addr);
      end else if (pop) begin
        if (model.size() == 0) e_unf = 1;
        else void'(model.pop_back());
      end
      @(posedge clk);
      #1;
      check(top_valid == (model.size() != 0), "top_valid");
      if (model.size() != 0) check(top == model[$], "top value");
      check(overflow == e_ovf, "overflow pulse");
      check(underflow == e_unf, "underflow pulse");
      n_ovf += e_ovf;
      n_unf += e_unf;
    end
    check(n_ovf > 0 && n_unf > 0, "overflow and underflow exercised");
    $display("overflows=%0d underflows=%0d", n_ovf, n_unf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
