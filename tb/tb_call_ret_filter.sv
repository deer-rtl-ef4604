// tb_call_ret_filter: random retired-instruction stream into the call/return
// filter. After each instruction the testbench checks, one cycle later, that
// only calls push (PC + 4) and only returns pop, and that calls and returns
// (and nothing else) raise a trigger carrying the instruction's target.
module tb_call_ret_filter;
  import deer_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic retire_valid;
  retire_t retire;
  logic ras_push, ras_pop, trig_valid, trig_is_call;
  va_t  ras_push_addr, trig_pc;

  call_ret_filter dut (.*);

  int checks = 0, failures = 0;
  int n_call = 0, n_ret = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit      exp_v;
    retire_t exp_r;
    retire_valid = 0;
    retire = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      retire_valid = ($urandom % 4) != 0;
      retire.pc     = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFC;
      retire.target = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFC;
      case ($urandom % 3)
        0: retire.kind = BR_OTHER;
        1: retire.kind = BR_CALL;
        default: retire.kind = BR_RET;
      endcase
      exp_v = retire_valid;
      exp_r = retire;
      @(posedge clk);
      #1;
      if (exp_v && exp_r.kind == BR_CALL) begin
        n_call++;
        check(ras_push && !ras_pop, "call pushes");
        check(ras_push_addr == exp_r.pc + 48'd4, "return address");
        check(trig_valid && trig_is_call && trig_pc == exp_r.target, "call trigger");
      end else if (exp_v && exp_r.kind == BR_RET) begin
        n_ret++;
        check(ras_pop && !ras_push, "return pops");
        check(trig_valid && !trig_is_call && trig_pc == exp_r.target, "return trigger");
      end else begin
        check(!ras_push && !ras_pop && !trig_valid, "other ignored");
      end
    end
    check(n_call > 100 && n_ret > 100, "both kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
