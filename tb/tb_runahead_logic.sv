// tb_runahead_logic: checks that each trigger yields a metadata request for
// the trigger PC followed by one for the RAS-top PC, read when issued, that
// an empty RAS skips the second request, and that a newer trigger replaces
// requests still waiting. A directed part checks the timing with an always
// ready fetch unit (trigger request one cycle after the trigger, RAS-top one
// cycle later); a random part compares every cycle with a small model. A
// second instance with TRIGGER_EN = 0 ("RAS-top HB only") must make only the
// RAS-top request, one cycle after the trigger.
module tb_runahead_logic;
  import deer_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic trig_valid, ras_top_valid, req_valid, req_ready, req_is_ras_top;
  va_t  trig_pc, ras_top, req_hb_pc;
  logic ev_req_trigger, ev_req_ras_top, ev_superseded;

  runahead_logic dut (.*);

  // RAS-top only variant, driven by the same inputs
  logic r_req_valid, r_req_is_ras_top, r_ev_trig, r_ev_rt, r_ev_sup;
  va_t  r_req_hb_pc;
  runahead_logic #(.TRIGGER_EN(1'b0)) dut_rt (
    .clk, .rst_n, .trig_valid, .trig_pc, .ras_top_valid, .ras_top,
    .req_valid (r_req_valid), .req_ready, .req_hb_pc (r_req_hb_pc), .req_is_ras_top (r_req_is_ras_top),
    .ev_req_trigger (r_ev_trig), .ev_req_ras_top (r_ev_rt), .ev_superseded (r_ev_sup)
  );

  int checks = 0, failures = 0, n_sup = 0, n_rt = 0;

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

  // model state
  bit  m_trig, m_ras;
  va_t m_pc;

  initial begin
    trig_valid = 0; trig_pc = '0; ras_top_valid = 0; ras_top = '0; req_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- directed: timing
    @(negedge clk);
    trig_valid = 1; trig_pc = 48'h1234_5678_9AB0; ras_top_valid = 1; ras_top = 48'h0000_0040_0000;
    @(negedge clk);
    trig_valid = 0;
    check(req_valid && !req_is_ras_top && req_hb_pc == 48'h1234_5678_9AB0, "trigger request 1 cycle later");
    check(ev_req_trigger, "trigger event");
    check(r_req_valid && r_req_is_ras_top && r_req_hb_pc == 48'h0000_0040_0000 && r_ev_rt && !r_ev_trig,
          "RAS-top only: RAS-top request 1 cycle later");
    @(negedge clk);
    check(req_valid && req_is_ras_top && req_hb_pc == 48'h0000_0040_0000, "RAS-top request next cycle");
    check(ev_req_ras_top, "ras-top event");
    check(!r_req_valid, "RAS-top only: single request");
    @(negedge clk);
    check(!req_valid, "idle after two requests");
    // directed: empty RAS
    trig_valid = 1; trig_pc = 48'hABC0; ras_top_valid = 0;
    @(negedge clk);
    trig_valid = 0;
    check(req_valid && req_hb_pc == 48'hABC0, "trigger with empty RAS");
    check(!r_req_valid, "RAS-top only: nothing when RAS empty");
    @(negedge clk);
    check(!req_valid, "no RAS-top request when RAS empty");
    check(!r_req_valid, "RAS-top only: still nothing");
    // ---------------- random against a model
    m_trig = 0; m_ras = 0; m_pc = '0;
    for (int i = 0; i < 5000; i++) begin
      bit  e_valid, e_rt, fire, e_sup;
      va_t e_pc;
      @(negedge clk);
      trig_valid    = ($urandom % 5) == 0;
      trig_pc       = {$urandom, $urandom};
      ras_top_valid = ($urandom % 4) != 0;
      ras_top       = {$urandom, $urandom};
      req_ready     = ($urandom % 3) != 0;
      #1;
      e_valid = m_trig || (m_ras && ras_top_valid);
      e_rt    = !m_trig;
      e_pc    = m_trig ? m_pc : ras_top;
      check(req_valid == e_valid, "req_valid");
      if (e_valid) check(req_hb_pc == e_pc && req_is_ras_top == e_rt, "request contents");
      fire  = e_valid && req_ready;
      e_sup = trig_valid && ((m_trig && !(fire && !e_rt)) || (m_ras && ras_top_valid && !(fire && e_rt)));
      check(ev_superseded == e_sup, "superseded event");
      n_sup += e_sup;
      n_rt  += (fire && e_rt);
      if (trig_valid) begin m_trig = 1; m_ras = 1; m_pc = trig_pc; end
      else if (m_trig) begin if (fire) m_trig = 0; end
      else if (m_ras) begin if (fire || !ras_top_valid) m_ras = 0; end
    end
    check(n_sup > 0 && n_rt > 0, "supersede and RAS-top exercised");
    $display("superseded=%0d ras_top_requests=%0d", n_sup, n_rt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
