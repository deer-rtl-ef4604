// tb_deer_dru: end-to-end test of the deep runahead unit at its default
// sizes (16-entry RAS, 32-entry prefetch buffer, 64 metadata reads in flight,
// 15-bit hash), against a memory model with the paper's 400-cycle metadata
// load latency.
//
// Phase 0: calls and returns retire while HBT_PTR is zero; no memory read
//          may be issued.
// Phase A: calls and returns retire 64 cycles apart, so no request is ever
//          replaced or stalled. A reference model (its own RAS) predicts the
//          exact sequence of metadata reads (trigger PC, then RAS-top PC) and
//          the exact sequence of prefetched cacheline addresses, which must
//          come out in order on the L2 port. Also checks the latency from a
//          retired call to its read (2 cycles) and from the read to the first
//          prefetch (memory latency + 2 cycles).
// Phase B: a retired call/return nearly every cycle, deep call chains and
//          runs of returns, a slow L2 port and an HBT_PTR write while reads
//          are in flight. Every read and every prefetch must belong to a PC
//          that retired; afterwards, with the port drained, every pushed
//          address must have left the buffer.
// Each mechanism (call and return triggers, RAS overflow and underflow,
// trigger and RAS-top requests, replaced requests, stalls at the in-flight
// limit, refills, buffer drops, issue, discarded stale lines) is counted and
// must occur at least once.
module tb_deer_dru;
  import deer_pkg::*;
  import deer_tb_pkg::*;

  localparam int LAT = 400;
  localparam int HB  = 15;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic retire_valid;
  retire_t retire;
  logic hbt_we;
  va_t  hbt_wdata, hbt_rdata;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  va_t  mem_req_addr;
  logic [5:0] mem_req_tag, mem_resp_tag;
  logic [127:0] mem_resp_data;
  logic pf_l2_valid, pf_l2_ready, pf_l1_valid, pf_l1_ready;
  line_addr_t pf_l2_addr, pf_l1_addr;
  dru_events_t events;

  deer_dru dut (.*);

  md_mem_model #(.LATENCY(LAT), .TAG_W(6)) u_mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready),
    .req_addr (mem_req_addr), .req_tag (mem_req_tag),
    .resp_valid (mem_resp_valid), .resp_ready (mem_resp_ready),
    .resp_tag (mem_resp_tag), .resp_data (mem_resp_data)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ event counts
  int n_trig_call, n_trig_ret, n_ovf, n_unf, n_req_trig, n_req_rt, n_sup,
      n_refill, n_push, n_drop, n_issue, n_tag_stall, n_stale_lines;
  int cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_trig_call += events.trig_call;
    n_trig_ret  += events.trig_ret;
    n_ovf       += events.ras_overflow;
    n_unf       += events.ras_underflow;
    n_req_trig  += events.req_trigger;
    n_req_rt    += events.req_ras_top;
    n_sup       += events.req_superseded;
    n_refill    += events.md_refill;
    n_push      += events.pf_push;
    n_drop      += events.pf_drop;
    n_issue     += events.pf_issue;
    n_tag_stall += (dut.req_valid && !dut.req_ready && mem_req_ready && hbt_rdata != '0);
    n_stale_lines += (mem_resp_valid && mem_resp_ready && !events.md_refill);
    check(!pf_l1_valid, "L1 port idle when prefetching into L2");
  end

  // ------------------------------------------------------------ phase A model
  int phase = 0;
  longint unsigned exp_req[$];     // expected read addresses
  longint unsigned exp_line[$];    // expected prefetch line addresses
  int req_cycle[$];                // cycle of each read (phase A)
  int first_pf_cycle = -1;

  // phase B membership sets
  bit ok_addr [longint unsigned];
  bit ok_line [longint unsigned];

  va_t cur_hbt = '0;

  always @(posedge clk) if (rst_n) begin
    if (mem_req_valid && mem_req_ready) begin
      if (phase == 0) check(0, "read issued with HBT_PTR zero");
      if (phase == 1) begin
        check(exp_req.size() != 0, "read expected");
        if (exp_req.size() != 0) check(64'(mem_req_addr) == exp_req.pop_front(), "read address in order");
        req_cycle.push_back(cyc);
      end
      if (phase == 2) check(ok_addr.exists(64'(mem_req_addr)), "read belongs to a retired PC");
    end
    if (pf_l2_valid && pf_l2_ready) begin
      if (phase == 1) begin
        check(exp_line.size() != 0, "prefetch expected");
        if (exp_line.size() != 0) check(64'(pf_l2_addr) == exp_line.pop_front(), "prefetch address in order");
        if (first_pf_cycle < 0) first_pf_cycle = cyc;
      end
      if (phase == 2) check(ok_line.exists(64'(pf_l2_addr)), "prefetch belongs to a retired PC");
    end
  end

  va_t ras_m[$];   // reference RAS

  function automatic void expect_pc(input va_t pc);
    longint unsigned a, l[$];
    a = ref_md_addr(64'(cur_hbt), 64'(pc), HB);
    exp_req.push_back(a);
    void'(ref_decode(gen_md_line(a), 64'(pc), l));
    foreach (l[i]) exp_line.push_back(l[i]);
  endfunction

  function automatic void allow_pc(input va_t pc, input va_t hbt);
    longint unsigned a, l[$];
    a = ref_md_addr(64'(hbt), 64'(pc), HB);
    ok_addr[a] = 1;
    void'(ref_decode(gen_md_line(a), 64'(pc), l));
    foreach (l[i]) ok_line[l[i]] = 1;
  endfunction

  function automatic va_t rand_pc();
    // code in a few 1 MB libraries of a 48-bit space
    return {8'h00, 4'(($urandom % 3) + 4), 8'h00, 4'($urandom % 6), 20'($urandom)} & 48'hFFFF_FFFF_FFFC;
  endfunction

  task automatic retire_one(input br_kind_e k, input va_t pc, input va_t tgt);
    @(negedge clk);
    retire_valid = 1; retire.kind = k; retire.pc = pc; retire.target = tgt;
    @(negedge clk);
    retire_valid = 0; retire.kind = BR_OTHER;
  endtask

  initial begin
    int call_cycle, first_req_cycle, lines_a;
    retire_valid = 0; retire = '0; hbt_we = 0; hbt_wdata = '0;
    pf_l2_ready = 1; pf_l1_ready = 1;
    n_trig_call = 0; n_trig_ret = 0; n_ovf = 0; n_unf = 0; n_req_trig = 0; n_req_rt = 0;
    n_sup = 0; n_refill = 0; n_push = 0; n_drop = 0; n_issue = 0; n_tag_stall = 0; n_stale_lines = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- phase 0: no table
    for (int i = 0; i < 10; i++) retire_one(BR_CALL, rand_pc(), rand_pc());
    repeat (10) @(negedge clk);
    check(n_req_trig == 10 && n_refill == 0, "requests dropped while HBT_PTR is zero");
    // the reference RAS holds what phase 0 pushed? reset it by returning
    for (int i = 0; i < 10; i++) retire_one(BR_RET, rand_pc(), rand_pc());
    repeat (10) @(negedge clk);

    // ---------------- phase A: exact
    @(negedge clk);
    hbt_we = 1; hbt_wdata = 48'h0000_7F00_0000;
    @(negedge clk);
    hbt_we = 0; cur_hbt = 48'h0000_7F00_0000;
    phase = 1;
    ras_m.delete();
    for (int i = 0; i < 250; i++) begin
      va_t pc, tgt;
      br_kind_e k;
      k  = (($urandom % 100) < 55 || ras_m.size() == 0) ? BR_CALL : BR_RET;
      pc = rand_pc();
      if (k == BR_CALL) begin
        tgt = rand_pc();
        if (ras_m.size() == 16) void'(ras_m.pop_front());
        ras_m.push_back(pc + 48'd4);
      end else begin
        tgt = ras_m.pop_back();
      end
      expect_pc(tgt);
      if (ras_m.size() != 0) expect_pc(ras_m[$]);
      if (i == 0) call_cycle = cyc;
      retire_one(k, pc, tgt);
      repeat (62) @(negedge clk);
    end
    repeat (LAT + 200) @(negedge clk);
    check(exp_req.size() == 0, "all phase A reads seen");
    check(exp_line.size() == 0, "all phase A prefetches seen");
    check(req_cycle.size() > 0 && req_cycle[0] - call_cycle == 2 + 1, "read 2 cycles after retire");
    check(first_pf_cycle - req_cycle[0] == LAT + 2, "first prefetch LAT+2 cycles after its read");
    $display("phase A: retire->read %0d cycles, read->first prefetch %0d cycles",
             req_cycle[0] - call_cycle - 1, first_pf_cycle - req_cycle[0]);
    lines_a = n_issue;
    check(n_drop == 0 && n_sup == 0, "phase A without drops or replacement");

    // ---------------- phase B: stress
    phase = 2;
    for (int i = 0; i < 6000; i++) begin
      va_t pc, tgt, hbt;
      br_kind_e k;
      int sel;
      @(negedge clk);
      // bursts of calls (RAS overflow) and of returns (underflow)
      sel = ((i / 400) % 3 == 0) ? 85 : (((i / 400) % 3 == 1) ? 15 : 50);
      k   = (($urandom % 100) < sel) ? BR_CALL : BR_RET;
      pc  = rand_pc();
      tgt = rand_pc();
      retire_valid = ($urandom % 100) < ((i % 1000 < 500) ? 90 : 3);
      retire.kind = k; retire.pc = pc; retire.target = tgt;
      pf_l2_ready = ($urandom % 100) < ((i % 1000 < 700) ? 10 : 100);
      hbt = cur_hbt;
      hbt_we = (i == 3100);
      hbt_wdata = 48'h0000_6600_0000;
      if (hbt_we) cur_hbt = hbt_wdata;
      // a PC may be looked up under either table around the switch
      allow_pc(tgt, hbt);       allow_pc(tgt, cur_hbt);
      allow_pc(pc + 48'd4, hbt); allow_pc(pc + 48'd4, cur_hbt);
    end
    @(negedge clk);
    retire_valid = 0; hbt_we = 0; pf_l2_ready = 1;
    repeat (LAT * 20) @(negedge clk);
    check(n_push == n_issue, "every pushed address issued after draining");
    check(!pf_l2_valid && !mem_resp_valid, "drained");

    $display("triggers call=%0d ret=%0d  RAS overflow=%0d underflow=%0d", n_trig_call, n_trig_ret, n_ovf, n_unf);
    $display("requests trigger=%0d ras_top=%0d superseded=%0d in-flight-limit stalls=%0d",
             n_req_trig, n_req_rt, n_sup, n_tag_stall);
    $display("refills=%0d stale lines discarded=%0d pushes=%0d drops=%0d issued=%0d (phase A %0d)",
             n_refill, n_stale_lines, n_push, n_drop, n_issue, lines_a);
    check(n_trig_call > 0, "mechanism: call trigger");
    check(n_trig_ret > 0,  "mechanism: return trigger");
    check(n_ovf > 0,       "mechanism: RAS overflow");
    check(n_unf > 0,       "mechanism: RAS underflow");
    check(n_req_trig > 0,  "mechanism: trigger-PC request");
    check(n_req_rt > 0,    "mechanism: RAS-top request");
    check(n_sup > 0,       "mechanism: replaced requests");
    check(n_tag_stall > 0, "mechanism: in-flight limit");
    check(n_refill > 0,    "mechanism: prefetch on refill");
    check(n_drop > 0,      "mechanism: prefetch buffer full drop");
    check(n_issue > 0,     "mechanism: prefetch issue");
    check(n_stale_lines > 0, "mechanism: stale line after HBT_PTR switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
