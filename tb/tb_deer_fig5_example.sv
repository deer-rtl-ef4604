// tb_deer_fig5_example: replays the worked example of hyperblocks HB1..HB6
// through three deep runahead units.
//
// Call graph of the example: a caller calls HB1; HB1 calls HB2; HB2 calls HB3
// (return address HB6); HB3 calls HB4 (return address HB5); HB4 returns to
// HB5; HB5 returns to HB6. The SSRA metadata of each hyperblock lists the
// cachelines of its statically formed chain:
//     HB1: x0..x5   HB2: x2..x7   HB3: x3,x4,x5   HB4: x4   HB5: x5
//     HB6: x6,x7,x8 caller's continuation R0: y0,y1
// The testbench writes these lines, in the 16-byte encoding, into a table
// memory at HBT_PTR + 16 * hash(PC), retires the calls and returns one by
// one, and checks the exact prefetch stream:
//   * unit A, main configuration: trigger lines, then RAS-top lines, on the
//     L2 port;
//   * unit B, RAS-top prefetch off and prefetch into L1: trigger lines only,
//     on the L1 port;
//   * unit C, trigger request off: RAS-top lines only, on the L2 port.
module tb_deer_fig5_example;
  import deer_pkg::*;
  import deer_tb_pkg::*;

  localparam int LAT = 400;
  localparam longint unsigned HBT = 48'h0000_7F00_0000;
  localparam longint unsigned CODE = 48'h0000_4010_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ example data
  // hyperblock start PCs
  longint unsigned HB[8];
  longint unsigned R0, CALLER;
  longint unsigned X[9], Y[2];
  logic [127:0] table_mem [longint unsigned];

  // Encode up to 6 regions' worth of line addresses (byte addresses).
  function automatic logic [127:0] encode(input longint unsigned lines[$]);
    logic [127:0] e = '0;
    longint unsigned regs[$];
    foreach (lines[i]) begin
      longint unsigned r = lines[i] >> 9;
      bit seen = 0;
      foreach (regs[j]) if (regs[j] == r) seen = 1;
      if (!seen) regs.push_back(r);
    end
    regs.sort();
    for (int k = 0; k < regs.size(); k++) begin
      int g = k / 3, s = k % 3;
      logic [7:0] bm = '0;
      foreach (lines[i]) if ((lines[i] >> 9) == regs[k]) bm[(lines[i] >> 6) & 7] = 1'b1;
      if (s == 0) begin
        e[64*g + 34 +: 30] = regs[k][29:0];
        e[64*g + 26 +: 8]  = bm;
      end else if (s == 1) begin
        e[64*g + 21 +: 5]  = 5'(regs[k] - regs[3*g]);
        e[64*g + 13 +: 8]  = bm;
      end else begin
        e[64*g + 8 +: 5]   = 5'(regs[k] - regs[3*g]);
        e[64*g + 0 +: 8]   = bm;
      end
    end
    return e;
  endfunction

  function automatic void put(input longint unsigned pc, input longint unsigned lines[$]);
    longint unsigned a = ref_md_addr(HBT, pc, 15);
    if (table_mem.exists(a)) $display("note: hash collision at %h", a);
    table_mem[a] = encode(lines);
  endfunction

  // ------------------------------------------------------------ two units
  logic retire_valid;
  retire_t retire;
  logic hbt_we;
  va_t  hbt_wdata;

  typedef struct {
    longint unsigned due;
    logic [5:0] tag;
    logic [47:0] addr;
  } pend_t;

  // unit A: defaults
  va_t a_hbt_rd, a_mem_addr;
  logic a_mem_req_valid, a_mem_req_ready, a_resp_valid, a_resp_ready;
  logic [5:0] a_req_tag, a_resp_tag;
  logic [127:0] a_resp_data;
  logic a_l2_valid, a_l1_valid;
  line_addr_t a_l2_addr, a_l1_addr;
  dru_events_t a_ev;

  deer_dru u_a (
    .clk, .rst_n, .retire_valid, .retire, .hbt_we, .hbt_wdata, .hbt_rdata (a_hbt_rd),
    .mem_req_valid (a_mem_req_valid), .mem_req_ready (a_mem_req_ready), .mem_req_addr (a_mem_addr),
    .mem_req_tag (a_req_tag), .mem_resp_valid (a_resp_valid), .mem_resp_ready (a_resp_ready),
    .mem_resp_tag (a_resp_tag), .mem_resp_data (a_resp_data),
    .pf_l2_valid (a_l2_valid), .pf_l2_ready (1'b1), .pf_l2_addr (a_l2_addr),
    .pf_l1_valid (a_l1_valid), .pf_l1_ready (1'b1), .pf_l1_addr (a_l1_addr),
    .events (a_ev)
  );

  // unit B: trigger-only, into L1
  va_t b_hbt_rd, b_mem_addr;
  logic b_mem_req_valid, b_mem_req_ready, b_resp_valid, b_resp_ready;
  logic [5:0] b_req_tag, b_resp_tag;
  logic [127:0] b_resp_data;
  logic b_l2_valid, b_l1_valid;
  line_addr_t b_l2_addr, b_l1_addr;
  dru_events_t b_ev;

  deer_dru #(.RAS_TOP_EN(1'b0), .PREFETCH_INTO_L2(1'b0)) u_b (
    .clk, .rst_n, .retire_valid, .retire, .hbt_we, .hbt_wdata, .hbt_rdata (b_hbt_rd),
    .mem_req_valid (b_mem_req_valid), .mem_req_ready (b_mem_req_ready), .mem_req_addr (b_mem_addr),
    .mem_req_tag (b_req_tag), .mem_resp_valid (b_resp_valid), .mem_resp_ready (b_resp_ready),
    .mem_resp_tag (b_resp_tag), .mem_resp_data (b_resp_data),
    .pf_l2_valid (b_l2_valid), .pf_l2_ready (1'b1), .pf_l2_addr (b_l2_addr),
    .pf_l1_valid (b_l1_valid), .pf_l1_ready (1'b1), .pf_l1_addr (b_l1_addr),
    .events (b_ev)
  );

  // unit C: RAS-top only, into L2
  va_t c_hbt_rd, c_mem_addr;
  logic c_mem_req_valid, c_mem_req_ready, c_resp_valid, c_resp_ready;
  logic [5:0] c_req_tag, c_resp_tag;
  logic [127:0] c_resp_data;
  logic c_l2_valid, c_l1_valid;
  line_addr_t c_l2_addr, c_l1_addr;
  dru_events_t c_ev;

  deer_dru #(.TRIGGER_EN(1'b0)) u_c (
    .clk, .rst_n, .retire_valid, .retire, .hbt_we, .hbt_wdata, .hbt_rdata (c_hbt_rd),
    .mem_req_valid (c_mem_req_valid), .mem_req_ready (c_mem_req_ready), .mem_req_addr (c_mem_addr),
    .mem_req_tag (c_req_tag), .mem_resp_valid (c_resp_valid), .mem_resp_ready (c_resp_ready),
    .mem_resp_tag (c_resp_tag), .mem_resp_data (c_resp_data),
    .pf_l2_valid (c_l2_valid), .pf_l2_ready (1'b1), .pf_l2_addr (c_l2_addr),
    .pf_l1_valid (c_l1_valid), .pf_l1_ready (1'b1), .pf_l1_addr (c_l1_addr),
    .events (c_ev)
  );

  // table memories, fixed latency, in order
  pend_t qa[$], qb[$], qc[$];
  longint unsigned cyc = 0;
  function automatic logic [127:0] rd(input logic [47:0] a);
    return table_mem.exists(64'(a)) ? table_mem[64'(a)] : '0;
  endfunction
  assign a_mem_req_ready = 1'b1;
  assign b_mem_req_ready = 1'b1;
  assign c_mem_req_ready = 1'b1;
  always_comb begin
    a_resp_valid = qa.size() != 0 && qa[0].due <= cyc;
    a_resp_tag   = qa.size() != 0 ? qa[0].tag : '0;
    a_resp_data  = qa.size() != 0 ? rd(qa[0].addr) : '0;
    b_resp_valid = qb.size() != 0 && qb[0].due <= cyc;
    b_resp_tag   = qb.size() != 0 ? qb[0].tag : '0;
    b_resp_data  = qb.size() != 0 ? rd(qb[0].addr) : '0;
    c_resp_valid = qc.size() != 0 && qc[0].due <= cyc;
    c_resp_tag   = qc.size() != 0 ? qc[0].tag : '0;
    c_resp_data  = qc.size() != 0 ? rd(qc[0].addr) : '0;
  end
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (a_resp_valid && a_resp_ready) void'(qa.pop_front());
    if (b_resp_valid && b_resp_ready) void'(qb.pop_front());
    if (c_resp_valid && c_resp_ready) void'(qc.pop_front());
    if (a_mem_req_valid) qa.push_back('{due: cyc + LAT, tag: a_req_tag, addr: a_mem_addr});
    if (b_mem_req_valid) qb.push_back('{due: cyc + LAT, tag: b_req_tag, addr: b_mem_addr});
    if (c_mem_req_valid) qc.push_back('{due: cyc + LAT, tag: c_req_tag, addr: c_mem_addr});
  end

  // observed prefetch streams
  longint unsigned got_a[$], got_b[$], got_c[$];
  always @(posedge clk) if (rst_n) begin
    if (a_l2_valid) got_a.push_back(64'(a_l2_addr) << 6);
    if (b_l1_valid) got_b.push_back(64'(b_l1_addr) << 6);
    if (c_l2_valid) got_c.push_back(64'(c_l2_addr) << 6);
    check(!a_l1_valid && !b_l2_valid && !c_l1_valid, "unused port idle");
  end

  task automatic do_retire(input br_kind_e k, input longint unsigned pc, input longint unsigned tgt);
    @(negedge clk);
    retire_valid = 1; retire.kind = k; retire.pc = pc[47:0]; retire.target = tgt[47:0];
    @(negedge clk);
    retire_valid = 0; retire.kind = BR_OTHER;
    repeat (100) @(negedge clk);
  endtask

  initial begin
    longint unsigned exp_a[$], exp_b[$], exp_c[$];
    longint unsigned l[$];
    // layout: hyperblocks 0x400 apart, cachelines x0..x8 spread over regions
    for (int i = 1; i <= 7; i++) HB[i] = CODE + i * 48'h400;
    R0 = CODE + 48'h4000; CALLER = R0 - 4;
    for (int k = 0; k <= 8; k++) X[k] = CODE + 48'h1000 + k * 48'h140 & ~48'h3F;
    Y[0] = CODE + 48'h8000; Y[1] = CODE + 48'h8040;
    l = '{X[0], X[1], X[2], X[3], X[4], X[5]}; put(HB[1], l);
    l = '{X[2], X[3], X[4], X[5], X[6], X[7]}; put(HB[2], l);
    l = '{X[3], X[4], X[5]};                   put(HB[3], l);
    l = '{X[4]};                               put(HB[4], l);
    l = '{X[5]};                               put(HB[5], l);
    l = '{X[6], X[7], X[8]};                   put(HB[6], l);
    l = '{Y[0], Y[1]};                         put(R0, l);

    retire_valid = 0; retire = '0; hbt_we = 0; hbt_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); hbt_we = 1; hbt_wdata = HBT[47:0];
    @(negedge clk); hbt_we = 0;

    // caller -> HB1 : trigger HB1, RAS-top R0
    do_retire(BR_CALL, CALLER, HB[1]);
    exp_a.push_back(X[0]); exp_a.push_back(X[1]); exp_a.push_back(X[2]);
    exp_a.push_back(X[3]); exp_a.push_back(X[4]); exp_a.push_back(X[5]);
    exp_a.push_back(Y[0]); exp_a.push_back(Y[1]);
    exp_b.push_back(X[0]); exp_b.push_back(X[1]); exp_b.push_back(X[2]);
    exp_b.push_back(X[3]); exp_b.push_back(X[4]); exp_b.push_back(X[5]);
    exp_c.push_back(Y[0]); exp_c.push_back(Y[1]);
    // HB1 -> HB2; HB1's own return address is not part of the example and has no entry
    do_retire(BR_CALL, HB[1] + 48'h3C, HB[2]);
    exp_a.push_back(X[2]); exp_a.push_back(X[3]); exp_a.push_back(X[4]);
    exp_a.push_back(X[5]); exp_a.push_back(X[6]); exp_a.push_back(X[7]);
    exp_b.push_back(X[2]); exp_b.push_back(X[3]); exp_b.push_back(X[4]);
    exp_b.push_back(X[5]); exp_b.push_back(X[6]); exp_b.push_back(X[7]);
    // RAS-top is HB1's return address, which has no entry: no lines
    // HB2 -> HB3, return address HB6
    do_retire(BR_CALL, HB[6] - 4, HB[3]);
    exp_a.push_back(X[3]); exp_a.push_back(X[4]); exp_a.push_back(X[5]);
    exp_a.push_back(X[6]); exp_a.push_back(X[7]); exp_a.push_back(X[8]);
    exp_b.push_back(X[3]); exp_b.push_back(X[4]); exp_b.push_back(X[5]);
    exp_c.push_back(X[6]); exp_c.push_back(X[7]); exp_c.push_back(X[8]);
    // HB3 -> HB4, return address HB5
    do_retire(BR_CALL, HB[5] - 4, HB[4]);
    exp_a.push_back(X[4]); exp_a.push_back(X[5]);
    exp_b.push_back(X[4]);
    exp_c.push_back(X[5]);
    // HB4 returns to HB5; RAS-top is then HB6
    do_retire(BR_RET, HB[4] + 48'h20, HB[5]);
    exp_a.push_back(X[5]); exp_a.push_back(X[6]); exp_a.push_back(X[7]); exp_a.push_back(X[8]);
    exp_b.push_back(X[5]);
    exp_c.push_back(X[6]); exp_c.push_back(X[7]); exp_c.push_back(X[8]);
    // HB5 returns to HB6; RAS-top is then HB1's return address (no entry)
    do_retire(BR_RET, HB[5] + 48'h20, HB[6]);
    exp_a.push_back(X[6]); exp_a.push_back(X[7]); exp_a.push_back(X[8]);
    exp_b.push_back(X[6]); exp_b.push_back(X[7]); exp_b.push_back(X[8]);

    repeat (LAT + 100) @(negedge clk);
    check(got_a.size() == exp_a.size(), "unit A prefetch count");
    foreach (exp_a[i]) if (i < got_a.size()) check(got_a[i] == exp_a[i], "unit A prefetch stream");
    check(got_b.size() == exp_b.size(), "unit B prefetch count");
    foreach (exp_b[i]) if (i < got_b.size()) check(got_b[i] == exp_b[i], "unit B prefetch stream");
    check(got_c.size() == exp_c.size(), "unit C prefetch count");
    foreach (exp_c[i]) if (i < got_c.size()) check(got_c[i] == exp_c[i], "unit C prefetch stream");
    $display("unit A (trigger + RAS-top, L2): %0d prefetches; unit B (trigger only, L1): %0d prefetches; unit C (RAS-top only, L2): %0d prefetches",
             got_a.size(), got_b.size(), got_c.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
