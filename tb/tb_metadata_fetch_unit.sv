// tb_metadata_fetch_unit: drives hyperblock PCs into the metadata fetch unit
// against a memory model with a fixed latency. Checks that every read goes to
// HBT_PTR + 16 * hash(PC), that each returned line is offered with the PC
// bits [47:39] of its request, also when lines return out of order, that no
// more than 64 reads are in flight (and that the limit is reached and stalls
// requests), that requests
// are dropped while HBT_PTR is zero, and that lines of reads issued before an
// HBT_PTR write are discarded.
module tb_metadata_fetch_unit;
  import deer_pkg::*;
  import deer_tb_pkg::*;

  localparam int LAT = 80;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic hbt_we;
  va_t  hbt_wdata, hbt_rdata;
  logic req_valid, req_ready;
  va_t  req_hb_pc;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  va_t  mem_req_addr;
  logic [5:0] mem_req_tag, mem_resp_tag;
  logic [127:0] mem_resp_data;
  logic md_valid, md_ready, ev_refill;
  md_line_t md_line;
  pc_hi_t md_pc_hi;

  metadata_fetch_unit dut (.*);

  md_mem_model #(.LATENCY(LAT), .TAG_W(6), .STALL_PCT(10), .JITTER(40)) u_mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready),
    .req_addr (mem_req_addr), .req_tag (mem_req_tag),
    .resp_valid (mem_resp_valid), .resp_ready (mem_resp_ready),
    .resp_tag (mem_resp_tag), .resp_data (mem_resp_data)
  );

  int checks = 0, failures = 0;
  int inflight = 0, max_inflight = 0, tag_stalls = 0, n_lines = 0, n_stale = 0, n_dropped_off = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint unsigned addr; longint unsigned pc; bit stale; int seq; } exp_t;
  int seq = 0, n_ooo = 0;
  exp_t fly_q[int];  // reads in flight, by tag
  exp_t rdy_q[$];    // lines accepted, waiting in the fetched-metadata buffer
  va_t  cur_hbt = '0;

  function automatic int first_tag_in_flight();
    int best = -1, bs = 0;
    foreach (fly_q[t]) if (best < 0 || fly_q[t].seq < bs) begin best = t; bs = fly_q[t].seq; end
    return best;
  endfunction

  // monitor: memory requests, responses and delivered lines
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready && cur_hbt == '0) begin
      check(!mem_req_valid, "no read while HBT_PTR is zero");
      n_dropped_off++;
    end
    if (req_valid && !req_ready && mem_req_ready && cur_hbt != '0) begin
      tag_stalls++;
      check(inflight == 64, "stall only when 64 reads are in flight");
    end
    if (md_valid && md_ready) begin
      exp_t e;
      check(rdy_q.size() != 0, "line expected");
      e = rdy_q.pop_front();
      check(128'(md_line) == gen_md_line(e.addr), "line data");
      check(64'(md_pc_hi) == (e.pc >> 39), "pc high bits");
      n_lines++;
    end
    if (mem_resp_valid && mem_resp_ready) begin
      exp_t e;
      inflight--;
      check(fly_q.exists(int'(mem_resp_tag)), "response carries a tag in flight");
      e = fly_q[int'(mem_resp_tag)];
      fly_q.delete(int'(mem_resp_tag));
      if (int'(mem_resp_tag) != first_tag_in_flight()) n_ooo++;
      check(ev_refill == !e.stale, "stale lines discarded, others kept");
      if (e.stale) n_stale++;
      else rdy_q.push_back(e);
    end
    // reads still in flight when HBT_PTR is written belong to the old table
    if (hbt_we) foreach (fly_q[i]) fly_q[i].stale = 1;
    if (mem_req_valid && mem_req_ready) begin
      check(req_valid && req_ready, "request passes through");
      check(64'(mem_req_addr) == ref_md_addr(64'(cur_hbt), 64'(req_hb_pc), 15), "read address");
      check(!fly_q.exists(int'(mem_req_tag)), "tag not reused while in flight");
      fly_q[int'(mem_req_tag)] = '{addr: 64'(mem_req_addr), pc: 64'(req_hb_pc), stale: hbt_we, seq: seq++};
      inflight++;
    end
    if (inflight > max_inflight) max_inflight = inflight;
    check(inflight <= 64, "at most 64 in flight");
    if (hbt_we) cur_hbt = hbt_wdata;
  end

  initial begin
    hbt_we = 0; hbt_wdata = '0; req_valid = 0; req_hb_pc = '0; md_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // HBT_PTR still zero: requests dropped
    repeat (20) begin
      @(negedge clk);
      req_valid = 1; req_hb_pc = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFC;
      md_ready = 1;
    end
    @(negedge clk);
    req_valid = 0;
    hbt_we = 1; hbt_wdata = 48'h0000_7F00_0000;
    @(negedge clk);
    hbt_we = 0;
    check(hbt_rdata == 48'h0000_7F00_0000, "HBT_PTR readback");
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (!req_valid || req_ready) begin
        req_valid = (i < 300) ? 1'b1 : (($urandom % 3) == 0);
        req_hb_pc = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFC;
      end
      md_ready = ($urandom % 4) != 0;
      hbt_we   = (i == 2000);                  // context switch in the middle
      hbt_wdata = 48'h0000_5A00_0000;
    end
    @(negedge clk);
    req_valid = 0; hbt_we = 0; md_ready = 1;
    repeat (LAT * 3) @(negedge clk);
    check(fly_q.size() == 0 && rdy_q.size() == 0 && inflight == 0, "all reads returned");
    check(max_inflight == 64 && tag_stalls > 0, "outstanding limit reached");
    check(n_stale > 0, "stale lines seen");
    check(n_ooo > 0, "out-of-order responses seen");
    check(n_dropped_off == 20, "requests dropped with HBT_PTR zero");
    $display("lines=%0d stale=%0d tag_stalls=%0d out_of_order=%0d", n_lines, n_stale, tag_stalls, n_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
