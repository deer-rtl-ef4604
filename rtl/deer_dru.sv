// deer_dru: the DEER deep runahead unit (top level).
//
// DEER prefetches instruction cachelines hundreds of instructions ahead of
// execution. Software profiles the program, groups basic blocks into
// hyperblocks (HBs), links each HB to its most likely successor, and writes
// for every HB that starts at a call/return target one 16-byte "semi-static
// runahead" (SSRA) metadata line naming the cachelines of the whole predicted
// chain that follows it. The table lives in memory at HBT_PTR. This unit
// follows the retired instruction stream and, for each retired call or
// return:
//   1. call_ret_filter  keeps only calls/returns, updates the RAS and takes
//                       the call/return target as the trigger PC;
//   2. ras              tracks return addresses; its top is the RAS-top PC;
//   3. runahead_logic   requests the metadata line of the trigger PC, then
//                       that of the RAS-top PC;
//   4. metadata_fetch_unit hashes each PC into the table, reads the line over
//                       the memory path and holds the returned line;
//   5. prefetch_on_refill decodes the line into cacheline addresses;
//   6. prefetch_buffer  queues them for the load/store unit (prefetch into
//                       L2, PREFETCH_INTO_L2 = 1, the paper's default) or the
//                       fetch unit (prefetch into L1 I-cache). Both ports
//                       exist in either mode; the one not selected has its
//                       valid tied low (pf_l1_valid in the default mode).
// Block structure and sizes (RAS 16, prefetch buffer 32, one fetched-metadata
// entry, no metadata cache, trigger and RAS-top requests both on) follow the
// paper; TRIGGER_EN / RAS_TOP_EN select the single-request variants the paper
// compares against. Handshakes, the hash, the number of metadata reads in
// flight and the overflow policies are this design's choices and are
// described in each block.
//
// Latency from a retired call/return to its metadata read on mem_req: 2
// cycles (filter register, runahead register). A returned line starts
// producing one prefetch address per cycle one cycle after mem_resp is
// accepted; an address reaches pf_*_valid the cycle after it is pushed.
module deer_dru
  import deer_pkg::*;
#(
  parameter int unsigned RAS_DEPTH        = 16,
  parameter int unsigned PB_DEPTH         = 32,
  parameter int unsigned HASH_BITS        = 15,
  parameter int unsigned MAX_OUTSTANDING  = 64,
  parameter int unsigned TAG_W            = (MAX_OUTSTANDING > 1) ? $clog2(MAX_OUTSTANDING) : 1,
  parameter bit          TRIGGER_EN       = 1'b1,
  parameter bit          RAS_TOP_EN       = 1'b1,
  parameter bit          PREFETCH_INTO_L2 = 1'b1,
  parameter int unsigned RET_OFFSET       = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // retired instructions from the commit unit
  input  logic                 retire_valid,
  input  retire_t              retire,
  // HBT_PTR system register access
  input  logic                 hbt_we,
  input  va_t                  hbt_wdata,
  output va_t                  hbt_rdata,
  // metadata reads over the core's memory path
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output va_t                  mem_req_addr,
  output logic [TAG_W-1:0]     mem_req_tag,
  input  logic                 mem_resp_valid,
  output logic                 mem_resp_ready,
  input  logic [TAG_W-1:0]     mem_resp_tag,
  input  logic [MD_LINE_W-1:0] mem_resp_data,
  // prefetches to the load/store unit (into L2)
  output logic                 pf_l2_valid,
  input  logic                 pf_l2_ready,
  output line_addr_t           pf_l2_addr,
  // prefetches to the instruction fetch unit (into L1 I-cache)
  output logic                 pf_l1_valid,
  input  logic                 pf_l1_ready,
  output line_addr_t           pf_l1_addr,
  // event pulses for performance counters
  output dru_events_t          events
);

  // filter -> RAS / runahead
  logic ras_push, ras_pop;
  va_t  ras_push_addr;
  logic trig_valid, trig_is_call;
  va_t  trig_pc;

  call_ret_filter #(.RET_OFFSET(RET_OFFSET)) u_filter (
    .clk, .rst_n,
    .retire_valid, .retire,
    .ras_push, .ras_push_addr, .ras_pop,
    .trig_valid, .trig_pc, .trig_is_call
  );

  va_t  ras_top;
  logic ras_top_valid, ras_overflow, ras_underflow;

  ras #(.DEPTH(RAS_DEPTH)) u_ras (
    .clk, .rst_n,
    .push (ras_push), .push_addr (ras_push_addr), .pop (ras_pop),
    .top (ras_top), .top_valid (ras_top_valid),
    .overflow (ras_overflow), .underflow (ras_underflow)
  );

  // runahead -> metadata fetch
  logic req_valid, req_ready, req_is_ras_top;
  va_t  req_hb_pc;
  logic ev_req_trigger, ev_req_ras_top, ev_superseded;

  runahead_logic #(.TRIGGER_EN(TRIGGER_EN), .RAS_TOP_EN(RAS_TOP_EN)) u_runahead (
    .clk, .rst_n,
    .trig_valid, .trig_pc,
    .ras_top_valid, .ras_top,
    .req_valid, .req_ready, .req_hb_pc, .req_is_ras_top,
    .ev_req_trigger, .ev_req_ras_top, .ev_superseded
  );

  logic     md_valid, md_ready, ev_refill;
  md_line_t md_line;
  pc_hi_t   md_pc_hi;

  metadata_fetch_unit #(
    .HASH_BITS (HASH_BITS), .MAX_OUTSTANDING (MAX_OUTSTANDING), .TAG_W (TAG_W)
  ) u_fetch (
    .clk, .rst_n,
    .hbt_we, .hbt_wdata, .hbt_rdata,
    .req_valid, .req_ready, .req_hb_pc,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_tag,
    .mem_resp_valid, .mem_resp_ready, .mem_resp_tag, .mem_resp_data,
    .md_valid, .md_ready, .md_line, .md_pc_hi,
    .ev_refill
  );

  // refill -> prefetch buffer
  logic       push_valid, pf_drop;
  line_addr_t push_addr;

  prefetch_on_refill u_refill (
    .clk, .rst_n,
    .md_valid, .md_ready, .md_line, .md_pc_hi,
    .push_valid, .push_addr
  );

  logic       pf_valid, pf_ready;
  line_addr_t pf_addr;

  prefetch_buffer #(.DEPTH(PB_DEPTH)) u_pbuf (
    .clk, .rst_n,
    .push_valid, .push_addr, .drop (pf_drop),
    .pf_valid, .pf_ready, .pf_addr,
    .occupancy ()
  );

  // route the buffer head to L2 (load/store unit) or L1 (fetch unit)
  assign pf_l2_valid = PREFETCH_INTO_L2 ? pf_valid : 1'b0;
  assign pf_l1_valid = PREFETCH_INTO_L2 ? 1'b0 : pf_valid;
  assign pf_l2_addr  = pf_addr;
  assign pf_l1_addr  = pf_addr;
  assign pf_ready    = PREFETCH_INTO_L2 ? pf_l2_ready : pf_l1_ready;

  always_comb begin
    events                = '0;
    events.trig_call      = trig_valid && trig_is_call;
    events.trig_ret       = trig_valid && !trig_is_call;
    events.ras_overflow   = ras_overflow;
    events.ras_underflow  = ras_underflow;
    events.req_trigger    = ev_req_trigger;
    events.req_ras_top    = ev_req_ras_top;
    events.req_superseded = ev_superseded;
    events.md_refill      = ev_refill;
    events.pf_push        = push_valid && !pf_drop;
    events.pf_drop        = pf_drop;
    events.pf_issue       = pf_valid && pf_ready;
  end

endmodule
