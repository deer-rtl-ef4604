// metadata_fetch_unit: reads SSRA metadata lines from memory.
//
// It owns the HBT_PTR system register, the one piece of per-process state of
// DEER: software loads it with the base of the process's metadata table at
// program load and saves/restores it on a context switch. A value of zero
// means no table, and requests are then dropped.
//
// Each hyperblock PC from the runahead logic becomes one 16-byte read at
// HBT_PTR + (hash(PC) << 4) (see md_addr_gen) on the core's ordinary memory
// path; there is no metadata cache. Up to MAX_OUTSTANDING reads may be in
// flight; each carries a tag, and the unit keeps per tag the PC bits [47:39]
// that the line's region bases do not encode. When a line returns it is
// placed in the single-entry fetched-metadata buffer (16 bytes, as in the
// paper) and offered to the prefetch-on-refill unit, together with those PC
// bits. The memory response is back-pressured while that buffer is full.
//
// Choices of this design where the paper is silent: the request/response
// handshake and tags, the number of reads in flight, the zero-means-off
// HBT_PTR convention, and that lines of reads issued before an HBT_PTR write
// are discarded on return (they belong to the previous process's table).
// MAX_OUTSTANDING = 64 is sized from the paper's figures: about one call per
// 50 instructions (so about one call or return per 25), an IPC of at most 2
// on the 8-wide core, and two reads per call/return give up to 0.16 reads
// per cycle, which at the 400-cycle metadata latency keeps about 64 in
// flight.
// Timing: a request is accepted and forwarded to memory in the same cycle
// (combinational valid/ready pass-through); a response accepted at a clock
// edge is visible on md_valid from the next cycle.
module metadata_fetch_unit
  import deer_pkg::*;
#(
  parameter int unsigned HASH_BITS       = 15,
  parameter int unsigned MAX_OUTSTANDING = 64,
  parameter int unsigned TAG_W           = (MAX_OUTSTANDING > 1) ? $clog2(MAX_OUTSTANDING) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // HBT_PTR system register
  input  logic                 hbt_we,
  input  va_t                  hbt_wdata,
  output va_t                  hbt_rdata,
  // metadata request from the runahead logic
  input  logic                 req_valid,
  output logic                 req_ready,
  input  va_t                  req_hb_pc,
  // memory read request
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output va_t                  mem_req_addr,
  output logic [TAG_W-1:0]     mem_req_tag,
  // memory read response
  input  logic                 mem_resp_valid,
  output logic                 mem_resp_ready,
  input  logic [TAG_W-1:0]     mem_resp_tag,
  input  logic [MD_LINE_W-1:0] mem_resp_data,
  // fetched metadata line to the prefetch-on-refill unit
  output logic                 md_valid,
  input  logic                 md_ready,
  output md_line_t             md_line,
  output pc_hi_t               md_pc_hi,
  // event pulse: a line was accepted from memory
  output logic                 ev_refill
);

  va_t hbt_ptr;
  logic hbt_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hbt_ptr <= '0;
    else if (hbt_we) hbt_ptr <= hbt_wdata;
  end
  assign hbt_rdata = hbt_ptr;
  assign hbt_en    = (hbt_ptr != '0);

  // ---------------------------------------------------------------- address
  va_t md_addr;
  md_addr_gen #(.HASH_BITS(HASH_BITS)) u_addr (
    .hbt_ptr (hbt_ptr),
    .hb_pc   (req_hb_pc),
    .index   (),
    .addr    (md_addr)
  );

  // ---------------------------------------------------------------- tags
  logic [MAX_OUTSTANDING-1:0] busy, stale;
  pc_hi_t                     tag_pc_hi [MAX_OUTSTANDING];
  logic                       have_free;
  logic [TAG_W-1:0]           free_tag;

  always_comb begin
    have_free = 1'b0;
    free_tag  = '0;
    for (int i = MAX_OUTSTANDING - 1; i >= 0; i--) begin
      if (!busy[i]) begin
        have_free = 1'b1;
        free_tag  = TAG_W'(i);
      end
    end
  end

  assign mem_req_valid = req_valid && hbt_en && have_free;
  assign mem_req_addr  = md_addr;
  assign mem_req_tag   = free_tag;
  // with no table the request is consumed and dropped
  assign req_ready     = hbt_en ? (mem_req_ready && have_free) : 1'b1;

  logic issue, resp_fire;
  assign issue     = mem_req_valid && mem_req_ready;
  assign resp_fire = mem_resp_valid && mem_resp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= '0;
      stale <= '0;
    end else begin
      if (resp_fire) begin
        busy[mem_resp_tag]  <= 1'b0;
        stale[mem_resp_tag] <= 1'b0;
      end
      if (hbt_we) stale <= busy & ~((MAX_OUTSTANDING)'(resp_fire) << mem_resp_tag);
      if (issue) begin
        busy[free_tag]  <= 1'b1;
        stale[free_tag] <= hbt_we;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (issue) tag_pc_hi[free_tag] <= req_hb_pc[VA_W-1 -: PC_HI_W];
  end

  // ---------------------------------------------------------------- fetched metadata buffer
  logic keep;
  assign mem_resp_ready = !md_valid || md_ready;
  assign keep           = resp_fire && !stale[mem_resp_tag];
  assign ev_refill      = keep;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      md_valid <= 1'b0;
      md_line  <= '0;
      md_pc_hi <= '0;
    end else begin
      if (md_valid && md_ready) md_valid <= 1'b0;
      if (keep) begin
        md_valid <= 1'b1;
        md_line  <= md_line_t'(mem_resp_data);
        md_pc_hi <= tag_pc_hi[mem_resp_tag];
      end
    end
  end

  // A response must carry the tag of a read in flight.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_resp_valid |-> busy[mem_resp_tag]);

endmodule
