// md_mem_model: behavioural model of the memory path that serves DEER's
// metadata reads.
//
// Each accepted read returns gen_md_line(addr) (see deer_tb_pkg) with its
// tag LATENCY cycles later (plus a random 0..JITTER-1 cycles when JITTER > 0,
// which lets later reads overtake earlier ones); responses wait while
// resp_ready is low. The default latency of 400 cycles is the metadata load
// latency of the paper's evaluation. With STALL_PCT > 0 the request ready is
// withheld at random in that percentage of cycles. Not synthesizable.
module md_mem_model
  import deer_tb_pkg::*;
#(
  parameter int unsigned LATENCY   = 400,
  parameter int unsigned TAG_W     = 6,
  parameter int unsigned STALL_PCT = 0,
  parameter int unsigned JITTER    = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [47:0]        req_addr,
  input  logic [TAG_W-1:0]   req_tag,
  output logic               resp_valid,
  input  logic               resp_ready,
  output logic [TAG_W-1:0]   resp_tag,
  output logic [127:0]       resp_data
);

  typedef struct {
    longint unsigned due;
    logic [TAG_W-1:0] tag;
    logic [47:0] addr;
  } pend_t;

  pend_t q[$];
  longint unsigned cyc = 0;

  // oldest entry that is due
  int sel;
  always_comb begin
    sel = -1;
    for (int i = q.size() - 1; i >= 0; i--) if (q[i].due <= cyc) sel = i;
    resp_valid = (sel >= 0);
    resp_tag   = (sel >= 0) ? q[sel].tag : '0;
    resp_data  = (sel >= 0) ? gen_md_line(64'(q[sel].addr)) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q.delete();
      cyc       <= 0;
      req_ready <= 1'b1;
    end else begin
      cyc <= cyc + 1;
      if (resp_valid && resp_ready) q.delete(sel);
      if (req_valid && req_ready)
        q.push_back('{due: cyc + LATENCY + ((JITTER > 0) ? ($urandom % JITTER) : 0),
                      tag: req_tag, addr: req_addr});
      req_ready <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
    end
  end

endmodule
