// prefetch_buffer: FIFO of cacheline addresses waiting to be prefetched.
//
// The prefetch-on-refill unit pushes the cachelines of each returned metadata
// line to the tail; the head is handed to the load/store unit (prefetch into
// the unified L2, the paper's default) or to the instruction fetch unit
// (prefetch into the L1 I-cache). DEPTH is 32 entries in the paper, each a
// 6-byte address; here an entry holds the 42-bit line address.
//
// When the buffer is full, a new address is dropped and reported on drop:
// the paper notes that a small buffer loses useful prefetches and that older
// queued prefetches are favoured over newer ones, which is what drop-on-full
// does. A push into a full buffer in a cycle whose head is taken is accepted.
// The output follows a valid/ready handshake; the head is stable while
// pf_valid is high.
module prefetch_buffer
  import deer_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  // tail
  input  logic       push_valid,
  input  line_addr_t push_addr,
  output logic       drop,
  // head
  output logic       pf_valid,
  input  logic       pf_ready,
  output line_addr_t pf_addr,
  output logic [$clog2(DEPTH+1)-1:0] occupancy
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  line_addr_t       mem [DEPTH];
  logic [PTR_W-1:0] head, tail;
  logic [CNT_W-1:0] count;
  logic             pop, push, full;

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign full      = (count == CNT_W'(DEPTH));
  assign pf_valid  = (count != '0);
  assign pf_addr   = mem[head];
  assign pop       = pf_valid && pf_ready;
  assign push      = push_valid && (!full || pop);
  assign drop      = push_valid && !push;
  assign occupancy = count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
    end else begin
      if (push) tail <= inc(tail);
      if (pop)  head <= inc(head);
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[tail] <= push_addr;
  end

  // The head may not change while it is offered and not taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   pf_valid && !pf_ready |=> pf_valid && $stable(pf_addr));

endmodule
