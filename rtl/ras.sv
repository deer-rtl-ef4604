// ras: the deep runahead unit's return address stack.
//
// A retired call pushes its return address and a retired return pops one,
// so the top of the stack is the address execution is expected to return to
// next. The runahead logic reads that top (the RAS-top PC) to fetch a second
// metadata line that continues the prefetch chain past the current function.
//
// The stack is a circular buffer of DEPTH entries (16 in the paper, 6 bytes
// each). The paper does not say what happens at the limits; here a push onto
// a full stack overwrites the oldest entry (overflow) and a pop from an empty
// stack does nothing (underflow); both are reported as one-cycle pulses.
// Push and pop take effect at the clock edge; top/top_valid show the state
// after the last edge.
module ras
  import deer_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  va_t  push_addr,
  input  logic pop,
  output va_t  top,
  output logic top_valid,
  output logic overflow,
  output logic underflow
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  va_t              mem [DEPTH];
  logic [PTR_W-1:0] tos;    // index of the top entry
  logic [CNT_W-1:0] count;  // number of valid entries

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction
  function automatic logic [PTR_W-1:0] dec(input logic [PTR_W-1:0] p);
    return (p == '0) ? PTR_W'(DEPTH - 1) : p - 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tos       <= PTR_W'(DEPTH - 1);
      count     <= '0;
      overflow  <= 1'b0;
      underflow <= 1'b0;
    end else begin
      overflow  <= 1'b0;
      underflow <= 1'b0;
      if (push) begin
        tos <= inc(tos);
        if (count == CNT_W'(DEPTH)) overflow <= 1'b1;
        else                        count    <= count + 1'b1;
      end else if (pop) begin
        if (count == '0) underflow <= 1'b1;
        else begin
          tos   <= dec(tos);
          count <= count - 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[inc(tos)] <= push_addr;
  end

  assign top_valid = (count != '0);
  assign top       = mem[tos];

endmodule
