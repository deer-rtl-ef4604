// call_ret_filter: picks the call and return instructions out of the
// retired-instruction stream.
//
// DEER is engaged only by committed (not fetched) instructions. For every
// retired call this block asks the return address stack to push the call's
// return address, and for every retired return it asks the stack to pop. In
// both cases the architectural target of the instruction is the trigger PC
// that starts a runahead, since every call/return target is the start of a
// hyperblock. All other retired instructions are ignored.
//
// Interface: one retired instruction per cycle on retire_valid/retire (the
// commit stage is expected to present call/return instructions one at a
// time). Outputs are registered: trigger, push and pop appear one cycle after
// the instruction retires and last one cycle. The return address of a call
// is PC + RET_OFFSET (4 for a fixed-width ISA such as AArch64); the paper
// does not give it, so the offset is a parameter of this design.
module call_ret_filter
  import deer_pkg::*;
#(
  parameter int unsigned RET_OFFSET = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  // retired instruction from the commit stage
  input  logic    retire_valid,
  input  retire_t retire,
  // to the return address stack
  output logic    ras_push,
  output va_t     ras_push_addr,
  output logic    ras_pop,
  // to the runahead logic
  output logic    trig_valid,
  output va_t     trig_pc,
  output logic    trig_is_call
);

  logic is_call, is_ret;
  assign is_call = retire_valid && (retire.kind == BR_CALL);
  assign is_ret  = retire_valid && (retire.kind == BR_RET);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ras_push      <= 1'b0;
      ras_pop       <= 1'b0;
      ras_push_addr <= '0;
      trig_valid    <= 1'b0;
      trig_pc       <= '0;
      trig_is_call  <= 1'b0;
    end else begin
      ras_push   <= is_call;
      ras_pop    <= is_ret;
      trig_valid <= is_call || is_ret;
      if (is_call) ras_push_addr <= retire.pc + va_t'(RET_OFFSET);
      if (is_call || is_ret) begin
        trig_pc      <= retire.target;
        trig_is_call <= is_call;
      end
    end
  end

  // A call and a return cannot retire in the same filter cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(ras_push && ras_pop));

endmodule
