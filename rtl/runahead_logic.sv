// runahead_logic: turns each trigger into metadata requests (semi-static
// runahead, SSRA).
//
// With SSRA metadata the whole runahead chain of a hyperblock (HB) has been
// worked out offline, so the hardware only has to fetch metadata lines: for
// every trigger PC it requests the line of the trigger PC, and then the line
// of the PC on top of the return address stack ("RAS-top prefetch"), which
// continues the chain on the return path beyond where the static chain had to
// stop. Both requests are on in the paper's main configuration. For the
// paper's comparison of their contributions either one can be turned off:
// RAS_TOP_EN = 0 gives "trigger HB only", TRIGGER_EN = 0 "RAS-top HB only".
// At least one of the two must be set.
//
// Each trigger fills two pending slots (trigger PC, RAS-top). They drain over
// the req_valid/req_ready handshake, trigger first. The RAS-top PC is read
// when its request is presented, so it reflects the push or pop of the same
// call/return. If the RAS is empty the RAS-top request is skipped. A new
// trigger that arrives while requests are still pending replaces them
// (counted by superseded): the prefetch list always follows the latest
// committed call/return, which is how DEER corrects itself. This replacement
// policy is this design's choice; the paper does not describe one.
// Because of replacement, req_hb_pc may change while req_valid is high and
// req_ready low.
module runahead_logic
  import deer_pkg::*;
#(
  parameter bit TRIGGER_EN = 1'b1,
  parameter bit RAS_TOP_EN = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  // from the call/return filter
  input  logic trig_valid,
  input  va_t  trig_pc,
  // from the return address stack
  input  logic ras_top_valid,
  input  va_t  ras_top,
  // metadata request to the metadata fetch unit
  output logic req_valid,
  input  logic req_ready,
  output va_t  req_hb_pc,
  output logic req_is_ras_top,
  // event pulses
  output logic ev_req_trigger,
  output logic ev_req_ras_top,
  output logic ev_superseded
);

  if (!TRIGGER_EN && !RAS_TOP_EN) begin : g_no_request
    $error("runahead_logic: TRIGGER_EN and RAS_TOP_EN are both 0; no request would ever be made");
  end

  logic pend_trig, pend_ras;
  va_t  pend_pc;

  always_comb begin
    req_valid      = 1'b0;
    req_hb_pc      = pend_pc;
    req_is_ras_top = 1'b0;
    if (pend_trig) begin
      req_valid = 1'b1;
    end else if (pend_ras && ras_top_valid) begin
      req_valid      = 1'b1;
      req_hb_pc      = ras_top;
      req_is_ras_top = 1'b1;
    end
  end

  logic fire;
  assign fire           = req_valid && req_ready;
  assign ev_req_trigger = fire && !req_is_ras_top;
  assign ev_req_ras_top = fire && req_is_ras_top;

  // Pending requests that are still waiting when a new trigger arrives.
  assign ev_superseded  = trig_valid &&
                          ((pend_trig && !(fire && !req_is_ras_top)) ||
                           (pend_ras && ras_top_valid && !(fire && req_is_ras_top)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_trig <= 1'b0;
      pend_ras  <= 1'b0;
      pend_pc   <= '0;
    end else if (trig_valid) begin
      pend_trig <= TRIGGER_EN;
      pend_ras  <= RAS_TOP_EN;
      pend_pc   <= trig_pc;
    end else if (pend_trig) begin
      if (fire) pend_trig <= 1'b0;
    end else if (pend_ras) begin
      // issued, or nothing on the RAS to prefetch for
      if (fire || !ras_top_valid) pend_ras <= 1'b0;
    end
  end

endmodule
