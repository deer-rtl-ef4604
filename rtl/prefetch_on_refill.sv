// prefetch_on_refill: expands a returned SSRA metadata line into cacheline
// addresses and pushes them to the tail of the prefetch buffer.
//
// A 16-byte metadata line lists the instruction cachelines of a hyperblock's
// whole statically formed runahead chain. It has two 64-bit groups, each
// describing three 512-byte regions of 8 cachelines:
//     [63:34] base of the group's first region, in 512-byte units (30 bits)
//     [33:26] bitmap of the first region's 8 lines
//     [25:21] offset of the second region from the first, 512-byte units
//     [20:13] bitmap of the second region
//     [12:8]  offset of the third region from the first, 512-byte units
//     [7:0]   bitmap of the third region
// so a line can name up to 48 cachelines. Address bits above the 30-bit base
// ([47:39]) are those of the hyperblock PC the line was fetched for. The
// field layout, widths and the "upper bits from the HB PC" rule follow the
// paper. Choices of this design where the paper is silent: both deltas count
// from the group's first region (the paper says the three regions lie within
// 16 KB of each other, which 5-bit deltas from one base give), bitmap bit i
// selects the i-th 64-byte line of its region, and lines are emitted in
// region order 1..6, lowest line first.
//
// Timing: one cacheline address per cycle, starting the cycle a line is
// offered. md_ready is raised with the last address (or at once for a line
// with an empty bitmap), so a line with n set bits takes max(n,1) cycles.
// The prefetch buffer never stalls this unit; it drops what does not fit.
module prefetch_on_refill
  import deer_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // fetched metadata line
  input  logic       md_valid,
  output logic       md_ready,
  input  md_line_t   md_line,
  input  pc_hi_t     md_pc_hi,
  // to the prefetch buffer tail
  output logic       push_valid,
  output line_addr_t push_addr
);

  localparam int unsigned N = MAX_LINES_PER_ENTRY; // 48

  // ----------------------------------------------------------- region bases
  va_t                    region_base [REGIONS_PER_LINE];
  logic [N-1:0]           bits;

  function automatic va_t group_base(input pc_hi_t hi, input logic [BASE_W-1:0] b);
    return {hi, b, {REGION_OFF_W{1'b0}}};
  endfunction
  function automatic va_t plus_delta(input va_t base, input logic [DELTA_W-1:0] d);
    return base + (va_t'(d) << REGION_OFF_W);
  endfunction

  always_comb begin
    region_base[0] = group_base(md_pc_hi, md_line.grp1.base1);
    region_base[1] = plus_delta(region_base[0], md_line.grp1.delta2);
    region_base[2] = plus_delta(region_base[0], md_line.grp1.delta3);
    region_base[3] = group_base(md_pc_hi, md_line.grp2.base1);
    region_base[4] = plus_delta(region_base[3], md_line.grp2.delta2);
    region_base[5] = plus_delta(region_base[3], md_line.grp2.delta3);
    bits = {md_line.grp2.bitmap3, md_line.grp2.bitmap2, md_line.grp2.bitmap1,
            md_line.grp1.bitmap3, md_line.grp1.bitmap2, md_line.grp1.bitmap1};
  end

  // ----------------------------------------------------------- scan
  logic [N-1:0]         done;
  logic [N-1:0]         pending;
  logic                 any;
  logic [$clog2(N)-1:0] sel;

  assign pending = bits & ~done;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (pending[i]) begin
        any = 1'b1;
        sel = ($clog2(N))'(i);
      end
    end
  end

  logic [2:0] sel_region;
  logic [2:0] sel_line;
  va_t        sel_va;
  assign sel_region = sel[5:3];
  assign sel_line   = sel[2:0];
  always_comb begin
    sel_va = '0;
    for (int r = 0; r < REGIONS_PER_LINE; r++)
      if (sel_region == 3'(r)) sel_va = region_base[r];
    sel_va = sel_va + (va_t'(sel_line) << LINE_OFF_W);
  end

  assign push_valid = md_valid && any;
  assign push_addr  = sel_va[VA_W-1:LINE_OFF_W];
  // last address of this line (or nothing to emit): release the line
  assign md_ready   = md_valid && ((pending & (pending - 1'b1)) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= '0;
    else if (md_valid) begin
      if (md_ready) done <= '0;
      else          done <= done | (N'(1) << sel);
    end
  end

endmodule
