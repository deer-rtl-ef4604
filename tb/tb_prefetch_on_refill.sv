// tb_prefetch_on_refill: offers random metadata lines (random bases, deltas,
// bitmaps, including empty ones and the full 48-line case) and compares the
// pushed cacheline addresses, in order, with an arithmetic reference decode
// of the encoding. Checks that a line with n set bits is released after
// max(n,1) cycles at one address per cycle.
module tb_prefetch_on_refill;
  import deer_pkg::*;
  import deer_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       md_valid, md_ready, push_valid;
  md_line_t   md_line;
  pc_hi_t     md_pc_hi;
  line_addr_t push_addr;

  prefetch_on_refill dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned exp[$];
    md_valid = 0; md_line = '0; md_pc_hi = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      logic [127:0] l;
      longint unsigned pc;
      int n, cyc, got;
      l  = {$urandom, $urandom, $urandom, $urandom};
      case (t % 5)
        0: ;                                                    // dense
        1: begin l[33:26] = 0; l[20:13] = 0; l[7:0] = 0;
                 l[97:90] = 0; l[84:77] = 0; l[71:64] = 0; end  // empty
        2: begin l[33:26] = '1; l[20:13] = '1; l[7:0] = '1;
                 l[97:90] = '1; l[84:77] = '1; l[71:64] = '1; end // all 48
        default: l = gen_md_line(64'(t));                       // sparse
      endcase
      if (t % 7 == 0) l[63:34] = '1;                            // carry into PC bits
      pc = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
      n  = ref_decode(l, pc, exp);
      @(negedge clk);
      md_valid = 1; md_line = md_line_t'(l); md_pc_hi = pc[47:39];
      cyc = 0; got = 0;
      forever begin
        #1;
        cyc++;
        if (got < n) begin
          check(push_valid, "push valid");
          check(64'(push_addr) == exp[got], "address");
          got++;
        end else check(!push_valid, "no extra push");
        if (md_ready) break;
        @(negedge clk);
        if (cyc > 60) break;
      end
      check(got == n, "all lines emitted");
      check(cyc == ((n == 0) ? 1 : n), "one address per cycle");
      @(negedge clk);
      md_valid = ($urandom % 2);   // sometimes idle a cycle, sometimes back to back
      if (md_valid) begin md_line = '0; #1; check(md_ready && !push_valid, "empty line consumed at once"); @(negedge clk); end
      md_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
