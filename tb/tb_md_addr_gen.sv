// tb_md_addr_gen: compares the metadata-entry address with a bit-serial
// reference of the XOR-fold hash, HBT_PTR + 16 * index, over random PCs and
// table bases, for the default 15-bit and a 10-bit index.
module tb_md_addr_gen;
  import deer_pkg::*;
  import deer_tb_pkg::*;

  va_t hbt_ptr, hb_pc, addrd, addr10;
  logic [14:0] indexd;
  logic [9:0]  index10;

  md_addr_gen                  dutd (.hbt_ptr, .hb_pc, .index(indexd), .addr(addrd));
  md_addr_gen #(.HASH_BITS(10)) dut10 (.hbt_ptr, .hb_pc, .index(index10), .addr(addr10));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s pc=%h", what, hb_pc);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      hbt_ptr = {$urandom, $urandom} & 48'hFFFF_FFFF_F000;
      hb_pc   = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFC;
      if (i < 48) hb_pc = 48'h1 << i;
      #1;
      check(64'(indexd) == ref_hash(64'(hb_pc), 15), "index default");
      check(64'(addrd)  == ref_md_addr(64'(hbt_ptr), 64'(hb_pc), 15), "addr default");
      check(64'(index10) == ref_hash(64'(hb_pc), 10), "index 10");
      check(64'(addr10)  == ref_md_addr(64'(hbt_ptr), 64'(hb_pc), 10), "addr 10");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
