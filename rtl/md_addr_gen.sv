// md_addr_gen: address of the metadata-table entry of a hyperblock.
//
// The metadata table lives in ordinary (non-cacheable) memory. Its base is
// held in the HBT_PTR system register; the entry of a hyperblock is found by
// hashing the hyperblock's start PC into an entry index and adding it, times
// the 16-byte entry size, to HBT_PTR:
//     addr = HBT_PTR + (hash(hb_pc) << 4)
// The paper gives this structure (hash, adder, HBT_PTR) but not the hash
// function nor the table size. This design uses an XOR fold: the PC bits
// above the 4-byte instruction alignment, [47:2], are cut into HASH_BITS-wide
// slices and XORed together. HASH_BITS = 15 gives a 32768-entry (512 KB)
// table, twice the hyperblock count of the largest workload the paper
// reports (11,371), in line with its remark that hashing typically doubles
// the metadata footprint. The index has no tag, so two hyperblocks whose PCs
// collide share an entry. Software that builds the table must use the same
// function.
// Purely combinational.
module md_addr_gen
  import deer_pkg::*;
#(
  parameter int unsigned HASH_BITS = 15
) (
  input  va_t                  hbt_ptr,
  input  va_t                  hb_pc,
  output logic [HASH_BITS-1:0] index,
  output va_t                  addr
);

  localparam int unsigned SRC_W   = VA_W - 2;                         // PC[47:2]
  localparam int unsigned NSLICES = (SRC_W + HASH_BITS - 1) / HASH_BITS;

  always_comb begin
    logic [NSLICES*HASH_BITS-1:0] src;
    src   = '0;
    src[SRC_W-1:0] = hb_pc[VA_W-1:2];
    index = '0;
    for (int unsigned s = 0; s < NSLICES; s++)
      index ^= src[s*HASH_BITS +: HASH_BITS];
  end

  assign addr = hbt_ptr + (va_t'(index) << MD_ENTRY_BYTES_LOG2);

endmodule
