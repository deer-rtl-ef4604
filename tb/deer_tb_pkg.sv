// deer_tb_pkg: reference functions for the DEER testbenches.
//
// These recompute, independently of the RTL and in a different style, what
// the design is expected to produce:
//   ref_hash      entry index of a hyperblock PC (bit-serial XOR fold)
//   ref_decode    the cacheline addresses named by a 16-byte metadata line,
//                 in emission order, computed with integer arithmetic
//   gen_md_line   the deterministic metadata line a test memory returns for
//                 a given address (sparse bitmaps, pseudo-random bases)
package deer_tb_pkg;

  // Index bit j is the XOR of PC bits 2 + j + k*hash_bits for all k.
  function automatic longint unsigned ref_hash(input longint unsigned pc, input int hash_bits);
    longint unsigned idx = 0;
    for (int j = 0; j < hash_bits; j++) begin
      bit b = 0;
      for (int p = 2 + j; p < 48; p += hash_bits) b ^= pc[p];
      idx[j] = b;
    end
    return idx;
  endfunction

  function automatic longint unsigned ref_md_addr(input longint unsigned hbt,
                                                  input longint unsigned pc,
                                                  input int hash_bits);
    return (hbt + ref_hash(pc, hash_bits) * 16) & 48'hFFFF_FFFF_FFFF;
  endfunction

  // Decode: returns the number of lines, fills out[] with 42-bit line addresses.
  function automatic int ref_decode(input logic [127:0] line, input longint unsigned hb_pc,
                                    ref longint unsigned out[$]);
    int n = 0;
    out.delete();
    for (int g = 0; g < 2; g++) begin
      longint unsigned w     = line[64*g +: 64];
      longint unsigned base  = (w >> 34) & 32'h3FFF_FFFF;
      longint unsigned first = ((hb_pc >> 39) << 39) + base * 512;
      longint unsigned bm [3];
      longint unsigned ra [3];
      bm[0] = (w >> 26) & 8'hFF;
      bm[1] = (w >> 13) & 8'hFF;
      bm[2] = w & 8'hFF;
      ra[0] = first;
      ra[1] = first + ((w >> 21) & 5'h1F) * 512;
      ra[2] = first + ((w >> 8)  & 5'h1F) * 512;
      for (int r = 0; r < 3; r++)
        for (int i = 0; i < 8; i++)
          if (bm[r][i]) begin
            out.push_back(((ra[r] + i * 64) & 48'hFFFF_FFFF_FFFF) >> 6);
            n++;
          end
    end
    return n;
  endfunction

  // Small mixing function for test data.
  function automatic longint unsigned mix(input longint unsigned x);
    x ^= x >> 29;
    x *= 64'hBF58_476D_1CE4_E5B9;
    x ^= x >> 32;
    x *= 64'h94D0_49BB_1331_11EB;
    x ^= x >> 29;
    return x;
  endfunction

  // Metadata line stored at a given address of the test memory: six regions,
  // each bitmap with about one line in four set.
  function automatic logic [127:0] gen_md_line(input longint unsigned addr);
    logic [127:0] l;
    longint unsigned a = mix(addr), b = mix(addr ^ 64'h5555);
    l[63:0]   = a;
    l[127:64] = b;
    l[33:26]  = l[33:26]  & l[98:91];
    l[20:13]  = l[20:13]  & l[85:78];
    l[7:0]    = l[7:0]    & l[72:65];
    l[97:90]  = l[97:90]  & l[33+10 -: 8];
    l[84:77]  = l[84:77]  & l[20+20 -: 8];
    l[71:64]  = l[71:64]  & l[7+50 -: 8];
    return l;
  endfunction

endpackage
