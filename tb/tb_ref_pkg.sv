// tb_ref_pkg: reference model shared by the testbenches.
//
// It recomputes, independently of the RTL, what the classifier should
// produce: the design-time random tables (same MurmurHash3 fmix32 formula,
// rewritten here), the LBP code update, the position of each bound 1-bit
// computed arithmetically rather than by shifting, the OR bundling, the
// temporal counts and the AND/popcount similarity.
package tb_ref_pkg;

  function automatic int unsigned ref_fmix(input int unsigned k);
    longint unsigned x;
    x = 64'(k);
    x = x ^ (x >> 16);
    x = (x * 64'h85ebca6b) & 64'hffff_ffff;
    x = x ^ (x >> 13);
    x = (x * 64'hc2b2ae35) & 64'hffff_ffff;
    x = x ^ (x >> 16);
    return int'(x[31:0]);
  endfunction

  // salt 1: item memory, salt 2: electrode HVs
  function automatic int unsigned ref_rand(input int unsigned salt, input int unsigned ch,
                                           input int unsigned code, input int unsigned seg);
    int unsigned key;
    key = (salt * (1 << 30)) ^ ((ch % 1024) * (1 << 20)) ^ ((code % 1024) * (1 << 10)) ^ (seg % 1024);
    return ref_fmix(key);
  endfunction

  // CompIM entry: bit index of the 1 in segment seg of channel ch, code code
  function automatic int unsigned ref_im_pos(input int unsigned ch, input int unsigned code,
                                             input int unsigned seg, input int unsigned seg_len);
    return ref_rand(1, ch, code, seg) % seg_len;
  endfunction

  // electrode HV: bit index of the 1 in segment seg of channel ch
  function automatic int unsigned ref_ehv_pos(input int unsigned ch, input int unsigned seg,
                                              input int unsigned seg_len);
    return ref_rand(2, ch, 0, seg) % seg_len;
  endfunction

  // Index of the 1-bit after binding: out[j] = in[(j+p+1) mod L], so a 1 at
  // index e moves to (e - p - 1) mod L.
  function automatic int unsigned ref_bound_idx(input int unsigned e, input int unsigned p,
                                                input int unsigned seg_len);
    return (e + 2 * seg_len - p - 1) % seg_len;
  endfunction

  function automatic int unsigned ref_popcount_and(input logic [1023:0] a, input logic [1023:0] b,
                                                   input int unsigned d);
    int unsigned n;
    n = 0;
    for (int unsigned i = 0; i < d; i++) if (a[i] && b[i]) n++;
    return n;
  endfunction

endpackage
