// dadda_pkg: elaboration-time arithmetic shared by the multiplier blocks.
//
// Nothing here is hardware. The functions compute, from the operand width N,
// the Dadda height targets (2, 3, 4, 6, 9, 13, 19, 28, 42, 63, ...), the
// number of reduction stages a tree of a given height needs, and the block
// layout of the hybrid final adder. The Dadda sequence is the standard one
// the paper refers to; the hybrid-adder layout rule is this design's own
// generalisation of the four layouts drawn for N = 8, 16, 32 and 64.
package dadda_pkg;

  // k-th Dadda height target: d(1) = 2, d(k+1) = floor(3 * d(k) / 2).
  function automatic int unsigned dadda_d(input int unsigned k);
    int unsigned d = 2;
    for (int unsigned i = 1; i < k; i++) d = (3 * d) / 2;
    return d;
  endfunction

  // Number of Dadda stages needed to bring a column of height maxh down to 2.
  function automatic int unsigned dadda_stages(input int unsigned maxh);
    int unsigned s = 0;
    while (dadda_d(s + 1) < maxh) s++;
    return s;
  endfunction

  // Width of the ripple carry adder at the bottom of the hybrid final adder:
  // log2(N), i.e. the number of excess carry bits part0 produces above bit N.
  function automatic int unsigned hyb_rca_width(input int unsigned n);
    return $clog2(n);
  endfunction

  // Number of MBECWC blocks (sizes 4, 8, 16, ...). A block of 2^k bits is
  // used while at least 2^(k+1) bits remain; whatever is left goes to the
  // final MBEC. This gives 3+5, 4+4+8, 5+4+8+15 and 6+4+8+16+30 for
  // N = 8, 16, 32, 64.
  function automatic int unsigned hyb_num_becwc(input int unsigned n);
    int unsigned rem = n - hyb_rca_width(n);
    int unsigned sz  = 4;
    int unsigned k   = 0;
    while (rem >= 2 * sz) begin
      rem -= sz;
      sz  *= 2;
      k++;
    end
    return k;
  endfunction

  // Size of MBECWC block idx (idx < hyb_num_becwc), or of the final MBEC
  // block (idx == hyb_num_becwc).
  function automatic int unsigned hyb_block_size(input int unsigned n, input int unsigned idx);
    int unsigned nb  = hyb_num_becwc(n);
    int unsigned rem = n - hyb_rca_width(n);
    for (int unsigned i = 0; i < nb; i++) begin
      if (i == idx) return 4 << i;
      rem -= 4 << i;
    end
    return rem;
  endfunction

  // Bit offset, relative to product bit N, where block idx starts.
  function automatic int unsigned hyb_block_lsb(input int unsigned n, input int unsigned idx);
    int unsigned off = hyb_rca_width(n);
    for (int unsigned i = 0; i < idx; i++) off += hyb_block_size(n, i);
    return off;
  endfunction

endpackage
