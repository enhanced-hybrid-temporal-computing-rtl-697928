// ehtc_ref_pkg -- reference models shared by the testbenches.
//
// Bit-level models of the E-HTC encodings written from their definitions, not
// from the RTL: the regulated bitstream places operand bit NBITS-1-k in the cycles
// c with c mod 2^(k+1) == 2^(k+1)-1 - 2^k (the counts whose k lowest bits are 1
// and bit k is 0), the temporal bitstream is 1 for c < code, and products are
// AND (unipolar) or XNOR (bipolar).
package ehtc_ref_pkg;

  function automatic bit ref_rb(int unsigned c, int unsigned code, int unsigned nbits);
    for (int unsigned k = 0; k < nbits; k++) begin
      int unsigned period = 1 << (k + 1);
      if ((c % period) == (period - 1 - (1 << k)))
        return bit'((code >> (nbits - 1 - k)) & 1);
    end
    return 1'b0;
  endfunction

  function automatic bit ref_tb(int unsigned c, int unsigned code);
    return c < code;
  endfunction

  // Operand code fed to a generator: unipolar as is, bipolar offset by 2^(nbits-1).
  function automatic int unsigned ref_code(int unsigned x, bit bip, int unsigned nbits);
    int unsigned mask = (1 << nbits) - 1;
    if (!bip) return x & mask;
    return ((x & mask) + (1 << (nbits - 1))) & mask;
  endfunction

  // Product ones of one multiplier over a whole pass.
  function automatic int unsigned ref_prod_ones(int unsigned x, int unsigned y, bit bip,
                                                int unsigned nbits);
    int unsigned n = 0;
    int unsigned xc = ref_code(x, bip, nbits);
    int unsigned yc = ref_code(y, bip, nbits);
    for (int unsigned c = 0; c < (1 << nbits); c++) begin
      bit t = ref_tb(c, xc);
      bit r = ref_rb(c, yc, nbits);
      n += bip ? int'(t == r) : int'(t & r);
    end
    return n;
  endfunction

endpackage
