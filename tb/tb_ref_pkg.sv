// tb_ref_pkg: reference models used by the SpecPCM testbenches.
//
// These functions restate, independently of the RTL, the arithmetic the
// blocks must perform: the hypervector element generator, ID-level encoding
// of one dimension, dimension packing, flash-ADC quantisation and the
// bit-line dot product. Testbenches compare the RTL against them.
package tb_ref_pkg;

  // element `dim` of HV number `idx` of family `seed` (1 = +1, 0 = -1)
  function automatic bit ref_hv_bit(input bit [31:0] seed, input int idx, input int dim);
    bit [31:0] x;
    x = seed ^ ((idx & 32'hFFFF) << 16) ^ (dim & 32'hFFFF);
    x = x * 32'd2654435761;   // 0x9E3779B1
    x = x ^ (x >> 16);
    x = x * 32'd2246822507;   // 0x85EBCA6B
    x = x ^ (x >> 13);
    return x[31];
  endfunction

  // ADC: code on the 6-bit scale for b enabled bits
  function automatic int ref_adc(input int vin, input int lsb, input int b);
    int s, q, m, j;
    s = 1 << (6 - b);
    // floor division for negative values
    q = (vin >= 0) ? vin / lsb : -((-vin + lsb - 1) / lsb);
    m = 32 + q;
    if (m < 0) m = 0;
    j = m / s;
    if (j > 64 / s - 1) j = 64 / s - 1;
    return s * j - 32;
  endfunction

  function automatic int clampi(input int v, input int lo, input int hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

endpackage
