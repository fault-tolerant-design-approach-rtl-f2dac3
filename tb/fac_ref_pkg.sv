// fac_ref_pkg: bit-true reference model of the FAC imprecise adder, written
// arithmetically (integer shifts and adds) and independently of the RTL
// structure, for the testbenches.
//
// For operands a, b of width n split at l, with the top lb approximate bits
// carrying reduced logic:
//   T      = a[l-1] & b[l-1]
//   upper  = a[n-1:l] + b[n-1:l] + T                  (n-l+1 bits)
//   lower  = bit i is a[i] | b[i] for i >= l-lb, else 1
//   result = upper * 2^l + lower
package fac_ref_pkg;

  function automatic longint unsigned bits_mask(int unsigned w);
    return (w >= 64) ? '1 : ((64'd1 << w) - 64'd1);
  endfunction

  function automatic longint unsigned ref_lower(longint unsigned a, longint unsigned b,
                                                int unsigned l, int unsigned lb);
    longint unsigned lo;
    lo = 0;
    for (int unsigned i = 0; i < l; i++) begin
      if (i + lb >= l) lo |= (((a >> i) | (b >> i)) & 64'd1) << i;
      else             lo |= 64'd1 << i;
    end
    return lo;
  endfunction

  function automatic longint unsigned ref_carry_t(longint unsigned a, longint unsigned b,
                                                  int unsigned l);
    return (a >> (l - 1)) & (b >> (l - 1)) & 64'd1;
  endfunction

  function automatic longint unsigned ref_upper(longint unsigned a, longint unsigned b,
                                                int unsigned n, int unsigned l);
    return ((a & bits_mask(n)) >> l) + ((b & bits_mask(n)) >> l) + ref_carry_t(a, b, l);
  endfunction

  function automatic longint unsigned ref_sum(longint unsigned a, longint unsigned b,
                                              int unsigned n, int unsigned l, int unsigned lb);
    return (ref_upper(a, b, n, l) << l) | ref_lower(a, b, l, lb);
  endfunction

  function automatic longint unsigned rand64();
    return {$urandom(), $urandom()};
  endfunction

endpackage
