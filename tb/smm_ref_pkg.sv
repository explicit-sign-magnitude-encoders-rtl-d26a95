// smm_ref_pkg: reference arithmetic for the testbenches.
//
// Decodes and encodes the number formats from their definitions with plain
// integer arithmetic, independently of the circuits under test. Codes are
// passed zero-extended in 32 bits together with their width w.
//   TC   value = code - 2^w if the top bit is set
//   SM   value = (top bit ? -1 : 1) * low w-1 bits   (code 10..0 illegal)
//   SME  as SM, but code 10..0 means -2^(w-1)
package smm_ref_pkg;
  function automatic int tc_val(int unsigned code, int w);
    return ((code >> (w - 1)) & 1) != 0 ? int'(code) - (1 << w) : int'(code);
  endfunction

  function automatic bit sm_is_negzero(int unsigned code, int w);
    return code == (32'd1 << (w - 1));
  endfunction

  function automatic int sm_val(int unsigned code, int w);
    int mag = int'(code & ((32'd1 << (w - 1)) - 1));
    return ((code >> (w - 1)) & 1) != 0 ? -mag : mag;
  endfunction

  function automatic int sme_val(int unsigned code, int w);
    return sm_is_negzero(code, w) ? -(1 << (w - 1)) : sm_val(code, w);
  endfunction

  // Code of value v in w-bit two's complement.
  function automatic int unsigned tc_code(int v, int w);
    return int'(unsigned'(v)) & ((32'd1 << w) - 1);
  endfunction

  // Code of value v in w-bit sign-magnitude (no negative zero).
  function automatic int unsigned sm_code(int v, int w);
    return v < 0 ? (32'd1 << (w - 1)) | int'(-v) : int'(v);
  endfunction

  // Number of differing bits between two codes.
  function automatic int hamming(int unsigned x, int unsigned y);
    return $countones(x ^ y);
  endfunction
endpackage
