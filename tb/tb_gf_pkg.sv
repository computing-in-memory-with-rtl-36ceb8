// tb_gf_pkg: reference arithmetic for the testbenches, written independently
// of the design: GF(2^6) through log/antilog tables built from the LFSR of
// x^6 + x + 1, and the syndromes S1, S3, S5 of a 51-bit codeword.
package tb_gf_pkg;
  int unsigned gexp [126];

  function automatic void build();
    int unsigned v;
    v = 1;
    for (int i = 0; i < 126; i++) begin
      gexp[i] = v;
      v = v << 1;
      if (v & 64) v = v ^ 'h43;
    end
  endfunction

  // syndrome S_k of bits 0..49 (bit 50 is the overall parity)
  function automatic int unsigned syn(logic [50:0] cw, int k);
    int unsigned s;
    s = 0;
    for (int i = 0; i < 50; i++) if (cw[i]) s ^= gexp[(k * i) % 63];
    return s;
  endfunction
endpackage
