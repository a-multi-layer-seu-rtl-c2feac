// tb_ref_pkg: reference models used by the testbenches, written independently
// of the RTL: a bit-serial 1 + x^39 + x^58 scrambler and descrambler kept in a
// 64-bit history (bit 0 = newest bit), and helpers for FEB test payloads.
package tb_ref_pkg;

  // serial reference scrambler over 26 payload bits, MSB first
  function automatic logic [25:0] ref_scramble(ref logic [63:0] hist, input logic [25:0] d);
    logic [25:0] o;
    for (int i = 25; i >= 0; i--) begin
      logic b;
      b    = d[i] ^ hist[38] ^ hist[57];
      o[i] = b;
      hist = {hist[62:0], b};
    end
    return o;
  endfunction

  function automatic logic [25:0] ref_descramble(ref logic [63:0] hist, input logic [25:0] d);
    logic [25:0] o;
    for (int i = 25; i >= 0; i--) begin
      o[i] = d[i] ^ hist[38] ^ hist[57];
      hist = {hist[62:0], d[i]};
    end
    return o;
  endfunction

  // test payload number n of a stream with base b: group g = b_g + n*(g+1)
  function automatic logic [103:0] test_payload(input logic [103:0] base, input int unsigned n);
    logic [103:0] p;
    for (int g = 0; g < 13; g++) p[8*g +: 8] = base[8*g +: 8] + 8'((g + 1) * n);
    return p;
  endfunction

endpackage
