// tb_ref_pkg: reference models used by the testbenches of the SC network.
// They are written from the arithmetic definitions (bipolar coding, APC
// weighting, saturating Btanh walk, Fibonacci LFSR) independently of the RTL.
package tb_ref_pkg;

  // Improved APC: pairs 0..N-3 through AND (even pair) / OR (odd pair), each
  // worth two; last two inputs added directly.
  function automatic int apc_ref(input logic [63:0] a, input int n);
    int s = 0;
    for (int k = 0; k < (n - 2) / 2; k++) begin
      bit g = (k % 2 == 0) ? (a[2*k] && a[2*k+1]) : (a[2*k] || a[2*k+1]);
      s += 2 * int'(g);
    end
    s += int'(a[n-2]) + int'(a[n-1]);
    return s;
  endfunction

  // One Btanh step; returns the new state.
  function automatic int btanh_step(input int state, input int cnt, input int n,
                                    input int k, input bit first);
    int s = (first ? k / 2 : state) + 2 * cnt - n;
    if (s < 0) s = 0;
    if (s > k - 1) s = k - 1;
    return s;
  endfunction

  // Fibonacci LFSR x^10 + x^7 + 1 (new bit = b9 ^ b6 shifted in at bit 0).
  function automatic int lfsr10_next(input int s);
    int fb = ((s >> 9) ^ (s >> 6)) & 1;
    return ((s << 1) | fb) & 10'h3FF;
  endfunction

  // Lane bit of a stream generator: rotate the random word, compare with the
  // offset-binary threshold of the signed value.
  function automatic bit sng_ref(input int rnd, input int lane, input int val);
    int r = rnd, u;
    for (int i = 0; i < lane % 10; i++) r = ((r << 1) | (r >> 9)) & 10'h3FF;
    u = (val & 10'h3FF) ^ 10'h200;
    return r <= u;
  endfunction

endpackage
