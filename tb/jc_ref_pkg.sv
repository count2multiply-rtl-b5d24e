// jc_ref_pkg: reference arithmetic for the testbenches, written independently
// of the RTL: Johnson-counter encode/decode and the expected number of
// commands of a digit uProgram.
package jc_ref_pkg;

  // n-bit JC for value v (0 <= v < 2n): v <= n -> the v low bits are 1;
  // v > n -> the v-n low bits are 0 and the rest 1.
  function automatic logic [15:0] jc_enc(input int n, input int v);
    logic [15:0] b;
    b = '0;
    for (int i = 0; i < n; i++) b[i] = (v <= n) ? (i < v) : (i >= v - n);
    return b;
  endfunction

  // -1 if the pattern is not a JC state.
  function automatic int jc_dec(input int n, input logic [15:0] b);
    for (int v = 0; v < 2 * n; v++) if (jc_enc(n, v) == b) return v;
    return -1;
  endfunction

  function automatic int gcd_ref(input int a, input int b);
    while (b != 0) begin
      int t;
      t = a % b;
      a = b;
      b = t;
    end
    return a;
  endfunction

  // Commands for one masked update by k in direction dec of an n-bit digit:
  // one save of the MSB, a save for each further rotation cycle longer than
  // one bit, seven per bit, and a six- or ten-command flag program.
  function automatic int cmd_count(input int n, input int k, input bit dec);
    int r, sh, g, len, saves;
    r   = dec ? 2 * n - k : k;
    sh  = (r <= n) ? r % n : r - n;
    g   = gcd_ref(n, sh);
    len = n / g;
    saves = 1 + ((len > 1) ? g - 1 : 0);
    return saves + 7 * n + ((k > n) ? 10 : 6);
  endfunction

endpackage
