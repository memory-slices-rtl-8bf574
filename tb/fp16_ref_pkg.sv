// fp16_ref_pkg: reference binary16 arithmetic for the testbenches.
//
// Works through the simulator's 64-bit 'real', which holds every binary16
// value, every product of two of them and every sum of two of them exactly;
// the only rounding is the final conversion back to binary16 (round to nearest
// even, results below 2^-14 flushed to zero, overflow to infinity), which is
// the number format the RTL implements.
package fp16_ref_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    real  x, m, scaled, rem;
    int   e;
    int   f;
    s = (r < 0.0);
    x = s ? -r : r;
    if (x == 0.0) return 16'h0000;
    e = 0;
    m = x;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    scaled = (m - 1.0) * 1024.0;
    f      = int'($floor(scaled));
    rem    = scaled - real'(f);
    if (rem > 0.5 || (rem == 0.5 && (f % 2) == 1)) f++;
    if (f == 1024) begin f = 0; e++; end
    if (e + 15 >= 31) return {s, 15'h7c00};
    if (e + 15 <= 0)  return {s, 15'h0000};
    return {s, 5'(e + 15), 10'(f)};
  endfunction

  function automatic logic [15:0] ref_mul(input logic [15:0] a, input logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) * fp16_to_real(b));
  endfunction

  function automatic logic [15:0] ref_add(input logic [15:0] a, input logic [15:0] b);
    real r;
    r = fp16_to_real(a) + fp16_to_real(b);
    if (r == 0.0) begin
      if (a[14:10] == 0 && b[14:10] == 0) return {a[15] & b[15], 15'd0};
      if (a[14:10] == 0) return b;
      if (b[14:10] == 0) return a;
      return 16'h0000;
    end
    return real_to_fp16(r);
  endfunction

  // Sum of eight values in the order of a three-level binary tree.
  function automatic logic [15:0] ref_tree8(input logic [7:0][15:0] v);
    logic [15:0] l1 [4];
    logic [15:0] l2 [2];
    for (int i = 0; i < 4; i++) l1[i] = ref_add(v[2*i], v[2*i+1]);
    for (int i = 0; i < 2; i++) l2[i] = ref_add(l1[2*i], l1[2*i+1]);
    return ref_add(l2[0], l2[1]);
  endfunction

  // A random finite normal binary16 with magnitude in [2^(lo-15), 2^(hi-14)).
  function automatic logic [15:0] rand_fp16(input int lo = 12, input int hi = 17);
    logic [15:0] h;
    h[15]    = 1'($urandom_range(0, 1));
    h[14:10] = 5'($urandom_range(lo, hi));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage
