// tb_fp_ref_pkg: reference model for IEEE 754 single precision addition used
// by the testbenches, and a generator of interesting operands.
//
// The reference does not share the hardware's algorithm: it places both
// operands on a common integer grid (value = M * 2^(emin-150)) in a 320-bit
// integer, adds them exactly, and rounds the exact sum once, to nearest with
// ties to even, onto the quantum 2^max(E-23,-149) of the result's binade E.
package tb_fp_ref_pkg;

  typedef logic signed [319:0] big_t;

  function automatic logic is_nan(logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] != 0);
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b, logic sub);
    logic sa, sb;
    int   ea, eb, emin, k, q, d;
    big_t ma, mb, s, m, n, rem, half;
    sa = a[31];
    sb = b[31] ^ sub;
    if (is_nan(a) || is_nan(b)) return 32'h7FC00000;
    if (a[30:23] == 8'hFF && b[30:23] == 8'hFF)
      return (sa != sb) ? 32'h7FC00000 : {sa, 8'hFF, 23'd0};
    if (a[30:23] == 8'hFF) return {sa, 8'hFF, 23'd0};
    if (b[30:23] == 8'hFF) return {sb, 8'hFF, 23'd0};
    ea = (a[30:23] == 0) ? 1 : int'(a[30:23]);
    eb = (b[30:23] == 0) ? 1 : int'(b[30:23]);
    ma = big_t'({a[30:23] != 0, a[22:0]});
    mb = big_t'({b[30:23] != 0, b[22:0]});
    emin = (ea < eb) ? ea : eb;
    ma = ma <<< (ea - emin);
    mb = mb <<< (eb - emin);
    s  = (sa ? -ma : ma) + (sb ? -mb : mb);
    if (s == 0) return {sa & sb, 31'd0};
    m = (s < 0) ? -s : s;
    k = 0;
    for (int i = 0; i < 320; i++) if (m[i]) k = i;
    // binade exponent of the exact value, and quantum exponent
    q = k + emin - 150 - 23;
    if (q < -149) q = -149;
    d = q - (emin - 150);
    if (d <= 0) n = m <<< (-d);
    else begin
      n    = m >>> d;
      rem  = m - (n <<< d);
      half = big_t'(1) <<< (d - 1);
      if (rem > half || (rem == half && n[0])) n = n + 1;
    end
    if (n >= (big_t'(1) <<< 24)) begin
      n = n >>> 1;
      q = q + 1;
    end
    if (n < (big_t'(1) <<< 23)) return {s < 0, 8'd0, n[22:0]};
    if (q + 150 >= 255) return {s < 0, 8'hFF, 23'd0};
    return {s < 0, 8'(q + 150), n[22:0]};
  endfunction

  // Random operand with a bias towards edge cases.
  function automatic logic [31:0] rand_fp();
    logic [31:0] x;
    int sel;
    x = $urandom;
    sel = $urandom_range(0, 9);
    case (sel)
      0: x[30:23] = 8'd0;                              // zero / subnormal
      1: begin                                         // inf / NaN
        x[30:23] = 8'hFF;
        if (x[0]) x[22:0] = '0;
      end
      2: x[30:23] = 8'hFE;                             // near overflow
      3: x[30:23] = 8'd1;                              // smallest normals
      4: x[22:0]  = 23'h7FFFFF;                        // all-ones fraction
      default: x[30:23] = 8'($urandom_range(100, 154));
    endcase
    if ($urandom_range(0, 15) == 0) x[30:0] = '0;
    return x;
  endfunction

  // Second operand close to the first, to exercise cancellation.
  function automatic logic [31:0] near_fp(logic [31:0] a);
    logic [31:0] x;
    x = a;
    x[31] = $urandom_range(0, 1);
    if (x[30:23] != 8'hFF) x[30:0] = x[30:0] + 31'($signed($urandom_range(0, 64)) - 32);
    return x;
  endfunction

  function automatic logic same_result(logic [31:0] got, logic [31:0] exp);
    if (is_nan(exp)) return is_nan(got);
    return got == exp;
  endfunction

endpackage
