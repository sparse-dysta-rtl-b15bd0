// dysta_ref_pkg: reference model of the scheduler arithmetic for the
// testbenches. Each FP16 operation of the compute unit is reproduced with
// real arithmetic and rounded to FP16 separately, in the same order:
//   coef  = r(r(zeros * recip_shape) * recip_avg_sparsity)
//   score = r(r(lat * coef) + r(beta * r(r(ddl - t) + r(r(t - exe) * rni))))
package dysta_ref_pkg;
  import fp16_ref_pkg::*;

  function automatic logic [15:0] r_mul(logic [15:0] a, logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) * fp16_to_real(b));
  endfunction

  function automatic logic [15:0] r_add(logic [15:0] a, logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) + fp16_to_real(b));
  endfunction

  function automatic logic [15:0] r_sub(logic [15:0] a, logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) - fp16_to_real(b));
  endfunction

  function automatic logic [15:0] ref_coef(logic [15:0] zeros, logic [15:0] rshape,
                                           logic [15:0] rsp);
    return r_mul(r_mul(zeros, rshape), rsp);
  endfunction

  function automatic logic [15:0] ref_score(logic [15:0] t, logic [15:0] ddl,
                                            logic [15:0] exe, logic [15:0] rni,
                                            logic [15:0] beta, logic [15:0] lat,
                                            logic [15:0] coef);
    logic [15:0] pen, sp;
    pen = r_mul(r_sub(t, exe), rni);
    sp  = r_add(r_sub(ddl, t), pen);
    return r_add(r_mul(lat, coef), r_mul(beta, sp));
  endfunction

  // Same zero-equality convention as the RTL (-0 and +0 are both zero).
  function automatic logic fp16_same(logic [15:0] a, logic [15:0] b);
    return (a == b) || (a[14:0] == 15'd0 && b[14:0] == 15'd0);
  endfunction

  // value of an unsigned integer times 2^-scale, truncated to FP16
  function automatic logic [15:0] ref_uint_to_fp16(longint unsigned v, int scale);
    real x;
    int  e;
    int  m;
    if (v == 0) return 16'h0000;
    x = real'(v) / (2.0 ** scale);
    e = 0;
    while (x >= 2.0 ** (e + 1)) e++;
    while (x < 2.0 ** e) e--;
    if (e + 15 >= 31) return 16'h7C00;
    if (e + 15 <= 0) return 16'h0000;
    m = int'($floor(x / (2.0 ** e) * 1024.0)) - 1024;
    return {1'b0, 5'(e + 15), 10'(m)};
  endfunction
endpackage
