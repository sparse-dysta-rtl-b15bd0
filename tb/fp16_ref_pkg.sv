// fp16_ref_pkg: reference FP16 arithmetic for the testbenches.
//
// Works on `real` numbers, independently of the bit-level RTL: an FP16 value
// is decoded to a real, the exact result of an operation is formed in double
// precision (exact for one FP16 sum or product) and then rounded back to FP16
// to nearest, ties to even, with subnormals flushed to zero and overflow
// going to infinity, the conventions the RTL follows.
package fp16_ref_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(real x);
    logic s;
    real  ax, sc, fl, fr;
    int   e;
    int   mi;
    s  = (x < 0.0);
    ax = s ? -x : x;
    if (ax == 0.0) return 16'h0000;
    e = 0;
    while (ax >= 2.0 ** (e + 1)) e++;
    while (ax < 2.0 ** e) e--;
    sc = ax / (2.0 ** e) * 1024.0;   // in [1024, 2048)
    fl = $floor(sc);
    fr = sc - fl;
    mi = int'(fl);
    if (fr > 0.5 || (fr == 0.5 && (mi % 2) == 1)) mi++;
    if (mi == 2048) begin
      mi = 1024;
      e++;
    end
    if (e + 15 >= 31) return {s, 15'h7C00};
    if (e + 15 <= 0)  return {s, 15'h0000};
    return {s, 5'(e + 15), 10'(mi - 1024)};
  endfunction

  // A random normal FP16 number with exponent field in [elo, ehi].
  function automatic logic [15:0] rand_fp16(int elo, int ehi);
    int e;
    e = elo + int'($urandom_range(ehi - elo));
    return {1'($urandom), 5'(e), 10'($urandom)};
  endfunction

endpackage
