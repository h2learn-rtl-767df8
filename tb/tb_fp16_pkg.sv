// tb_fp16_pkg - reference conversions between real numbers and FP16 for the testbenches.
//
// r2h rounds a real to the nearest FP16 (ties to even), flushing results below the
// normal range to signed zero and saturating above it to infinity, which is the
// convention of the RTL datapath. Because the sum or product of two FP16 values is
// exact in a double, r2h(h2r(a) + h2r(b)) is the correctly rounded FP16 sum and can be
// used as an independent reference for the RTL adders and multipliers.
package tb_fp16_pkg;

  function automatic real h2r(input logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(input real x);
    logic s;
    real  m, fr, rem;
    int   e, fl;
    s = (x < 0.0);
    m = s ? -x : x;
    if (m == 0.0) return {s, 15'd0};
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0) begin m = m * 2.0; e--; end
    fr  = (m - 1.0) * 1024.0;
    fl  = int'($floor(fr));
    rem = fr - real'(fl);
    if (rem > 0.5 || (rem == 0.5 && (fl % 2) == 1)) fl++;
    if (fl == 1024) begin fl = 0; e++; end
    if (e + 15 >= 31) return {s, 5'd31, 10'd0};
    if (e + 15 <= 0) return {s, 15'd0};
    return {s, 5'(e + 15), 10'(fl)};
  endfunction

  // A random FP16 value of the form k/4 with |k| < 64: sums of a few of them stay exact.
  function automatic logic [15:0] small_val();
    int k;
    k = int'($urandom_range(0, 126)) - 63;
    return r2h(real'(k) / 4.0);
  endfunction

endpackage
