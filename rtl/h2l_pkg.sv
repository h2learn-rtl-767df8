// h2l_pkg - types, tile constants and FP16 arithmetic shared by the H2Learn engines.
//
// Every real-valued operand in the accelerator (weights, potentials, partial sums,
// gradients) is IEEE 754 binary16 ("FP16"); spikes and masks are single bits.
// The functions below are the one FP16 datapath definition used by every adder,
// multiplier and comparator in the design, so all engines round identically.
//
// Arithmetic conventions (the format is the paper's, the details are this design's):
//   * round to nearest, ties to even;
//   * subnormal inputs are read as zero and subnormal results flush to signed zero;
//   * exponent overflow gives a signed infinity; an infinity or NaN input is passed on.
// Tiles are 8x8 neurons (one byte of spikes per tile row), kernels 3x3.
//
// Lint note: fp16_is_zero looks only at the exponent field (flush-to-zero format), so
// the sign and mantissa bits of its argument are unused by design.
package h2l_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;

  localparam int TILE_H = 8;               // tile height (rows)
  localparam int TILE_W = 8;               // tile width (one byte of spikes)
  localparam int TILE_N = TILE_H * TILE_W; // neurons per tile

  // FP16 addition, round to nearest even. Written with a single exit and a plain
  // leading-zero count so that it maps to one flat block of logic per adder.
  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    logic        swap, sub, az, bz;
    fp16_t       x, y;
    logic [4:0]  d5;
    logic [13:0] mx, my, mask;
    logic [14:0] sum;
    logic [3:0]  lz;
    logic [5:0]  er;
    logic [11:0] mr;
    fp16_t       res;
    swap = (b[14:0] > a[14:0]);
    x    = swap ? b : a;                        // larger magnitude
    y    = swap ? a : b;
    az   = (x[14:10] == 5'd0);
    bz   = (y[14:10] == 5'd0);
    sub  = x[15] ^ y[15];
    d5   = x[14:10] - y[14:10];
    mx   = {1'b1, x[9:0], 3'b000};
    my   = {1'b1, y[9:0], 3'b000};
    mask = (d5 >= 5'd14) ? 14'h3FFF : ((14'd1 << d5) - 14'd1);
    my   = (d5 >= 5'd14) ? 14'd1 : ((my >> d5) | {13'd0, |(my & mask)});
    sum  = sub ? ({1'b0, mx} - {1'b0, my}) : ({1'b0, mx} + {1'b0, my});
    // leading zeros below bit 14 (bit 14 set means a carry out)
    lz = 4'd14;
    for (int i = 0; i <= 13; i++)
      if (sum[i]) lz = 4'(13 - i);
    if (sum[14]) begin
      sum = {1'b0, sum[14:2], sum[1] | sum[0]};
      er  = {1'b0, x[14:10]} + 6'd1;
    end else begin
      sum = sum << lz;
      er  = {1'b0, x[14:10]} - {2'b00, lz};
    end
    mr = {1'b0, sum[13:3]} + {11'd0, sum[2] & (sum[1] | sum[0] | sum[3])};
    if (mr[11]) begin
      mr = mr >> 1;
      er = er + 6'd1;
    end
    res = {x[15], er[4:0], mr[9:0]};
    if (er[5] || er == 6'd0) res = {x[15], 15'd0};          // underflow: flush
    else if (er >= 6'd31)    res = {x[15], 5'd31, 10'd0};   // overflow: infinity
    if (sub && sum == 15'd0) res = FP16_ZERO;               // exact cancellation
    if (bz)                  res = az ? {x[15] & y[15], 15'd0} : x;
    if (x[14:10] == 5'd31)   res = x;
    else if (y[14:10] == 5'd31) res = y;
    return res;
  endfunction

  // FP16 multiplication, round to nearest even, single exit.
  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    logic        sr;
    logic [21:0] p;
    logic [10:0] mant;
    logic        g, st;
    logic [11:0] mr;
    logic [6:0]  er;   // biased exponent, two's complement
    fp16_t       res;
    sr = a[15] ^ b[15];
    p  = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    er = {2'b00, a[14:10]} + {2'b00, b[14:10]} - 7'd15 + {6'd0, p[21]};
    if (p[21]) begin
      mant = p[21:11]; g = p[10]; st = |p[9:0];
    end else begin
      mant = p[20:10]; g = p[9]; st = |p[8:0];
    end
    mr = {1'b0, mant} + {11'd0, g & (st | mant[0])};
    if (mr[11]) begin
      mr = mr >> 1;
      er = er + 7'd1;
    end
    res = {sr, er[4:0], mr[9:0]};
    if (er[6] || er == 7'd0) res = {sr, 15'd0};
    else if (er >= 7'd31)    res = {sr, 5'd31, 10'd0};
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) res = {sr, 15'd0};
    if (a[14:10] == 5'd31 || b[14:10] == 5'd31) res = {sr, 5'd31, 10'd0};
    return res;
  endfunction

  function automatic fp16_t fp16_neg(input fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // Ordering key: a signed integer that orders FP16 values (+0 and -0 equal).
  function automatic logic signed [16:0] fp16_key(input fp16_t a);
    return a[15] ? -$signed({2'b00, a[14:0]}) : $signed({2'b00, a[14:0]});
  endfunction

  function automatic logic fp16_lt(input fp16_t a, input fp16_t b);
    return fp16_key(a) < fp16_key(b);
  endfunction

  function automatic logic fp16_ge(input fp16_t a, input fp16_t b);
    return fp16_key(a) >= fp16_key(b);
  endfunction

  function automatic logic fp16_is_zero(input fp16_t a);
    return a[14:10] == 5'd0;
  endfunction

endpackage
