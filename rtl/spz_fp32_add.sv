// spz_fp32_add: single-precision floating-point adder used by the PEs to add
// the values of combined keys.
//
// Combinational. y = a + b in IEEE-754 binary32 with round-to-nearest-even.
// How: the operand with the larger magnitude is found, the other one's
// significand is shifted right to the same exponent (keeping guard, round and
// sticky bits), the significands are added or subtracted, the result is
// normalised (one right shift after a carry, or a left shift by the number
// of leading zeros after a cancellation), then rounded.
// Subnormal inputs are read as zero and results below the smallest normal
// number become zero (flush to zero). An exact zero sum is +0. Infinities
// add as usual; inf - inf and any NaN input give the quiet NaN 0x7fc00000.
// The PE reuses the adder of its multiply-accumulate unit for this in the
// design this follows; that unit itself belongs to the dense matrix engine
// and is not built here, so this stand-alone adder takes its place. The
// flush-to-zero and NaN choices are this design's own.
module spz_fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ma, mb, ml, ms;
  logic        a_nan, b_nan, a_inf, b_inf, sub;
  logic [7:0]  d;
  logic [26:0] ml_x, ms_x;     // significand, guard, round, sticky
  logic [27:0] sum;
  logic [4:0]  lz;
  logic [26:0] norm;
  logic [9:0]  e_n;            // signed working exponent
  logic [24:0] rnd;
  logic        up, sticky;

  always_comb begin
    sa = a[31]; ea = a[30:23]; ma = {ea != 8'd0, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = {eb != 8'd0, b[22:0]};
    if (ea == 8'd0) ma = '0;                       // flush subnormals
    if (eb == 8'd0) mb = '0;
    a_nan = ea == 8'hff && a[22:0] != '0;
    b_nan = eb == 8'hff && b[22:0] != '0;
    a_inf = ea == 8'hff && a[22:0] == '0;
    b_inf = eb == 8'hff && b[22:0] == '0;

    // larger magnitude first
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    sub = sl != ss;
    d   = el - es;

    // align the smaller significand; everything shifted past the round bit
    // is folded into the sticky bit
    ml_x   = {ml, 3'b000};
    ms_x   = {ms, 3'b000};
    sticky = 1'b0;
    for (int i = 0; i < 27; i++)
      if (i < int'(d) && ms_x[i]) sticky = 1'b1;
    if (d >= 8'd27) ms_x = {26'd0, ms != '0};
    else begin
      ms_x    = ms_x >> d;
      ms_x[0] = ms_x[0] | sticky;
    end

    sum = sub ? {1'b0, ml_x} - {1'b0, ms_x} : {1'b0, ml_x} + {1'b0, ms_x};

    // normalise to a leading one in bit 26
    e_n = {2'b00, el};
    lz  = '0;
    if (sum[27]) begin
      norm = sum[27:1];
      norm[0] = norm[0] | sum[0];
      e_n = e_n + 10'd1;
    end else begin
      // leading zeros above bit 26 (the highest set bit wins)
      lz = 5'd27;
      for (int i = 0; i <= 26; i++)
        if (sum[i]) lz = 5'(26 - i);
      norm = sum[26:0] << lz;
      e_n  = e_n - {5'd0, lz};
    end

    // round to nearest, ties to even
    up  = norm[2] && (norm[1] || norm[0] || norm[3]);
    rnd = {1'b0, norm[26:3]} + {24'd0, up};
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e_n = e_n + 10'd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && sa != sb)) y = QNAN;
    else if (a_inf)                                     y = {sa, 8'hff, 23'd0};
    else if (b_inf)                                     y = {sb, 8'hff, 23'd0};
    else if (sum == '0)                                 y = 32'd0;
    else if ($signed(e_n) <= 0)                         y = {sl, 31'd0};
    else if ($signed(e_n) >= 10'sd255)                  y = {sl, 8'hff, 23'd0};
    else                                                y = {sl, e_n[7:0], rnd[22:0]};
  end

endmodule
