// tb_spz_fp32_add: self-checking testbench for the single-precision adder.
//
// Operands are random normal numbers (exponents kept away from overflow and
// underflow), with equal or nearby exponents favoured so that carries,
// cancellations and rounding ties all occur. The reference widens both
// operands to double precision, where their sum is exact as long as the
// exponents differ by at most 29, and rounds that sum back to single
// precision (nearest, ties to even) by bit manipulation of the double. For
// larger exponent differences the result must be the larger operand. Zeros,
// infinities and NaNs are checked separately. The adder is combinational,
// so there is no latency to check.
`timescale 1ns/1ps
module tb_spz_fp32_add;
  int checks = 0, failures = 0;
  logic [31:0] a, b, y;

  spz_fp32_add dut (.a, .b, .y);

  initial begin : watchdog
    #10_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  function automatic void chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endfunction

  function automatic real to_real(logic [31:0] f);
    logic [63:0] dbits;
    if (f[30:23] == 8'd0) return 0.0;
    dbits = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(dbits);
  endfunction

  function automatic logic [31:0] to_single(real r);
    logic [63:0] dbits; int e; logic [23:0] m; logic up;
    if (r == 0.0) return 32'd0;
    dbits = $realtobits(r);
    e  = int'(dbits[62:52]) - 1023 + 127;
    m  = {1'b0, dbits[51:29]};
    up = dbits[28] && (dbits[27:0] != '0 || dbits[29]);
    m  = m + 24'(up);
    if (m[23]) begin m = '0; e++; end
    return {dbits[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] rnd_float(int emin, int emax);
    return {1'($urandom_range(1, 0)), 8'($urandom_range(emax, emin)), 23'($urandom)};
  endfunction

  initial begin
    #1;
    for (int it = 0; it < 200000; it++) begin
      int da, db, diff;
      a = rnd_float(40, 200);
      b = a;
      case (it % 4)
        0: b = rnd_float(40, 200);
        1: b[30:23] = 8'(int'(a[30:23]) - $urandom_range(2, 0));          // near exponents
        2: begin b[31] = ~a[31]; b[22:0] = a[22:0] ^ 23'($urandom_range(255, 0)); end // cancellation
        default: begin b[22:0] = 23'($urandom); b[2:0] = a[2:0]; end
      endcase
      #1;
      da = a[30:23]; db = b[30:23];
      diff = da > db ? da - db : db - da;
      if (diff <= 29)
        chk(y == to_single(to_real(a) + to_real(b)),
            $sformatf("%h + %h = %h, exp %h", a, b, y, to_single(to_real(a) + to_real(b))));
      else
        chk(y == (da > db ? a : b), $sformatf("%h + %h = %h (far apart)", a, b, y));
    end
    // special values
    a = 32'h3f80_0000; b = 32'hbf80_0000; #1; chk(y == 32'h0, "1 - 1 = +0");
    a = 32'h4040_0000; b = 32'h0000_0000; #1; chk(y == a, "x + 0 = x");
    a = 32'h0000_0000; b = 32'hc0a0_0000; #1; chk(y == b, "0 + x = x");
    a = 32'h7f80_0000; b = 32'h3f80_0000; #1; chk(y == 32'h7f80_0000, "inf + 1");
    a = 32'h7f80_0000; b = 32'hff80_0000; #1; chk(y == 32'h7fc0_0000, "inf - inf = NaN");
    a = 32'h7fc1_2345; b = 32'h3f80_0000; #1; chk(y == 32'h7fc0_0000, "NaN + 1");
    a = 32'h7f7f_ffff; b = 32'h7f7f_ffff; #1; chk(y == 32'h7f80_0000, "overflow to inf");
    a = 32'h0080_0001; b = 32'h8080_0000; #1; chk(y == 32'h0, "underflow flushes");
    a = 32'h4b80_0000; b = 32'h3f80_0000; #1; chk(y == 32'h4b80_0000, "tie to even down (2^24 + 1)");
    a = 32'h4b80_0001; b = 32'h3f80_0000; #1; chk(y == 32'h4b80_0002, "tie to even up");
    a = 32'h40a0_0000; b = 32'h4120_0000; #1; chk(y == 32'h4170_0000, "5 + 10 = 15");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
