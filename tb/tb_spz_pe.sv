// tb_spz_pe: self-checking testbench for one processing element.
//
// Two PEs are driven with the same random stimulus: an ordinary PE and a
// diagonal one. Each cycle a key micro-op (sort or merge, pass 0 or 1) is
// applied to a random stream row; the registered outputs are checked one cycle
// later against the routing rule (larger key east, smaller key south, invalid
// keys count as larger, equal keys combine with the west copy marked as a
// duplicate, diagonal PEs switch in the sorting pass 0 and in every pass 1)
// and against the merge-bit rules. After every key micro-op the matching
// value micro-op is replayed on the same stream row and pass, and its outputs
// must follow the recorded routing (switch, forward, or add into the south
// output; values are single-precision numbers holding integers below 2^23,
// so their sums are exact). The check on the cycle count is the one-cycle PE latency.
`timescale 1ns/1ps
module tb_spz_pe;
  import spz_pkg::*;
  localparam int N = 16;
  localparam int W = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tok_t         w_tok, n_tok;
  logic [W-1:0] w_data, n_data;
  kctl_t        w_ctl, n_ctl;
  tok_t         e_tok [2], s_tok [2];
  logic [W-1:0] e_data [2], s_data [2];
  kctl_t        e_ctl [2], s_ctl [2];

  spz_pe #(.N(N), .W(W), .DIAG(1'b0)) u_pe (
    .clk, .rst_n, .w_tok, .w_data, .w_ctl, .n_tok, .n_data, .n_ctl,
    .e_tok(e_tok[0]), .e_data(e_data[0]), .e_ctl(e_ctl[0]),
    .s_tok(s_tok[0]), .s_data(s_data[0]), .s_ctl(s_ctl[0]));
  spz_pe #(.N(N), .W(W), .DIAG(1'b1)) u_pd (
    .clk, .rst_n, .w_tok, .w_data, .w_ctl, .n_tok, .n_data, .n_ctl,
    .e_tok(e_tok[1]), .e_data(e_data[1]), .e_ctl(e_ctl[1]),
    .s_tok(s_tok[1]), .s_data(s_data[1]), .s_ctl(s_ctl[1]));

  initial begin : watchdog
    #2_000_000;
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

  // values are single-precision numbers; small integers are exact in them
  function automatic logic [31:0] i2f(int unsigned v);
    int p;
    if (v == 0) return 32'd0;
    p = 0;
    for (int i = 0; i < 24; i++) if (v[i]) p = i;
    return {1'b0, 8'(127 + p), 23'((v << (23 - p)) & 32'h7f_ffff)};
  endfunction
  function automatic int unsigned f2i(logic [31:0] f);
    int p;
    if (f[30:23] == 8'd0) return 0;
    p = int'(f[30:23]) - 127;
    return {8'd0, 1'b1, f[22:0]} >> (23 - p);
  endfunction

  // 0 forward, 1 switch, 2 combine
  int route [2][2][N];

  task automatic drive(tok_t t, logic [W-1:0] wd, logic [W-1:0] nd, kctl_t wc, kctl_t nc);
    w_tok = t; n_tok = t; w_data = wd; n_data = nd; w_ctl = wc; n_ctl = nc;
    @(negedge clk);
  endtask

  task automatic key_step(int d, tok_t t, logic [W-1:0] wd, logic [W-1:0] nd, kctl_t wc, kctl_t nc);
    bit hard; int r; kctl_t xw, xn;
    hard = (d == 1) && (t.pass || t.op == AOP_SORTK);
    if (hard)              r = 1;
    else if (wc.dup)       r = 0;
    else if (nc.dup)       r = 1;
    else if (wd == nd)     r = 2;
    else if (wd > nd)      r = 0;
    else                   r = 1;
    route[d][t.pass][t.idx] = r;
    xw = wc; xn = nc;
    if (t.op == AOP_ZIPK && !t.pass && !hard && !wc.dup && !nc.dup) begin
      if (wc.src != nc.src) begin
        xw.merge = wc.merge | (wd <= nd);
        xn.merge = nc.merge | (nd <= wd);
      end else if (wd < nd) xw.merge = wc.merge | nc.merge;
      else                  xn.merge = nc.merge | wc.merge;
    end
    chk(e_tok[d] == t && s_tok[d] == t, "token passes in one cycle");
    case (r)
      0: chk(e_data[d] == wd && s_data[d] == nd && e_ctl[d] == xw && s_ctl[d] == xn,
             $sformatf("pe%0d forward w=%0d n=%0d", d, wd, nd));
      1: chk(e_data[d] == nd && s_data[d] == wd && e_ctl[d] == xn && s_ctl[d] == xw,
             $sformatf("pe%0d switch w=%0d n=%0d got e=%0d s=%0d", d, wd, nd, e_data[d], s_data[d]));
      default: begin
        xw.dup = 1'b1;
        chk(e_data[d] == wd && s_data[d] == nd && e_ctl[d] == xw && s_ctl[d] == xn,
            $sformatf("pe%0d combine w=%0d", d, wd));
      end
    endcase
    // ordinary PE on two valid keys: the larger always leaves east
    if (d == 0 && !wc.dup && !nc.dup && wd != nd)
      chk(e_data[0] == (wd > nd ? wd : nd) && s_data[0] == (wd > nd ? nd : wd), "max east, min south");
  endtask

  task automatic val_step(int d, tok_t t, logic [W-1:0] wd, logic [W-1:0] nd, kctl_t wc, kctl_t nc);
    kctl_t xw;
    case (route[d][t.pass][t.idx])
      0: chk(e_data[d] == wd && s_data[d] == nd, $sformatf("pe%0d value forward", d));
      1: chk(e_data[d] == nd && s_data[d] == wd, $sformatf("pe%0d value switch", d));
      default: begin
        xw = wc; xw.dup = 1'b1;
        chk(s_data[d] == i2f(f2i(wd) + f2i(nd)) && e_data[d] == '0 && e_ctl[d] == xw,
            $sformatf("pe%0d value add %0d+%0d got %h", d, f2i(wd), f2i(nd), s_data[d]));
      end
    endcase
  endtask

  initial begin
    tok_t t, v; logic [W-1:0] wd, nd; kctl_t wc, nc;
    w_tok = '0; n_tok = '0; w_data = '0; n_data = '0; w_ctl = '0; n_ctl = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(e_tok[0] == '0 && s_tok[1] == '0, "idle after reset");
    for (int it = 0; it < 20000; it++) begin
      t = '0; t.vld = 1; t.pass = $urandom_range(1, 0);
      t.idx = IDX_W'($urandom_range(N - 1, 0));
      t.op  = $urandom_range(1, 0) ? AOP_SORTK : AOP_ZIPK;
      wd = $urandom_range(7, 0); nd = $urandom_range(7, 0);
      if (it % 5 == 0) begin wd = $urandom; nd = $urandom; end
      wc = kctl_t'($urandom_range(7, 0)); nc = kctl_t'($urandom_range(7, 0));
      drive(t, wd, nd, wc, nc);
      key_step(0, t, wd, nd, wc, nc);
      key_step(1, t, wd, nd, wc, nc);
      // the value micro-op for the same stream row and pass
      v = t; v.op = (t.op == AOP_SORTK) ? AOP_SORTV : AOP_ZIPV;
      wd = i2f($urandom_range(1 << 22, 0)); nd = i2f($urandom_range(1 << 22, 0)); wc = kctl_t'($urandom_range(7, 0)); nc = kctl_t'($urandom_range(7, 0));
      drive(v, wd, nd, wc, nc);
      val_step(0, v, wd, nd, wc, nc);
      val_step(1, v, wd, nd, wc, nc);
      // an idle cycle keeps the last data but passes an empty token
      if (it % 97 == 0) begin
        drive('0, $urandom, $urandom, '0, '0);
        chk(!e_tok[0].vld && !s_tok[1].vld, "bubble passes");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
