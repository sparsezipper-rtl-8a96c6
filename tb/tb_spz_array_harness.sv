// tb_spz_array_harness: drives one spz_systolic_array with key and value
// micro-ops and checks every result against a reference model.
//
// Each test loads N stream rows: chunk A enters from the west (element e on
// row N-1-e, so the chunk reads bottom to top) and chunk B from the north
// (element e on column e). The key instruction's rows reach PE(0,0) on
// cycles 1..N, the value instruction's rows on cycles 2N+2..3N+1, the
// earliest the schedule allows. Pass-1 outputs must leave the east edge of
// row r at t_i+r+2N and the south edge of column c at t_i+c+2N.
// Reference: sort = sorted unique keys of each chunk with the values of equal
// keys added; merge = the unique keys of both chunks not above the smaller of
// the two chunk maxima, in order, split between the east part (first) and the
// south part, each part packed to the front.
// With FIG set, the first two tests are the two 3x3 examples of the paper
// (mssortk: west 5,2,4 top to bottom, north 5,8,5; mszipk: west 9,5,2,
// north 3,5,8), checked cell by cell including the counters.
module tb_spz_array_harness
  import spz_pkg::*;
#(
  parameter int N     = 3,
  parameter int NRAND = 40,
  parameter bit FIG   = 1'b1,
  parameter int SEED  = 1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int W = 32;

  logic rst_n;
  tok_t  [N-1:0]        west_tok, north_tok, east_tok, south_tok;
  logic  [N-1:0][W-1:0] west_data, north_data, east_data, south_data;
  kctl_t [N-1:0]        west_ctl, north_ctl, east_ctl, south_ctl;

  spz_systolic_array #(.N(N), .W(W)) dut (.*);

  // stimulus of one test
  int unsigned ka [N][N], kb [N][N], va [N][N], vb [N][N];
  int          la [N], lb [N];
  bit          zip;
  // observed
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

  int unsigned oek [N][N], osk [N][N], oev [N][N], osv [N][N];
  bit          oed [N][N], osd [N][N];
  int          wic [N], nic [N];
  int          cyc;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL N=%0d: %s", N, what);
    end
  endtask

  // drive lanes for cycle t (called before posedge t)
  task automatic drive(input int t);
    for (int k = 0; k < N; k++) begin
      int i;
      west_tok[k] = '0; north_tok[k] = '0;
      west_data[k] = '0; north_data[k] = '0;
      west_ctl[k] = '0; north_ctl[k] = '0;
      for (int ph = 0; ph < 2; ph++) begin
        i = t - 1 - k - ph * (2 * N + 1);
        if (i >= 0 && i < N) begin
          int e;
          aop_e op;
          e  = N - 1 - k;
          op = ph == 0 ? (zip ? AOP_ZIPK : AOP_SORTK) : (zip ? AOP_ZIPV : AOP_SORTV);
          west_tok[k]  = '{vld: 1'b1, pass: 1'b0, idx: IDX_W'(i), op: op};
          north_tok[k] = west_tok[k];
          west_data[k]  = ph == 0 ? ka[i][e] : i2f(va[i][e]);
          north_data[k] = ph == 0 ? kb[i][k] : i2f(vb[i][k]);
          if (ph == 0) begin
            west_ctl[k]  = '{src: 1'b0, dup: e >= la[i], merge: !zip && e < la[i]};
            north_ctl[k] = '{src: 1'b1, dup: k >= lb[i], merge: !zip && k < lb[i]};
          end
        end
      end
    end
  endtask

  // sample edges after posedge t
  task automatic sample(input int t);
    for (int k = 0; k < N; k++) begin
      if (east_tok[k].vld) begin
        int i; i = int'(east_tok[k].idx);
        if (is_key_op(east_tok[k].op) && !east_tok[k].pass && east_ctl[k].merge)
          if (east_ctl[k].src) nic[i]++; else wic[i]++;
        if (east_tok[k].pass) begin
          chk(t == 1 + i + k + 2 * N + (is_key_op(east_tok[k].op) ? 0 : 2 * N + 1),
              $sformatf("east timing stream %0d lane %0d at %0d", i, k, t));
          if (is_key_op(east_tok[k].op)) begin
            oek[i][N-1-k] = east_data[k]; oed[i][N-1-k] = east_ctl[k].dup;
          end else oev[i][N-1-k] = f2i(east_data[k]);
        end
      end
      if (south_tok[k].vld) begin
        int i; i = int'(south_tok[k].idx);
        if (is_key_op(south_tok[k].op) && !south_tok[k].pass && south_ctl[k].merge)
          if (south_ctl[k].src) nic[i]++; else wic[i]++;
        if (south_tok[k].pass) begin
          chk(t == 1 + i + k + 2 * N + (is_key_op(south_tok[k].op) ? 0 : 2 * N + 1),
              $sformatf("south timing stream %0d lane %0d at %0d", i, k, t));
          if (is_key_op(south_tok[k].op)) begin
            osk[i][k] = south_data[k]; osd[i][k] = south_ctl[k].dup;
          end else osv[i][k] = f2i(south_data[k]);
        end
      end
    end
  endtask

  task automatic run_test();
    for (int i = 0; i < N; i++) begin wic[i] = 0; nic[i] = 0; end
    cyc = 0;
    for (int t = 1; t <= 6 * N + 3; t++) begin
      @(negedge clk); drive(t);
      @(posedge clk); #1 sample(t);
    end
    @(negedge clk); drive(0);
  endtask

  // reference + compare for stream i; returns E and S valid counts
  task automatic check_stream(input int i, output int eoc, output int soc);
    int unsigned acc [int unsigned];
    int unsigned keys [$], vals [$];
    int unsigned lim;
    int wexp, nexp, pos;
    bit have;
    eoc = 0; soc = 0;
    for (int e = 0; e < N; e++) if (!oed[i][e]) eoc++;
    for (int e = 0; e < N; e++) if (!osd[i][e]) soc++;
    // valid outputs packed to the front
    for (int e = 0; e < N; e++) begin
      chk(oed[i][e] == (e >= eoc), $sformatf("stream %0d east not packed at %0d", i, e));
      chk(osd[i][e] == (e >= soc), $sformatf("stream %0d south not packed at %0d", i, e));
    end
    if (!zip) begin
      acc.delete();
      for (int e = 0; e < la[i]; e++)
        acc[ka[i][e]] = (acc.exists(ka[i][e]) ? acc[ka[i][e]] : 0) + va[i][e];
      pos = 0;
      chk(eoc == acc.num(), $sformatf("stream %0d E_OC %0d exp %0d", i, eoc, acc.num()));
      foreach (acc[k]) begin
        if (pos < N) begin
          chk(oek[i][pos] == k && oev[i][pos] == acc[k],
              $sformatf("stream %0d east[%0d]=%0d/%0d exp %0d/%0d", i, pos, oek[i][pos], oev[i][pos], k, acc[k]));
        end
        pos++;
      end
      acc.delete();
      for (int e = 0; e < lb[i]; e++)
        acc[kb[i][e]] = (acc.exists(kb[i][e]) ? acc[kb[i][e]] : 0) + vb[i][e];
      pos = 0;
      chk(soc == acc.num(), $sformatf("stream %0d S_OC %0d exp %0d", i, soc, acc.num()));
      foreach (acc[k]) begin
        if (pos < N)
          chk(osk[i][pos] == k && osv[i][pos] == acc[k],
              $sformatf("stream %0d south[%0d]=%0d/%0d exp %0d/%0d", i, pos, osk[i][pos], osv[i][pos], k, acc[k]));
        pos++;
      end
      chk(wic[i] == la[i] && nic[i] == lb[i],
          $sformatf("stream %0d IC %0d/%0d exp %0d/%0d", i, wic[i], nic[i], la[i], lb[i]));
    end else begin
      have = la[i] > 0 && lb[i] > 0;
      lim  = 0;
      if (have) lim = ka[i][la[i]-1] < kb[i][lb[i]-1] ? ka[i][la[i]-1] : kb[i][lb[i]-1];
      acc.delete(); wexp = 0; nexp = 0;
      for (int e = 0; e < la[i]; e++) if (have && ka[i][e] <= lim) begin
        acc[ka[i][e]] = (acc.exists(ka[i][e]) ? acc[ka[i][e]] : 0) + va[i][e]; wexp++;
      end
      for (int e = 0; e < lb[i]; e++) if (have && kb[i][e] <= lim) begin
        acc[kb[i][e]] = (acc.exists(kb[i][e]) ? acc[kb[i][e]] : 0) + vb[i][e]; nexp++;
      end
      chk(wic[i] == wexp && nic[i] == nexp,
          $sformatf("stream %0d IC %0d/%0d exp %0d/%0d", i, wic[i], nic[i], wexp, nexp));
      chk(eoc + soc == acc.num(), $sformatf("stream %0d OC %0d+%0d exp %0d", i, eoc, soc, acc.num()));
      keys.delete(); vals.delete();
      for (int e = 0; e < eoc; e++) begin keys.push_back(oek[i][e]); vals.push_back(oev[i][e]); end
      for (int e = 0; e < soc; e++) begin keys.push_back(osk[i][e]); vals.push_back(osv[i][e]); end
      pos = 0;
      foreach (acc[k]) begin
        if (pos < keys.size())
          chk(keys[pos] == k && vals[pos] == acc[k],
              $sformatf("stream %0d merged[%0d]=%0d/%0d exp %0d/%0d", i, pos, keys[pos], vals[pos], k, acc[k]));
        pos++;
      end
    end
  endtask

  task automatic gen_random(input bit z);
    zip = z;
    for (int i = 0; i < N; i++) begin
      la[i] = $urandom_range(N, 0);
      lb[i] = $urandom_range(N, 0);
      if (i == 0) begin la[i] = N; lb[i] = N; end
      if (!z) begin
        for (int e = 0; e < N; e++) begin
          ka[i][e] = $urandom_range(2 * N, 0);
          kb[i][e] = $urandom_range(2 * N, 0);
          if (i == 1) begin ka[i][e] = 7; kb[i][e] = 7; end  // all duplicates
        end
      end else begin
        int unsigned k;
        k = $urandom_range(2, 0);
        for (int e = 0; e < N; e++) begin k += $urandom_range(3, 1); ka[i][e] = k; end
        k = $urandom_range(2, 0);
        for (int e = 0; e < N; e++) begin k += $urandom_range(3, 1); kb[i][e] = k; end
      end
      for (int e = 0; e < N; e++) begin
        va[i][e] = $urandom_range(65535, 0);
        vb[i][e] = $urandom_range(65535, 0);
      end
    end
  endtask

  int eoc, soc;

  initial begin
    done = 0; checks = 0; failures = 0;
    rst_n = 0;
    drive(0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    if (FIG && N == 3) begin
      // mssortk example: west column top to bottom 5,2,4 (chunk 4,2,5)
      gen_random(1'b0);
      for (int i = 0; i < N; i++) begin la[i] = 0; lb[i] = 0; end
      ka[0][0] = 4; ka[0][1] = 2; ka[0][2] = 5; la[0] = 3;
      kb[0][0] = 5; kb[0][1] = 8; kb[0][2] = 5; lb[0] = 3;
      run_test();
      chk(oek[0][0] == 2 && oek[0][1] == 4 && oek[0][2] == 5, "fig mssortk east 2,4,5");
      chk(osk[0][0] == 5 && osk[0][1] == 8 && osd[0][2], "fig mssortk south 5,8,d");
      chk(wic[0] == 3 && nic[0] == 3, "fig mssortk W_IC=3 N_IC=3");
      check_stream(0, eoc, soc);
      chk(eoc == 3 && soc == 2, "fig mssortk E_OC=3 S_OC=2");
      // mszipk example: west column top to bottom 9,5,2 (chunk 2,5,9)
      gen_random(1'b1);
      for (int i = 0; i < N; i++) begin la[i] = 0; lb[i] = 0; end
      ka[0][0] = 2; ka[0][1] = 5; ka[0][2] = 9; la[0] = 3;
      kb[0][0] = 3; kb[0][1] = 5; kb[0][2] = 8; lb[0] = 3;
      run_test();
      chk(oek[0][0] == 2 && oek[0][1] == 3 && oek[0][2] == 5, "fig mszipk east 2,3,5");
      chk(osk[0][0] == 8 && osd[0][1] && osd[0][2], "fig mszipk south 8,d,x");
      chk(wic[0] == 2 && nic[0] == 3, "fig mszipk W_IC=2 N_IC=3");
      check_stream(0, eoc, soc);
      chk(eoc == 3 && soc == 1, "fig mszipk E_OC=3 S_OC=1");
    end
    for (int n = 0; n < NRAND; n++) begin
      gen_random(n[0]);
      run_test();
      for (int i = 0; i < N; i++) check_stream(i, eoc, soc);
    end
    done = 1;
  end
endmodule
