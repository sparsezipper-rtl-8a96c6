// tb_spz_matrix_unit: end-to-end test of the SparseZipper matrix unit at its
// default size (N = 16, 16 physical matrix registers).
//
// It computes rows of C = A x A for a random sparse 96 x 96 A (values are
// small integers held as single-precision numbers, so every sum is exact)
// the way a merge-based
// row-wise SpGEMM does, N output rows at a time, one row per stream:
//   1. expansion (done here in software): every A[i][j] * A[j][k] becomes a
//      tuple (k, value) of stream i, written to memory;
//   2. sorting: chunk pairs of every stream are loaded with mlxe.t, sorted
//      with mssortk/mssortv, and stored with msxe.t using the lengths read
//      back with mmv.vo (this is the code of the paper's sorting example);
//   3. merging: adjacent sorted partitions are merged chunk by chunk with
//      mszipk/mszipv, input pointers advanced by mmv.vi and output pointers
//      by mmv.vo (the paper's merging example), until one partition is left
//      per stream; a partition whose partner is used up is copied over.
// The result of every stream is compared with a reference (sorted unique
// column indices, values of equal indices added). The test also checks the
// register contents and counters of one sort, that a value instruction
// starts exactly 2N+1 cycles after its key instruction and that the unit is
// idle 4N+3 cycles after the value instruction, and counts the
// mechanisms of the design, failing if one never happened: duplicate
// combining, exclusion of unmergeable keys, a value instruction overlapping
// its key instruction, a key instruction held back until the array drained,
// length clamping, and memory back-pressure.
module tb_spz_matrix_unit;
  import spz_pkg::*;

  localparam int N     = 16;
  localparam int W     = 32;
  localparam int ADDRW = 32;
  localparam int RW    = 4;
  localparam int KB    = 32'h0000_0000;   // key buffers
  localparam int VB    = 32'h0004_0000;   // value buffers
  localparam int BUFSZ = 32'h0001_0000;   // bytes per ping-pong buffer
  localparam int MAXL  = 192;             // elements per stream region
  localparam int NGRP  = 6;               // groups of N output rows
  localparam int AR    = NGRP * N;        // rows of A
  localparam int AC    = AR;              // columns of A (square)

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic                cmd_valid, cmd_ready, cmd_cimm, rsp_valid, idle;
  opcode_e             cmd_op;
  logic [RW-1:0]       cmd_td1, cmd_td2;
  logic [ADDRW-1:0]    cmd_base;
  logic [N-1:0][W-1:0] cmd_va, cmd_vb, rsp_vd;
  logic                mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [ADDRW-1:0]    mem_req_addr;
  logic [N*W-1:0]      mem_req_wdata, mem_rsp_rdata;
  logic [N-1:0]        mem_req_be;

  spz_matrix_unit dut (.*);

  spz_mem_model #(.N(N), .W(W), .ADDRW(ADDRW), .WORDS(1 << 17), .LAT(3)) mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_we (mem_req_we),
    .req_addr (mem_req_addr), .req_wdata (mem_req_wdata), .req_be (mem_req_be),
    .rsp_valid (mem_rsp_valid), .rsp_rdata (mem_rsp_rdata)
  );

  int checks = 0, failures = 0;
  int n_comb = 0, n_excl = 0, n_overlap = 0, n_drain_wait = 0, n_clamp = 0, n_bp = 0;
  int n_sortk = 0, n_zipk = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  typedef int unsigned vec_t [N];

  int cycle = 0, t_key, t_val;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------------------------------------------------------- issue
  task automatic issue(input opcode_e op, input int td1, input int td2, input int base,
                       input vec_t va, input vec_t vb, input bit cimm, output vec_t vd);
    bit waited_drain;
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_td1 = RW'(td1); cmd_td2 = RW'(td2);
    cmd_base = ADDRW'(base); cmd_cimm = cimm;
    for (int i = 0; i < N; i++) begin cmd_va[i] = va[i]; cmd_vb[i] = vb[i]; end
    #1;
    waited_drain = 0;
    while (!cmd_ready) begin
      if ((op == OP_MSSORTK || op == OP_MSZIPK) && !idle) waited_drain = 1;
      @(negedge clk); #1;
    end
    if (waited_drain) n_drain_wait++;
    if ((op == OP_MSSORTV || op == OP_MSZIPV) && !idle) n_overlap++;
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    if (op == OP_MMV_VI || op == OP_MMV_VO) begin
      chk(rsp_valid, "mmv response");
      for (int i = 0; i < N; i++) vd[i] = rsp_vd[i];
    end
  endtask

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

  vec_t zero_v, dummy;

  task automatic mlxe(input int td, input int base, input vec_t off, input vec_t len);
    for (int i = 0; i < N; i++) if (len[i] > N) n_clamp++;
    issue(OP_MLXE, td, 0, base, off, len, 0, dummy);
  endtask
  task automatic msxe(input int ts, input int base, input vec_t off, input vec_t len);
    issue(OP_MSXE, ts, 0, base, off, len, 0, dummy);
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (!(idle && !cmd_valid)) @(negedge clk);
  endtask

  always @(posedge clk) if (mem_req_valid && !mem_req_ready) n_bp++;

  // ---------------------------------------------------------------- memory helpers
  function automatic int unsigned rdw(input int unsigned addr);
    return mem.words[addr >> 2];
  endfunction
  task automatic wrw(input int unsigned addr, input int unsigned d);
    mem.words[addr >> 2] = d;
  endtask

  // ---------------------------------------------------------------- matrix A
  int unsigned a_col [AR][$];
  int unsigned a_val [AR][$];

  task automatic gen_matrix();
    for (int r = 0; r < AR; r++) begin
      int nnz; bit used [AC];
      nnz = (r % 7 == 3) ? 0 : $urandom_range(8, 1);     // some empty rows
      if (r % 11 == 5) nnz = 20;                         // some heavy rows
      for (int c = 0; c < AC; c++) used[c] = 0;
      for (int k = 0; k < nnz; k++) begin
        int c; c = $urandom_range(AC - 1, 0);
        if (!used[c]) begin used[c] = 1; end
      end
      for (int c = 0; c < AC; c++) if (used[c]) begin
        a_col[r].push_back(c);
        a_val[r].push_back($urandom_range(9, 1));
      end
    end
  endtask

  // ---------------------------------------------------------------- one group of N rows
  typedef struct { int unsigned off; int unsigned len; int unsigned cap; } part_t;

  task automatic run_group(input int g);
    int unsigned ek [N][$], ev [N][$];
    int unsigned ref_acc [int unsigned];
    part_t parts [N][$];
    int src, dst;
    int maxp;
    // expansion
    for (int i = 0; i < N; i++) begin
      int r; r = g * N + i;
      ek[i].delete(); ev[i].delete();
      foreach (a_col[r][x]) begin
        int j; j = int'(a_col[r][x]);
        foreach (a_col[j][y]) begin
          ek[i].push_back(a_col[j][y]);
          ev[i].push_back(a_val[r][x] * a_val[j][y]);
        end
      end
      if (ek[i].size() > MAXL) begin
        ek[i] = ek[i][0:MAXL-1]; ev[i] = ev[i][0:MAXL-1];
      end
      for (int e = 0; e < ek[i].size(); e++) begin
        wrw(KB + i * MAXL * 4 + e * 4, ek[i][e]);
        wrw(VB + i * MAXL * 4 + e * 4, i2f(ev[i][e]));
      end
    end
    // sorting: chunk pairs (2p, 2p+1) -> buffer 1, same slots
    maxp = 0;
    for (int i = 0; i < N; i++) begin
      int nch; nch = (ek[i].size() + N - 1) / N;
      if ((nch + 1) / 2 > maxp) maxp = (nch + 1) / 2;
    end
    for (int p = 0; p < maxp; p++) begin
      vec_t off0, off1, l0, l1, r0, r1, oc0, oc1;
      for (int i = 0; i < N; i++) begin
        int n0, n1, sz;
        sz = ek[i].size();
        // the unit clamps lengths to N: hand it the raw remaining lengths
        r0[i] = sz > 2 * p * N ? sz - 2 * p * N : 0;
        r1[i] = sz > (2 * p + 1) * N ? sz - (2 * p + 1) * N : 0;
        n0 = sz - 2 * p * N;       n0 = n0 < 0 ? 0 : (n0 > N ? N : n0);
        n1 = sz - (2 * p + 1) * N; n1 = n1 < 0 ? 0 : (n1 > N ? N : n1);
        off0[i] = i * MAXL * 4 + 2 * p * N * 4;
        off1[i] = off0[i] + N * 4;
        l0[i] = n0; l1[i] = n1;
      end
      mlxe(0, KB, off0, r0);
      mlxe(1, VB, off0, r0);
      mlxe(2, KB, off1, r1);
      mlxe(3, VB, off1, r1);
      issue(OP_MSSORTK, 0, 2, 0, r0, r1, 0, dummy); n_sortk++;
      issue(OP_MSSORTV, 1, 3, 0, r0, r1, 0, dummy);
      issue(OP_MMV_VO, 0, 0, 0, zero_v, zero_v, 0, oc0);
      issue(OP_MMV_VO, 0, 0, 0, zero_v, zero_v, 1, oc1);
      msxe(0, KB + BUFSZ, off0, oc0);
      msxe(1, VB + BUFSZ, off0, oc0);
      msxe(2, KB + BUFSZ, off1, oc1);
      msxe(3, VB + BUFSZ, off1, oc1);
      for (int i = 0; i < N; i++) begin
        if (oc0[i] < l0[i] || oc1[i] < l1[i]) n_comb++;
        if (l0[i] > 0) parts[i].push_back('{off0[i], oc0[i], N});
        if (l1[i] > 0) parts[i].push_back('{off1[i], oc1[i], N});
      end
    end
    // the sorted partitions
    wait_idle();
    for (int i = 0; i < N; i++)
      foreach (parts[i][q]) begin
        int unsigned acc [int unsigned];
        int pos, base;
        base = i * MAXL * 4 + q * N * 4;
        chk(parts[i][q].off == base, "partition slot");
        for (int e = q * N; e < q * N + N && e < ek[i].size(); e++)
          acc[ek[i][e]] = (acc.exists(ek[i][e]) ? acc[ek[i][e]] : 0) + ev[i][e];
        chk(parts[i][q].len == acc.num(), $sformatf("sorted chunk %0d/%0d length", i, q));
        pos = 0;
        foreach (acc[k]) begin
          chk(rdw(KB + BUFSZ + base + pos * 4) == k && f2i(rdw(VB + BUFSZ + base + pos * 4)) == acc[k],
              $sformatf("group %0d row %0d chunk %0d [%0d] = %0d/%0d exp %0d/%0d", g, i, q, pos,
                        rdw(KB + BUFSZ + base + pos * 4), f2i(rdw(VB + BUFSZ + base + pos * 4)), k, acc[k]));
          pos++;
        end
      end
    // merging rounds
    src = 1; dst = 0;
    forever begin
      int maxpairs; bit any;
      part_t np [N][$];
      maxpairs = 0; any = 0;
      for (int i = 0; i < N; i++) begin
        if (parts[i].size() > 1) any = 1;
        if ((parts[i].size() + 1) / 2 > maxpairs) maxpairs = (parts[i].size() + 1) / 2;
      end
      if (!any) break;
      for (int p = 0; p < maxpairs; p++) begin
        vec_t pa, pb, ra, rb, po, tot;
        bit more;
        for (int i = 0; i < N; i++) begin
          pa[i] = 0; pb[i] = 0; ra[i] = 0; rb[i] = 0; po[i] = 0; tot[i] = 0;
          if (2 * p < parts[i].size()) begin
            pa[i] = parts[i][2*p].off; ra[i] = parts[i][2*p].len; po[i] = pa[i];
          end
          if (2 * p + 1 < parts[i].size()) begin
            pb[i] = parts[i][2*p+1].off; rb[i] = parts[i][2*p+1].len;
          end
        end
        // merge while both sides have tuples
        forever begin
          vec_t la, lb, ic0, ic1, oc0, oc1;
          more = 0;
          for (int i = 0; i < N; i++) begin
            la[i] = (ra[i] > 0 && rb[i] > 0) ? ra[i] : 0;
            lb[i] = (ra[i] > 0 && rb[i] > 0) ? rb[i] : 0;
            if (la[i] > 0) more = 1;
          end
          if (!more) break;
          mlxe(0, KB + src * BUFSZ, pa, la);
          mlxe(1, VB + src * BUFSZ, pa, la);
          mlxe(2, KB + src * BUFSZ, pb, lb);
          mlxe(3, VB + src * BUFSZ, pb, lb);
          issue(OP_MSZIPK, 0, 2, 0, la, lb, 0, dummy); n_zipk++;
          issue(OP_MSZIPV, 1, 3, 0, la, lb, 0, dummy);
          issue(OP_MMV_VI, 0, 0, 0, zero_v, zero_v, 0, ic0);
          issue(OP_MMV_VI, 0, 0, 0, zero_v, zero_v, 1, ic1);
          issue(OP_MMV_VO, 0, 0, 0, zero_v, zero_v, 0, oc0);
          issue(OP_MMV_VO, 0, 0, 0, zero_v, zero_v, 1, oc1);
          msxe(0, KB + dst * BUFSZ, po, oc0);
          msxe(1, VB + dst * BUFSZ, po, oc0);
          for (int i = 0; i < N; i++) po[i] += oc0[i] * 4;
          msxe(2, KB + dst * BUFSZ, po, oc1);
          msxe(3, VB + dst * BUFSZ, po, oc1);
          for (int i = 0; i < N; i++) begin
            int lam, lbm;
            lam = la[i] > N ? N : la[i];
            lbm = lb[i] > N ? N : lb[i];
            po[i] += oc1[i] * 4; tot[i] += oc0[i] + oc1[i];
            chk(ic0[i] <= lam && ic1[i] <= lbm, "IC within lengths");
            if (lam > 0) chk(ic0[i] == lam || ic1[i] == lbm, "one chunk fully merged");
            if (ic0[i] < lam || ic1[i] < lbm) n_excl++;
            if (oc0[i] + oc1[i] < ic0[i] + ic1[i]) n_comb++;
            pa[i] += ic0[i] * 4; ra[i] -= ic0[i];
            pb[i] += ic1[i] * 4; rb[i] -= ic1[i];
          end
        end
        // copy what is left of either side
        forever begin
          vec_t pc, lc;
          more = 0;
          for (int i = 0; i < N; i++) begin
            pc[i] = ra[i] > 0 ? pa[i] : pb[i];
            lc[i] = ra[i] > 0 ? ra[i] : rb[i];
            if (lc[i] > 0) more = 1;
          end
          if (!more) break;
          mlxe(4, KB + src * BUFSZ, pc, lc);
          mlxe(5, VB + src * BUFSZ, pc, lc);
          msxe(4, KB + dst * BUFSZ, po, lc);
          msxe(5, VB + dst * BUFSZ, po, lc);
          for (int i = 0; i < N; i++) begin
            int c; c = lc[i] > N ? N : lc[i];
            po[i] += c * 4; tot[i] += c;
            if (ra[i] > 0) begin pa[i] += c * 4; ra[i] -= c; end
            else if (rb[i] > 0) begin pb[i] += c * 4; rb[i] -= c; end
          end
        end
        for (int i = 0; i < N; i++)
          if (2 * p < parts[i].size())
            np[i].push_back('{parts[i][2*p].off, tot[i],
                              parts[i][2*p].cap + (2*p+1 < parts[i].size() ? parts[i][2*p+1].cap : 0)});
      end
      for (int i = 0; i < N; i++) parts[i] = np[i];
      src = 1 - src; dst = 1 - dst;
    end
    // compare with the reference
    wait_idle();
    for (int i = 0; i < N; i++) begin
      int pos;
      ref_acc.delete();
      foreach (ek[i][e]) ref_acc[ek[i][e]] = (ref_acc.exists(ek[i][e]) ? ref_acc[ek[i][e]] : 0) + ev[i][e];
      if (ref_acc.num() == 0) begin
        chk(parts[i].size() == 0, "empty row has no partition");
        continue;
      end
      chk(parts[i].size() == 1 && parts[i][0].len == ref_acc.num(),
          $sformatf("group %0d row %0d length %0d exp %0d", g, i,
                    parts[i].size() ? parts[i][0].len : -1, ref_acc.num()));
      pos = 0;
      foreach (ref_acc[k]) begin
        if (parts[i].size() == 1 && pos < parts[i][0].len) begin
          int unsigned a;
          a = parts[i][0].off + pos * 4;
          chk(rdw(KB + src * BUFSZ + a) == k && f2i(rdw(VB + src * BUFSZ + a)) == ref_acc[k],
              $sformatf("group %0d row %0d [%0d] = %0d/%0d exp %0d/%0d", g, i, pos,
                        rdw(KB + src * BUFSZ + a), rdw(VB + src * BUFSZ + a), k, ref_acc[k]));
        end
        pos++;
      end
    end
  endtask

  // ---------------------------------------------------------------- direct checks
  task automatic direct_sort_check();
    vec_t off, l0, l1, oc0, oc1, ic0, ic1;
    // stream i: chunk 0 = keys (i*7+e) % 5 (duplicates), chunk 1 = 100-e
    for (int i = 0; i < N; i++) begin
      off[i] = i * N * 8;
      l0[i] = i;  l1[i] = N - i;
      for (int e = 0; e < N; e++) begin
        wrw(KB + off[i] + e * 4, (i * 7 + e) % 5);
        wrw(VB + off[i] + e * 4, i2f(e + 1));
        wrw(KB + off[i] + N * 4 + e * 4, 100 - e);
        wrw(VB + off[i] + N * 4 + e * 4, i2f(1000 + e));
      end
    end
    mlxe(6, KB, off, l0);
    mlxe(7, VB, off, l0);
    for (int i = 0; i < N; i++) off[i] += N * 4;
    mlxe(8, KB, off, l1);
    mlxe(9, VB, off, l1);
    wait_idle();
    // a key instruction followed at once by its value instruction: the value
    // rows start 2N+1 cycles after the key rows, and the unit is idle again
    // 4N+3 cycles after the value instruction was accepted
    issue(OP_MSSORTK, 6, 8, 0, l0, l1, 0, dummy); n_sortk++;
    t_key = cycle;
    issue(OP_MSSORTV, 7, 9, 0, l0, l1, 0, dummy);
    t_val = cycle;
    chk(t_val - t_key == 2 * N + 1, $sformatf("value start %0d cycles after key, exp %0d", t_val - t_key, 2 * N + 1));
    @(negedge clk);
    while (!idle) @(negedge clk);
    chk(cycle - t_val == 4 * N + 3, $sformatf("latency %0d exp %0d", cycle - t_val, 4 * N + 3));
    issue(OP_MMV_VI, 0, 0, 0, zero_v, zero_v, 0, ic0);
    issue(OP_MMV_VI, 0, 0, 0, zero_v, zero_v, 1, ic1);
    issue(OP_MMV_VO, 0, 0, 0, zero_v, zero_v, 0, oc0);
    issue(OP_MMV_VO, 0, 0, 0, zero_v, zero_v, 1, oc1);
    for (int i = 0; i < N; i++) begin
      int unsigned acc [int unsigned];
      int pos;
      chk(ic0[i] == l0[i] && ic1[i] == l1[i], $sformatf("sort IC row %0d", i));
      chk(oc1[i] == l1[i], $sformatf("sort S_OC row %0d", i));
      for (int e = 0; e < l0[i]; e++)
        acc[(i * 7 + e) % 5] = (acc.exists((i * 7 + e) % 5) ? acc[(i * 7 + e) % 5] : 0) + e + 1;
      chk(oc0[i] == acc.num(), $sformatf("sort E_OC row %0d = %0d exp %0d", i, oc0[i], acc.num()));
      pos = 0;
      foreach (acc[k]) begin
        chk(dut.u_mrf.g_bank[6].u_bank.mem[i][pos*W +: W] == k &&
            f2i(dut.u_mrf.g_bank[7].u_bank.mem[i][pos*W +: W]) == acc[k],
            $sformatf("sorted row %0d [%0d]", i, pos));
        pos++;
      end
      for (int e = 0; e < l1[i]; e++)
        chk(dut.u_mrf.g_bank[8].u_bank.mem[i][e*W +: W] == 100 - (l1[i] - 1 - e) &&
            f2i(dut.u_mrf.g_bank[9].u_bank.mem[i][e*W +: W]) == 1000 + (l1[i] - 1 - e),
            $sformatf("sorted row %0d south [%0d]", i, e));
      if (oc0[i] < l0[i]) n_comb++;
    end
  endtask

  initial begin
    cmd_valid = 0; cmd_op = OP_NOP; cmd_td1 = 0; cmd_td2 = 0; cmd_base = 0; cmd_cimm = 0;
    cmd_va = '0; cmd_vb = '0;
    for (int i = 0; i < N; i++) zero_v[i] = 0;
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    direct_sort_check();
    gen_matrix();
    // a unit that already fails the direct check would send the multiplication
    // into long, meaningless merge loops: stop early instead
    if (failures == 0)
      for (int g = 0; g < NGRP && failures == 0; g++) run_group(g);
    else
      $display("direct check failed: multiplication skipped");
    $display("mechanisms: combine=%0d exclude=%0d kv_overlap=%0d drain_wait=%0d clamp=%0d mem_backpressure=%0d sortk=%0d zipk=%0d",
             n_comb, n_excl, n_overlap, n_drain_wait, n_clamp, n_bp, n_sortk, n_zipk);
    if (failures == 0) begin
    chk(n_comb > 0, "duplicate combining happened");
    chk(n_excl > 0, "key exclusion happened");
    chk(n_overlap > 0, "key/value overlap happened");
    chk(n_drain_wait > 0, "key instruction waited for drain");
    chk(n_clamp > 0, "length clamp happened");
    chk(n_bp > 0, "memory back-pressure happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
