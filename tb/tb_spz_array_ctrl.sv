// tb_spz_array_ctrl: self-checking testbench for the array sequencer.
//
// The array is replaced by a delay line: each row token the sequencer feeds
// comes back as a pass-1 write-back token ARR_LAT cycles later, the latency
// of the real array plus skew and deskew buffers (3N+1 cycles). The
// testbench issues random key/value instruction pairs, sometimes with a gap
// between them, and checks:
//   * rows 0..N-1 are read in consecutive cycles from {td2, td1}, and the
//     feed token (stream row, operation, pass 0) and row lengths follow one
//     cycle later;
//   * the counters are cleared when, and only when, a key instruction is
//     accepted;
//   * a value instruction held ready right behind its key instruction is
//     accepted exactly 2N+1 cycles after it (the overlap of Fig. 8);
//   * the next key instruction waits until every row has been written back;
//   * write-backs go to the key registers for key rows and to the value
//     registers for value rows;
//   * idle falls on accept and rises once the last row is written back:
//     N+ARR_LAT+2 cycles after the accepting cycle (N reads, one cycle to the
//     feed register, ARR_LAT in the array, one for the write).
`timescale 1ns/1ps
module tb_spz_array_ctrl;
  import spz_pkg::*;
  localparam int N       = 16;
  localparam int NREG    = 16;
  localparam int RW      = $clog2(NREG);
  localparam int AW      = $clog2(N);
  localparam int CW      = $clog2(N) + 1;
  localparam int ARR_LAT = 3 * N + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 req_valid, req_ready, rd_en, wr_en, clear_counters, idle;
  aop_e                 req_op;
  logic [RW-1:0]        req_td1, req_td2;
  logic [N-1:0][CW-1:0] req_len1, req_len2;
  logic [1:0][RW-1:0]   rd_reg, wr_reg;
  logic [AW-1:0]        rd_row, wr_row;
  tok_t                 feed_tok, wb_tok;
  logic [CW-1:0]        feed_len1, feed_len2;
  tok_t                 dl [ARR_LAT];

  spz_array_ctrl #(.N(N), .NREG(NREG)) dut (.*);

  // the array as a delay line
  always_ff @(posedge clk) begin
    if (!rst_n) for (int i = 0; i < ARR_LAT; i++) dl[i] <= '0;
    else begin
      dl[0] <= feed_tok;
      for (int i = 1; i < ARR_LAT; i++) dl[i] <= dl[i-1];
    end
  end
  always_comb begin
    wb_tok = dl[ARR_LAT-1];
    if (wb_tok.vld) wb_tok.pass = 1'b1;
  end

  initial begin : watchdog
    #5_000_000;
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

  // monitor: reads, feed tokens, write-back registers, counter clears
  int cycle = 0;
  logic [1:0][RW-1:0] exp_key_td, exp_val_td;
  logic [1:0][RW-1:0] cur_td;
  aop_e cur_op;
  logic [N-1:0][CW-1:0] cur_l1, cur_l2;
  int   next_row = N;   // N: no instruction being read
  int   rd_q = -1;
  int   n_clear = 0, n_key_acc = 0, n_wb = 0;

  always @(posedge clk) if (rst_n) begin
    cycle++;
    // feed one cycle after the read
    if (rd_q >= 0)
      chk(feed_tok.vld && !feed_tok.pass && feed_tok.idx == IDX_W'(rd_q) && feed_tok.op == cur_op &&
          feed_len1 == cur_l1[rd_q] && feed_len2 == cur_l2[rd_q], $sformatf("feed of row %0d", rd_q));
    else
      chk(!feed_tok.vld, "no feed without a read");
    if (next_row < N) begin
      chk(rd_en && rd_row == AW'(next_row) && rd_reg == cur_td, $sformatf("read of row %0d", next_row));
      rd_q = next_row;
      next_row++;
    end else begin
      chk(!rd_en, "no read between instructions");
      rd_q = -1;
    end
    if (wr_en) begin
      n_wb++;
      chk(wr_row == wb_tok.idx[AW-1:0] &&
          wr_reg == (is_key_op(wb_tok.op) ? exp_key_td : exp_val_td), "write-back register");
    end
    if (clear_counters) n_clear++;
    if (req_valid && req_ready) begin
      cur_td   = {req_td2, req_td1};
      cur_op   = req_op;
      cur_l1   = req_len1;
      cur_l2   = req_len2;
      next_row = 0;
      if (is_key_op(req_op)) begin n_key_acc++; exp_key_td = cur_td; end
      else exp_val_td = cur_td;
      chk(clear_counters == is_key_op(req_op), "clear on key accept");
    end else chk(!clear_counters, "no clear without key accept");
  end

  task automatic issue(aop_e op, int t1, int t2, output int t_acc);
    req_valid = 1; req_op = op; req_td1 = RW'(t1); req_td2 = RW'(t2);
    for (int i = 0; i < N; i++) begin
      req_len1[i] = CW'($urandom_range(N, 0));
      req_len2[i] = CW'($urandom_range(N, 0));
    end
    // accepted at the coming edge if ready (ready depends on the operation,
    // so let it settle first)
    #1;
    while (!req_ready) @(posedge clk) #1;
    t_acc = cycle;
    @(posedge clk) #1;
    req_valid = 0;
  endtask

  initial begin
    int tk, tv, tprev_done;
    req_valid = 0; req_op = AOP_SORTK; req_td1 = '0; req_td2 = '0; req_len1 = '0; req_len2 = '0;
    exp_key_td = '0; exp_val_td = '0; cur_td = '0; cur_op = AOP_SORTK; cur_l1 = '0; cur_l2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(idle && req_ready, "idle after reset");
    for (int it = 0; it < 60; it++) begin
      int a, b, c, d, gap, t_idle;
      aop_e kop, vop;
      a = $urandom_range(NREG - 1, 0); b = (a + $urandom_range(NREG - 1, 1)) % NREG;
      c = $urandom_range(NREG - 1, 0); d = (c + $urandom_range(NREG - 1, 1)) % NREG;
      kop = $urandom_range(1, 0) ? AOP_SORTK : AOP_ZIPK;
      vop = kop == AOP_SORTK ? AOP_SORTV : AOP_ZIPV;
      @(negedge clk);
      issue(kop, a, b, tk);
      chk(!idle, "busy after accept");
      gap = (it % 3 == 0) ? $urandom_range(3 * N, 0) : 0;
      repeat (gap) @(negedge clk);
      issue(vop, c, d, tv);
      if (gap == 0) chk(tv - tk == 2 * N + 1, $sformatf("value accepted %0d after key, exp %0d", tv - tk, 2 * N + 1));
      else          chk(tv - tk >= 2 * N + 1, "value never before 2N+1");
      // a key instruction right behind must wait for the drain
      if (it % 2 == 0) begin
        int tk2;
        issue(kop, a, b, tk2);
        chk(tk2 - tv == N + ARR_LAT + 2, $sformatf("next key accepted %0d after value, exp %0d", tk2 - tv, N + ARR_LAT + 2));
        issue(vop, c, d, tv);
      end
      @(negedge clk);
      t_idle = cycle;
      while (!idle) begin @(negedge clk); t_idle = cycle; end
      chk(t_idle - tv == N + ARR_LAT + 2, $sformatf("idle %0d after value accept, exp %0d", t_idle - tv, N + ARR_LAT + 2));
    end
    chk(n_clear == n_key_acc && n_key_acc > 60, "counter clears");
    chk(n_wb == 2 * N * n_key_acc, $sformatf("every row written back: %0d of %0d", n_wb, 2 * N * n_key_acc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
