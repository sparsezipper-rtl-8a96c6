// tb_spz_popc: self-checking testbench for the input/output counters.
//
// Random key and value items are placed on the array's east and south edges,
// with both lanes of a lane pair always carrying the same stream row (as in
// the array). A reference model counts, per stream row, the pass-0 items
// whose merge bit is set (split by source chunk: west -> ic0, north -> ic1)
// and the valid pass-1 items (east -> oc0, south -> oc1). Value items never
// count. The counters are compared with the model every cycle; they update
// one cycle after the items appear. The clear input is pulsed now and then
// and must zero all counters in the next cycle.
`timescale 1ns/1ps
module tb_spz_popc;
  import spz_pkg::*;
  localparam int N  = 16;
  localparam int CW = $clog2(N) + 1;

  logic clk = 0, rst_n = 0, clear;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tok_t  [N-1:0]         east_tok, south_tok;
  kctl_t [N-1:0]         east_ctl, south_ctl;
  logic  [N-1:0][CW-1:0] ic0, ic1, oc0, oc1;
  int m_ic0 [N], m_ic1 [N], m_oc0 [N], m_oc1 [N];

  spz_popc #(.N(N)) dut (.clk, .rst_n, .clear, .east_tok, .east_ctl, .south_tok, .south_ctl,
                         .ic0, .ic1, .oc0, .oc1);

  initial begin : watchdog
    #1_000_000;
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

  initial begin
    int rows [N];
    clear = 0; east_tok = '0; south_tok = '0; east_ctl = '0; south_ctl = '0;
    foreach (m_ic0[j]) begin m_ic0[j] = 0; m_ic1[j] = 0; m_oc0[j] = 0; m_oc1[j] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      // each lane pair carries a distinct stream row (a permutation)
      for (int k = 0; k < N; k++) rows[k] = k;
      rows.shuffle();
      clear = (t % 200 == 150);
      for (int k = 0; k < N; k++) begin
        tok_t tk; aop_e op; bit pass;
        op   = aop_e'($urandom_range(3, 0));
        pass = $urandom_range(1, 0);
        tk = '{vld: 1'b1, pass: pass, idx: IDX_W'(rows[k]), op: op};
        east_tok[k]  = $urandom_range(3, 0) != 0 ? tk : '0;
        south_tok[k] = $urandom_range(3, 0) != 0 ? tk : '0;
        east_ctl[k]  = kctl_t'($urandom_range(7, 0));
        south_ctl[k] = kctl_t'($urandom_range(7, 0));
      end
      @(negedge clk);
      if (clear) begin
        foreach (m_ic0[j]) begin m_ic0[j] = 0; m_ic1[j] = 0; m_oc0[j] = 0; m_oc1[j] = 0; end
      end else begin
        for (int k = 0; k < N; k++) begin
          if (east_tok[k].vld && is_key_op(east_tok[k].op)) begin
            int r; r = east_tok[k].idx;
            if (!east_tok[k].pass && east_ctl[k].merge) begin
              if (east_ctl[k].src) m_ic1[r]++; else m_ic0[r]++;
            end
            if (east_tok[k].pass && !east_ctl[k].dup) m_oc0[r]++;
          end
          if (south_tok[k].vld && is_key_op(south_tok[k].op)) begin
            int r; r = south_tok[k].idx;
            if (!south_tok[k].pass && south_ctl[k].merge) begin
              if (south_ctl[k].src) m_ic1[r]++; else m_ic0[r]++;
            end
            if (south_tok[k].pass && !south_ctl[k].dup) m_oc1[r]++;
          end
        end
      end
      for (int j = 0; j < N; j++) begin
        int mk; mk = 1 << CW;
        chk(ic0[j] == CW'(m_ic0[j] % mk) && ic1[j] == CW'(m_ic1[j] % mk) &&
            oc0[j] == CW'(m_oc0[j] % mk) && oc1[j] == CW'(m_oc1[j] % mk),
            $sformatf("row %0d cycle %0d: ic0 %0d/%0d ic1 %0d/%0d oc0 %0d/%0d oc1 %0d/%0d", j, t,
                      ic0[j], m_ic0[j], ic1[j], m_ic1[j], oc0[j], m_oc0[j], oc1[j], m_oc1[j]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
