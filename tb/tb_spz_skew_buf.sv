// tb_spz_skew_buf: self-checking testbench for the skew buffer.
//
// A new random word enters every lane in every cycle. The testbench keeps a
// history of the inputs and checks that each output lane equals the input of
// the same lane a fixed number of cycles earlier: lane k is delayed by k+1 cycles, so the rows of a matrix register, which are read one per cycle, enter the array diagonally (row r of lane k reaches the array edge in cycle r+k+1).
// Lanes are also checked to read zero right after reset, before the first
// words have travelled through.
`timescale 1ns/1ps
module tb_spz_skew_buf;
  localparam int N  = 16;
  localparam int DW = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0][DW-1:0] in_lanes, out_lanes;
  logic [N-1:0][DW-1:0] hist [$];

  spz_skew_buf #(.N(N), .DW(DW)) dut (.clk, .rst_n, .in_lanes, .out_lanes);

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
    in_lanes = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < N; k++) in_lanes[k] = DW'($urandom);
      hist.push_front(in_lanes);
      @(negedge clk);
      // hist[0] is the word that entered at the edge just passed
      for (int k = 0; k < N; k++) begin
        int d; d = k + 1;
        if (t + 1 >= d)
          chk(out_lanes[k] == hist[d - 1][k], $sformatf("lane %0d cycle %0d", k, t));
        else
          chk(out_lanes[k] == '0, $sformatf("lane %0d empty after reset", k));
      end
      if (hist.size() > N + 2) void'(hist.pop_back());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
