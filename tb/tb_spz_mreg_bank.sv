// tb_spz_mreg_bank: self-checking testbench for one matrix-register bank.
//
// The bank is first filled row by row, then random reads and writes (both in
// the same cycle as well) are applied and every read is compared with a
// reference copy. Reads are synchronous: the data of the row addressed in
// one cycle is on rd_data after the next clock edge, and a read of the row
// being written in the same cycle returns the old contents. With rd_en low
// the output must hold its last value.
`timescale 1ns/1ps
module tb_spz_mreg_bank;
  localparam int N = 16;
  localparam int W = 32;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 rd_en, wr_en;
  logic [$clog2(N)-1:0] rd_row, wr_row;
  logic [N*W-1:0]       rd_data, wr_data, exp_q, ref_mem [N];

  spz_mreg_bank #(.N(N), .W(W)) dut (.clk, .rd_en, .rd_row, .rd_data, .wr_en, .wr_row, .wr_data);

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

  function automatic logic [N*W-1:0] rnd_row();
    logic [N*W-1:0] v;
    for (int i = 0; i < N; i++) v[i*W +: W] = W'($urandom);
    return v;
  endfunction

  initial begin
    rd_en = 0; wr_en = 0; rd_row = '0; wr_row = '0; wr_data = '0;
    @(negedge clk);
    for (int r = 0; r < N; r++) begin
      wr_en = 1; wr_row = r; wr_data = rnd_row(); ref_mem[r] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    rd_en = 1; rd_row = 0;
    @(negedge clk);
    exp_q = ref_mem[0];
    for (int t = 0; t < 4000; t++) begin
      logic [N*W-1:0] e;
      rd_en  = $urandom_range(3, 0) != 0;
      rd_row = $urandom_range(N - 1, 0);
      wr_en  = $urandom_range(1, 0);
      wr_row = (t % 5 == 0) ? rd_row : $clog2(N)'($urandom_range(N - 1, 0));
      wr_data = rnd_row();
      e = rd_en ? ref_mem[rd_row] : exp_q;
      if (wr_en) ref_mem[wr_row] = wr_data;
      @(negedge clk);
      chk(rd_data == e, $sformatf("cycle %0d read row %0d (en %0d)", t, rd_row, rd_en));
      exp_q = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
