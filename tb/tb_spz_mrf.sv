// tb_spz_mrf: self-checking testbench for the matrix register file.
//
// Random traffic on the two read ports and the two write ports, with the two
// reads (and the two writes) of one cycle always aimed at different
// registers, as the unit guarantees. Every read is compared with a reference
// copy of all registers: data appears one cycle after the request, and a
// read of a row being written in the same cycle returns the old contents.
// A second phase reads the same register through port 0 while port 1 writes
// it, the pattern the array uses when a result overwrites a source register.
`timescale 1ns/1ps
module tb_spz_mrf;
  localparam int NREG = 16;
  localparam int N    = 16;
  localparam int W    = 32;
  localparam int RW   = $clog2(NREG);
  localparam int AW   = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0]          rd_en, wr_en;
  logic [1:0][RW-1:0]  rd_reg, wr_reg;
  logic [1:0][AW-1:0]  rd_row, wr_row;
  logic [1:0][N*W-1:0] rd_data, wr_data;
  logic [N*W-1:0]      ref_mem [NREG][N];

  spz_mrf #(.NREG(NREG), .N(N), .W(W)) dut (.clk, .rst_n, .rd_en, .rd_reg, .rd_row, .rd_data,
                                            .wr_en, .wr_reg, .wr_row, .wr_data);

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

  function automatic logic [N*W-1:0] rnd_row();
    logic [N*W-1:0] v;
    for (int i = 0; i < N; i++) v[i*W +: W] = W'($urandom);
    return v;
  endfunction

  task automatic step(int t);
    logic [N*W-1:0] e [2];
    for (int p = 0; p < 2; p++) e[p] = ref_mem[rd_reg[p]][rd_row[p]];
    for (int p = 0; p < 2; p++) if (wr_en[p]) ref_mem[wr_reg[p]][wr_row[p]] = wr_data[p];
    @(negedge clk);
    for (int p = 0; p < 2; p++)
      if (rd_en[p]) chk(rd_data[p] == e[p], $sformatf("cycle %0d port %0d reg %0d row %0d", t, p, rd_reg[p], rd_row[p]));
  endtask

  initial begin
    rd_en = 0; wr_en = 0; rd_reg = '0; wr_reg = '0; rd_row = '0; wr_row = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill every register through alternating ports
    for (int r = 0; r < NREG; r++)
      for (int w = 0; w < N; w++) begin
        wr_en = 2'b01 << (w % 2); wr_reg = {RW'(r), RW'(r)}; wr_row = {AW'(w), AW'(w)};
        wr_data = {rnd_row(), rnd_row()};
        ref_mem[r][w] = wr_data[w % 2];
        @(negedge clk);
      end
    for (int t = 0; t < 5000; t++) begin
      rd_en  = 2'($urandom_range(3, 0));
      rd_reg[0] = RW'($urandom_range(NREG - 1, 0));
      rd_reg[1] = rd_reg[0] + RW'($urandom_range(NREG - 1, 1));
      rd_row = {AW'($urandom_range(N - 1, 0)), AW'($urandom_range(N - 1, 0))};
      wr_en  = 2'($urandom_range(3, 0));
      wr_reg[0] = RW'($urandom_range(NREG - 1, 0));
      wr_reg[1] = wr_reg[0] + RW'($urandom_range(NREG - 1, 1));
      if (t % 3 == 0) wr_reg[1] = rd_reg[0];
      if (wr_reg[0] == wr_reg[1]) wr_reg[0] = wr_reg[1] + 1'b1;
      wr_row = {AW'($urandom_range(N - 1, 0)), AW'($urandom_range(N - 1, 0))};
      wr_data = {rnd_row(), rnd_row()};
      step(t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
