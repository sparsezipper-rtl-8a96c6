// tb_spz_mem_uop: self-checking testbench for the row-wise load/store unit.
//
// The unit is connected to a behavioural memory (random request back-pressure,
// fixed response latency) and to a behavioural register file with one-cycle
// read latency. Random indexed loads and stores are issued, each with random
// per-row byte offsets and lengths 0..N. After each load every row of the
// target register must equal the memory words at base+offset, with elements
// at or beyond the row length read as zero. After each store the memory must
// hold the register row's first len elements at base+offset and be unchanged
// elsewhere. Exactly N memory requests are counted per instruction, one
// outstanding at a time, and an instruction must take at least N x (LAT+2)
// cycles (load) or N x (LAT+4) cycles (store) from the start pulse until busy
// falls, and at most 8 more per row (random back-pressure).
`timescale 1ns/1ps
module tb_spz_mem_uop;
  localparam int N     = 16;
  localparam int W     = 32;
  localparam int NREG  = 16;
  localparam int ADDRW = 32;
  localparam int RW    = $clog2(NREG);
  localparam int AW    = $clog2(N);
  localparam int CW    = $clog2(N) + 1;
  localparam int WORDS = 4096;
  localparam int LAT   = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 start, is_store, busy;
  logic [RW-1:0]        treg;
  logic [ADDRW-1:0]     base;
  logic [N-1:0][W-1:0]  off;
  logic [N-1:0][CW-1:0] len;
  logic                 rd_en, wr_en;
  logic [RW-1:0]        rd_reg, wr_reg;
  logic [AW-1:0]        rd_row, wr_row;
  logic [N*W-1:0]       rd_data, wr_data;
  logic                 mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [ADDRW-1:0]     mem_req_addr;
  logic [N*W-1:0]       mem_req_wdata, mem_rsp_rdata;
  logic [N-1:0]         mem_req_be;
  logic [N*W-1:0]       regs [NREG][N];
  int                   outstanding = 0, nreq = 0;

  spz_mem_uop #(.N(N), .W(W), .NREG(NREG), .ADDRW(ADDRW)) dut (.*);
  spz_mem_model #(.N(N), .W(W), .ADDRW(ADDRW), .WORDS(WORDS), .LAT(LAT)) u_mem (
    .clk, .rst_n, .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_we (mem_req_we),
    .req_addr (mem_req_addr), .req_wdata (mem_req_wdata), .req_be (mem_req_be),
    .rsp_valid (mem_rsp_valid), .rsp_rdata (mem_rsp_rdata));

  // behavioural register file: synchronous read, write port
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= regs[rd_reg][rd_row];
    if (wr_en) regs[wr_reg][wr_row] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (mem_req_valid && mem_req_ready) begin
      nreq <= nreq + 1;
      if (outstanding != 0) begin failures++; $display("FAIL: two requests outstanding"); end
    end
    outstanding <= outstanding + int'(mem_req_valid && mem_req_ready) - int'(mem_rsp_valid);
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

  task automatic run(bit st, int r, int b, output int cyc);
    int n0;
    n0 = nreq;
    @(negedge clk);
    start = 1; is_store = st; treg = RW'(r); base = ADDRW'(b);
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    chk(nreq - n0 == N, $sformatf("%0d requests for one instruction", nreq - n0));
  endtask

  initial begin
    logic [W-1:0] prev [WORDS];
    int cyc;
    start = 0; is_store = 0; treg = '0; base = '0; off = '0; len = '0;
    for (int r = 0; r < NREG; r++)
      for (int i = 0; i < N; i++)
        for (int e = 0; e < N; e++) regs[r][i][e*W +: W] = W'($urandom);
    for (int a = 0; a < WORDS; a++) u_mem.words[a] = W'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      bit st; int r, b;
      st = $urandom_range(1, 0);
      r  = $urandom_range(NREG - 1, 0);
      b  = 4 * $urandom_range(WORDS / 2, 0);
      for (int i = 0; i < N; i++) begin
        // rows never overlap each other: row i has its own window
        off[i] = 4 * i * (WORDS / 2 / N) + 4 * $urandom_range(WORDS / 2 / N - N, 0);
        len[i] = CW'($urandom_range(N, 0));
      end
      if (it % 4 == 0) len = '0;
      if (it % 4 == 1) for (int i = 0; i < N; i++) len[i] = CW'(N);
      for (int a = 0; a < WORDS; a++) prev[a] = u_mem.words[a];
      run(st, r, b, cyc);
      for (int i = 0; i < N; i++) begin
        int a; a = (b + off[i]) / 4;
        for (int e = 0; e < N; e++) begin
          if (!st)
            chk(regs[r][i][e*W +: W] == (e < len[i] ? prev[(a + e) % WORDS] : '0),
                $sformatf("load reg %0d row %0d elem %0d", r, i, e));
          else
            chk(u_mem.words[(a + e) % WORDS] == (e < len[i] ? regs[r][i][e*W +: W] : prev[(a + e) % WORDS]),
                $sformatf("store reg %0d row %0d elem %0d", r, i, e));
        end
      end
    end
    // cycle count: the memory drops ready at random, so the count is bounded:
    // each row needs at least LAT+2 (load) or LAT+4 (store) cycles
    run(1'b0, 1, 0, cyc);
    chk(cyc >= N * (LAT + 2) && cyc <= N * (LAT + 2 + 8), $sformatf("load took %0d cycles", cyc));
    run(1'b1, 1, 0, cyc);
    chk(cyc >= N * (LAT + 4) && cyc <= N * (LAT + 4 + 8), $sformatf("store took %0d cycles", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
