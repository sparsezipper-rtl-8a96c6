// spz_mreg_bank: one physical matrix register, N rows of N x W bits, held as
// a one-read one-write SRAM bank (the paper's per-register 1r1w SRAM).
// Rows are read and written whole. Read data appears one cycle after
// rd_en (synchronous read); a write is visible to reads from the next cycle.
// Written as a plain array so a memory compiler or the synthesis tool can map
// it to an SRAM macro; contents are not reset.
module spz_mreg_bank #(
  parameter int N = 16,
  parameter int W = 32
) (
  input  logic                 clk,
  input  logic                 rd_en,
  input  logic [$clog2(N)-1:0] rd_row,
  output logic [N*W-1:0]       rd_data,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_row,
  input  logic [N*W-1:0]       wr_data
);
  logic [N*W-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row];
  end
endmodule
