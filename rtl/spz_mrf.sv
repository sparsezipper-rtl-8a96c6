// spz_mrf: matrix register file with two read ports and two write ports.
//
// NREG physical matrix registers, each its own one-read one-write bank
// (spz_mreg_bank). A read crossbar lets each of the two read ports reach any
// bank, and a write crossbar does the same for the two write ports. The two
// ports of one kind must address different registers in the same cycle
// (asserted), so no bank ever needs a second port: this is how the paper
// adds the second write port that the sorting and merging instructions need
// (two destination registers) without multi-ported SRAMs.
// Timing: read data one cycle after the request; writes take effect at the
// clock edge.
module spz_mrf #(
  parameter int NREG = 16,
  parameter int N    = 16,
  parameter int W    = 32,
  localparam int RW  = $clog2(NREG),
  localparam int AW  = $clog2(N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [1:0]               rd_en,
  input  logic [1:0][RW-1:0]       rd_reg,
  input  logic [1:0][AW-1:0]       rd_row,
  output logic [1:0][N*W-1:0]      rd_data,
  input  logic [1:0]               wr_en,
  input  logic [1:0][RW-1:0]       wr_reg,
  input  logic [1:0][AW-1:0]       wr_row,
  input  logic [1:0][N*W-1:0]      wr_data
);

  logic [NREG-1:0][N*W-1:0] bank_rd_data;
  logic [1:0][RW-1:0]       rd_reg_q;

  for (genvar b = 0; b < NREG; b++) begin : g_bank
    logic           sel_r1, sel_w1, b_rd, b_wr;
    assign sel_r1 = !(rd_en[0] && rd_reg[0] == RW'(b));
    assign sel_w1 = !(wr_en[0] && wr_reg[0] == RW'(b));
    assign b_rd   = (rd_en[0] && rd_reg[0] == RW'(b)) || (rd_en[1] && rd_reg[1] == RW'(b));
    assign b_wr   = (wr_en[0] && wr_reg[0] == RW'(b)) || (wr_en[1] && wr_reg[1] == RW'(b));
    spz_mreg_bank #(.N(N), .W(W)) u_bank (
      .clk     (clk),
      .rd_en   (b_rd),
      .rd_row  (sel_r1 ? rd_row[1] : rd_row[0]),
      .rd_data (bank_rd_data[b]),
      .wr_en   (b_wr),
      .wr_row  (sel_w1 ? wr_row[1] : wr_row[0]),
      .wr_data (sel_w1 ? wr_data[1] : wr_data[0])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_reg_q <= '0;
    else begin
      if (rd_en[0]) rd_reg_q[0] <= rd_reg[0];
      if (rd_en[1]) rd_reg_q[1] <= rd_reg[1];
    end
  end

  assign rd_data[0] = bank_rd_data[rd_reg_q[0]];
  assign rd_data[1] = bank_rd_data[rd_reg_q[1]];

  a_rd_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_en[0] && rd_en[1]) |-> (rd_reg[0] != rd_reg[1]));
  a_wr_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_en[0] && wr_en[1]) |-> (wr_reg[0] != wr_reg[1]));

endmodule
