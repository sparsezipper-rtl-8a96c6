// spz_mem_uop: row-wise micro-ops for the indexed matrix load and store.
//
// mlxe.t td, 0(rs1), vs2, vs3 and msxe.t ts, 0(rs1), vs2, vs3 move one
// key or value chunk per stream row between a matrix register and memory.
// Row i is a unit-stride access of len[i] elements (vs3, at most N) starting
// at byte address base + off[i] (rs1 + vs2[i]). The unit issues the rows one
// after another to the core's load/store port: a load writes the returned
// row into the register (elements at or beyond the length become zero); a
// store reads the row from the register and sends it with one enable bit per
// element.
// Memory port: valid/ready request {we, addr, wdata, be}; every request,
// load or store, is answered by exactly one rsp_valid (load data or store
// acknowledge), in order. One request is outstanding at a time.
// Register-file access: read port 0 (stores, data one cycle after rd_en),
// write port 0 (loads).
// Follows the paper: one memory micro-op per row, executed by the core's
// load/store unit. The port protocol, zero fill and serial issue are this
// design's own.
module spz_mem_uop #(
  parameter int N     = 16,
  parameter int W     = 32,
  parameter int NREG  = 16,
  parameter int ADDRW = 32,
  localparam int RW   = $clog2(NREG),
  localparam int AW   = $clog2(N),
  localparam int CW   = $clog2(N) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   is_store,
  input  logic [RW-1:0]          treg,
  input  logic [ADDRW-1:0]       base,
  input  logic [N-1:0][W-1:0]    off,
  input  logic [N-1:0][CW-1:0]   len,
  output logic                   busy,
  // register file
  output logic                   rd_en,
  output logic [RW-1:0]          rd_reg,
  output logic [AW-1:0]          rd_row,
  input  logic [N*W-1:0]         rd_data,
  output logic                   wr_en,
  output logic [RW-1:0]          wr_reg,
  output logic [AW-1:0]          wr_row,
  output logic [N*W-1:0]         wr_data,
  // memory
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_we,
  output logic [ADDRW-1:0]       mem_req_addr,
  output logic [N*W-1:0]         mem_req_wdata,
  output logic [N-1:0]           mem_req_be,
  input  logic                   mem_rsp_valid,
  input  logic [N*W-1:0]         mem_rsp_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_READ, S_LATCH, S_REQ, S_WAIT} state_e;

  state_e                 state;
  logic                   st_q;
  logic [RW-1:0]          reg_q;
  logic [ADDRW-1:0]       base_q;
  logic [N-1:0][W-1:0]    off_q;
  logic [N-1:0][CW-1:0]   len_q;
  logic [AW-1:0]          row;
  logic [N*W-1:0]         data_q;
  logic [N-1:0]           mask;

  always_comb
    for (int e = 0; e < N; e++) mask[e] = CW'(e) < len_q[row];

  assign busy          = state != S_IDLE;
  assign rd_en         = state == S_READ;
  assign rd_reg        = reg_q;
  assign rd_row        = row;
  assign mem_req_valid = state == S_REQ;
  assign mem_req_we    = st_q;
  assign mem_req_addr  = base_q + ADDRW'(off_q[row]);
  assign mem_req_wdata = data_q;
  assign mem_req_be    = mask;
  assign wr_en         = state == S_WAIT && mem_rsp_valid && !st_q;
  assign wr_reg        = reg_q;
  assign wr_row        = row;

  always_comb
    for (int e = 0; e < N; e++)
      wr_data[e*W +: W] = mask[e] ? mem_rsp_rdata[e*W +: W] : '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      st_q   <= 1'b0;
      reg_q  <= '0;
      base_q <= '0;
      off_q  <= '0;
      len_q  <= '0;
      row    <= '0;
      data_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          st_q   <= is_store;
          reg_q  <= treg;
          base_q <= base;
          off_q  <= off;
          len_q  <= len;
          row    <= '0;
          state  <= is_store ? S_READ : S_REQ;
        end
        S_READ:  state <= S_LATCH;  // register-file data arrives next cycle
        S_LATCH: begin
          data_q <= rd_data;
          state  <= S_REQ;
        end
        S_REQ:   if (mem_req_ready) state <= S_WAIT;
        S_WAIT: if (mem_rsp_valid) begin
          if (row == AW'(N - 1)) state <= S_IDLE;
          else begin
            row   <= row + 1'b1;
            state <= st_q ? S_READ : S_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req_valid && !mem_req_ready) |=> mem_req_valid);

endmodule
