// spz_array_ctrl: sequencer for the sorting and merging instructions.
//
// An accepted mssortk / mszipk / mssortv / mszipv is broken into N row
// micro-ops, one per stream row; row i of both source registers is read in
// consecutive cycles (rows enter the array back to back, there is no
// dependence between them). For each row it emits a token (valid, pass 0,
// row, operation) one cycle after the read, aligned with the register-file
// data, together with the row's two chunk lengths.
//
// Issue rules (the paper's Sec. IV-C):
//   * a value instruction may start while its key instruction is still in
//     the array: its first row is read 2N+1 cycles after the key
//     instruction's first row, so it reaches PE(0,0) in the cycle after
//     PE(0,0) finished its last key-compressing step (the key rows occupy
//     PE(0,0) for N cycles, one cycle is lost turning the data around, then
//     come N compressing cycles: the paper's Fig. 8);
//   * a key instruction waits until the array is empty, so a new pair never
//     overwrites counters that were not yet read;
//   * `idle` tells the rest of the unit that no row is in flight.
// Write-back: when a row's pass-1 results leave the deskew buffers (wb_tok),
// the controller writes them to the destination registers of the
// instruction they belong to (east half -> td1, south half -> td2), using
// both write ports.
// The counting rules and register-id bookkeeping are this design's own.
// feed_tok.pass is always 0 and the upper bits of feed_tok.idx are always 0
// here (the array sets pass 1 on its loop-back paths); they are kept so the
// token has one type everywhere.
module spz_array_ctrl
  import spz_pkg::*;
#(
  parameter int N    = 16,
  parameter int NREG = 16,
  localparam int RW  = $clog2(NREG),
  localparam int AW  = $clog2(N),
  localparam int CW  = $clog2(N) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // instruction
  input  logic                  req_valid,
  output logic                  req_ready,
  input  aop_e                  req_op,
  input  logic [RW-1:0]         req_td1,
  input  logic [RW-1:0]         req_td2,
  input  logic [N-1:0][CW-1:0]  req_len1,
  input  logic [N-1:0][CW-1:0]  req_len2,
  // register-file reads (both ports, same row)
  output logic                  rd_en,
  output logic [1:0][RW-1:0]    rd_reg,
  output logic [AW-1:0]         rd_row,
  // row feed, aligned with read data
  output tok_t                  feed_tok,
  output logic [CW-1:0]         feed_len1,
  output logic [CW-1:0]         feed_len2,
  // write-back
  input  tok_t                  wb_tok,
  output logic                  wr_en,
  output logic [1:0][RW-1:0]    wr_reg,
  output logic [AW-1:0]         wr_row,
  // status
  output logic                  clear_counters,
  output logic                  idle
);
  localparam int GW = $clog2(N + 3) + 1;

  logic                 issuing;
  logic [AW-1:0]        row;
  aop_e                 cur_op;
  logic [N-1:0][CW-1:0] len1_q, len2_q;
  logic [1:0][RW-1:0]   cur_td;
  logic [1:0][RW-1:0]   key_td, val_td;
  logic [GW-1:0]        since;        // cycles since the last row was read
  logic [AW+1:0]        key_inflight, val_inflight;
  logic                 accept, issue_row, last_row, wb_fire;

  assign idle      = !issuing && key_inflight == '0 && val_inflight == '0;
  assign req_ready = !issuing && (is_key_op(req_op) ? (key_inflight == '0 && val_inflight == '0)
                                                    : (val_inflight == '0 && since >= GW'(N + 1)));
  assign accept    = req_valid && req_ready;
  assign issue_row = issuing;
  assign last_row  = issuing && row == AW'(N - 1);
  assign wb_fire   = wb_tok.vld && wb_tok.pass;
  assign clear_counters = accept && is_key_op(req_op);

  assign rd_en  = issue_row;
  assign rd_reg = cur_td;
  assign rd_row = row;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issuing      <= 1'b0;
      row          <= '0;
      cur_op       <= AOP_SORTK;
      cur_td       <= '0;
      key_td       <= '0;
      val_td       <= '0;
      len1_q       <= '0;
      len2_q       <= '0;
      since        <= GW'(N + 2);
      key_inflight <= '0;
      val_inflight <= '0;
      feed_tok     <= '0;
      feed_len1    <= '0;
      feed_len2    <= '0;
    end else begin
      if (accept) begin
        issuing <= 1'b1;
        row     <= '0;
        cur_op  <= req_op;
        cur_td  <= {req_td2, req_td1};
        len1_q  <= req_len1;
        len2_q  <= req_len2;
        if (is_key_op(req_op)) key_td <= {req_td2, req_td1};
        else                   val_td <= {req_td2, req_td1};
      end else if (issue_row) begin
        row <= row + 1'b1;
        if (last_row) issuing <= 1'b0;
      end
      if (issue_row)                    since <= GW'(1);
      else if (since < GW'(N + 2))      since <= since + 1'b1;

      feed_tok <= '0;
      if (issue_row) begin
        feed_tok  <= '{vld: 1'b1, pass: 1'b0, idx: IDX_W'(row), op: cur_op};
        feed_len1 <= len1_q[row];
        feed_len2 <= len2_q[row];
      end

      key_inflight <= key_inflight + (AW+2)'(issue_row && is_key_op(cur_op))
                                   - (AW+2)'(wb_fire && is_key_op(wb_tok.op));
      val_inflight <= val_inflight + (AW+2)'(issue_row && !is_key_op(cur_op))
                                   - (AW+2)'(wb_fire && !is_key_op(wb_tok.op));
    end
  end

  assign wr_en  = wb_fire;
  assign wr_reg = is_key_op(wb_tok.op) ? key_td : val_td;
  assign wr_row = wb_tok.idx[AW-1:0];

  a_dst_distinct: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> (req_td1 != req_td2));

endmodule
