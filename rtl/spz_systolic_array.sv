// spz_systolic_array: N x N grid of SparseZipper PEs with the two loop-back
// paths.
//
// West inputs enter row r at PE(r,0) and travel east; north inputs enter
// column c at PE(0,c) and travel south. Every key micro-op crosses the array
// twice:
//   pass 0 (sorting or merging): the row coming out of the east edge is
//     looped back, through one pipeline register, to the west inputs, and the
//     row coming out of the south edge to the north inputs (east row r ->
//     west row r, south column c -> north column c);
//   pass 1 (compressing): the same network sorts again with invalid keys
//     counted as largest, which packs the valid keys to the front.
// On the loop-back a key whose merge bit is still clear (a key that cannot
// yet be placed in the merged output, or padding) becomes invalid. A mux in
// front of each west/north edge PE picks the loop-back register over the
// skew buffer; the schedule never presents both in one cycle.
// The outputs of both passes appear on the east and south edges (for the
// popcount logic); only pass-1 items are results.
// Timing: the item of stream i in lane r/c reaches PE(r,c) at t_i+r+c in pass
// 0 and at t_i+r+c+N+1 in pass 1 (t_i = its arrival at PE(0,0)); its pass-1
// result leaves the edge PE one cycle after it was processed there.
// Follows the paper (Fig. 9): grid, loop-back paths with one register each,
// input muxes. The token bundle that travels with the data is this design's.
module spz_systolic_array
  import spz_pkg::*;
#(
  parameter int N = 16,
  parameter int W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  tok_t  [N-1:0]       west_tok,
  input  logic  [N-1:0][W-1:0] west_data,
  input  kctl_t [N-1:0]       west_ctl,
  input  tok_t  [N-1:0]       north_tok,
  input  logic  [N-1:0][W-1:0] north_data,
  input  kctl_t [N-1:0]       north_ctl,
  output tok_t  [N-1:0]       east_tok,
  output logic  [N-1:0][W-1:0] east_data,
  output kctl_t [N-1:0]       east_ctl,
  output tok_t  [N-1:0]       south_tok,
  output logic  [N-1:0][W-1:0] south_data,
  output kctl_t [N-1:0]       south_ctl
);

  // h_*[r][c]: item entering PE(r,c) from the west (c = N: leaving row r east)
  // v_*[r][c]: item entering PE(r,c) from the north (r = N: leaving column c south)
  tok_t         h_tok  [N][N+1];
  logic [W-1:0] h_data [N][N+1];
  kctl_t        h_ctl  [N][N+1];
  tok_t         v_tok  [N+1][N];
  logic [W-1:0] v_data [N+1][N];
  kctl_t        v_ctl  [N+1][N];

  // loop-back registers
  tok_t  [N-1:0]        lbw_tok, lbn_tok;
  logic  [N-1:0][W-1:0] lbw_data, lbn_data;
  kctl_t [N-1:0]        lbw_ctl, lbn_ctl;

  function automatic kctl_t to_compress(aop_e op, kctl_t c);
    kctl_t r;
    r = c;
    if (is_key_op(op) && !c.merge) r.dup = 1'b1;
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lbw_tok <= '0; lbw_data <= '0; lbw_ctl <= '0;
      lbn_tok <= '0; lbn_data <= '0; lbn_ctl <= '0;
    end else begin
      for (int k = 0; k < N; k++) begin
        lbw_tok[k]      <= '0;
        lbn_tok[k]      <= '0;
        if (h_tok[k][N].vld && !h_tok[k][N].pass) begin
          lbw_tok[k]      <= h_tok[k][N];
          lbw_tok[k].pass <= 1'b1;
          lbw_data[k]     <= h_data[k][N];
          lbw_ctl[k]      <= to_compress(h_tok[k][N].op, h_ctl[k][N]);
        end
        if (v_tok[N][k].vld && !v_tok[N][k].pass) begin
          lbn_tok[k]      <= v_tok[N][k];
          lbn_tok[k].pass <= 1'b1;
          lbn_data[k]     <= v_data[N][k];
          lbn_ctl[k]      <= to_compress(v_tok[N][k].op, v_ctl[N][k]);
        end
      end
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_edge
    // input muxes (red muxes of Fig. 9)
    assign h_tok[k][0]  = lbw_tok[k].vld ? lbw_tok[k]  : west_tok[k];
    assign h_data[k][0] = lbw_tok[k].vld ? lbw_data[k] : west_data[k];
    assign h_ctl[k][0]  = lbw_tok[k].vld ? lbw_ctl[k]  : west_ctl[k];
    assign v_tok[0][k]  = lbn_tok[k].vld ? lbn_tok[k]  : north_tok[k];
    assign v_data[0][k] = lbn_tok[k].vld ? lbn_data[k] : north_data[k];
    assign v_ctl[0][k]  = lbn_tok[k].vld ? lbn_ctl[k]  : north_ctl[k];

    assign east_tok[k]   = h_tok[k][N];
    assign east_data[k]  = h_data[k][N];
    assign east_ctl[k]   = h_ctl[k][N];
    assign south_tok[k]  = v_tok[N][k];
    assign south_data[k] = v_data[N][k];
    assign south_ctl[k]  = v_ctl[N][k];

    a_no_collision_w: assert property (@(posedge clk) disable iff (!rst_n)
      !(lbw_tok[k].vld && west_tok[k].vld));
    a_no_collision_n: assert property (@(posedge clk) disable iff (!rst_n)
      !(lbn_tok[k].vld && north_tok[k].vld));
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      spz_pe #(.N(N), .W(W), .DIAG(r == c)) u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .w_tok  (h_tok[r][c]),
        .w_data (h_data[r][c]),
        .w_ctl  (h_ctl[r][c]),
        .n_tok  (v_tok[r][c]),
        .n_data (v_data[r][c]),
        .n_ctl  (v_ctl[r][c]),
        .e_tok  (h_tok[r][c+1]),
        .e_data (h_data[r][c+1]),
        .e_ctl  (h_ctl[r][c+1]),
        .s_tok  (v_tok[r+1][c]),
        .s_data (v_data[r+1][c]),
        .s_ctl  (v_ctl[r+1][c])
      );
    end
  end

endmodule
