// spz_matrix_unit: SparseZipper matrix unit (top level).
//
// A matrix engine built around an N x N systolic array, extended so that it
// can sort and merge key-value streams held in matrix registers, the core
// step of row-wise (Gustavson) sparse-sparse matrix multiplication. One
// stream occupies one row of a matrix register: keys in one register, values
// in another.
//
// Instructions (cmd_op):
//   mlxe.t / msxe.t  td1, base, va = byte offsets, vb = lengths
//                    indexed row-wise load / store (spz_mem_uop)
//   mssortk.tt td1, td2, va, vb   sort the key chunks of td1 and td2 of every
//                    row (va/vb = chunk lengths), combine duplicate keys;
//                    sets IC0/IC1 (keys processed) and OC0/OC1 (keys out)
//   mssortv.tt td1, td2, va, vb   move and add the values the same way
//   mszipk.tt / mszipv.tt         merge two sorted chunks per row; the
//                    merged chunk is td1 (first OC0 keys) then td2 (next OC1);
//                    IC0/IC1 count the keys consumed from td1/td2
//   mmv.vi / mmv.vo  vd, cimm     return IC[cimm] / OC[cimm] on rsp_vd
// cmd_td1/cmd_td2 are physical matrix-register numbers (renaming belongs to
// the core). The unit accepts an instruction when cmd_ready is high; a value
// instruction overlaps with its key instruction, all else waits for the
// array to drain. idle is high when nothing is in flight.
//
// Datapath: register file (2 read, 2 write ports) -> west / north skew
// buffers -> systolic array with loop-back paths -> east / south deskew
// buffers -> register file; the popcount logic watches the array edges.
// td1 feeds the west side with element e on row N-1-e, td2 the north side
// with element e on column e; east results return to td1, south to td2.
// Latency: a key instruction accepted alone in cycle a reads its rows in
// cycles a+1..a+N, row i reaches PE(0,0) in cycle a+3+i, and the unit is idle
// again in cycle a+4N+3 (each row spends 3N cycles in array and deskew).
// Follows the paper's Fig. 9 and Sec. III-IV. The command/response and
// memory ports are this design's stand-ins for the core it would sit in.
module spz_matrix_unit
  import spz_pkg::*;
#(
  parameter int N     = 16,
  parameter int W     = 32,
  parameter int NREG  = 16,
  parameter int ADDRW = 32,
  localparam int RW   = $clog2(NREG),
  localparam int AW   = $clog2(N),
  localparam int CW   = $clog2(N) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // instruction interface
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  opcode_e              cmd_op,
  input  logic [RW-1:0]        cmd_td1,
  input  logic [RW-1:0]        cmd_td2,
  input  logic [ADDRW-1:0]     cmd_base,
  input  logic [N-1:0][W-1:0]  cmd_va,
  input  logic [N-1:0][W-1:0]  cmd_vb,
  input  logic                 cmd_cimm,
  output logic                 rsp_valid,
  output logic [N-1:0][W-1:0]  rsp_vd,
  output logic                 idle,
  // memory port of the core's load/store unit
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic                 mem_req_we,
  output logic [ADDRW-1:0]     mem_req_addr,
  output logic [N*W-1:0]       mem_req_wdata,
  output logic [N-1:0]         mem_req_be,
  input  logic                 mem_rsp_valid,
  input  logic [N*W-1:0]       mem_rsp_rdata
);
  localparam int LW = $bits(tok_t) + W + $bits(kctl_t);

  // ---------------- command decode ----------------
  logic is_mem, is_arr, is_mmv;
  aop_e arr_op;
  logic arr_ready, arr_idle, mem_busy;
  logic [N-1:0][CW-1:0] len_a, len_b;

  always_comb begin
    is_mem = cmd_op == OP_MLXE || cmd_op == OP_MSXE;
    is_mmv = cmd_op == OP_MMV_VI || cmd_op == OP_MMV_VO;
    is_arr = cmd_op == OP_MSSORTK || cmd_op == OP_MSSORTV ||
             cmd_op == OP_MSZIPK  || cmd_op == OP_MSZIPV;
    unique case (cmd_op)
      OP_MSZIPK: arr_op = AOP_ZIPK;
      OP_MSSORTV: arr_op = AOP_SORTV;
      OP_MSZIPV: arr_op = AOP_ZIPV;
      default:   arr_op = AOP_SORTK;
    endcase
    // lengths above N are clamped to N
    for (int i = 0; i < N; i++) begin
      len_a[i] = cmd_va[i] > W'(N) ? CW'(N) : cmd_va[i][CW-1:0];
      len_b[i] = cmd_vb[i] > W'(N) ? CW'(N) : cmd_vb[i][CW-1:0];
    end
    if (is_mem)      cmd_ready = arr_idle && !mem_busy;
    else if (is_arr) cmd_ready = arr_ready && !mem_busy;
    else if (is_mmv) cmd_ready = arr_idle && !mem_busy;
    else             cmd_ready = 1'b1;
  end

  assign idle = arr_idle && !mem_busy;

  // ---------------- register file ----------------
  logic [1:0]            rf_rd_en, rf_wr_en;
  logic [1:0][RW-1:0]    rf_rd_reg, rf_wr_reg;
  logic [1:0][AW-1:0]    rf_rd_row, rf_wr_row;
  logic [1:0][N*W-1:0]   rf_rd_data, rf_wr_data;

  // sequencer
  logic                  ac_rd_en, ac_wr_en, clear_cnt;
  logic [1:0][RW-1:0]    ac_rd_reg, ac_wr_reg;
  logic [AW-1:0]         ac_rd_row, ac_wr_row;
  tok_t                  feed_tok, wb_tok;
  logic [CW-1:0]         feed_len1, feed_len2;

  // load/store micro-ops
  logic                  mu_rd_en, mu_wr_en;
  logic [RW-1:0]         mu_rd_reg, mu_wr_reg;
  logic [AW-1:0]         mu_rd_row, mu_wr_row;
  logic [N*W-1:0]        mu_wr_data;

  spz_array_ctrl #(.N(N), .NREG(NREG)) u_ctrl (
    .clk, .rst_n,
    .req_valid (cmd_valid && is_arr && !mem_busy),
    .req_ready (arr_ready),
    .req_op    (arr_op),
    .req_td1   (cmd_td1),
    .req_td2   (cmd_td2),
    .req_len1  (len_a),
    .req_len2  (len_b),
    .rd_en     (ac_rd_en),
    .rd_reg    (ac_rd_reg),
    .rd_row    (ac_rd_row),
    .feed_tok  (feed_tok),
    .feed_len1 (feed_len1),
    .feed_len2 (feed_len2),
    .wb_tok    (wb_tok),
    .wr_en     (ac_wr_en),
    .wr_reg    (ac_wr_reg),
    .wr_row    (ac_wr_row),
    .clear_counters (clear_cnt),
    .idle      (arr_idle)
  );

  spz_mem_uop #(.N(N), .W(W), .NREG(NREG), .ADDRW(ADDRW)) u_mem (
    .clk, .rst_n,
    .start    (cmd_valid && cmd_ready && is_mem),
    .is_store (cmd_op == OP_MSXE),
    .treg     (cmd_td1),
    .base     (cmd_base),
    .off      (cmd_va),
    .len      (len_b),
    .busy     (mem_busy),
    .rd_en    (mu_rd_en),
    .rd_reg   (mu_rd_reg),
    .rd_row   (mu_rd_row),
    .rd_data  (rf_rd_data[0]),
    .wr_en    (mu_wr_en),
    .wr_reg   (mu_wr_reg),
    .wr_row   (mu_wr_row),
    .wr_data  (mu_wr_data),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr,
    .mem_req_wdata, .mem_req_be, .mem_rsp_valid, .mem_rsp_rdata
  );

  // east / south results after deskew
  logic [N-1:0][W-1:0]  de_out, ds_out;
  logic [N-1:0][W-1:0]  wb_east, wb_south;

  always_comb begin
    // port 0: sequencer or load/store unit (never at the same time)
    rf_rd_en[0]  = ac_rd_en || mu_rd_en;
    rf_rd_reg[0] = mu_rd_en ? mu_rd_reg : ac_rd_reg[0];
    rf_rd_row[0] = mu_rd_en ? mu_rd_row : ac_rd_row;
    rf_rd_en[1]  = ac_rd_en;
    rf_rd_reg[1] = ac_rd_reg[1];
    rf_rd_row[1] = ac_rd_row;
    rf_wr_en[0]   = ac_wr_en || mu_wr_en;
    rf_wr_reg[0]  = mu_wr_en ? mu_wr_reg : ac_wr_reg[0];
    rf_wr_row[0]  = mu_wr_en ? mu_wr_row : ac_wr_row;
    rf_wr_data[0] = mu_wr_en ? mu_wr_data : wb_east;
    rf_wr_en[1]   = ac_wr_en;
    rf_wr_reg[1]  = ac_wr_reg[1];
    rf_wr_row[1]  = ac_wr_row;
    rf_wr_data[1] = wb_south;
  end

  spz_mrf #(.NREG(NREG), .N(N), .W(W)) u_mrf (
    .clk, .rst_n,
    .rd_en (rf_rd_en), .rd_reg (rf_rd_reg), .rd_row (rf_rd_row), .rd_data (rf_rd_data),
    .wr_en (rf_wr_en), .wr_reg (rf_wr_reg), .wr_row (rf_wr_row), .wr_data (rf_wr_data)
  );

  // ---------------- row -> lanes, skew ----------------
  logic [N-1:0][LW-1:0] sw_in, sn_in, sw_out, sn_out;

  always_comb begin
    for (int k = 0; k < N; k++) begin
      kctl_t cw, cn;
      int    e;
      e  = N - 1 - k;
      cw = '{src: 1'b0, dup: CW'(e) >= feed_len1, merge: 1'b0};
      cn = '{src: 1'b1, dup: CW'(k) >= feed_len2, merge: 1'b0};
      if (feed_tok.op == AOP_SORTK) begin
        cw.merge = !cw.dup;
        cn.merge = !cn.dup;
      end
      if (!is_key_op(feed_tok.op)) begin
        cw = '0;
        cn = '0;
      end
      sw_in[k] = {feed_tok, rf_rd_data[0][e*W +: W], cw};
      sn_in[k] = {feed_tok, rf_rd_data[1][k*W +: W], cn};
    end
  end

  spz_skew_buf #(.N(N), .DW(LW)) u_skew_w (.clk, .rst_n, .in_lanes (sw_in), .out_lanes (sw_out));
  spz_skew_buf #(.N(N), .DW(LW)) u_skew_n (.clk, .rst_n, .in_lanes (sn_in), .out_lanes (sn_out));

  // ---------------- array ----------------
  tok_t  [N-1:0]        w_tok, n_tok, e_tok, s_tok;
  logic  [N-1:0][W-1:0] w_data, n_data, e_data, s_data;
  kctl_t [N-1:0]        w_ctl, n_ctl, e_ctl, s_ctl;

  always_comb
    for (int k = 0; k < N; k++) begin
      {w_tok[k], w_data[k], w_ctl[k]} = sw_out[k];
      {n_tok[k], n_data[k], n_ctl[k]} = sn_out[k];
    end

  spz_systolic_array #(.N(N), .W(W)) u_array (
    .clk, .rst_n,
    .west_tok  (w_tok), .west_data  (w_data), .west_ctl  (w_ctl),
    .north_tok (n_tok), .north_data (n_data), .north_ctl (n_ctl),
    .east_tok  (e_tok), .east_data  (e_data), .east_ctl  (e_ctl),
    .south_tok (s_tok), .south_data (s_data), .south_ctl (s_ctl)
  );

  // ---------------- popcount and counter vector registers ----------------
  logic [N-1:0][CW-1:0] ic0, ic1, oc0, oc1;

  spz_popc #(.N(N)) u_popc (
    .clk, .rst_n,
    .clear     (clear_cnt),
    .east_tok  (e_tok), .east_ctl  (e_ctl),
    .south_tok (s_tok), .south_ctl (s_ctl),
    .ic0, .ic1, .oc0, .oc1
  );

  // ---------------- deskew, write-back ----------------
  // Only the data is deskewed. The control tags are not stored with the
  // results (the output counters already say how many leading elements of
  // each half are valid), and every lane of a row carries the same token, so
  // the token of south lane 0 is delayed by the N cycles of that lane's
  // deskew path and marks the row being written back.
  tok_t tok_pipe [N];

  spz_deskew_buf #(.N(N), .DW(W)) u_deskew_e (.clk, .rst_n, .in_lanes (e_data), .out_lanes (de_out));
  spz_deskew_buf #(.N(N), .DW(W)) u_deskew_s (.clk, .rst_n, .in_lanes (s_data), .out_lanes (ds_out));

  always_ff @(posedge clk) begin
    if (!rst_n)
      for (int i = 0; i < N; i++) tok_pipe[i] <= '0;
    else begin
      tok_pipe[0] <= s_tok[0];
      for (int i = 1; i < N; i++) tok_pipe[i] <= tok_pipe[i-1];
    end
  end

  always_comb begin
    for (int k = 0; k < N; k++) begin
      wb_east[N-1-k] = de_out[k];
      wb_south[k]    = ds_out[k];
    end
    wb_tok = tok_pipe[N-1];
  end

  // ---------------- counter vector moves ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_vd    <= '0;
    end else begin
      rsp_valid <= cmd_valid && cmd_ready && is_mmv;
      if (cmd_valid && cmd_ready && is_mmv)
        for (int i = 0; i < N; i++)
          if (cmd_op == OP_MMV_VI) rsp_vd[i] <= W'(cmd_cimm ? ic1[i] : ic0[i]);
          else                     rsp_vd[i] <= W'(cmd_cimm ? oc1[i] : oc0[i]);
    end
  end

  // Every lane of a row leaves the array with the same token, lane k k cycles
  // after lane 0.
  for (genvar k = 1; k < N; k++) begin : g_lane_tok
    a_lane_tok: assert property (@(posedge clk) disable iff (!rst_n)
      (s_tok[k].vld && s_tok[k].pass) |-> (s_tok[k] == tok_pipe[k-1]));
  end

endmodule
