// spz_pe: one SparseZipper processing element.
//
// A PE takes one item from the west and one from the north each cycle and
// drives one item east and one south through output registers (one cycle per
// PE, as for the sorting and merging instructions in the paper).
//
// Key micro-ops (mssortk / mszipk):
//   * the larger key goes east, the smaller south; an invalid key (padding,
//     combined duplicate or excluded key) counts as larger than any valid key;
//   * equal valid keys are combined: the north item goes south as the single
//     valid key, the west item goes east tagged as duplicate;
//   * a PE on the main diagonal always switches (west->south, north->east)
//     in the sorting pass of mssortk and in every compressing pass, so that
//     the two chunks are sorted separately in the two triangles of the array;
//     in the merging pass of mszipk it compares like every other PE;
//   * in the merging pass a key's merge bit is set when it meets a larger or
//     equal valid key from the other input chunk; when two valid keys of the
//     same chunk meet, the smaller one also takes over the larger one's merge
//     bit (keys below a merged key of a sorted chunk are merged as well).
//   The routing decision (forward / switch / combine) is stored per stream row
//   and per pass, two bits each: N x 4 bits per PE, as in the paper.
// Value micro-ops (mssortv / mszipv) replay the stored decision; on combine
// the two values are added (IEEE single precision, spz_fp32_add) and the
// sum goes south.
//
// Interface: w_*/n_* inputs (token, data, 3-bit control tag), e_*/s_* outputs,
// registered. The token of the west input decides what the PE does; the
// north token belongs to the same micro-op by construction of the schedule.
// Follows the paper: routing rules, diagonal rule, merge bit, state storage.
// Own choices: unsigned key comparison, the state encoding, which of two
// equal keys is kept, the same-chunk merge-bit rule, and a separate adder
// (the paper reuses the adder of the PE's multiply-accumulate unit, which
// is not part of this design). Values must be W = 32 bits wide.
module spz_pe
  import spz_pkg::*;
#(
  parameter int  N    = 16,
  parameter int  W    = 32,
  parameter bit  DIAG = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  tok_t         w_tok,
  input  logic [W-1:0] w_data,
  input  kctl_t        w_ctl,
  input  tok_t         n_tok,
  input  logic [W-1:0] n_data,
  input  kctl_t        n_ctl,
  output tok_t         e_tok,
  output logic [W-1:0] e_data,
  output kctl_t        e_ctl,
  output tok_t         s_tok,
  output logic [W-1:0] s_data,
  output kctl_t        s_ctl
);

  // Routing states: [pass][stream row]; the paper's repurposed weight register.
  pe_state_e st_mem [2][N];

  pe_state_e    st;
  logic         key_op, hard_switch;
  kctl_t        wc, nc;
  logic [W-1:0] e_d, s_d;
  kctl_t        e_c, s_c;
  logic [W-1:0] v_sum;

  if (W != 32) begin : g_w_check
    $error("spz_pe: values are single-precision numbers, W must be 32");
  end
  spz_fp32_add u_vadd (.a (w_data), .b (n_data), .y (v_sum));

  assign key_op      = is_key_op(w_tok.op);
  assign hard_switch = DIAG && (w_tok.pass || is_sort_op(w_tok.op));

  always_comb begin
    wc  = w_ctl;
    nc  = n_ctl;
    st  = ST_FWD;
    e_d = w_data;
    s_d = n_data;
    e_c = w_ctl;
    s_c = n_ctl;
    if (key_op) begin
      if (hard_switch)                st = ST_SWITCH;
      else if (w_ctl.dup)             st = ST_FWD;     // invalid west key is "larger"
      else if (n_ctl.dup)             st = ST_SWITCH;  // invalid north key is "larger"
      else if (w_data == n_data)      st = ST_COMB;
      else if (w_data >  n_data)      st = ST_FWD;
      else                            st = ST_SWITCH;
      // merge bits: merging pass of mszipk, two valid keys from different chunks
      if (w_tok.op == AOP_ZIPK && !w_tok.pass && !hard_switch &&
          !w_ctl.dup && !n_ctl.dup) begin
        if (w_ctl.src != n_ctl.src) begin
          if (w_data <= n_data) wc.merge = 1'b1;
          if (n_data <= w_data) nc.merge = 1'b1;
        end else begin
          // same chunk: the smaller key is merged if the larger one is
          if (w_data < n_data) wc.merge = w_ctl.merge | n_ctl.merge;
          else                 nc.merge = n_ctl.merge | w_ctl.merge;
        end
      end
      unique case (st)
        ST_SWITCH: begin e_d = n_data; e_c = nc; s_d = w_data; s_c = wc; end
        ST_COMB: begin
          s_d = n_data; s_c = nc;
          e_d = w_data; e_c = wc; e_c.dup = 1'b1;
        end
        default:   begin e_d = w_data; e_c = wc; s_d = n_data; s_c = nc; end
      endcase
    end else begin
      st = st_mem[w_tok.pass][w_tok.idx[$clog2(N)-1:0]];
      unique case (st)
        ST_SWITCH: begin e_d = n_data; e_c = n_ctl; s_d = w_data; s_c = w_ctl; end
        ST_COMB: begin
          s_d = v_sum;           s_c = n_ctl;
          e_d = '0;              e_c = w_ctl; e_c.dup = 1'b1;
        end
        default:   begin e_d = w_data; e_c = w_ctl; s_d = n_data; s_c = n_ctl; end
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      e_tok  <= '0;
      s_tok  <= '0;
      e_data <= '0;
      s_data <= '0;
      e_ctl  <= '0;
      s_ctl  <= '0;
      for (int p = 0; p < 2; p++)
        for (int r = 0; r < N; r++)
          st_mem[p][r] <= ST_NONE;
    end else begin
      e_tok  <= w_tok;
      s_tok  <= w_tok;
      if (w_tok.vld) begin
        e_data <= e_d;
        s_data <= s_d;
        e_ctl  <= e_c;
        s_ctl  <= s_c;
        if (key_op) st_mem[w_tok.pass][w_tok.idx[$clog2(N)-1:0]] <= st;
      end
    end
  end

  // Both inputs of a PE always belong to the same micro-op.
  a_tok_match: assert property (@(posedge clk) disable iff (!rst_n)
    w_tok.vld |-> (n_tok == w_tok));

endmodule
