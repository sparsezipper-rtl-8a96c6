// spz_popc: population-count logic and the four counter vector registers.
//
// Each cycle it looks at the control tags leaving the east and south edges
// of the array (two bits per lane are used: the source bit with the merge
// bit in the sorting/merging pass, the duplicate bit in the compressing
// pass) and adds them to the counter of the stream row the lane belongs to:
//   IC0 (W_IC) / IC1 (N_IC): keys of the west / north input chunk that were
//       processed (mssortk) or merged (mszipk), counted in pass 0;
//   OC0 (E_OC) / OC1 (S_OC): valid keys in the east / south output chunk,
//       counted in pass 1.
// Lane k of the east and lane k of the south edge always carry the same
// stream row, and different lanes carry different rows, so each counter
// takes at most one lane's increment (0..2) per cycle. Value micro-ops do not
// touch the counters. `clear` zeroes all counters at the start of a key
// instruction.
// Counter width: the paper says log2(R) bits in Sec. III but builds 16
// five-bit counters in its area model; a counter must hold N, so it is
// $clog2(N)+1 bits here.
module spz_popc
  import spz_pkg::*;
#(
  parameter int N  = 16,
  parameter int CW = $clog2(N) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  tok_t  [N-1:0]         east_tok,
  input  kctl_t [N-1:0]         east_ctl,
  input  tok_t  [N-1:0]         south_tok,
  input  kctl_t [N-1:0]         south_ctl,
  output logic  [N-1:0][CW-1:0] ic0,
  output logic  [N-1:0][CW-1:0] ic1,
  output logic  [N-1:0][CW-1:0] oc0,
  output logic  [N-1:0][CW-1:0] oc1
);
  localparam int SW = $clog2(N);

  logic [N-1:0][1:0]    inc_w, inc_n, inc_e, inc_s;
  logic [N-1:0][SW-1:0] lane_idx;

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic ek, sk;
      ek = east_tok[k].vld  && is_key_op(east_tok[k].op);
      sk = south_tok[k].vld && is_key_op(south_tok[k].op);
      lane_idx[k] = east_tok[k].vld ? east_tok[k].idx[SW-1:0] : south_tok[k].idx[SW-1:0];
      inc_w[k] = 2'(ek && !east_tok[k].pass && east_ctl[k].merge && !east_ctl[k].src)
               + 2'(sk && !south_tok[k].pass && south_ctl[k].merge && !south_ctl[k].src);
      inc_n[k] = 2'(ek && !east_tok[k].pass && east_ctl[k].merge && east_ctl[k].src)
               + 2'(sk && !south_tok[k].pass && south_ctl[k].merge && south_ctl[k].src);
      inc_e[k] = 2'(ek && east_tok[k].pass && !east_ctl[k].dup);
      inc_s[k] = 2'(sk && south_tok[k].pass && !south_ctl[k].dup);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      ic0 <= '0; ic1 <= '0; oc0 <= '0; oc1 <= '0;
    end else begin
      for (int j = 0; j < N; j++) begin
        logic [CW-1:0] aw, an, ae, as_;
        aw = '0; an = '0; ae = '0; as_ = '0;
        for (int k = 0; k < N; k++) begin
          if (lane_idx[k] == SW'(j)) begin
            aw  = aw  + CW'(inc_w[k]);
            an  = an  + CW'(inc_n[k]);
            ae  = ae  + CW'(inc_e[k]);
            as_ = as_ + CW'(inc_s[k]);
          end
        end
        ic0[j] <= ic0[j] + aw;
        ic1[j] <= ic1[j] + an;
        oc0[j] <= oc0[j] + ae;
        oc1[j] <= oc1[j] + as_;
      end
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_chk
    a_same_row: assert property (@(posedge clk) disable iff (!rst_n)
      (east_tok[k].vld && south_tok[k].vld) |-> (east_tok[k].idx == south_tok[k].idx));
  end

endmodule
