// spz_skew_buf: skew buffer in front of the west or north side of the array.
//
// A matrix-register row enters all N lanes in one cycle; lane k leaves k+1
// cycles later, so that element k reaches the edge PE of row/column k one
// cycle after the element of lane k-1, as the systolic wavefront requires.
// Each lane is a shift register of k+1 flip-flop stages, which is how the
// paper models its 16-lane skew buffers (shift registers of one to 16
// entries). DW is the width of one lane (data, control tag and token).
// Latency: lane k = k+1 cycles; throughput: one row per cycle.
module spz_skew_buf #(
  parameter int N  = 16,
  parameter int DW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0][DW-1:0] in_lanes,
  output logic [N-1:0][DW-1:0] out_lanes
);

  for (genvar k = 0; k < N; k++) begin : g_lane
    logic [DW-1:0] sr [k+1];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i <= k; i++) sr[i] <= '0;
      end else begin
        sr[0] <= in_lanes[k];
        for (int i = 1; i <= k; i++) sr[i] <= sr[i-1];
      end
    end
    assign out_lanes[k] = sr[k];
  end

endmodule
