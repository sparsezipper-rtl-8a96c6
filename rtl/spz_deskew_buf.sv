// spz_deskew_buf: deskew buffer on the east or south side of the array.
//
// The array's outputs for one stream row leave its N edge PEs on N
// consecutive cycles, lane k one cycle after lane k-1. Lane k is delayed by
// N-k flip-flop stages, so every lane of a row comes out in the same cycle
// and the row can be written to a matrix register at once. The baseline
// array has one (south); the paper adds a second one for the east side.
// Latency: lane k = N-k cycles; throughput: one row per cycle.
module spz_deskew_buf #(
  parameter int N  = 16,
  parameter int DW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0][DW-1:0] in_lanes,
  output logic [N-1:0][DW-1:0] out_lanes
);

  for (genvar k = 0; k < N; k++) begin : g_lane
    localparam int D = N - k;
    logic [DW-1:0] sr [D];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < D; i++) sr[i] <= '0;
      end else begin
        sr[0] <= in_lanes[k];
        for (int i = 1; i < D; i++) sr[i] <= sr[i-1];
      end
    end
    assign out_lanes[k] = sr[D-1];
  end

endmodule
