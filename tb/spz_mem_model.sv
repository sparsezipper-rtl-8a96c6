// spz_mem_model: behavioural model of the core's load/store path and memory,
// as seen by the matrix unit's row-wise memory port. Not synthesizable
// design: a word array with a request/response protocol. Each accepted
// request is answered LAT cycles later with one rsp_valid (load data or
// store acknowledge). req_ready drops at random to exercise the handshake.
// Addresses are byte addresses of 32-bit words; a row is N consecutive words.
module spz_mem_model #(
  parameter int N     = 16,
  parameter int W     = 32,
  parameter int ADDRW = 32,
  parameter int WORDS = 1 << 16,
  parameter int LAT   = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [ADDRW-1:0] req_addr,
  input  logic [N*W-1:0]   req_wdata,
  input  logic [N-1:0]     req_be,
  output logic             rsp_valid,
  output logic [N*W-1:0]   rsp_rdata
);
  logic [W-1:0] words [WORDS];
  int           cnt;
  logic         pend;
  int           nreq;

  initial nreq = 0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend      <= 1'b0;
      cnt       <= 0;
      rsp_valid <= 1'b0;
      req_ready <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        int unsigned a;
        a = int'(req_addr >> 2);
        nreq <= nreq + 1;
        for (int e = 0; e < N; e++) begin
          if (req_we) begin
            if (req_be[e]) words[(a + e) % WORDS] <= req_wdata[e*W +: W];
          end else rsp_rdata[e*W +: W] <= words[(a + e) % WORDS];
        end
        pend      <= 1'b1;
        cnt       <= LAT;
        req_ready <= 1'b0;
      end else if (pend) begin
        if (cnt <= 1) begin
          pend      <= 1'b0;
          rsp_valid <= 1'b1;
        end
        cnt <= cnt - 1;
      end else begin
        req_ready <= ($urandom_range(3, 0) != 0);
      end
    end
  end
endmodule
