// rr_scheduler: round-robin choice among the non-empty cpoll queues.
//
// The paper's scheduler fetches cpoll signals from the per-buffer queues
// under a configurable algorithm and its prototype uses round-robin, as here.
// Each cycle in which 'ready' is high and some queue is non-empty, the first
// requesting queue at or after the priority pointer is granted (one-hot
// 'grant', also its index), and the pointer moves to the position after it,
// so every non-empty queue is served within N grants. The grant is
// combinational; the pointer updates on the clock edge.
module rr_scheduler #(
  parameter int unsigned N = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 ready,
  output logic                 valid,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] grant_idx
);

  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] prio;

  always_comb begin
    valid     = 1'b0;
    grant     = '0;
    grant_idx = '0;
    for (int k = 0; k < N; k++) begin
      int unsigned idx;
      idx = (int'(prio) + k) % N;
      if (!valid && req[idx]) begin
        valid     = 1'b1;
        grant_idx = IW'(idx);
      end
    end
    if (valid && ready) grant[grant_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              prio <= '0;
    else if (valid && ready) prio <= (grant_idx == IW'(N - 1)) ? '0 : grant_idx + 1'b1;
  end

endmodule
