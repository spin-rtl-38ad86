// rr_arbiter: round-robin arbiter for N requesters.
//
// Grants at most one requester per cycle. The search starts one place
// after the requester granted last, so every requester that keeps its
// request up is served within N grants. The grant is combinational from
// req; the priority pointer moves only when advance is high (the granted
// request was actually consumed). Used by the shared HPU memory banks, the
// DMA unit, the counters and the put unit; the paper does not name an
// arbitration policy, round-robin is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic                 any
);
  logic [$clog2(N)-1:0] last;

  always_comb begin
    logic [$clog2(N)-1:0] k;
    gnt     = '0;
    gnt_idx = '0;
    any     = 1'b0;
    for (int unsigned i = 1; i <= N; i++) begin
      k = $clog2(N)'((int'(last) + i) % N);
      if (!any && req[k]) begin
        any      = 1'b1;
        gnt[k]   = 1'b1;
        gnt_idx  = k;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= $clog2(N)'(N - 1);
    else if (advance && any) last <= gnt_idx;
  end
endmodule
