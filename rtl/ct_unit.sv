// ct_unit: counting events of the NIC.
//
// A bank of NUM_CT 64-bit counters. Handlers increment, read and set them
// atomically (the paper's PtlHandlerCTInc / CTGet / CTSet); the packet
// scheduler increments the counter attached to an ME when a message on it
// completes; the host reads any counter and may set it.
//
// Interface: port p holds req[p] until gnt[p]; one port is served per
// cycle, round-robin, and rsp_valid[p] is high the cycle after the grant
// with the counter value before the operation. The host write (host_set)
// wins over a port operation on the same counter in the same cycle. Only
// the success count of a Portals counting event is kept; the port count,
// arbitration and counter width are this design's choices.
module ct_unit
  import spin_pkg::*;
#(
  parameter int unsigned NPORTS = NUM_HPUS + 1,
  parameter int unsigned N_CT   = NUM_CT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  ct_req_t                 req       [NPORTS],
  output logic                    gnt       [NPORTS],
  output logic                    rsp_valid [NPORTS],
  output logic [63:0]             rsp_val,
  input  logic [$clog2(N_CT)-1:0] host_idx,
  output logic [63:0]             host_val,
  input  logic                    host_set,
  input  logic [$clog2(N_CT)-1:0] host_set_idx,
  input  logic [63:0]             host_set_val
);
  localparam int unsigned PW = $clog2(NPORTS);

  logic [63:0]       ct [N_CT];
  logic [NPORTS-1:0] rq, g;
  logic [PW-1:0]     sel;
  logic              any;
  ct_req_t           r;
  logic [NPORTS-1:0] g_q;

  always_comb for (int p = 0; p < NPORTS; p++) rq[p] = req[p].valid;
  rr_arbiter #(.N(NPORTS)) u_arb (.clk, .rst_n, .req(rq), .advance(1'b1),
                                  .gnt(g), .gnt_idx(sel), .any(any));
  always_comb for (int p = 0; p < NPORTS; p++) begin
    gnt[p]       = g[p];
    rsp_valid[p] = g_q[p];
  end

  assign r        = req[sel];
  assign host_val = ct[host_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CT; i++) ct[i] <= '0;
      g_q     <= '0;
      rsp_val <= '0;
    end else begin
      g_q <= g;
      if (any) begin
        rsp_val <= ct[r.idx];
        unique case (r.op)
          CT_INC:  ct[r.idx] <= ct[r.idx] + r.val;
          CT_SET:  ct[r.idx] <= r.val;
          default: ;
        endcase
      end
      if (host_set) ct[host_set_idx] <= host_set_val;
    end
  end
endmodule
