// hpu_mem: the fast shared memory of the NIC ("handlers and data").
//
// All HPUs, the packet ingress, the DMA unit, the put unit and the host
// share this memory coherently: there are no caches, every access goes to
// the one copy. It holds the packet buffer slots (low addresses) and the
// handlers' state and data. Besides reads and writes it executes the two
// atomic operations handlers use to synchronise: 64-bit compare-and-swap
// (old value returned; the caller sees success when old == cmp) and
// fetch-and-add (old value returned).
//
// Organisation: NBANKS banks, interleaved by word address (bank = addr mod
// NBANKS), each with a round-robin arbiter over the ports. A port holds its
// request until gnt; the answer comes in rsp one cycle after the grant, so
// an uncontended access takes one cycle, as the paper's k = 1 scratchpad.
// An atomic is a read-modify-write done inside the bank in that cycle, so
// no other port can slip in between. Banking and round-robin are this
// design's choices; the paper gives the function and the 1-cycle access.
module hpu_mem
  import spin_pkg::*;
#(
  parameter int unsigned NPORTS = NUM_HPUS + 4,
  parameter int unsigned WORDS  = MEM_WORDS,
  parameter int unsigned NBANKS = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  mem_req_t        req [NPORTS],
  output logic            gnt [NPORTS],
  output mem_rsp_t        rsp [NPORTS]
);
  localparam int unsigned BW  = $clog2(NBANKS);
  localparam int unsigned BWD = WORDS / NBANKS;
  localparam int unsigned IW  = $clog2(BWD);

  logic [NPORTS-1:0] bank_gnt [NBANKS];
  logic [NPORTS-1:0] gnt_q;
  logic [63:0]       bank_rdata [NBANKS];
  logic [BW-1:0]     rsp_bank [NPORTS];

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    logic [63:0]              mem [BWD];
    logic [NPORTS-1:0]        breq;
    logic [$clog2(NPORTS)-1:0] sel;
    logic                     any;
    mem_req_t                 r;
    logic [63:0]              old;

    always_comb
      for (int p = 0; p < NPORTS; p++)
        breq[p] = req[p].valid && (req[p].addr[BW-1:0] == BW'(b));

    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk, .rst_n, .req(breq), .advance(1'b1),
      .gnt(bank_gnt[b]), .gnt_idx(sel), .any(any)
    );

    assign r   = req[sel];
    assign old = mem[r.addr[MAW-1:BW]];

    always_ff @(posedge clk) begin
      if (any) begin
        bank_rdata[b] <= old;
        unique case (r.op)
          M_WRITE: mem[r.addr[MAW-1:BW]] <= r.wdata;
          M_CAS:   if (old == r.cmp) mem[r.addr[MAW-1:BW]] <= r.wdata;
          M_FADD:  mem[r.addr[MAW-1:BW]] <= old + r.wdata;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      gnt[p] = 1'b0;
      for (int b = 0; b < NBANKS; b++) gnt[p] = gnt[p] | bank_gnt[b][p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gnt_q <= '0;
      for (int p = 0; p < NPORTS; p++) rsp_bank[p] <= '0;
    end else begin
      for (int p = 0; p < NPORTS; p++) begin
        gnt_q[p]    <= gnt[p];
        rsp_bank[p] <= req[p].addr[BW-1:0];
      end
    end
  end

  always_comb
    for (int p = 0; p < NPORTS; p++) begin
      rsp[p].valid = gnt_q[p];
      rsp[p].rdata = bank_rdata[rsp_bank[p]];
    end

  initial assert (WORDS % NBANKS == 0 && (1 << BW) == NBANKS && IW + BW == MAW)
    else $error("hpu_mem: bank geometry does not fit the address width");
endmodule
