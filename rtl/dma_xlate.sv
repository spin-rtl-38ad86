// dma_xlate: address translation and protection of one HPU's DMA calls.
//
// A handler never names a host address. Its DMA call gives an offset into
// one of two host memory spaces of the ME it runs for: the ME's own buffer,
// or the handler host memory that the application set aside for the
// handlers. This block keeps the base and length of both spaces for the
// handler now running on its HPU. It adds the base to the offset and
// passes the call on to the DMA unit. A call that would reach past the end
// of its space is not passed on. It is answered at once with a done pulse
// and the fault flag; the handler can then return SEGV.
//
// Interface: start/task_in are the scheduler's dispatch to this HPU; the
// bounds are captured there. hreq/hready/hdone/htag/hval/hfault face the
// HPU, dreq/dready/ddone/dtag/dval face the DMA unit. A fault done pulse
// never coincides with a real one: if both fall in one cycle the fault
// waits a cycle. The translation is combinational and adds no cycle.
//
// The two spaces and their selection by an option bit follow the paper's
// DMA calls; the fault reporting through the done pulse is this design's.
module dma_xlate
  import spin_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  hpu_task_t   task_in,
  // HPU side
  input  hdma_req_t   hreq,
  output logic        hready,
  output logic        hdone,
  output logic [7:0]  htag,
  output logic [63:0] hval,
  output logic        hfault,
  // DMA unit side
  output dma_req_t    dreq,
  input  logic        dready,
  input  logic        ddone,
  input  logic [7:0]  dtag,
  input  logic [63:0] dval
);
  logic [63:0]     me_base, h_base;
  logic [LENW-1:0] me_len, h_len;
  logic            fault_pend;
  logic [7:0]      fault_tag;

  logic [63:0]     base;
  logic [LENW:0]   limit, reach;
  logic            in_range;

  always_comb begin
    base     = (hreq.space == SP_HANDLER) ? h_base : me_base;
    limit    = (hreq.space == SP_HANDLER) ? {1'b0, h_len} : {1'b0, me_len};
    reach    = {1'b0, hreq.offset} + {1'b0, hreq.len};
    in_range = reach <= limit;

    dreq            = '0;
    dreq.valid      = hreq.valid && in_range;
    dreq.op         = hreq.op;
    dreq.local_addr = hreq.local_addr;
    dreq.host_addr  = base + 64'(hreq.offset);
    dreq.len        = hreq.len;
    dreq.cmp        = hreq.cmp;
    dreq.operand    = hreq.operand;
    dreq.tag        = hreq.tag;

    hready = hreq.valid && (in_range ? dready : !fault_pend);
    hdone  = ddone || fault_pend;
    hfault = fault_pend && !ddone;
    htag   = ddone ? dtag : fault_tag;
    hval   = ddone ? dval : 64'd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      me_base <= '0; me_len <= '0; h_base <= '0; h_len <= '0;
      fault_pend <= 1'b0; fault_tag <= '0;
    end else begin
      if (start) begin
        me_base <= task_in.me_host_base;
        me_len  <= task_in.me_host_len;
        h_base  <= task_in.h_host_base;
        h_len   <= task_in.h_host_len;
      end
      if (fault_pend && !ddone) fault_pend <= 1'b0;
      if (hreq.valid && !in_range && !fault_pend) begin
        fault_pend <= 1'b1;
        fault_tag  <= hreq.tag;
      end
    end
  end
endmodule
