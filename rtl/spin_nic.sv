// spin_nic: a sPIN network interface (top level).
//
// sPIN lets an application install three small handlers on an ME (matching
// entry): a header handler, a payload handler and a completion handler.
// The NIC runs them on its handler processing units (HPUs) as the packets
// of a matching message stream in, so data can be inspected, steered into
// host memory, combined with host data or answered straight from the NIC
// without first being written to host memory.
//
// Data path: rx packets -> ingress (writes the packet into a buffer slot of
// the shared HPU memory) -> pkt_scheduler (ME matching in me_table for
// header packets, channel_cam for the rest; header / payload / completion
// handler ordering) -> HPUs. Handlers use the shared memory (hpu_mem, with
// CAS and fetch-add), the DMA unit (host memory and host atomics), the
// counters (ct_unit) and the put unit (single-packet sends from HPU memory,
// or sends from host memory via the NIC's normal send queue). The host
// uploads handler state and manages memory through its own memory port and
// the ME write port, and reads events from the event queue.
//
// What is outside: the HPU cores themselves (the paper simulates ARM
// Cortex-A15 cores; any core that can follow the hpu_* handshake fits),
// the host link (PCIe or on-chip, behind host_req / host_rsp), the network
// transceiver (rx_* / tx_*) and the NIC's ordinary send engine (hsq_*).
//
// HPU handshake: hpu_start[h] pulses with hpu_task[h]; the HPU runs the
// handler whose entry point is task.pc and then holds hpu_done[h] with
// hpu_rc[h] until hpu_ack[h]. Memory ports: hold valid until gnt, data one
// cycle after. DMA: hold until dma_ready, completion is a dma_done pulse
// with the tag. A handler names host memory by an offset into its ME's
// buffer or into the handler host memory (dma_xlate); a call out of
// bounds ends at once with dma_fault. Counters: hold until ct_gnt, value
// with ct_rsp_valid. Put:
// hold until put_done.
//
// Memory port numbering: 0..N-1 HPUs, N ingress, N+1 DMA, N+2 put unit,
// N+3 host. Block structure and handler rules follow the paper; the port
// numbering and all handshakes are this design's.
module spin_nic
  import spin_pkg::*;
#(
  parameter int unsigned N_HPU = NUM_HPUS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [15:0]     my_id,
  // network receive
  input  logic            rx_valid,
  output logic            rx_ready,
  input  logic            rx_sop,
  input  logic            rx_eop,
  input  pkt_hdr_t        rx_hdr,
  input  logic [63:0]     rx_data,
  // network transmit (PutFromDevice) and host send queue (PutFromHost)
  output logic            tx_valid,
  input  logic            tx_ready,
  output logic            tx_sop,
  output logic            tx_eop,
  output pkt_hdr_t        tx_hdr,
  output logic [63:0]     tx_data,
  output logic            hsq_valid,
  input  logic            hsq_ready,
  output put_req_t        hsq_req,
  // host control
  input  logic            me_wr_valid,
  input  logic [MEW-1:0]  me_wr_idx,
  input  me_t             me_wr,
  input  logic [MEW-1:0]  me_rd_idx,
  output me_t             me_rd,
  input  mem_req_t        host_mem_req,
  output logic            host_mem_gnt,
  output mem_rsp_t        host_mem_rsp,
  input  logic [NUM_PT-1:0] pt_enable,
  output logic [NUM_PT-1:0] pt_fc,
  input  logic            ev_pop,
  output event_t          ev_head,
  output logic            ev_empty,
  output logic [15:0]     ev_lost,
  input  logic [CTW-1:0]  ct_host_idx,
  output logic [63:0]     ct_host_val,
  input  logic            ct_host_set,
  input  logic [CTW-1:0]  ct_host_set_idx,
  input  logic [63:0]     ct_host_set_val,
  output logic [15:0]     orphan_drops,
  // host link of the DMA unit
  output host_req_t       host_req,
  input  logic            host_req_ready,
  input  logic            host_rsp_valid,
  input  logic [63:0]     host_rsp_data,
  output logic            host_rsp_ready,
  // HPUs
  output logic            hpu_start   [N_HPU],
  output hpu_task_t       hpu_task    [N_HPU],
  input  logic            hpu_done    [N_HPU],
  input  ret_code_e       hpu_rc      [N_HPU],
  output logic            hpu_ack     [N_HPU],
  input  mem_req_t        hpu_mem_req [N_HPU],
  output logic            hpu_mem_gnt [N_HPU],
  output mem_rsp_t        hpu_mem_rsp [N_HPU],
  input  hdma_req_t       hpu_dma_req [N_HPU],
  output logic            hpu_dma_ready [N_HPU],
  output logic            hpu_dma_done  [N_HPU],
  output logic [7:0]      hpu_dma_tag   [N_HPU],
  output logic [63:0]     hpu_dma_val   [N_HPU],
  output logic            hpu_dma_fault [N_HPU],
  input  ct_req_t         hpu_ct_req  [N_HPU],
  output logic            hpu_ct_gnt  [N_HPU],
  output logic            hpu_ct_rsp_valid [N_HPU],
  output logic [63:0]     hpu_ct_rsp_val,
  input  put_req_t        hpu_put_req [N_HPU],
  output logic            hpu_put_done [N_HPU]
);
  localparam int unsigned NMP   = N_HPU + 4;
  localparam int unsigned P_ING = N_HPU;
  localparam int unsigned P_DMA = N_HPU + 1;
  localparam int unsigned P_PUT = N_HPU + 2;
  localparam int unsigned P_HST = N_HPU + 3;

  // ------------------------------------------------- shared HPU memory
  mem_req_t mreq [NMP];
  logic     mgnt [NMP];
  mem_rsp_t mrsp [NMP];

  hpu_mem #(.NPORTS(NMP)) u_mem (.clk, .rst_n, .req(mreq), .gnt(mgnt), .rsp(mrsp));

  for (genvar h = 0; h < N_HPU; h++) begin : g_hpu_mem
    assign mreq[h]        = hpu_mem_req[h];
    assign hpu_mem_gnt[h] = mgnt[h];
    assign hpu_mem_rsp[h] = mrsp[h];
  end
  assign mreq[P_HST]  = host_mem_req;
  assign host_mem_gnt = mgnt[P_HST];
  assign host_mem_rsp = mrsp[P_HST];

  // ------------------------------------------------------------ ingress
  logic             desc_valid, desc_ready, free_valid;
  pkt_desc_t        desc;
  logic [SLOTW-1:0] free_slot;

  ingress u_ing (
    .clk, .rst_n, .rx_valid, .rx_ready, .rx_sop, .rx_eop, .rx_hdr, .rx_data,
    .mem_req(mreq[P_ING]), .mem_gnt(mgnt[P_ING]),
    .desc_valid, .desc, .desc_ready, .free_valid, .free_slot, .slot_busy()
  );

  // ------------------------------------------------- ME table and CAM
  logic           me_lk_valid, me_lk_busy, me_lk_done, me_lk_hit, me_unlink_valid;
  logic [PTW-1:0] me_lk_pt;
  logic [63:0]    me_lk_bits;
  logic [MEW-1:0] me_lk_idx, me_unlink_idx;
  me_t            me_lk_me;

  me_table u_me (
    .clk, .rst_n, .wr_valid(me_wr_valid), .wr_idx(me_wr_idx), .wr_me(me_wr),
    .unlink_valid(me_unlink_valid), .unlink_idx(me_unlink_idx),
    .lk_valid(me_lk_valid), .lk_pt(me_lk_pt), .lk_bits(me_lk_bits),
    .lk_busy(me_lk_busy), .lk_done(me_lk_done), .lk_hit(me_lk_hit),
    .lk_idx(me_lk_idx), .lk_me(me_lk_me), .rd_idx(me_rd_idx), .rd_me(me_rd)
  );

  logic           cam_ins_valid, cam_ins_ok, cam_lk_valid, cam_lk_busy, cam_lk_done, cam_lk_hit, cam_rm_valid;
  logic [31:0]    cam_ins_key, cam_lk_key;
  logic [CHW-1:0] cam_ins_chan, cam_lk_chan, cam_rm_chan;

  channel_cam u_cam (
    .clk, .rst_n, .ins_valid(cam_ins_valid), .ins_key(cam_ins_key), .ins_ok(cam_ins_ok),
    .ins_chan(cam_ins_chan), .lk_valid(cam_lk_valid), .lk_key(cam_lk_key),
    .lk_busy(cam_lk_busy), .lk_done(cam_lk_done), .lk_hit(cam_lk_hit), .lk_chan(cam_lk_chan),
    .rm_valid(cam_rm_valid), .rm_chan(cam_rm_chan), .used()
  );

  // ----------------------------------------------------------- DMA unit
  dma_req_t    dreq   [N_HPU+1];
  logic        drdy   [N_HPU+1];
  logic        ddone  [N_HPU+1];
  logic [7:0]  dtag   [N_HPU+1];
  logic [63:0] dval   [N_HPU+1];

  dma_unit #(.NREQ(N_HPU + 1)) u_dma (
    .clk, .rst_n, .req(dreq), .req_ready(drdy), .done(ddone), .done_tag(dtag), .done_val(dval),
    .mem_req(mreq[P_DMA]), .mem_gnt(mgnt[P_DMA]), .mem_rsp(mrsp[P_DMA]),
    .host_req, .host_req_ready, .host_rsp_valid, .host_rsp_data, .host_rsp_ready
  );
  // handlers address host memory by offsets into their ME's spaces
  for (genvar h = 0; h < N_HPU; h++) begin : g_hpu_dma
    dma_xlate u_xl (
      .clk, .rst_n, .start(hpu_start[h]), .task_in(hpu_task[h]),
      .hreq(hpu_dma_req[h]), .hready(hpu_dma_ready[h]), .hdone(hpu_dma_done[h]),
      .htag(hpu_dma_tag[h]), .hval(hpu_dma_val[h]), .hfault(hpu_dma_fault[h]),
      .dreq(dreq[h]), .dready(drdy[h]), .ddone(ddone[h]), .dtag(dtag[h]), .dval(dval[h])
    );
  end

  // ----------------------------------------------------------- counters
  ct_req_t ctreq [N_HPU+1];
  logic    ctgnt [N_HPU+1];
  logic    ctrv  [N_HPU+1];

  ct_unit #(.NPORTS(N_HPU + 1)) u_ct (
    .clk, .rst_n, .req(ctreq), .gnt(ctgnt), .rsp_valid(ctrv), .rsp_val(hpu_ct_rsp_val),
    .host_idx(ct_host_idx), .host_val(ct_host_val),
    .host_set(ct_host_set), .host_set_idx(ct_host_set_idx), .host_set_val(ct_host_set_val)
  );
  for (genvar h = 0; h < N_HPU; h++) begin : g_hpu_ct
    assign ctreq[h]            = hpu_ct_req[h];
    assign hpu_ct_gnt[h]       = ctgnt[h];
    assign hpu_ct_rsp_valid[h] = ctrv[h];
  end

  // ----------------------------------------------------------- put unit
  put_unit #(.N_HPU(N_HPU)) u_put (
    .clk, .rst_n, .my_id, .req(hpu_put_req), .done(hpu_put_done),
    .mem_req(mreq[P_PUT]), .mem_gnt(mgnt[P_PUT]), .mem_rsp(mrsp[P_PUT]),
    .tx_valid, .tx_ready, .tx_sop, .tx_eop, .tx_hdr, .tx_data,
    .hsq_valid, .hsq_ready, .hsq_req
  );

  // -------------------------------------------------------- event queue
  logic   ev_valid;
  event_t ev;

  sync_fifo #(.WIDTH($bits(event_t)), .DEPTH(16)) u_evq (
    .clk, .rst_n, .push(ev_valid), .din(ev), .pop(ev_pop), .dout(ev_head),
    .empty(ev_empty), .full(), .count(), .overflows(ev_lost)
  );

  // ---------------------------------------------------- packet scheduler
  pkt_scheduler #(.N_HPU(N_HPU)) u_sched (
    .clk, .rst_n,
    .desc_valid, .desc, .desc_ready, .free_valid, .free_slot,
    .me_lk_valid, .me_lk_pt, .me_lk_bits, .me_lk_busy, .me_lk_done, .me_lk_hit,
    .me_lk_idx, .me_lk_me, .me_unlink_valid, .me_unlink_idx,
    .cam_ins_valid, .cam_ins_key, .cam_ins_ok, .cam_ins_chan,
    .cam_lk_valid, .cam_lk_key, .cam_lk_busy, .cam_lk_done, .cam_lk_hit, .cam_lk_chan,
    .cam_rm_valid, .cam_rm_chan,
    .hpu_start, .hpu_task, .hpu_done, .hpu_rc, .hpu_ack,
    .dep_req(dreq[N_HPU]), .dep_ready(drdy[N_HPU]), .dep_done(ddone[N_HPU]), .dep_done_tag(dtag[N_HPU]),
    .ev_valid, .ev, .ct_req(ctreq[N_HPU]), .ct_gnt(ctgnt[N_HPU]),
    .pt_enable, .pt_fc, .orphan_drops
  );
endmodule
