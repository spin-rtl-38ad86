// pkt_scheduler: the sPIN runtime that steers packets to handlers.
//
// For every stored packet it finds the message the packet belongs to and
// decides what runs on it. A header packet is matched against the ME list
// (me_table, 75 cycles); on a hit a channel is installed in the channel
// CAM and per-message state is opened. Any other packet finds its channel
// in the CAM (5 cycles). Then the sPIN ordering rules are applied:
//
//   * the header handler runs once, and no other handler of the message
//     starts before it returns; payload packets that arrive meanwhile are
//     parked in their buffer slots;
//   * its return code decides the rest: PROCESS_DATA -> a payload handler
//     per packet (several may run in parallel on different HPUs); PROCEED
//     -> the default action, a DMA deposit of the whole packet into the
//     ME's host memory, and no more handlers; DROP -> all following
//     packets are discarded; a *_PENDING variant also keeps the ME linked;
//   * when every byte of the message is accounted for and nothing is in
//     flight, the completion handler runs with the number of dropped bytes
//     and the flow-control flag, then a completion event is posted, the
//     ME's counter is incremented and the ME is unlinked (unless PENDING);
//   * a packet that found no buffer slot (stored = 0) puts its portal
//     entry into flow control: until the host re-enables the entry, its
//     packets are dropped and counted in dropped_bytes.
//
// A handler with no entry point installed is skipped (no payload handler:
// packets are deposited by DMA). FAIL/SEGV post an error event (the first
// per message only); a failed header handler is treated as DROP.
//
// Structure: a lookup front end (one packet at a time, in arrival order),
// a per-channel state table, a per-slot table, a task queue and an event
// step that applies exactly one happening per cycle (HPU returns first,
// then deposit completions, then the new packet, then one step of the scan
// that walks the slots and releases parked packets whose header handler
// has returned). Ready tasks go to
// the lowest idle HPU; hpu_start is high one cycle after the task is
// queued, the paper's "execution can start within a cycle". HPU returns are
// held by the HPU until hpu_ack. The queue and table sizes, the event
// order and the single-event step are this design's own.
module pkt_scheduler
  import spin_pkg::*;
#(
  parameter int unsigned N_HPU   = NUM_HPUS,
  parameter int unsigned N_SLOTS = NUM_SLOTS,
  parameter int unsigned N_CH    = NUM_CHANNELS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from ingress
  input  logic                 desc_valid,
  input  pkt_desc_t            desc,
  output logic                 desc_ready,
  output logic                 free_valid,
  output logic [SLOTW-1:0]     free_slot,
  // ME table
  output logic                 me_lk_valid,
  output logic [PTW-1:0]       me_lk_pt,
  output logic [63:0]          me_lk_bits,
  input  logic                 me_lk_busy,
  input  logic                 me_lk_done,
  input  logic                 me_lk_hit,
  input  logic [MEW-1:0]       me_lk_idx,
  input  me_t                  me_lk_me,
  output logic                 me_unlink_valid,
  output logic [MEW-1:0]       me_unlink_idx,
  // channel CAM
  output logic                 cam_ins_valid,
  output logic [31:0]          cam_ins_key,
  input  logic                 cam_ins_ok,
  input  logic [CHW-1:0]       cam_ins_chan,
  output logic                 cam_lk_valid,
  output logic [31:0]          cam_lk_key,
  input  logic                 cam_lk_busy,
  input  logic                 cam_lk_done,
  input  logic                 cam_lk_hit,
  input  logic [CHW-1:0]       cam_lk_chan,
  output logic                 cam_rm_valid,
  output logic [CHW-1:0]       cam_rm_chan,
  // HPUs
  output logic                 hpu_start [N_HPU],
  output hpu_task_t            hpu_task  [N_HPU],
  input  logic                 hpu_done  [N_HPU],
  input  ret_code_e            hpu_rc    [N_HPU],
  output logic                 hpu_ack   [N_HPU],
  // default deposit through the DMA unit
  output dma_req_t             dep_req,
  input  logic                 dep_ready,
  input  logic                 dep_done,
  input  logic [7:0]           dep_done_tag,
  // events, counters, flow control
  output logic                 ev_valid,
  output event_t               ev,
  output ct_req_t              ct_req,
  input  logic                 ct_gnt,
  input  logic [NUM_PT-1:0]    pt_enable,
  output logic [NUM_PT-1:0]    pt_fc,
  output logic [15:0]          orphan_drops
);
  // ------------------------------------------------------------ types
  typedef enum logic [2:0] {P_HDR, P_DATA, P_PROCEED, P_DROP, P_CMP} phase_e;

  typedef struct packed {
    logic            active;
    phase_e          phase;
    logic [MEW-1:0]  me_idx;
    me_t             me;
    logic [LENW-1:0] msg_len;
    logic [LENW-1:0] me_offset;
    logic [LENW-1:0] accounted;
    logic [LENW-1:0] dropped;
    logic [7:0]      outstanding;
    logic            fc;
    logic            pending;
    logic            err;
    ret_code_e       first_err;
  } chan_t;

  typedef struct packed {
    logic           parked;
    logic [CHW-1:0] chan;
    pkt_hdr_t       hdr;
  } slot_t;

  typedef struct packed {
    hkind_e         kind;
    logic [CHW-1:0] chan;
    logic [SLOTW-1:0] slot;
  } task_t;

  typedef enum logic [2:0] {F_IDLE, F_LOOK, F_MEWAIT, F_CAMWAIT, F_RESULT} fstate_e;

  chan_t   ch [N_CH];
  slot_t   sl [N_SLOTS];

  // ------------------------------------------------------- front end
  fstate_e          fst;
  pkt_desc_t        cur;
  logic             res_hit;      // ME hit (header) or CAM hit (other)
  logic [MEW-1:0]   res_me_idx;
  me_t              res_me;
  logic [CHW-1:0]   res_chan;

  wire cur_blocked = !cur.stored || pt_fc[cur.hdr.pt_index];

  assign desc_ready   = (fst == F_IDLE);
  assign me_lk_valid  = (fst == F_LOOK) && cur.hdr.is_header && !cur_blocked && !me_lk_busy;
  assign me_lk_pt     = cur.hdr.pt_index;
  assign me_lk_bits   = cur.hdr.match_bits;
  assign cam_lk_valid = (fst == F_LOOK) && !cur.hdr.is_header && !cam_lk_busy;
  assign cam_lk_key   = {cur.hdr.source_id, cur.hdr.msg_id};

  // ------------------------------------------------------ task queue
  logic    tq_push, tq_pop, tq_empty, tq_full;
  task_t   tq_din, tq_head;
  sync_fifo #(.WIDTH($bits(task_t)), .DEPTH(32)) u_tq (
    .clk, .rst_n, .push(tq_push), .din(tq_din), .pop(tq_pop),
    .dout(tq_head), .empty(tq_empty), .full(tq_full), .count(), .overflows()
  );

  // deposit queue (slots whose packet goes to host memory by DMA)
  logic             dq_push, dq_empty, dq_full;
  logic [SLOTW-1:0] dq_din, dq_head;
  sync_fifo #(.WIDTH(SLOTW), .DEPTH(16)) u_dq (
    .clk, .rst_n, .push(dq_push), .din(dq_din), .pop(dep_req.valid && dep_ready),
    .dout(dq_head), .empty(dq_empty), .full(dq_full), .count(), .overflows()
  );

  // deposit completions waiting for the event step
  logic             dd_pop, dd_empty;
  logic [SLOTW-1:0] dd_head;
  sync_fifo #(.WIDTH(SLOTW), .DEPTH(16)) u_dd (
    .clk, .rst_n, .push(dep_done), .din(SLOTW'(dep_done_tag)), .pop(dd_pop),
    .dout(dd_head), .empty(dd_empty), .full(), .count(), .overflows()
  );

  always_comb begin
    chan_t c;
    c = ch[sl[dq_head].chan];
    dep_req            = '0;
    dep_req.valid      = !dq_empty;
    dep_req.op         = D_TO_HOST;
    dep_req.local_addr = MAW'(dq_head) * MAW'(SLOT_WORDS);
    dep_req.host_addr  = c.me.host_base + 64'(c.me_offset) + 64'(sl[dq_head].hdr.pkt_offset);
    dep_req.len        = (LENW'(sl[dq_head].hdr.pkt_len) + LENW'(7)) & ~LENW'(7);
    dep_req.tag        = 8'(dq_head);
  end

  // ---------------------------------------------------------- HPUs
  logic [N_HPU-1:0] busy;
  task_t            run [N_HPU];
  logic             disp;
  logic [$clog2(N_HPU)-1:0] disp_h;

  always_comb begin
    disp   = 1'b0;
    disp_h = '0;
    for (int h = N_HPU - 1; h >= 0; h--)
      if (!busy[h]) begin disp = !tq_empty; disp_h = $clog2(N_HPU)'(h); end
  end
  assign tq_pop = disp;

  function automatic hpu_task_t make_task(task_t t, chan_t c, slot_t s);
    hpu_task_t r;
    logic [PLENW-1:0] skip;
    r               = '0;
    r.kind          = t.kind;
    r.chan          = t.chan;
    r.me_idx        = c.me_idx;
    r.state_addr    = c.me.state_addr;
    r.hdr           = s.hdr;
    r.dropped_bytes = c.dropped;
    r.fc_triggered  = c.fc;
    r.me_host_base  = c.me.host_base;
    r.me_host_len   = c.me.host_len;
    r.h_host_base   = c.me.hhost_base;
    r.h_host_len    = c.me.hhost_len;
    skip            = (t.kind == H_PAYLOAD && s.hdr.is_header) ? c.me.user_hdr_bytes : '0;
    r.data_addr     = MAW'(t.slot) * MAW'(SLOT_WORDS) + MAW'(skip >> 3);
    r.data_len      = s.hdr.pkt_len - skip;
    r.data_offset   = s.hdr.pkt_offset + LENW'(skip);
    unique case (t.kind)
      H_HEADER:  r.pc = c.me.hh_pc;
      H_PAYLOAD: r.pc = c.me.ph_pc;
      default: begin
        r.pc = c.me.ch_pc;
        r.hdr = '0;
        r.data_addr = '0;
        r.data_len = '0;
        r.data_offset = '0;
      end
    endcase
    return r;
  endfunction

  // ---------------------------------------------------- event step
  // choose one happening per cycle
  logic                     hd_any;
  logic [$clog2(N_HPU)-1:0] hd_h;
  always_comb begin
    hd_any = 1'b0;
    hd_h   = '0;
    for (int h = N_HPU - 1; h >= 0; h--)
      if (hpu_done[h] && busy[h]) begin hd_any = 1'b1; hd_h = $clog2(N_HPU)'(h); end
  end

  logic             scan_active;
  logic [SLOTW-1:0] scan_idx;
  always_comb begin
    scan_active = 1'b0;
    for (int i = 0; i < N_SLOTS; i++) scan_active |= sl[i].parked;
  end
  logic             ct_pend;

  // the step may only run when its possible outputs have room
  wire step_ok  = !ct_pend && !tq_full && !dq_full;
  wire do_hd    = step_ok && hd_any;
  wire do_dd    = step_ok && !hd_any && !dd_empty;
  wire do_fe    = step_ok && !hd_any && dd_empty && (fst == F_RESULT);
  wire do_scan  = step_ok && !hd_any && dd_empty && (fst != F_RESULT) && scan_active;

  assign dd_pop = do_dd;
  always_comb
    for (int h = 0; h < N_HPU; h++) hpu_ack[h] = do_hd && (hd_h == $clog2(N_HPU)'(h));

  // results of the step, computed combinationally and applied below
  chan_t            nc;          // new state of channel sc
  logic             nc_we;
  logic [CHW-1:0]   sc;
  logic             ns_we;       // slot table write
  logic [SLOTW-1:0] ss;
  slot_t            ns;
  logic             set_fc;
  logic [PTW-1:0]   set_fc_pt;
  logic             orphan;

  function automatic logic is_err(ret_code_e rc);
    return rc == RC_FAIL || rc == RC_SEGV;
  endfunction

  always_comb begin
    slot_t s;
    logic  pkt_arrive;   // a stored packet reaches a channel in a known phase
    logic  pkt_account;  // a packet's bytes are done with
    logic  pkt_dropped;  // ... and they count as dropped
    logic  do_check;
    logic  free_it;
    logic [SLOTW-1:0] pslot;
    logic [PLENW-1:0] plen;
    nc = '0; nc_we = 1'b0; sc = '0;
    ns = '0; ns_we = 1'b0; ss = '0;
    tq_push = 1'b0; tq_din = '0;
    dq_push = 1'b0; dq_din = '0;
    free_valid = 1'b0; free_slot = '0;
    ev_valid = 1'b0; ev = '0;
    me_unlink_valid = 1'b0; me_unlink_idx = '0;
    cam_ins_valid = 1'b0; cam_ins_key = {cur.hdr.source_id, cur.hdr.msg_id};
    cam_rm_valid = 1'b0; cam_rm_chan = '0;
    set_fc = 1'b0; set_fc_pt = cur.hdr.pt_index;
    orphan = 1'b0;
    pkt_arrive = 1'b0; pkt_account = 1'b0; pkt_dropped = 1'b0;
    do_check = 1'b0; free_it = 1'b0;
    pslot = '0; plen = '0;
    s = '0;

    if (do_hd) begin
      // ------------------------------------------- a handler returned
      task_t t;
      ret_code_e rc;
      t  = run[hd_h];
      rc = hpu_rc[hd_h];
      sc = t.chan;
      nc = ch[t.chan];
      nc_we = 1'b1;
      s = sl[t.slot];
      nc.outstanding = nc.outstanding - 1'b1;
      if (is_err(rc) && !nc.err) begin
        nc.err = 1'b1;
        nc.first_err = rc;
        ev_valid = 1'b1;
        ev.kind = EV_ERROR; ev.me_idx = nc.me_idx; ev.pt_index = nc.me.pt_index; ev.rc = rc;
      end
      unique case (t.kind)
        H_HEADER: begin
          logic [PLENW-1:0] pay;
          pay = s.hdr.pkt_len - nc.me.user_hdr_bytes;
          if (rc == RC_DROP_PENDING || rc == RC_PROCESS_DATA_PENDING || rc == RC_PROCEED_PENDING)
            nc.pending = 1'b1;
          if (rc == RC_PROCESS_DATA || rc == RC_PROCESS_DATA_PENDING) begin
            nc.phase = P_DATA;
            if (nc.me.ph_en && s.hdr.pkt_len > nc.me.user_hdr_bytes) begin
              tq_push = 1'b1;
              tq_din  = '{kind: H_PAYLOAD, chan: t.chan, slot: t.slot};
              nc.outstanding = nc.outstanding + 1'b1;
            end else if (!nc.me.ph_en) begin
              dq_push = 1'b1; dq_din = t.slot;
              nc.outstanding = nc.outstanding + 1'b1;
            end else begin
              pkt_account = 1'b1; free_it = 1'b1; pslot = t.slot; plen = s.hdr.pkt_len;
            end
          end else if (rc == RC_PROCEED || rc == RC_PROCEED_PENDING) begin
            nc.phase = P_PROCEED;
            dq_push = 1'b1; dq_din = t.slot;
            nc.outstanding = nc.outstanding + 1'b1;
          end else begin
            // DROP, DROP_PENDING, FAIL, SEGV: discard the message
            nc.phase = P_DROP;
            // only payload bytes (not the user header) count as dropped
            pkt_account = 1'b1; free_it = 1'b1; pslot = t.slot; plen = s.hdr.pkt_len;
            nc.dropped = nc.dropped + LENW'(pay);
          end
          do_check = 1'b1;
        end
        H_PAYLOAD: begin
          pkt_account = 1'b1; free_it = 1'b1; pslot = t.slot; plen = s.hdr.pkt_len;
          if (rc == RC_DROP) begin
            logic [PLENW-1:0] uh;
            uh = s.hdr.is_header ? nc.me.user_hdr_bytes : PLENW'(0);
            nc.dropped = nc.dropped + LENW'(s.hdr.pkt_len - uh);
          end
          do_check = 1'b1;
        end
        default: begin
          // completion handler: finish the message
          if (rc == RC_SUCCESS_PENDING) nc.pending = 1'b1;
          if (is_err(rc) && !nc.err) begin nc.err = 1'b1; nc.first_err = rc; end
          nc.phase = P_CMP;
          ev_valid = 1'b1;   // completion event replaces the error event
          ev.kind = EV_COMPLETE; ev.me_idx = nc.me_idx; ev.pt_index = nc.me.pt_index;
          ev.rc = nc.err ? nc.first_err : RC_SUCCESS;
          ev.dropped_bytes = nc.dropped; ev.fc_triggered = nc.fc;
          me_unlink_valid = !nc.pending; me_unlink_idx = nc.me_idx;
          cam_rm_valid = 1'b1; cam_rm_chan = t.chan;
          nc.active = 1'b0;
        end
      endcase
    end else if (do_dd) begin
      // --------------------------------------- a deposit has finished
      s  = sl[dd_head];
      sc = s.chan;
      nc = ch[s.chan];
      nc_we = 1'b1;
      nc.outstanding = nc.outstanding - 1'b1;
      pkt_account = 1'b1; free_it = 1'b1; pslot = dd_head; plen = s.hdr.pkt_len;
      do_check = 1'b1;
    end else if (do_fe) begin
      // ------------------------------------ the looked-up new packet
      s.hdr = cur.hdr;
      if (cur.hdr.is_header) begin
        if (cur_blocked || !cam_ins_ok) begin
          // no buffer, portal entry in flow control, or no free channel
          free_it = cur.stored; pslot = cur.slot;
          if (!pt_fc[cur.hdr.pt_index]) begin
            set_fc = 1'b1;
            ev_valid = 1'b1; ev.kind = EV_FLOWCTL; ev.pt_index = cur.hdr.pt_index;
          end
        end else if (!res_hit) begin
          free_it = 1'b1; pslot = cur.slot;
          ev_valid = 1'b1; ev.kind = EV_NOMATCH; ev.pt_index = cur.hdr.pt_index;
        end else begin
          cam_ins_valid = 1'b1;
          sc = cam_ins_chan;
          nc_we = 1'b1;
          nc = '0;
          nc.active = 1'b1;
          nc.me_idx = res_me_idx;
          nc.me = res_me;
          nc.msg_len = cur.hdr.length;
          nc.me_offset = cur.hdr.offset;
          ns_we = 1'b1; ss = cur.slot;
          ns.parked = 1'b0; ns.chan = cam_ins_chan; ns.hdr = cur.hdr;
          if (res_me.hh_en) begin
            nc.phase = P_HDR;
            nc.outstanding = 8'd1;
            tq_push = 1'b1;
            tq_din = '{kind: H_HEADER, chan: cam_ins_chan, slot: cur.slot};
          end else begin
            nc.phase = P_DATA;
            pkt_arrive = 1'b1; pslot = cur.slot; plen = cur.hdr.pkt_len;
          end
        end
      end else if (!res_hit || !ch[res_chan].active) begin
        // no open message for this packet
        free_it = cur.stored; pslot = cur.slot;
        orphan = 1'b1;
      end else begin
        sc = res_chan;
        nc = ch[res_chan];
        nc_we = 1'b1;
        if (cur_blocked) begin
          free_it = cur.stored; pslot = cur.slot;
          pkt_account = 1'b1; pkt_dropped = 1'b1; plen = cur.hdr.pkt_len;
          nc.fc = 1'b1;
          if (!pt_fc[cur.hdr.pt_index]) begin
            set_fc = 1'b1;
            ev_valid = 1'b1; ev.kind = EV_FLOWCTL; ev.pt_index = cur.hdr.pt_index;
          end
          do_check = 1'b1;
        end else begin
          ns_we = 1'b1; ss = cur.slot;
          ns.parked = 1'b0; ns.chan = res_chan; ns.hdr = cur.hdr;
          pkt_arrive = 1'b1; pslot = cur.slot; plen = cur.hdr.pkt_len;
        end
      end
    end else if (do_scan) begin
      // ---------- release one parked packet whose header handler returned
      if (sl[scan_idx].parked && ch[sl[scan_idx].chan].phase != P_HDR) begin
        sc = sl[scan_idx].chan;
        nc = ch[sc];
        nc_we = 1'b1;
        ns_we = 1'b1; ss = scan_idx;
        ns = sl[scan_idx];
        ns.parked = 1'b0;
        pkt_arrive = 1'b1; pslot = scan_idx; plen = sl[scan_idx].hdr.pkt_len;
      end
    end

    // a stored packet meets its message
    if (pkt_arrive) begin
      unique case (nc.phase)
        P_HDR: begin
          ns.parked = 1'b1;
        end
        P_DATA: begin
          logic [PLENW-1:0] skip;
          skip = ns.hdr.is_header ? nc.me.user_hdr_bytes : '0;
          if (nc.me.ph_en && plen > skip) begin
            tq_push = 1'b1;
            tq_din  = '{kind: H_PAYLOAD, chan: sc, slot: pslot};
            nc.outstanding = nc.outstanding + 1'b1;
          end else if (!nc.me.ph_en) begin
            dq_push = 1'b1; dq_din = pslot;
            nc.outstanding = nc.outstanding + 1'b1;
          end else begin
            pkt_account = 1'b1; free_it = 1'b1;
            do_check = 1'b1;
          end
        end
        P_PROCEED: begin
          dq_push = 1'b1; dq_din = pslot;
          nc.outstanding = nc.outstanding + 1'b1;
        end
        default: begin
          pkt_account = 1'b1; pkt_dropped = 1'b1; free_it = 1'b1;
          do_check = 1'b1;
        end
      endcase
    end

    if (free_it) begin
      free_valid = 1'b1;
      free_slot  = pslot;
    end
    if (pkt_account) begin
      nc.accounted = nc.accounted + LENW'(plen);
      if (pkt_dropped) nc.dropped = nc.dropped + LENW'(plen);
    end

    // is the message done?
    if (do_check && nc.active && nc.phase != P_HDR && nc.phase != P_CMP &&
        nc.accounted >= nc.msg_len && nc.outstanding == 0) begin
      if (nc.me.ch_en && nc.phase != P_PROCEED && !tq_push) begin
        tq_push = 1'b1;
        tq_din  = '{kind: H_COMPLETION, chan: sc, slot: '0};
        nc.outstanding = 8'd1;
        nc.phase = P_CMP;
      end else if (!(nc.me.ch_en && nc.phase != P_PROCEED)) begin
        ev_valid = 1'b1;
        ev.kind = EV_COMPLETE; ev.me_idx = nc.me_idx; ev.pt_index = nc.me.pt_index;
        ev.rc = nc.err ? nc.first_err : RC_SUCCESS;
        ev.dropped_bytes = nc.dropped; ev.fc_triggered = nc.fc;
        me_unlink_valid = !nc.pending; me_unlink_idx = nc.me_idx;
        cam_rm_valid = 1'b1; cam_rm_chan = sc;
        nc.active = 1'b0;
      end
    end
  end

  // ------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE;
      cur <= '0;
      res_hit <= 1'b0; res_me_idx <= '0; res_me <= '0; res_chan <= '0;
      for (int i = 0; i < N_CH; i++) ch[i] <= '0;
      for (int i = 0; i < N_SLOTS; i++) sl[i] <= '0;
      busy <= '0;
      for (int h = 0; h < N_HPU; h++) begin
        run[h] <= '0; hpu_start[h] <= 1'b0; hpu_task[h] <= '0;
      end
      scan_idx <= '0;
      ct_pend <= 1'b0; ct_req <= '0;
      pt_fc <= '0;
      orphan_drops <= '0;
    end else begin
      // front end
      unique case (fst)
        F_IDLE:   if (desc_valid) begin cur <= desc; fst <= F_LOOK; end
        F_LOOK: begin
          if (cur.hdr.is_header) begin
            if (cur_blocked) begin res_hit <= 1'b0; fst <= F_RESULT; end
            else if (!me_lk_busy) fst <= F_MEWAIT;
          end else if (!cam_lk_busy) fst <= F_CAMWAIT;
        end
        F_MEWAIT: if (me_lk_done) begin
          res_hit <= me_lk_hit; res_me_idx <= me_lk_idx; res_me <= me_lk_me;
          fst <= F_RESULT;
        end
        F_CAMWAIT: if (cam_lk_done) begin
          res_hit <= cam_lk_hit; res_chan <= cam_lk_chan;
          fst <= F_RESULT;
        end
        default:  if (do_fe) fst <= F_IDLE;
      endcase

      // state tables
      if (nc_we) ch[sc] <= nc;
      if (ns_we) sl[ss] <= ns;
      pt_fc <= (pt_fc | (set_fc ? (NUM_PT'(1) << set_fc_pt) : '0)) & ~pt_enable;
      if (orphan) orphan_drops <= orphan_drops + 1'b1;

      // counter increment of a completed message
      if (ct_pend && ct_gnt) begin ct_pend <= 1'b0; ct_req.valid <= 1'b0; end
      if (ev_valid && ev.kind == EV_COMPLETE) begin
        ct_pend <= 1'b1;
        ct_req  <= '{valid: 1'b1, op: CT_INC, idx: ch[sc].me.ct_index, val: 64'd1};
      end

      // scan of parked packets after a header handler
      if (do_scan) scan_idx <= (scan_idx == SLOTW'(N_SLOTS - 1)) ? '0 : scan_idx + 1'b1;

      // dispatch and return of handlers
      for (int h = 0; h < N_HPU; h++) hpu_start[h] <= 1'b0;
      if (disp) begin
        busy[disp_h]      <= 1'b1;
        run[disp_h]       <= tq_head;
        hpu_start[disp_h] <= 1'b1;
        hpu_task[disp_h]  <= make_task(tq_head, (nc_we && sc == tq_head.chan) ? nc : ch[tq_head.chan],
                                       sl[tq_head.slot]);
      end
      if (do_hd) busy[hd_h] <= 1'b0;
    end
  end
endmodule
