// tb_pkt_scheduler: self-checking test of the sPIN handler scheduler.
// The scheduler runs with the real ME table and channel CAM; the HPUs,
// the DMA unit, the counters and the ingress are behavioural models. Six
// messages exercise: header handler first and alone, payload handlers in
// parallel, completion handler last with the dropped-byte count, PROCEED
// (DMA deposit to the ME's host memory), DROP_PENDING (ME stays linked),
// no match, packets of unknown messages, flow control and its re-enable,
// and handler errors. The header-to-handler latency is checked against the
// 75-cycle matching time.
module tb_pkt_scheduler;
  import spin_pkg::*;
  localparam int NH = NUM_HPUS;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  int cyc = 0;
  always @(posedge clk) cyc++;

  // --------------------------------------------------------- DUT + tables
  logic desc_valid, desc_ready, free_valid;
  pkt_desc_t desc;
  logic [SLOTW-1:0] free_slot;
  logic me_lk_valid, me_lk_busy, me_lk_done, me_lk_hit, me_unlink_valid;
  logic [PTW-1:0] me_lk_pt;
  logic [63:0] me_lk_bits;
  logic [MEW-1:0] me_lk_idx, me_unlink_idx, me_wr_idx, me_rd_idx;
  me_t me_lk_me, me_wr, me_rd;
  logic me_wr_valid;
  logic cam_ins_valid, cam_ins_ok, cam_lk_valid, cam_lk_busy, cam_lk_done, cam_lk_hit, cam_rm_valid;
  logic [31:0] cam_ins_key, cam_lk_key;
  logic [CHW-1:0] cam_ins_chan, cam_lk_chan, cam_rm_chan;
  logic hpu_start [NH], hpu_done [NH], hpu_ack [NH];
  hpu_task_t hpu_task [NH];
  ret_code_e hpu_rc [NH];
  dma_req_t dep_req;
  logic dep_ready, dep_done;
  logic [7:0] dep_done_tag;
  logic ev_valid;
  event_t ev;
  ct_req_t ct_req;
  logic ct_gnt;
  logic [NUM_PT-1:0] pt_enable, pt_fc;
  logic [15:0] orphan_drops;

  me_table u_me (.clk, .rst_n, .wr_valid(me_wr_valid), .wr_idx(me_wr_idx), .wr_me(me_wr),
    .unlink_valid(me_unlink_valid), .unlink_idx(me_unlink_idx), .lk_valid(me_lk_valid),
    .lk_pt(me_lk_pt), .lk_bits(me_lk_bits), .lk_busy(me_lk_busy), .lk_done(me_lk_done),
    .lk_hit(me_lk_hit), .lk_idx(me_lk_idx), .lk_me(me_lk_me), .rd_idx(me_rd_idx), .rd_me(me_rd));
  channel_cam u_cam (.clk, .rst_n, .ins_valid(cam_ins_valid), .ins_key(cam_ins_key),
    .ins_ok(cam_ins_ok), .ins_chan(cam_ins_chan), .lk_valid(cam_lk_valid), .lk_key(cam_lk_key),
    .lk_busy(cam_lk_busy), .lk_done(cam_lk_done), .lk_hit(cam_lk_hit), .lk_chan(cam_lk_chan),
    .rm_valid(cam_rm_valid), .rm_chan(cam_rm_chan), .used());
  pkt_scheduler dut (.clk, .rst_n, .desc_valid, .desc, .desc_ready, .free_valid, .free_slot,
    .me_lk_valid, .me_lk_pt, .me_lk_bits, .me_lk_busy, .me_lk_done, .me_lk_hit, .me_lk_idx,
    .me_lk_me, .me_unlink_valid, .me_unlink_idx, .cam_ins_valid, .cam_ins_key, .cam_ins_ok,
    .cam_ins_chan, .cam_lk_valid, .cam_lk_key, .cam_lk_busy, .cam_lk_done, .cam_lk_hit,
    .cam_lk_chan, .cam_rm_valid, .cam_rm_chan, .hpu_start, .hpu_task, .hpu_done, .hpu_rc,
    .hpu_ack, .dep_req, .dep_ready, .dep_done, .dep_done_tag, .ev_valid, .ev, .ct_req, .ct_gnt,
    .pt_enable, .pt_fc, .orphan_drops);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ HPU model
  // Return codes by ME index and handler kind, set by the test.
  ret_code_e rc_tab [NUM_ME][3];
  int        dly_tab [3] = '{40, 30, 10};
  int        nrun [NUM_ME][3];        // handlers started
  int        first_start [NUM_ME][3];
  int        last_end [NUM_ME][3];
  int        drop_arg [NUM_ME];       // completion handler dropped_bytes
  int        nbusy = 0, max_busy [NUM_ME];
  int        busy_me [NH];
  int        hdr_start_cyc = 0;

  for (genvar h = 0; h < NH; h++) begin : g_hpu
    initial begin
      hpu_done[h] = 0; hpu_rc[h] = RC_SUCCESS; busy_me[h] = -1;
      forever begin
        hpu_task_t t;
        int k, m;
        @(posedge clk);
        if (rst_n && hpu_start[h]) begin
          t = hpu_task[h];
          k = int'(t.kind); m = int'(t.me_idx);
          if (nrun[m][k] == 0) first_start[m][k] = cyc;
          nrun[m][k]++;
          if (k == 0) hdr_start_cyc = cyc;
          if (k == 1) chk(nrun[m][0] == 0 || last_end[m][0] > 0, "payload handler after header handler");
          if (k == 2) begin
            drop_arg[m] = int'(t.dropped_bytes);
            chk(nbusy_of(m) == 0, "completion handler runs alone");
          end
          busy_me[h] = m;
          nbusy++;
          if (nbusy_of(m) > max_busy[m]) max_busy[m] = nbusy_of(m);
          repeat (dly_tab[k] + int'($urandom_range(0, 6))) @(posedge clk);
          #1;
          hpu_rc[h] = rc_tab[m][k];
          hpu_done[h] = 1;
          do @(posedge clk); while (!hpu_ack[h]);
          #1;
          hpu_done[h] = 0;
          busy_me[h] = -1;
          nbusy--;
          last_end[m][k] = cyc;
        end
      end
    end
  end
  function automatic int nbusy_of(int m);
    int n = 0;
    for (int h = 0; h < NH; h++) if (busy_me[h] == m) n++;
    return n;
  endfunction

  // ------------------------------------------------------------ DMA model
  int ndep [NUM_ME];
  logic [63:0] dep_addr_q [$];
  int dep_tag_q [$], dep_time_q [$];
  assign dep_ready = 1'b1;
  always @(posedge clk) begin
    dep_done <= 0;
    if (rst_n && dep_req.valid) begin
      dep_addr_q.push_back(dep_req.host_addr);
      dep_tag_q.push_back(int'(dep_req.tag));
      dep_time_q.push_back(cyc + 20);
    end
    if (dep_time_q.size() > 0 && dep_time_q[0] <= cyc) begin
      dep_done <= 1;
      dep_done_tag <= 8'(dep_tag_q.pop_front());
      void'(dep_time_q.pop_front());
    end
  end

  // --------------------------------------------------- counters / events
  int nct = 0;
  assign ct_gnt = ct_req.valid;
  always @(posedge clk) if (rst_n && ct_req.valid) nct++;
  event_t evq [$];
  always @(posedge clk) if (rst_n && ev_valid) evq.push_back(ev);

  // ------------------------------------------------------ slot pool
  bit slot_free [NUM_SLOTS];
  always @(posedge clk) if (rst_n && free_valid) begin
    chk(!slot_free[free_slot], "slot freed twice");
    slot_free[free_slot] = 1;
  end

  task automatic send(bit hdr, int pt, int msg, int len, int off, int plen, logic [63:0] bits,
                      bit stored = 1);
    pkt_desc_t d;
    int s = -1;
    if (stored) begin
      while (s < 0) begin
        for (int i = 0; i < NUM_SLOTS; i++) if (s < 0 && slot_free[i]) s = i;
        if (s < 0) @(posedge clk);
      end
      slot_free[s] = 0;
    end
    d = '0;
    d.stored = stored;
    d.slot = SLOTW'(s < 0 ? 0 : s);
    d.hdr.is_header = hdr;
    d.hdr.pt_index = PTW'(pt);
    d.hdr.source_id = 16'd1;
    d.hdr.msg_id = 16'(msg);
    d.hdr.match_bits = bits;
    d.hdr.length = 32'(len);
    d.hdr.offset = 32'd0;
    d.hdr.pkt_offset = 32'(off);
    d.hdr.pkt_len = PLENW'(plen);
    @(negedge clk);
    desc = d; desc_valid = 1;
    @(posedge clk);
    while (!desc_ready) @(posedge clk);
    #1 desc_valid = 0;
  endtask

  task automatic set_me(int idx, int pt, logic [63:0] bits, bit hh, bit ph, bit chd,
                        int uhdr = 0);
    me_t m = '0;
    m.valid = 1; m.pt_index = PTW'(pt); m.match_bits = bits; m.ignore_bits = '0;
    m.hh_en = hh; m.ph_en = ph; m.ch_en = chd;
    m.hh_pc = 16'h100; m.ph_pc = 16'h200; m.ch_pc = 16'h300;
    m.host_base = 64'h10000 * 64'(idx + 1); m.host_len = 32'h10000;
    m.ct_index = CTW'(idx);
    m.user_hdr_bytes = PLENW'(uhdr);
    @(negedge clk);
    me_wr_valid = 1; me_wr_idx = MEW'(idx); me_wr = m;
    @(negedge clk);
    me_wr_valid = 0;
  endtask

  function automatic int count_ev(ev_kind_e k, int me);
    int n = 0;
    foreach (evq[i]) if (evq[i].kind == k && (me < 0 || int'(evq[i].me_idx) == me)) n++;
    return n;
  endfunction
  function automatic event_t find_ev(ev_kind_e k, int me);
    foreach (evq[i]) if (evq[i].kind == k && int'(evq[i].me_idx) == me) return evq[i];
    return '0;
  endfunction

  task automatic settle();
    repeat (600) @(posedge clk);
  endtask

  initial begin
    int t0;
    event_t e;
    desc_valid = 0; desc = '0; me_wr_valid = 0; me_wr_idx = '0; me_wr = '0; me_rd_idx = '0;
    pt_enable = '0; dep_done = 0; dep_done_tag = '0;
    for (int i = 0; i < NUM_SLOTS; i++) slot_free[i] = 1;
    for (int m = 0; m < NUM_ME; m++) begin
      max_busy[m] = 0; drop_arg[m] = -1; ndep[m] = 0;
      for (int k = 0; k < 3; k++) begin
        nrun[m][k] = 0; first_start[m][k] = 0; last_end[m][k] = 0; rc_tab[m][k] = RC_SUCCESS;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---- message 1: all three handlers, PROCESS_DATA, 4 packets of 1 KiB
    set_me(1, 0, 64'hA1, 1, 1, 1);
    rc_tab[1][0] = RC_PROCESS_DATA; rc_tab[1][1] = RC_SUCCESS; rc_tab[1][2] = RC_SUCCESS;
    t0 = cyc;
    send(1, 0, 1, 4096, 0, 1024, 64'hA1);
    for (int p = 1; p < 4; p++) send(0, 0, 1, 4096, p * 1024, 1024, 64'hA1);
    settle();
    chk(hdr_start_cyc - t0 <= MATCH_CYCLES + 8 && hdr_start_cyc - t0 >= MATCH_CYCLES,
        $sformatf("header handler started %0d cycles after arrival", hdr_start_cyc - t0));
    chk(nrun[1][0] == 1, "one header handler");
    chk(nrun[1][1] == 4, $sformatf("four payload handlers, got %0d", nrun[1][1]));
    chk(nrun[1][2] == 1, "one completion handler");
    chk(first_start[1][1] >= last_end[1][0], "payload handlers wait for the header handler");
    chk(first_start[1][2] >= last_end[1][1], "completion handler after all payload handlers");
    chk(max_busy[1] >= 2, $sformatf("payload handlers in parallel (max %0d)", max_busy[1]));
    chk(drop_arg[1] == 0, "no dropped bytes");
    e = find_ev(EV_COMPLETE, 1);
    chk(count_ev(EV_COMPLETE, 1) == 1 && e.rc == RC_SUCCESS, "completion event msg 1");
    me_rd_idx = MEW'(1); #1;
    chk(!me_rd.valid, "ME unlinked after the message");
    chk(nct == 1, "counter incremented");

    // ---- message 2: header handler returns PROCEED -> deposits, no more handlers
    set_me(2, 0, 64'hA2, 1, 1, 1);
    rc_tab[2][0] = RC_PROCEED;
    dep_addr_q.delete();
    send(1, 0, 2, 3000, 0, 1024, 64'hA2);
    send(0, 0, 2, 3000, 1024, 1024, 64'hA2);
    send(0, 0, 2, 3000, 2048, 952, 64'hA2);
    settle();
    chk(nrun[2][0] == 1 && nrun[2][1] == 0 && nrun[2][2] == 0, "PROCEED: header handler only");
    chk(dep_addr_q.size() == 3, $sformatf("three deposits, got %0d", dep_addr_q.size()));
    if (dep_addr_q.size() == 3) begin
      dep_addr_q.sort();
      chk(dep_addr_q[0] == 64'h30000 && dep_addr_q[1] == 64'h30400 && dep_addr_q[2] == 64'h30800,
          "deposit addresses = ME base + packet offset");
    end
    chk(count_ev(EV_COMPLETE, 2) == 1, "completion event msg 2");

    // ---- message 3: DROP_PENDING, completion handler sees dropped bytes, ME kept
    set_me(3, 0, 64'hA3, 1, 1, 1, 64);
    rc_tab[3][0] = RC_DROP_PENDING;
    send(1, 0, 3, 1024, 0, 512, 64'hA3);
    send(0, 0, 3, 1024, 512, 512, 64'hA3);
    settle();
    chk(nrun[3][1] == 0 && nrun[3][2] == 1, "DROP: no payload handler, completion runs");
    chk(drop_arg[3] == 512 - 64 + 512, $sformatf("dropped bytes %0d", drop_arg[3]));
    me_rd_idx = MEW'(3); #1;
    chk(me_rd.valid, "PENDING keeps the ME linked");
    e = find_ev(EV_COMPLETE, 3);
    chk(e.dropped_bytes == 32'(512 - 64 + 512), "event carries dropped bytes");

    // ---- no match, and a packet of an unknown message
    send(1, 0, 9, 1024, 0, 512, 64'hDEAD);
    send(0, 0, 9, 1024, 512, 512, 64'hDEAD);
    settle();
    chk(count_ev(EV_NOMATCH, -1) == 1, "no-match event");
    chk(orphan_drops == 16'd1, "packet of unknown message dropped");

    // ---- flow control on portal entry 1
    set_me(4, 1, 64'hA4, 1, 1, 1);
    rc_tab[4][0] = RC_PROCESS_DATA;
    send(1, 1, 4, 512, 0, 512, 64'hA4, 0);      // no buffer slot
    settle();
    chk(pt_fc[1], "portal entry 1 in flow control");
    chk(count_ev(EV_FLOWCTL, -1) == 1, "flow-control event");
    send(1, 1, 5, 512, 0, 512, 64'hA4);         // still refused
    settle();
    chk(nrun[4][0] == 0 && count_ev(EV_FLOWCTL, -1) == 1, "entry stays disabled, one event");
    @(negedge clk); pt_enable = 4'b0010; @(negedge clk); pt_enable = '0;
    chk(!pt_fc[1], "host re-enables the entry");
    send(1, 1, 6, 512, 0, 512, 64'hA4);
    settle();
    chk(nrun[4][0] == 1 && nrun[4][1] == 1 && nrun[4][2] == 1, "message after re-enable runs");

    // ---- handler error, and an ME without header handler
    set_me(5, 0, 64'hA5, 0, 1, 1);
    rc_tab[5][1] = RC_FAIL;
    send(1, 0, 7, 2048, 0, 1024, 64'hA5);
    send(0, 0, 7, 2048, 1024, 1024, 64'hA5);
    settle();
    chk(nrun[5][0] == 0 && nrun[5][1] == 2 && nrun[5][2] == 1, "no header handler installed");
    chk(count_ev(EV_ERROR, 5) == 1, "one error event for the message");
    e = find_ev(EV_COMPLETE, 5);
    chk(count_ev(EV_COMPLETE, 5) == 1 && e.rc == RC_FAIL, "completion reports the failure");

    // ---- ME without handlers: plain deposit
    set_me(6, 0, 64'hA6, 0, 0, 0);
    dep_addr_q.delete();
    send(1, 0, 8, 100, 0, 100, 64'hA6);
    settle();
    chk(dep_addr_q.size() == 1 && count_ev(EV_COMPLETE, 6) == 1, "no handlers: deposit and event");
    for (int i = 0; i < NUM_SLOTS; i++) chk(slot_free[i], $sformatf("slot %0d returned", i));
    chk(nct == 6, $sformatf("counter increments %0d", nct));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
