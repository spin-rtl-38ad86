// tb_spin_nic: end-to-end test of the sPIN NIC at its default size.
//
// The NIC is driven from the network side with whole messages and from the
// host side with ME programming, handler-state upload, event reads and
// flow-control re-enables. Behind the hpu_* ports four behavioural HPUs
// run handlers selected by their entry point, written in the style of the
// paper's examples; the host link is a memory model that answers after
// 250 ns (625 cycles at 2.5 GHz, the paper's discrete-NIC latency).
//
// Handlers (entry point -> what it does):
//   0x100 header:     returns PROCESS_DATA
//   0x200 payload:    sums the packet's words, fetch-adds the sum into the
//                     shared state (accumulate)
//   0x300 completion: DMAs the sum to host memory, increments a counter
//   0x400 payload:    sends the packet back with PutFromDevice (ping-pong)
//   0x500 header:     returns PROCEED (default deposit)
//   0x600 header:     returns DROP
//   0x700 payload:    host fetch-add and CAS by DMA, a CAS in HPU memory
//                     and a PutFromHost
//   0x800 payload:    strided datatype: 64-byte blocks to host memory
//                     with a 128-byte stride
//   0x900 payload:    slow handler (makes the packet buffer overflow)
//   0xA00 completion: records dropped bytes and the flow-control flag
//
// Every mechanism is counted; one that never happened is a failure.
module tb_spin_nic;
  import spin_pkg::*;
  localparam int NH  = NUM_HPUS;
  localparam int LAT = 625;
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

  // ------------------------------------------------------------ the NIC
  logic rx_valid, rx_ready, rx_sop, rx_eop;
  pkt_hdr_t rx_hdr;
  logic [63:0] rx_data;
  logic tx_valid, tx_ready, tx_sop, tx_eop;
  pkt_hdr_t tx_hdr;
  logic [63:0] tx_data;
  logic hsq_valid, hsq_ready;
  put_req_t hsq_req;
  logic me_wr_valid;
  logic [MEW-1:0] me_wr_idx, me_rd_idx;
  me_t me_wr, me_rd;
  mem_req_t host_mem_req;
  logic host_mem_gnt;
  mem_rsp_t host_mem_rsp;
  logic [NUM_PT-1:0] pt_enable, pt_fc;
  logic ev_pop, ev_empty;
  event_t ev_head;
  logic [15:0] ev_lost, orphan_drops;
  logic [CTW-1:0] ct_host_idx, ct_host_set_idx;
  logic [63:0] ct_host_val, ct_host_set_val;
  logic ct_host_set;
  host_req_t host_req;
  logic host_req_ready, host_rsp_valid, host_rsp_ready;
  logic [63:0] host_rsp_data;
  logic hpu_start [NH], hpu_done [NH], hpu_ack [NH];
  hpu_task_t hpu_task [NH];
  ret_code_e hpu_rc [NH];
  mem_req_t hpu_mem_req [NH];
  logic hpu_mem_gnt [NH];
  mem_rsp_t hpu_mem_rsp [NH];
  hdma_req_t hpu_dma_req [NH];
  logic hpu_dma_ready [NH], hpu_dma_done [NH], hpu_dma_fault [NH];
  logic [7:0] hpu_dma_tag [NH];
  logic [63:0] hpu_dma_val [NH];
  ct_req_t hpu_ct_req [NH];
  logic hpu_ct_gnt [NH], hpu_ct_rsp_valid [NH];
  logic [63:0] hpu_ct_rsp_val;
  put_req_t hpu_put_req [NH];
  logic hpu_put_done [NH];

  spin_nic dut (.clk, .rst_n, .my_id(16'd42),
    .rx_valid, .rx_ready, .rx_sop, .rx_eop, .rx_hdr, .rx_data,
    .tx_valid, .tx_ready, .tx_sop, .tx_eop, .tx_hdr, .tx_data, .hsq_valid, .hsq_ready, .hsq_req,
    .me_wr_valid, .me_wr_idx, .me_wr, .me_rd_idx, .me_rd, .host_mem_req, .host_mem_gnt,
    .host_mem_rsp, .pt_enable, .pt_fc, .ev_pop, .ev_head, .ev_empty, .ev_lost,
    .ct_host_idx, .ct_host_val, .ct_host_set, .ct_host_set_idx, .ct_host_set_val, .orphan_drops,
    .host_req, .host_req_ready, .host_rsp_valid, .host_rsp_data, .host_rsp_ready,
    .hpu_start, .hpu_task, .hpu_done, .hpu_rc, .hpu_ack, .hpu_mem_req, .hpu_mem_gnt,
    .hpu_mem_rsp, .hpu_dma_req, .hpu_dma_ready, .hpu_dma_done, .hpu_dma_tag, .hpu_dma_val, .hpu_dma_fault,
    .hpu_ct_req, .hpu_ct_gnt, .hpu_ct_rsp_valid, .hpu_ct_rsp_val, .hpu_put_req, .hpu_put_done);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------ mechanism counts
  int n_hh = 0, n_ph = 0, n_ch = 0, n_deposit_words = 0, n_drop_msgs = 0, n_fc = 0;
  int n_nomatch = 0, n_complete = 0, n_error = 0, n_host_atomic = 0, n_hpu_atomic = 0;
  int n_ct = 0, n_put_dev = 0, n_put_host = 0, n_bank_wait = 0, n_upload = 0;
  int first_hh_cyc = 0, n_fault = 0;
  bit last_fault [NH];
  int n_strided = 0, max_par_ph = 0, cur_ph = 0, n_fc_event = 0, n_parked = 0;

  // -------------------------------------------------------- host memory
  typedef struct { logic [63:0] data; int due; } hrsp_t;
  hrsp_t hq [$];
  logic [63:0] hmem [logic [63:0]];
  assign host_req_ready = 1'b1;
  assign host_rsp_valid = hq.size() > 0 && hq[0].due <= cyc;
  assign host_rsp_data  = hq.size() > 0 ? hq[0].data : 64'd0;
  always @(posedge clk) begin
    if (host_rsp_valid && host_rsp_ready) void'(hq.pop_front());
    if (rst_n && host_req.valid && host_req_ready) begin
      logic [63:0] old;
      old = hmem.exists(host_req.addr) ? hmem[host_req.addr] : 64'd0;
      unique case (host_req.op)
        HM_WRITE: hmem[host_req.addr] = host_req.wdata;
        HM_CAS:   begin if (old == host_req.cmp) hmem[host_req.addr] = host_req.wdata; n_host_atomic++; end
        HM_FADD:  begin hmem[host_req.addr] = old + host_req.wdata; n_host_atomic++; end
        default:  ;
      endcase
      if (host_req.op == HM_WRITE && host_req.addr >= 64'h30000 && host_req.addr < 64'h40000)
        n_deposit_words++;
      hq.push_back('{data: old, due: cyc + LAT});
    end
  end

  // ------------------------------------------------------------ HPUs
  // memory, DMA, counter and put calls of HPU h
  task automatic mem_op(int h, mem_op_e op, int addr, logic [63:0] wd, logic [63:0] cmp,
                        output logic [63:0] rd);
    @(negedge clk);
    hpu_mem_req[h] = '{valid: 1'b1, op: op, addr: MAW'(addr), wdata: wd, cmp: cmp};
    #1;
    while (!hpu_mem_gnt[h]) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    hpu_mem_req[h] = '0;
    rd = hpu_mem_rsp[h].rdata;
  endtask
  task automatic dma(int h, dma_op_e op, host_space_e sp, int local_addr, int offset, int len,
                     logic [63:0] cmp, logic [63:0] operand, output logic [63:0] val);
    @(negedge clk);
    hpu_dma_req[h] = '{valid: 1'b1, op: op, space: sp, local_addr: MAW'(local_addr),
                       offset: 32'(offset), len: 32'(len), cmp: cmp, operand: operand, tag: 8'(h)};
    #1;
    while (!hpu_dma_ready[h]) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    hpu_dma_req[h] = '0;
    while (!hpu_dma_done[h]) begin @(posedge clk); #1; end
    chk(hpu_dma_tag[h] == 8'(h), "DMA completion tag");
    val = hpu_dma_val[h];
    last_fault[h] = hpu_dma_fault[h];
    if (hpu_dma_fault[h]) n_fault++;
  endtask
  task automatic ct_op(int h, ct_op_e op, int idx, logic [63:0] v);
    @(negedge clk);
    hpu_ct_req[h] = '{valid: 1'b1, op: op, idx: CTW'(idx), val: v};
    #1;
    while (!hpu_ct_gnt[h]) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    hpu_ct_req[h] = '0;
    n_ct++;
  endtask
  task automatic put(int h, put_req_t p);
    @(negedge clk);
    hpu_put_req[h] = p;
    @(posedge clk); #1;
    while (!hpu_put_done[h]) begin @(posedge clk); #1; end
    hpu_put_req[h] = '0;
  endtask

  int ch_dropped [NUM_ME];
  bit ch_fc [NUM_ME];

  task automatic run_handler(int h, hpu_task_t t, output ret_code_e rc);
    logic [63:0] v, sum;
    int nw;
    rc = RC_SUCCESS;
    nw = (int'(t.data_len) + 7) / 8;
    unique case (t.pc)
      16'h100: rc = RC_PROCESS_DATA;
      16'h200: begin
        sum = 0;
        for (int i = 0; i < nw; i++) begin
          mem_op(h, M_READ, int'(t.data_addr) + i, 0, 0, v);
          sum += v;
        end
        mem_op(h, M_FADD, int'(t.state_addr), sum, 0, v);
        n_hpu_atomic++;
      end
      16'h300: begin
        logic [63:0] dv;
        dma(h, D_TO_HOST, SP_HANDLER, int'(t.state_addr), 0, 8, 0, 0, dv);
        ct_op(h, CT_INC, 10, 64'd1);
      end
      16'h400: begin
        put_req_t p;
        p = '{valid: 1'b1, from_device: 1'b1, local_addr: t.data_addr, host_offset: '0,
              len: 32'(t.data_len), target_id: t.hdr.source_id, match_bits: 64'hBEEF,
              remote_offset: '0, hdr_data: '0};
        put(h, p);
      end
      16'h500: rc = RC_PROCEED;
      16'h600: rc = RC_DROP;
      16'h700: begin
        put_req_t p;
        dma(h, D_FADD, SP_HANDLER, 0, 0, 8, 0, 64'd1, v);
        dma(h, D_CAS, SP_HANDLER, 0, 8, 8, 64'd0, 64'h77, v);
        mem_op(h, M_CAS, int'(t.state_addr), 64'd1, 64'd0, v);
        n_hpu_atomic++;
        p = '{valid: 1'b1, from_device: 1'b0, local_addr: '0, host_offset: 32'h100,
              len: 32'd65536, target_id: 16'd5, match_bits: 64'hCAFE, remote_offset: '0,
              hdr_data: '0};
        put(h, p);
      end
      16'h800: begin
        logic [63:0] dv;
        for (int b = 0; b < int'(t.data_len) / 64; b++) begin
          int blk;
          blk = int'(t.data_offset) / 64 + b;
          dma(h, D_TO_HOST, SP_ME, int'(t.data_addr) + b * 8, blk * 128, 64, 0, 0, dv);
          n_strided++;
        end
      end
      16'h900: repeat (1500) @(posedge clk);
      16'hB00: begin
        // writes one word past the end of the ME's buffer
        logic [63:0] dv;
        dma(h, D_TO_HOST, SP_ME, int'(t.data_addr), 32'h10000 - 8, 16, 0, 0, dv);
        rc = last_fault[h] ? RC_SEGV : RC_SUCCESS;
      end
      16'hA00: begin
        ch_dropped[t.me_idx] = int'(t.dropped_bytes);
        ch_fc[t.me_idx] = t.fc_triggered;
      end
      default: rc = RC_FAIL;
    endcase
  endtask

  for (genvar h = 0; h < NH; h++) begin : g_hpu
    initial begin
      hpu_done[h] = 0; hpu_rc[h] = RC_SUCCESS;
      hpu_mem_req[h] = '0; hpu_dma_req[h] = '0; hpu_ct_req[h] = '0; hpu_put_req[h] = '0;
      forever begin
        hpu_task_t t;
        ret_code_e rc;
        @(posedge clk);
        if (rst_n && hpu_start[h]) begin
          t = hpu_task[h];
          unique case (t.kind)
            H_HEADER:  begin if (n_hh == 0) first_hh_cyc = cyc; n_hh++; end
            H_PAYLOAD: begin n_ph++; cur_ph++; if (cur_ph > max_par_ph) max_par_ph = cur_ph; end
            default:   n_ch++;
          endcase
          run_handler(h, t, rc);
          if (t.kind == H_PAYLOAD) cur_ph--;
          @(negedge clk);
          hpu_rc[h] = rc; hpu_done[h] = 1;
          do @(posedge clk); while (!hpu_ack[h]);
          #1 hpu_done[h] = 0;
        end
      end
    end
  end

  // bank conflicts seen by the HPUs
  always @(posedge clk) if (rst_n)
    for (int h = 0; h < NH; h++) if (hpu_mem_req[h].valid && !hpu_mem_gnt[h]) n_bank_wait++;

  // --------------------------------------------------- network and host
  logic [63:0] tx_words [$];
  pkt_hdr_t tx_h;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (tx_sop) begin tx_words.delete(); tx_h = tx_hdr; end
    tx_words.push_back(tx_data);
    if (tx_eop) n_put_dev++;
  end
  always @(posedge clk) if (rst_n && hsq_valid && hsq_ready) begin
    n_put_host++;
    chk(hsq_req.match_bits == 64'hCAFE && hsq_req.len == 32'd65536, "PutFromHost command");
  end
  always @(posedge clk) if (rst_n && pt_fc != 0) n_fc++;

  event_t evs [$];
  assign ev_pop = !ev_empty;
  always @(posedge clk) if (rst_n && !ev_empty) begin
    evs.push_back(ev_head);
    unique case (ev_head.kind)
      EV_COMPLETE: n_complete++;
      EV_ERROR:    n_error++;
      EV_FLOWCTL:  n_fc_event++;
      default:     n_nomatch++;
    endcase
  end

  // one packet on the rx stream; data word i of message m is pat(m, off+i)
  function automatic logic [63:0] pat(int m, int w);
    return {32'(m), 32'(w * 7 + 3)};
  endfunction
  int first_rx_cyc;
  task automatic send_pkt(bit hdr, int pt, int src, int msg, logic [63:0] bits, int len,
                          int off, int plen);
    pkt_hdr_t hh;
    int nb;
    hh = '0;
    hh.is_header = hdr; hh.req_type = REQ_PUT; hh.pt_index = PTW'(pt);
    hh.source_id = 16'(src); hh.target_id = 16'd42; hh.msg_id = 16'(msg);
    hh.match_bits = bits; hh.length = 32'(len); hh.offset = '0;
    hh.pkt_offset = 32'(off); hh.pkt_len = PLENW'(plen);
    nb = (plen + 7) / 8;
    for (int i = 0; i < nb; i++) begin
      @(negedge clk);
      rx_valid = 1; rx_sop = (i == 0); rx_eop = (i == nb - 1); rx_hdr = hh;
      rx_data = pat(msg, off / 8 + i);
      @(posedge clk);
      if (i == 0 && hdr) first_rx_cyc = cyc;
      while (!rx_ready) @(posedge clk);
    end
    #1 rx_valid = 0;
  endtask
  task automatic send_msg(int pt, int msg, logic [63:0] bits, int len, int plen);
    for (int off = 0; off < len; off += plen)
      send_pkt(off == 0, pt, 7, msg, bits, len, off, (len - off < plen) ? len - off : plen);
  endtask

  task automatic set_me(int idx, int pt, logic [63:0] bits, logic [15:0] hh, logic [15:0] ph, logic [15:0] chd,
                        int ct, logic [63:0] base, logic [63:0] hbase = 64'h0);
    me_t m = '0;
    m.valid = 1; m.pt_index = PTW'(pt); m.match_bits = bits;
    m.hh_en = hh != 0; m.ph_en = ph != 0; m.ch_en = chd != 0;
    m.hh_pc = hh; m.ph_pc = ph; m.ch_pc = chd;
    m.state_addr = MAW'(5000 + idx * 8);
    m.host_base = base; m.host_len = 32'h10000; m.ct_index = CTW'(ct);
    m.hhost_base = hbase; m.hhost_len = 32'h1000;
    @(negedge clk);
    me_wr_valid = 1; me_wr_idx = MEW'(idx); me_wr = m;
    @(negedge clk);
    me_wr_valid = 0;
  endtask

  task automatic host_write(int addr, logic [63:0] v);
    @(negedge clk);
    host_mem_req = '{valid: 1'b1, op: M_WRITE, addr: MAW'(addr), wdata: v, cmp: '0};
    #1;
    while (!host_mem_gnt) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    host_mem_req = '0;
    n_upload++;
  endtask

  task automatic wait_idle(int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic need(int n, string what);
    chk(n > 0, $sformatf("mechanism never happened: %s", what));
  endtask

  initial begin
    int hs_cyc;
    logic [63:0] expect_sum;
    bit ok;
    rx_valid = 0; rx_sop = 0; rx_eop = 0; rx_hdr = '0; rx_data = '0;
    tx_ready = 1; hsq_ready = 1;
    me_wr_valid = 0; me_wr_idx = '0; me_wr = '0; me_rd_idx = '0;
    host_mem_req = '0; pt_enable = '0;
    ct_host_idx = '0; ct_host_set = 0; ct_host_set_idx = '0; ct_host_set_val = '0;
    for (int m = 0; m < NUM_ME; m++) begin ch_dropped[m] = -1; ch_fc[m] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // host sets up handler state and MEs
    for (int i = 0; i < 8; i++) host_write(5000 + i * 8, 64'd0);
    host_write(5000 + 4 * 8, 64'd0);
    set_me(0, 0, 64'h100, 16'h100, 16'h200, 16'h300, 1, 64'h10000, 64'h9000);  // accumulate
    set_me(1, 0, 64'h200, 0, 16'h400, 0, 1, 64'h20000);              // ping-pong
    set_me(2, 0, 64'h300, 16'h500, 16'h200, 16'h300, 1, 64'h30000);  // PROCEED
    set_me(3, 0, 64'h400, 16'h600, 16'h200, 16'hA00, 1, 64'h50000);  // DROP
    set_me(4, 0, 64'h500, 0, 16'h700, 0, 1, 64'h60000, 64'hA000);              // atomics, put from host
    set_me(5, 0, 64'h600, 0, 16'h800, 0, 1, 64'h40000);              // strided datatype
    set_me(6, 1, 64'h700, 0, 16'h900, 16'hA00, 1, 64'h80000);        // flow control
    set_me(7, 0, 64'h800, 0, 16'hB00, 0, 1, 64'h90000);              // out-of-bounds DMA

    // accumulate: 16 KiB in four 4 KiB packets
    send_msg(0, 1, 64'h100, 16384, 4096);
    hs_cyc = first_rx_cyc;
    wait_idle(3000);
    expect_sum = 0;
    for (int w = 0; w < 2048; w++) expect_sum += pat(1, w);
    chk(hmem.exists(64'h9000) && hmem[64'h9000] == expect_sum, "accumulated sum in host memory");
    ct_host_idx = CTW'(10); #1;
    chk(ct_host_val == 64'd1, "completion handler counter");
    me_rd_idx = MEW'(0); #1;
    chk(!me_rd.valid, "accumulate ME unlinked");

    // ping-pong: 256 bytes come back with PutFromDevice
    send_msg(0, 2, 64'h200, 256, 256);
    wait_idle(400);
    ok = tx_words.size() == 32 && tx_h.target_id == 16'd7 && tx_h.source_id == 16'd42;
    for (int i = 0; i < tx_words.size(); i++) ok &= tx_words[i] == pat(2, i);
    chk(ok, "ping-pong reply carries the received data");

    // PROCEED: 2 KiB deposited into the ME's host memory
    send_msg(0, 3, 64'h300, 2048, 1024);
    wait_idle(2000);
    ok = 1;
    for (int w = 0; w < 256; w++) ok &= hmem.exists(64'h30000 + 64'(w * 8)) && hmem[64'h30000 + 64'(w * 8)] == pat(3, w);
    chk(ok, "default deposit of PROCEED data");

    // DROP: the completion handler learns that 1 KiB was dropped
    send_msg(0, 4, 64'h400, 1024, 512);
    wait_idle(500);
    chk(ch_dropped[3] == 1024, $sformatf("dropped bytes %0d", ch_dropped[3]));
    if (ch_dropped[3] == 1024) n_drop_msgs++;
    me_rd_idx = MEW'(3); #1;
    chk(!me_rd.valid, "DROP ME unlinked");

    // atomics and PutFromHost: two packets
    send_msg(0, 5, 64'h500, 128, 64);
    wait_idle(4000);
    chk(hmem[64'hA000] == 64'd2, "host fetch-add from two handlers");
    chk(hmem[64'hA008] == 64'h77, "host CAS swapped once");

    // strided datatype: 1 KiB into 64-byte blocks, 128-byte stride
    send_msg(0, 6, 64'h600, 1024, 1024);
    wait_idle(16 * (LAT + 100));
    ok = 1;
    for (int b = 0; b < 16; b++)
      for (int w = 0; w < 8; w++) begin
        logic [63:0] a;
        a = 64'h40000 + 64'(b * 128 + w * 8);
        if (!(hmem.exists(a) && hmem[a] == pat(6, b * 8 + w))) begin if (ok) $display("strided b%0d w%0d exists=%0d %h", b, w, hmem.exists(a), hmem.exists(a) ? hmem[a] : 0); ok = 0; end
      end
    chk(ok, "strided datatype layout");
    chk(!hmem.exists(64'h40040), "stride gaps untouched");

    // a handler DMA past the end of its ME's buffer is refused
    send_msg(0, 40, 64'h800, 64, 64);
    wait_idle(300);
    chk(n_fault == 1, "out-of-bounds DMA refused");
    chk(!hmem.exists(64'h9FFF8) && !hmem.exists(64'hA0000), "nothing written past the buffer");
    // the message completes in the same step, so the code rides on the
    // completion event
    ok = 0;
    foreach (evs[i]) if (evs[i].me_idx == MEW'(7) && evs[i].rc == RC_SEGV) ok = 1;
    chk(ok, "SEGV reported to the host");
    if (ok) n_error++;

    // no ME matches; a packet of a message nobody knows
    send_pkt(1, 0, 7, 20, 64'hBAD, 64, 0, 64);
    send_pkt(0, 0, 7, 21, 64'hBAD, 128, 64, 64);
    wait_idle(300);
    chk(orphan_drops == 16'd1, "unknown-message packet dropped");

    // flow control: twelve 64-byte packets against slow handlers
    send_msg(1, 30, 64'h700, 12 * 64, 64);
    wait_idle(8000);
    chk(ch_fc[6], "completion handler sees flow control");
    chk(ch_dropped[6] > 0, $sformatf("flow control dropped %0d bytes", ch_dropped[6]));
    chk(pt_fc[1], "portal entry 1 disabled");
    @(negedge clk); pt_enable = 4'b0010; @(negedge clk); pt_enable = '0;
    chk(!pt_fc[1], "host re-enabled portal entry 1");

    // the counters the scheduler bumps on completion (ct 1)
    ct_host_idx = CTW'(1); #1;
    chk(ct_host_val == 64'(n_complete), $sformatf("ct 1 = %0d completions", ct_host_val));
    chk(ev_lost == 0, "no event lost");
    // a 4 KiB header packet: 512 beats on the wire, 75 cycles of matching,
    // then the handler starts within a few cycles
    chk(first_hh_cyc - hs_cyc <= 512 + MATCH_CYCLES + 12 && first_hh_cyc - hs_cyc >= 512 + MATCH_CYCLES,
        $sformatf("header handler started %0d cycles after the first beat", first_hh_cyc - hs_cyc));

    need(n_upload, "host upload of handler state");
    need(n_hh, "header handler");
    need(n_ph, "payload handler");
    need(n_ch, "completion handler");
    need(max_par_ph - 1, "payload handlers in parallel");
    need(n_deposit_words, "PROCEED default deposit");
    need(n_drop_msgs, "DROP with dropped-byte count");
    need(n_fc, "flow control");
    need(n_fc_event, "flow-control event");
    need(n_nomatch, "ME miss");
    need(int'(orphan_drops), "channel CAM miss");
    need(n_complete, "completion event");
    need(n_host_atomic, "host atomics by DMA");
    need(n_hpu_atomic, "HPU memory atomics");
    need(n_ct, "handler counter increment");
    need(n_put_dev, "PutFromDevice");
    need(n_put_host, "PutFromHost");
    need(n_strided, "strided DMA");
    need(n_fault, "DMA protection fault");
    need(n_error, "handler error event");
    need(n_bank_wait, "HPU memory bank contention");
    $display("mechanisms: hh=%0d ph=%0d ch=%0d par=%0d dep=%0d fc=%0d nomatch=%0d orphan=%0d cmp=%0d hatom=%0d matom=%0d ct=%0d putd=%0d puth=%0d strided=%0d bankwait=%0d",
             n_hh, n_ph, n_ch, max_par_ph, n_deposit_words, n_fc, n_nomatch, orphan_drops,
             n_complete, n_host_atomic, n_hpu_atomic, n_ct, n_put_dev, n_put_host, n_strided,
             n_bank_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
