// dma_unit: DMA between the shared HPU memory and host memory.
//
// Serves the handlers' DMA calls (to host, from host, and the host-memory
// atomics compare-and-swap and fetch-and-add) and the scheduler's default
// deposit of packets into the ME's host memory. Commands are taken one at
// a time, round-robin over the requesters, and split into 64-bit word
// requests on the host port. The host port answers in order, one response
// per request (write acknowledgements included), after the host link's
// latency; the unit keeps up to INFLIGHT word requests outstanding, so a
// long transfer streams at one word per cycle and the next command starts
// issuing while the previous one still waits for its answers. This is the
// pipelining of DMA requests that the paper relies on for large messages.
//
// Interface: req[r] is held by requester r until req_ready[r]. done[r] is a
// one-cycle pulse when the last answer of a command has arrived, with the
// command's tag and, for CAS / fetch-add, the old host value (the caller
// decides success from it). Handles are kept by the requester; the tag is
// how it recognises the completion. host_req/host_req_ready and
// host_rsp_*/host_rsp_ready are valid/ready channels to the host link.
// Transfers must be 8-byte aligned and a positive multiple of 8 bytes.
//
// Latency and bandwidth of the host link (250 ns, 64 GiB/s for PCIe;
// 50 ns, 150 GiB/s integrated) are outside this block. The word width,
// the command-at-a-time issue and round-robin order are this design's.
module dma_unit
  import spin_pkg::*;
#(
  parameter int unsigned NREQ     = NUM_HPUS + 1,
  parameter int unsigned INFLIGHT = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  dma_req_t    req       [NREQ],
  output logic        req_ready [NREQ],
  output logic        done      [NREQ],
  output logic [7:0]  done_tag  [NREQ],
  output logic [63:0] done_val  [NREQ],
  // shared HPU memory port
  output mem_req_t    mem_req,
  input  logic        mem_gnt,
  input  mem_rsp_t    mem_rsp,
  // host link
  output host_req_t   host_req,
  input  logic        host_req_ready,
  input  logic        host_rsp_valid,
  input  logic [63:0] host_rsp_data,
  output logic        host_rsp_ready
);
  localparam int unsigned RW = (NREQ > 1) ? $clog2(NREQ) : 1;

  // bookkeeping of one outstanding host word request
  typedef struct packed {
    logic           to_mem;     // response data goes to HPU memory
    logic [MAW-1:0] local_addr;
    logic           last;
    logic [RW-1:0]  who;
    logic [7:0]     tag;
  } infl_t;

  // word read from HPU memory, waiting to be written to the host
  typedef struct packed {
    logic [63:0]   addr;
    logic          last;
    logic [RW-1:0] who;
    logic [7:0]    tag;
  } wr_t;

  // ------------------------------------------------- command selection
  logic [NREQ-1:0] rq;
  logic [NREQ-1:0] rgnt;
  logic [RW-1:0]   ridx;
  logic            rany;
  logic            active;
  dma_req_t        cmd;
  logic [RW-1:0]   cmd_who;
  logic [LENW-4:0] words_left;  // words still to issue
  logic [LENW-4:0] reads_left;  // TO_HOST: HPU memory reads still to do
  logic            take;

  always_comb for (int r = 0; r < NREQ; r++) rq[r] = req[r].valid;
  rr_arbiter #(.N(NREQ)) u_arb (.clk, .rst_n, .req(rq), .advance(take),
                                .gnt(rgnt), .gnt_idx(ridx), .any(rany));
  assign take = rany && !active;
  always_comb for (int r = 0; r < NREQ; r++) req_ready[r] = take && rgnt[r];

  // ------------------------------------------------ write data buffer
  logic wb_push, wb_pop, wb_empty;
  logic [$clog2(4):0] wb_count;
  wr_t  wb_din, wb_head;
  logic rd_pend;                  // an HPU memory read answers next cycle
  wr_t  rd_info;
  sync_fifo #(.WIDTH($bits(wr_t)), .DEPTH(4)) u_wb (
    .clk, .rst_n, .push(wb_push), .din(wb_din), .pop(wb_pop), .dout(wb_head),
    .empty(wb_empty), .full(), .count(wb_count), .overflows()
  );
  assign wb_push = rd_pend && mem_rsp.valid;
  assign wb_din  = rd_info;

  // ------------------------------------------------- in-flight queue
  logic  if_push, if_pop, if_empty, if_full;
  infl_t if_din, if_head;
  sync_fifo #(.WIDTH($bits(infl_t)), .DEPTH(INFLIGHT)) u_if (
    .clk, .rst_n, .push(if_push), .din(if_din), .pop(if_pop), .dout(if_head),
    .empty(if_empty), .full(if_full), .count(), .overflows()
  );

  // ------------------------------------------------------ host issue
  logic [63:0] wb_data [4];
  logic [1:0]  wbd_w, wbd_r;
  wire cmd_is_read = active && cmd.op != D_TO_HOST && words_left != 0;
  wr_t wb_d;
  assign wb_d = wb_head;

  always_comb begin
    host_req = '0;
    if_din   = '0;
    if (!wb_empty) begin
      host_req.valid = !if_full;
      host_req.op    = HM_WRITE;
      host_req.addr  = wb_d.addr;
      host_req.wdata = wb_data[wbd_r];
      if_din         = '{to_mem: 1'b0, local_addr: '0, last: wb_d.last, who: wb_d.who, tag: wb_d.tag};
    end else if (cmd_is_read) begin
      host_req.valid = !if_full;
      host_req.addr  = cmd.host_addr;
      host_req.cmp   = cmd.cmp;
      host_req.wdata = cmd.operand;
      unique case (cmd.op)
        D_CAS:   host_req.op = HM_CAS;
        D_FADD:  host_req.op = HM_FADD;
        default: host_req.op = HM_READ;
      endcase
      if_din = '{to_mem: (cmd.op == D_FROM_HOST), local_addr: cmd.local_addr,
                 last: (words_left == 1), who: cmd_who, tag: cmd.tag};
    end
  end
  wire host_fire = host_req.valid && host_req_ready;
  assign if_push = host_fire;
  assign wb_pop  = host_fire && !wb_empty;


  // ---------------------------------------------- HPU memory accesses
  wire rsp_needs_mem = host_rsp_valid && !if_empty && if_head.to_mem;
  wire want_read     = active && cmd.op == D_TO_HOST && reads_left != 0 &&
                       (32'(wb_count) + 32'(rd_pend) < 3);
  always_comb begin
    mem_req = '0;
    if (rsp_needs_mem) begin
      mem_req.valid = 1'b1;
      mem_req.op    = M_WRITE;
      mem_req.addr  = if_head.local_addr;
      mem_req.wdata = host_rsp_data;
    end else if (want_read) begin
      mem_req.valid = 1'b1;
      mem_req.op    = M_READ;
      mem_req.addr  = cmd.local_addr;
    end
  end
  wire read_fire = want_read && !rsp_needs_mem && mem_gnt;

  assign host_rsp_ready = !if_empty && (!if_head.to_mem || mem_gnt);
  assign if_pop = host_rsp_valid && host_rsp_ready;

  always_comb begin
    for (int r = 0; r < NREQ; r++) begin
      done[r]     = if_pop && if_head.last && (if_head.who == RW'(r));
      done_tag[r] = if_head.tag;
      done_val[r] = host_rsp_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; cmd <= '0; cmd_who <= '0;
      words_left <= '0; reads_left <= '0;
      rd_pend <= 1'b0; rd_info <= '0;
      wbd_w <= '0; wbd_r <= '0;
      for (int i = 0; i < 4; i++) wb_data[i] <= '0;
    end else begin
      if (take) begin
        active     <= 1'b1;
        cmd        <= req[ridx];
        cmd_who    <= ridx;
        words_left <= (req[ridx].op == D_CAS || req[ridx].op == D_FADD) ? (LENW-3)'(1)
                      : (LENW-3)'(req[ridx].len >> 3);
        reads_left <= (req[ridx].op == D_TO_HOST) ? (LENW-3)'(req[ridx].len >> 3) : '0;
      end
      // TO_HOST: read HPU memory word by word
      rd_pend <= read_fire;
      if (read_fire) begin
        rd_info          <= '{addr: cmd.host_addr, last: (reads_left == 1), who: cmd_who, tag: cmd.tag};
        cmd.local_addr   <= cmd.local_addr + 1'b1;
        cmd.host_addr    <= cmd.host_addr + 64'd8;
        reads_left       <= reads_left - 1'b1;
        words_left       <= words_left - 1'b1;
        if (reads_left == 1) active <= 1'b0;
      end
      if (wb_push) begin
        wb_data[wbd_w] <= mem_rsp.rdata;
        wbd_w <= wbd_w + 1'b1;
      end
      if (wb_pop) wbd_r <= wbd_r + 1'b1;
      // FROM_HOST and atomics: issue host requests word by word
      if (host_fire && wb_empty && cmd_is_read) begin
        cmd.local_addr <= cmd.local_addr + 1'b1;
        cmd.host_addr  <= cmd.host_addr + 64'd8;
        words_left     <= words_left - 1'b1;
        if (words_left == 1) active <= 1'b0;
      end
    end
  end

  for (genvar r = 0; r < NREQ; r++) begin : g_chk
    // a transfer must be a positive multiple of 8 bytes
    assert property (@(posedge clk) disable iff (!rst_n)
      req_ready[r] && (req[r].op == D_TO_HOST || req[r].op == D_FROM_HOST)
      |-> (req[r].len != 0 && req[r].len[2:0] == 3'b000 && req[r].host_addr[2:0] == 3'b000));
  end
endmodule
