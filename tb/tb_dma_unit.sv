// tb_dma_unit: self-checking test of the DMA unit.
// The host link is modelled with a fixed latency of LAT cycles (125 cycles
// = the 50 ns of the integrated configuration at 2.5 GHz) and in-order
// answers; HPU memory is a model that sometimes withholds its grant.
// Checks transfers to and from the host word by word, host CAS (success
// and failure) and fetch-add, completion tags, all requesters at once,
// and that a 64-word transfer is pipelined: it must finish in far fewer
// cycles than 64 round trips.
module tb_dma_unit;
  import spin_pkg::*;
  localparam int NR  = NUM_HPUS + 1;
  localparam int LAT = 125;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  longint cyc = 0;
  localparam int LIM64I = 64 * 2 + LAT + 40;
  localparam longint LIM64 = longint'(LIM64I);
  localparam int LIM32I = 32 * 2 + LAT + 40;
  localparam longint LIM32 = longint'(LIM32I);
  always @(posedge clk) cyc <= cyc + 1;

  dma_req_t req [NR];
  logic req_ready [NR], done [NR];
  logic [7:0] done_tag [NR];
  logic [63:0] done_val [NR];
  mem_req_t mem_req;
  logic mem_gnt;
  mem_rsp_t mem_rsp;
  host_req_t host_req;
  logic host_req_ready, host_rsp_valid, host_rsp_ready;
  logic [63:0] host_rsp_data;

  dma_unit dut (.clk, .rst_n, .req, .req_ready, .done, .done_tag, .done_val,
    .mem_req, .mem_gnt, .mem_rsp, .host_req, .host_req_ready,
    .host_rsp_valid, .host_rsp_data, .host_rsp_ready);

  // HPU memory model
  logic [63:0] lmem [MEM_WORDS];
  logic g_en = 1;
  always @(negedge clk) g_en <= ($urandom % 8) != 0;
  assign mem_gnt = mem_req.valid && g_en;
  always @(posedge clk) begin
    mem_rsp.valid <= mem_gnt;
    if (mem_gnt) begin
      mem_rsp.rdata <= lmem[mem_req.addr];
      if (mem_req.op == M_WRITE) lmem[mem_req.addr] <= mem_req.wdata;
    end
  end

  // host memory model: executes at request time, answers LAT cycles later
  logic [63:0] hmem [logic [63:0]];
  typedef struct { longint due; logic [63:0] data; } hrsp_t;
  hrsp_t hq[$];
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
        HM_CAS:   if (old == host_req.cmp) hmem[host_req.addr] = host_req.wdata;
        HM_FADD:  hmem[host_req.addr] = old + host_req.wdata;
        default: ;
      endcase
      hq.push_back('{due: cyc + longint'(LAT), data: old});
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue one command on requester r and wait for its completion
  task automatic dma(int r, dma_op_e op, int local_addr, logic [63:0] haddr, int len,
                     logic [63:0] cmp, logic [63:0] operand, int tag,
                     output logic [63:0] val, output longint took);
    longint t0;
    @(negedge clk);
    req[r] = '{valid: 1'b1, op: op, local_addr: MAW'(local_addr), host_addr: haddr,
               len: LENW'(len), cmp: cmp, operand: operand, tag: 8'(tag)};
    t0 = cyc;
    #1;
    while (!req_ready[r]) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req[r] = '0;
    while (!done[r]) begin @(negedge clk); end
    chk(done_tag[r] == 8'(tag), "completion carries the tag");
    val = done_val[r];
    took = cyc - t0;
    @(posedge clk);
    #1;
  endtask

  initial begin
    logic [63:0] v;
    longint took;
    for (int r = 0; r < NR; r++) req[r] = '0;
    for (int i = 0; i < MEM_WORDS; i++) lmem[i] = 64'(i) * 64'h1_0001;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // to host, 64 words
    dma(0, D_TO_HOST, 100, 64'h1000, 512, 0, 0, 7, v, took);
    begin
      bit ok; ok = 1;
      for (int w = 0; w < 64; w++) if (hmem[64'h1000 + 64'(w * 8)] !== lmem[100 + w]) ok = 0;
      chk(ok, "to-host data");
    end
    chk(took < LIM64, $sformatf("to-host 64 words pipelined: %0d cycles", took));
    // from host, 32 words
    for (int w = 0; w < 32; w++) hmem[64'h2000 + 64'(w * 8)] = 64'hF00D_0000 + 64'(w);
    dma(1, D_FROM_HOST, 5000, 64'h2000, 256, 0, 0, 9, v, took);
    begin
      bit ok; ok = 1;
      for (int w = 0; w < 32; w++) if (lmem[5000 + w] !== 64'hF00D_0000 + 64'(w)) ok = 0;
      chk(ok, "from-host data");
    end
    chk(took < LIM32, $sformatf("from-host pipelined: %0d cycles", took));
    // host atomics
    hmem[64'h3000] = 64'd10;
    dma(2, D_CAS, 0, 64'h3000, 8, 64'd10, 64'd55, 1, v, took);
    chk(v == 10 && hmem[64'h3000] == 55, "host CAS success");
    dma(3, D_CAS, 0, 64'h3000, 8, 64'd10, 64'd66, 2, v, took);
    chk(v == 55 && hmem[64'h3000] == 55, "host CAS failure returns current value");
    dma(4, D_FADD, 0, 64'h3000, 8, 0, 64'd5, 3, v, took);
    chk(v == 55 && hmem[64'h3000] == 60, "host fetch-add");
    // all requesters at once, 16 words each to distinct host areas
    for (int r = 0; r < NR; r++) begin
      automatic int rr = r;
      fork begin
        logic [63:0] v2; longint t2;
        dma(rr, D_TO_HOST, 1000 + rr * 16, 64'h10000 + 64'(rr * 4096), 128, 0, 0, 40 + rr, v2, t2);
      end join_none
    end
    wait fork;
    begin
      bit ok; ok = 1;
      for (int r = 0; r < NR; r++)
        for (int w = 0; w < 16; w++)
          if (hmem[64'h10000 + 64'(r * 4096 + w * 8)] !== lmem[1000 + r * 16 + w]) ok = 0;
      chk(ok, "concurrent requesters' data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
