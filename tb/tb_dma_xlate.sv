// tb_dma_xlate: self-checking test of DMA address translation.
// Loads the bounds of a handler's two host spaces through a dispatch,
// then checks that calls inside a space reach the DMA unit at base plus
// offset in the same cycle, that calls reaching past the end are refused
// with a fault done pulse, and that a fault waits when a real completion
// falls in the same cycle.
module tb_dma_xlate;
  import spin_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic start = 0, hready, hdone, hfault, dready, ddone;
  hpu_task_t task_in;
  hdma_req_t hreq;
  logic [7:0] htag, dtag;
  logic [63:0] hval, dval;
  dma_req_t dreq;
  dma_xlate dut (.clk, .rst_n, .start, .task_in, .hreq, .hready, .hdone, .htag, .hval, .hfault,
                 .dreq, .dready, .ddone, .dtag, .dval);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic hdma_req_t mk(host_space_e sp, int off, int len, int tag);
    hdma_req_t r = '0;
    r.valid = 1; r.op = D_TO_HOST; r.space = sp; r.local_addr = MAW'(100);
    r.offset = 32'(off); r.len = 32'(len); r.tag = 8'(tag);
    return r;
  endfunction

  initial begin
    hreq = '0; task_in = '0; dready = 0; ddone = 0; dtag = '0; dval = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    task_in.me_host_base = 64'h1_0000_0000; task_in.me_host_len = 32'h2000;
    task_in.h_host_base  = 64'h5000;        task_in.h_host_len  = 32'h100;
    start = 1;
    @(negedge clk);
    start = 0; task_in = '0;   // bounds must have been captured
    // inside the ME space: passed on with the base added, ready from the DMA unit
    hreq = mk(SP_ME, 32'h1FC0, 64, 3);
    dready = 0; #1;
    chk(dreq.valid && dreq.host_addr == 64'h1_0000_1FC0 && dreq.len == 32'd64, "ME space translated");
    chk(!hready, "ready follows the DMA unit");
    dready = 1; #1;
    chk(hready, "accepted with the DMA unit");
    @(negedge clk);
    // inside the handler space, exactly to its end
    hreq = mk(SP_HANDLER, 32'hF8, 8, 4); #1;
    chk(dreq.valid && dreq.host_addr == 64'h50F8 && hready, "handler space translated");
    @(negedge clk);
    // one word past the ME space: refused, fault pulse next cycle
    hreq = mk(SP_ME, 32'h1FC8, 64, 5); #1;
    chk(!dreq.valid, "out-of-bounds call not passed on");
    chk(hready, "out-of-bounds call accepted");
    @(negedge clk);
    hreq = '0; #1;
    chk(hdone && hfault && htag == 8'd5, "fault done pulse with the tag");
    @(negedge clk); #1;
    chk(!hdone && !hfault, "fault pulse lasts one cycle");
    // an offset whose sum wraps 32 bits is out of bounds too
    hreq = mk(SP_HANDLER, 32'hFFFF_FFF8, 16, 6); #1;
    chk(!dreq.valid && hready, "wrapping offset refused");
    @(negedge clk);
    hreq = '0;
    ddone = 1; dtag = 8'd9; dval = 64'h77; #1;
    chk(hdone && !hfault && htag == 8'd9 && hval == 64'h77, "real completion wins the cycle");
    @(negedge clk);
    ddone = 0; #1;
    chk(hdone && hfault && htag == 8'd6, "fault follows one cycle later");
    @(negedge clk); #1;
    chk(!hdone, "then quiet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
