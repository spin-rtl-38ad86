// tb_hpu_mem: self-checking test of the shared HPU memory.
// Checks single-cycle read-after-write on every port, that ports hitting
// different banks are all served in the same cycle, round-robin service of
// ports contending for one bank, compare-and-swap success and failure,
// and that fetch-and-add from all ports at once loses no increment.
module tb_hpu_mem;
  localparam logic [63:0] FADD_TOTAL = 64'd10 * 64'(NUM_HPUS + 4) * 64'(NUM_HPUS + 5) / 64'd2;
  import spin_pkg::*;
  localparam int NP = NUM_HPUS + 4;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  mem_req_t req [NP];
  logic     gnt [NP];
  mem_rsp_t rsp [NP];
  hpu_mem dut (.clk, .rst_n, .req, .gnt, .rsp);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one access from port p: request at a falling edge, wait for the grant,
  // the access happens at the next rising edge, the answer follows it
  task automatic access(int p, mem_op_e op, int addr, logic [63:0] wd, logic [63:0] cmp,
                        output logic [63:0] rd, output int wait_cycles);
    @(negedge clk);
    req[p] = '{valid: 1'b1, op: op, addr: MAW'(addr), wdata: wd, cmp: cmp};
    wait_cycles = 0;
    #1;
    while (!gnt[p]) begin @(negedge clk); #1; wait_cycles++; end
    @(posedge clk);
    #1;
    req[p] = '0;
    rd = rsp[p].rdata;
    chk(rsp[p].valid, "response valid one cycle after grant");
  endtask

  initial begin
    logic [63:0] rd;
    int w;
    for (int p = 0; p < NP; p++) req[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // every port writes and reads back its own word
    for (int p = 0; p < NP; p++) begin
      access(p, M_WRITE, 100 + p * 9, 64'hA000 + 64'(p), 0, rd, w);
      access(p, M_READ, 100 + p * 9, 0, 0, rd, w);
      chk(rd == 64'hA000 + 64'(p), $sformatf("port %0d read back", p));
      chk(w == 0, "uncontended access granted at once");
    end
    // all ports, different banks, same cycle
    @(negedge clk);
    for (int p = 0; p < NP; p++) req[p] = '{valid: 1'b1, op: M_WRITE, addr: MAW'(2000 + p), wdata: 64'(p * 3), cmp: 0};
    #1;
    begin
      int ng;
      ng = 0;
      for (int p = 0; p < NP; p++) ng += int'(gnt[p]);
      chk(ng == NP, $sformatf("%0d of %0d ports granted in one cycle", ng, NP));
    end
    @(posedge clk); #1;
    for (int p = 0; p < NP; p++) req[p] = '0;
    // all ports, same bank: one grant per cycle, each port served once
    @(negedge clk);
    for (int p = 0; p < NP; p++) req[p] = '{valid: 1'b1, op: M_READ, addr: MAW'(2000), wdata: 0, cmp: 0};
    begin
      int served[NP];
      for (int c = 0; c < NP; c++) begin
        int ng;
        ng = 0;
        #1;
        for (int p = 0; p < NP; p++) if (gnt[p]) begin ng++; served[p]++; end
        chk(ng == 1, $sformatf("one grant per bank per cycle (%0d)", ng));
        @(posedge clk); #1;
        for (int p = 0; p < NP; p++) if (served[p] > 0) req[p] = '0;
        @(negedge clk);
      end
      for (int p = 0; p < NP; p++) chk(served[p] == 1, $sformatf("port %0d served once", p));
    end
    for (int p = 0; p < NP; p++) req[p] = '0;
    // compare-and-swap
    access(1, M_WRITE, 3000, 64'd5, 0, rd, w);
    access(2, M_CAS, 3000, 64'd9, 64'd5, rd, w);
    chk(rd == 64'd5, "CAS returns old value (success)");
    access(3, M_CAS, 3000, 64'd7, 64'd5, rd, w);
    chk(rd == 64'd9, "CAS returns current value (failure)");
    access(0, M_READ, 3000, 0, 0, rd, w);
    chk(rd == 64'd9, "failed CAS left memory unchanged");
    // fetch-and-add from all ports on one word, 10 times each
    access(0, M_WRITE, 3001, 64'd0, 0, rd, w);
    for (int p = 0; p < NP; p++) begin
      automatic int pp = p;
      fork
        for (int k = 0; k < 10; k++) begin
          logic [63:0] r2; int w2;
          access(pp, M_FADD, 3001, 64'(pp + 1), 0, r2, w2);
        end
      join_none
    end
    wait fork;
    access(0, M_READ, 3001, 0, 0, rd, w);
    chk(rd == FADD_TOTAL, $sformatf("fetch-add total %0d", rd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
