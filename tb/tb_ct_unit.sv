// tb_ct_unit: self-checking test of the counters.
// Increments one counter from all ports at once, checks get/set and the
// value-before returned, and a host set and host read.
module tb_ct_unit;
  import spin_pkg::*;
  localparam int NP = NUM_HPUS + 1;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  ct_req_t req [NP];
  logic gnt [NP], rsp_valid [NP];
  logic [63:0] rsp_val, host_val, host_set_val = 0;
  logic [CTW-1:0] host_idx = 0, host_set_idx = 0;
  logic host_set = 0;
  ct_unit dut (.clk, .rst_n, .req, .gnt, .rsp_valid, .rsp_val, .host_idx, .host_val,
               .host_set, .host_set_idx, .host_set_val);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic op(int p, ct_op_e o, int idx, logic [63:0] v, output logic [63:0] old_val);
    @(negedge clk);
    req[p] = '{valid: 1'b1, op: o, idx: CTW'(idx), val: v};
    #1;
    while (!gnt[p]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1;
    req[p] = '0;
    chk(rsp_valid[p], "response after grant");
    old_val = rsp_val;
  endtask

  initial begin
    logic [63:0] b;
    for (int p = 0; p < NP; p++) req[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int p = 0; p < NP; p++) begin
      automatic int pp = p;
      fork
        for (int k = 0; k < 20; k++) begin logic [63:0] bb; op(pp, CT_INC, 3, 64'd1, bb); end
      join_none
    end
    wait fork;
    op(0, CT_GET, 3, 0, b);
    chk(b == 64'(20 * NP), $sformatf("concurrent increments %0d", b));
    op(1, CT_SET, 5, 64'd77, b);
    chk(b == 0, "set returns old value");
    op(2, CT_INC, 5, 64'd3, b);
    chk(b == 77, "increment returns value before");
    host_idx = 5; #1;
    chk(host_val == 80, "host reads counter");
    @(negedge clk);
    host_set = 1; host_set_idx = 7; host_set_val = 64'd1234;
    @(negedge clk);
    host_set = 0;
    host_idx = 7; #1;
    chk(host_val == 1234, "host set");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
