// tb_me_table: self-checking test of ME matching.
// Checks exact and masked (ignore bits) matches, the portal index, list
// order priority, a miss, unlinking, and that every lookup answers after
// exactly MATCH_CYCLES (75) cycles, the 30 ns header match of the design.
module tb_me_table;
  import spin_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic wr_valid = 0, unlink_valid = 0, lk_valid = 0;
  logic [MEW-1:0] wr_idx = 0, unlink_idx = 0, lk_idx, rd_idx = 0;
  me_t wr_me = '0, lk_me, rd_me;
  logic [PTW-1:0] lk_pt = 0;
  logic [63:0] lk_bits = 0;
  logic lk_busy, lk_done, lk_hit;

  me_table dut (.clk, .rst_n, .wr_valid, .wr_idx, .wr_me, .unlink_valid, .unlink_idx,
    .lk_valid, .lk_pt, .lk_bits, .lk_busy, .lk_done, .lk_hit, .lk_idx, .lk_me, .rd_idx, .rd_me);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put_me(int idx, int pt, logic [63:0] bits, logic [63:0] ign);
    me_t m;
    m = '0; m.valid = 1; m.pt_index = PTW'(pt); m.match_bits = bits; m.ignore_bits = ign;
    m.hh_pc = 16'(idx + 1000);
    wr_valid <= 1; wr_idx <= MEW'(idx); wr_me <= m;
    @(posedge clk); wr_valid <= 0;
  endtask

  task automatic lookup(int pt, logic [63:0] bits, output bit hit, output int idx, output int lat);
    int c;
    lk_valid <= 1; lk_pt <= PTW'(pt); lk_bits <= bits;
    @(posedge clk); lk_valid <= 0;
    c = 1;
    while (!lk_done) begin @(posedge clk); c++; end
    hit = lk_hit; idx = int'(lk_idx); lat = c - 1;  // edges after the accepting edge
    chk(lk_me.hh_pc == 16'(idx + 1000) || !hit, "entry copy matches index");
    @(posedge clk);
  endtask

  initial begin
    bit hit; int idx, lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    put_me(3, 0, 64'h1234, 64'h0);
    put_me(5, 0, 64'hAB00, 64'h00FF);        // low byte ignored
    put_me(7, 1, 64'h1234, 64'h0);           // other portal
    put_me(9, 0, 64'hAB12, 64'h0);           // later in list than 5
    lookup(0, 64'h1234, hit, idx, lat);
    chk(hit && idx == 3, "exact match");
    chk(lat == MATCH_CYCLES, $sformatf("match latency %0d", lat));
    lookup(0, 64'hAB12, hit, idx, lat);
    chk(hit && idx == 5, "masked match, list order wins over entry 9");
    lookup(1, 64'h1234, hit, idx, lat);
    chk(hit && idx == 7, "portal index selects entry 7");
    lookup(2, 64'h1234, hit, idx, lat);
    chk(!hit, "no entry on portal 2");
    lookup(0, 64'hFFFF, hit, idx, lat);
    chk(!hit, "miss");
    chk(lat == MATCH_CYCLES, "miss latency");
    unlink_valid <= 1; unlink_idx <= 5; @(posedge clk); unlink_valid <= 0;
    lookup(0, 64'hAB12, hit, idx, lat);
    chk(hit && idx == 9, "after unlink of 5, entry 9 matches");
    rd_idx <= 9; @(posedge clk); #1;
    chk(rd_me.valid && rd_me.match_bits == 64'hAB12, "read back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
