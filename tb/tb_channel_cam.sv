// tb_channel_cam: self-checking test of the channel CAM.
// Installs channels, looks them up (CAM_CYCLES = 5 cycle answer), checks
// misses, removal, and that a full CAM refuses a new channel.
module tb_channel_cam;
  import spin_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic ins_valid = 0, lk_valid = 0, rm_valid = 0;
  logic [31:0] ins_key = 0, lk_key = 0;
  logic ins_ok, lk_busy, lk_done, lk_hit;
  logic [CHW-1:0] ins_chan, lk_chan, rm_chan = 0;
  logic [NUM_CHANNELS-1:0] used;

  channel_cam dut (.clk, .rst_n, .ins_valid, .ins_key, .ins_ok, .ins_chan, .lk_valid, .lk_key,
    .lk_busy, .lk_done, .lk_hit, .lk_chan, .rm_valid, .rm_chan, .used);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lookup(logic [31:0] k, output bit hit, output int ch, output int lat);
    int c;
    lk_valid <= 1; lk_key <= k; @(posedge clk); lk_valid <= 0;
    c = 1;
    while (!lk_done) begin @(posedge clk); c++; end
    hit = lk_hit; ch = int'(lk_chan); lat = c - 1;  // edges after the accepting edge
    @(posedge clk);
  endtask

  initial begin
    int chans[NUM_CHANNELS];
    bit hit; int ch, lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NUM_CHANNELS; i++) begin
      #1;
      chk(ins_ok, "free entry available");
      chans[i] = int'(ins_chan);
      ins_valid <= 1; ins_key <= 32'(32'h100 + i * 7); @(posedge clk); ins_valid <= 0;
      @(posedge clk);
    end
    #1;
    chk(!ins_ok, "full CAM refuses");
    for (int i = 0; i < NUM_CHANNELS; i += 3) begin
      lookup(32'(32'h100 + i * 7), hit, ch, lat);
      chk(hit && ch == chans[i], $sformatf("lookup key %0d", i));
      chk(lat == CAM_CYCLES, $sformatf("CAM latency %0d", lat));
    end
    lookup(32'h5555, hit, ch, lat);
    chk(!hit, "unknown key misses");
    rm_valid <= 1; rm_chan <= CHW'(chans[4]); @(posedge clk); rm_valid <= 0;
    lookup(32'(32'h100 + 4 * 7), hit, ch, lat);
    chk(!hit, "removed channel misses");
    #1;
    chk(ins_ok && int'(ins_chan) == chans[4], "freed entry is reused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
