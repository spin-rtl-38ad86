// tb_sync_fifo: self-checking test of the FIFO used as the event queue.
// Fills the FIFO to full, checks that a further push is refused and
// counted, drains it in order, then runs random push/pop traffic against a
// queue model.
module tb_sync_fifo;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic push = 0, pop = 0, empty, full;
  logic [15:0] din = 0, dout, ovf;
  logic [4:0] count;
  sync_fifo #(.WIDTH(16), .DEPTH(16)) dut (.clk, .rst_n, .push, .din, .pop, .dout,
    .empty, .full, .count, .overflows(ovf));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] q[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk(empty && !full && count == 0, "empty after reset");
    for (int i = 0; i < 16; i++) begin
      push <= 1; din <= 16'(100 + i); @(posedge clk);
    end
    push <= 0; @(posedge clk);
    chk(full && count == 16, "full after 16 pushes");
    push <= 1; din <= 16'hdead; @(posedge clk); push <= 0; @(posedge clk);
    chk(ovf == 1, "push into full FIFO counted");
    for (int i = 0; i < 16; i++) begin
      chk(dout == 16'(100 + i), $sformatf("order %0d got %0d", i, dout));
      pop <= 1; @(posedge clk); pop <= 0; @(posedge clk);
    end
    chk(empty, "empty after drain");
    // random traffic against a model
    for (int n = 0; n < 2000; n++) begin
      logic dpush, dpop;
      dpush = ($urandom % 2) == 0;
      dpop  = ($urandom % 2) == 0;
      push <= dpush; pop <= dpop; din <= 16'($urandom);
      #1;
      if (dpop && q.size() > 0) begin
        chk(dout == q[0], "random order");
      end
      @(posedge clk);
      begin
        bit was_full;
        was_full = (q.size() == 16);
        if (dpop && q.size() > 0) void'(q.pop_front());
        if (dpush && !was_full) q.push_back(din);
      end
      #1;
      chk(count == 5'(q.size()), "count matches model");
    end
    push <= 0; pop <= 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
