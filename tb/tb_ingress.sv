// tb_ingress: self-checking test of packet reception.
// Sends packets of several lengths (including 0 and a full 4 KiB) with a
// memory that sometimes withholds its grant, checks every word lands in
// the right slot, checks the descriptors, that a full buffer drops the
// packet (stored = 0) while still consuming it, that a freed slot is
// reused, and that a 4 KiB packet is taken at one beat per cycle when the
// memory always grants.
module tb_ingress;
  import spin_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic rx_valid = 0, rx_ready, rx_sop = 0, rx_eop = 0;
  pkt_hdr_t rx_hdr = '0;
  logic [63:0] rx_data = 0;
  mem_req_t mem_req;
  logic mem_gnt;
  logic desc_valid, desc_ready = 0, free_valid = 0;
  pkt_desc_t desc;
  logic [SLOTW-1:0] free_slot = 0;
  logic [NUM_SLOTS-1:0] slot_busy;
  bit always_grant = 0;

  ingress dut (.clk, .rst_n, .rx_valid, .rx_ready, .rx_sop, .rx_eop, .rx_hdr, .rx_data,
    .mem_req, .mem_gnt, .desc_valid, .desc, .desc_ready, .free_valid, .free_slot, .slot_busy);

  logic [63:0] mem [MEM_WORDS];
  logic gnt_r = 0;
  always @(negedge clk) gnt_r <= always_grant || ($urandom % 4 != 0);
  assign mem_gnt = mem_req.valid && gnt_r;
  always @(posedge clk) if (mem_req.valid && mem_gnt && mem_req.op == M_WRITE) mem[mem_req.addr] <= mem_req.wdata;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] pat(int id, int w);
    return {32'(id), 32'(w * 13 + 7)};
  endfunction

  task automatic send(int id, int len, output int cycles);
    int nb;
    pkt_hdr_t h;
    nb = (len + 7) / 8;
    if (nb == 0) nb = 1;
    h = '0; h.is_header = 1; h.msg_id = 16'(id); h.pkt_len = PLENW'(len); h.length = LENW'(len);
    cycles = 0;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      rx_valid = 1; rx_sop = (b == 0); rx_eop = (b == nb - 1); rx_hdr = h; rx_data = pat(id, b);
      #1;
      while (!rx_ready) begin @(negedge clk); #1; cycles++; end
      @(posedge clk); cycles++;
    end
    #1 rx_valid = 0;
  endtask

  task automatic get_desc(output pkt_desc_t d);
    @(negedge clk);
    while (!desc_valid) @(negedge clk);
    d = desc;
    desc_ready = 1;
    @(negedge clk);
    desc_ready = 0;
  endtask

  initial begin
    pkt_desc_t d;
    int cyc;
    static int lens[8] = '{40, 0, 4096, 8, 1000, 16, 24, 64};
    int slot_of[8];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      send(i, lens[i], cyc);
      get_desc(d);
      chk(d.stored && d.hdr.msg_id == 16'(i) && d.hdr.pkt_len == PLENW'(lens[i]), $sformatf("descriptor %0d", i));
      slot_of[i] = int'(d.slot);
    end
    chk(slot_busy == '1, "all slots in use");
    for (int i = 0; i < 8; i++) begin
      bit ok;
      ok = 1;
      for (int w = 0; w < (lens[i] + 7) / 8; w++)
        if (mem[slot_of[i] * SLOT_WORDS + w] !== pat(i, w)) ok = 0;
      chk(ok, $sformatf("payload of packet %0d in slot %0d", i, slot_of[i]));
    end
    // buffer full: the packet is consumed and reported as not stored
    send(20, 256, cyc);
    get_desc(d);
    chk(!d.stored && d.hdr.msg_id == 16'd20, "packet dropped when no slot is free");
    // free slot of packet 2 and send again
    @(negedge clk); free_valid = 1; free_slot = SLOTW'(slot_of[2]); @(negedge clk); free_valid = 0;
    always_grant = 1;
    send(21, 4096, cyc);
    get_desc(d);
    chk(d.stored && int'(d.slot) == slot_of[2], "freed slot reused");
    chk(cyc == 512, $sformatf("4 KiB packet took %0d cycles (512 expected)", cyc));
    chk(mem[slot_of[2] * SLOT_WORDS + 511] == pat(21, 511), "last word of 4 KiB packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
