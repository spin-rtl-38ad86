// tb_put_unit: self-checking test of the put unit.
// Two HPUs post a PutFromDevice at once and a third a PutFromHost. The
// test checks the packet header and every data beat against the memory
// model, the done pulses, the 3-cycles-per-word send rate and that a
// PutFromHost is passed to the host send queue unchanged.
module tb_put_unit;
  import spin_pkg::*;
  localparam int NH = NUM_HPUS;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a falling edge, so the asynchronous reset is applied
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  put_req_t req [NH];
  logic done [NH];
  mem_req_t mem_req;
  logic mem_gnt;
  mem_rsp_t mem_rsp;
  logic tx_valid, tx_ready, tx_sop, tx_eop, hsq_valid, hsq_ready;
  pkt_hdr_t tx_hdr;
  logic [63:0] tx_data;
  put_req_t hsq_req;

  put_unit dut (.clk, .rst_n, .my_id(16'h00AB), .req, .done, .mem_req, .mem_gnt, .mem_rsp,
                .tx_valid, .tx_ready, .tx_sop, .tx_eop, .tx_hdr, .tx_data,
                .hsq_valid, .hsq_ready, .hsq_req);

  // memory model: word a holds a*3+1, granted every cycle, answer next cycle
  assign mem_gnt = mem_req.valid;
  always_ff @(posedge clk) begin
    mem_rsp.valid <= mem_req.valid;
    mem_rsp.rdata <= 64'(mem_req.addr) * 3 + 1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // transmit monitor
  int beats = 0, pkts = 0, first_beat = -1, last_beat = -1, cyc = 0;
  logic [MAW-1:0] base;
  logic [15:0] last_msg = 16'hFFFF;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (tx_sop) begin
      base = (tx_hdr.match_bits == 64'h11) ? MAW'(100) : MAW'(2000);
      chk(tx_hdr.is_header && tx_hdr.source_id == 16'h00AB, "header source and first flag");
      chk(tx_hdr.msg_id != last_msg, "new msg_id per message");
      last_msg = tx_hdr.msg_id;
      chk(tx_hdr.target_id == ((tx_hdr.match_bits == 64'h11) ? 16'd7 : 16'd9), "target id");
      chk(tx_hdr.length == ((tx_hdr.match_bits == 64'h11) ? 32'd64 : 32'd4096), "length capped at 4 KiB");
      beats = 0;
      if (tx_hdr.match_bits == 64'h22) first_beat = cyc;
    end
    chk(tx_data == 64'(base + MAW'(beats)) * 3 + 1, $sformatf("beat %0d data %h", beats, tx_data));
    beats++;
    if (tx_eop) begin
      pkts++;
      chk(beats == ((tx_hdr.match_bits == 64'h11) ? 8 : 512), $sformatf("beat count %0d", beats));
      if (tx_hdr.match_bits == 64'h22) last_beat = cyc;
    end
  end

  int ndone [NH];
  always @(posedge clk) if (rst_n) for (int h = 0; h < NH; h++) if (done[h]) begin
    ndone[h]++;
    req[h] = '0;  // HPU drops the command after done
  end

  int hsq_seen = 0;
  always @(posedge clk) if (rst_n && hsq_valid && hsq_ready) begin
    hsq_seen++;
    chk(!hsq_req.from_device && hsq_req.host_offset == 32'd4096 && hsq_req.len == 32'd100000,
        "PutFromHost forwarded unchanged");
  end

  initial begin
    for (int h = 0; h < NH; h++) begin req[h] = '0; ndone[h] = 0; end
    tx_ready = 1; hsq_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    req[0] = '{valid: 1'b1, from_device: 1'b1, local_addr: MAW'(100), host_offset: '0, len: 32'd64,
               target_id: 16'd7, match_bits: 64'h11, remote_offset: '0, hdr_data: 64'h5};
    req[1] = '{valid: 1'b1, from_device: 1'b1, local_addr: MAW'(2000), host_offset: '0, len: 32'd5000,
               target_id: 16'd9, match_bits: 64'h22, remote_offset: 32'd8, hdr_data: 64'h6};
    req[2] = '{valid: 1'b1, from_device: 1'b0, local_addr: '0, host_offset: 32'd4096, len: 32'd100000,
               target_id: 16'd3, match_bits: 64'h33, remote_offset: '0, hdr_data: 64'h7};
    // throttle the transmitter a little for the first packet
    repeat (5) @(negedge clk);
    tx_ready = 0;
    repeat (4) @(negedge clk);
    tx_ready = 1;
    repeat (20) @(negedge clk);
    hsq_ready = 1;
    wait (ndone[0] == 1 && ndone[1] == 1 && ndone[2] == 1);
    repeat (5) @(posedge clk);
    chk(pkts == 2, $sformatf("two packets sent, got %0d", pkts));
    chk(hsq_seen == 1, "one PutFromHost queued");
    for (int h = 0; h < 3; h++) chk(ndone[h] == 1, $sformatf("done pulse for hpu %0d", h));
    chk(ndone[3] == 0, "no done for idle hpu");
    // rate: 512 words at 3 cycles per word
    chk(last_beat - first_beat == 3 * 511, $sformatf("4 KiB send took %0d cycles", last_beat - first_beat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
