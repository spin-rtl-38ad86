// channel_cam: content-addressable table of open message channels.
//
// When a header packet has matched an ME, the scheduler installs a channel
// for its message, keyed by {source_id, msg_id}. The remaining packets of
// the message find their channel here instead of searching the ME list.
// The channel number indexes the scheduler's per-message state; it is
// freed when the message completes.
//
// Interface: ins_valid installs ins_key in the lowest free entry; ins_ok
// and ins_chan show, combinationally, whether an entry is free and which
// one will be used. lk_valid (while lk_busy is low) starts a lookup that
// answers with lk_done/lk_hit/lk_chan CAM_CYCLES later. rm_valid frees a
// channel. The paper gives the CAM and its 2 ns lookup time; the key
// (the sender's message number) and the entry count are this design's.
module channel_cam
  import spin_pkg::*;
#(
  parameter int unsigned N_CH    = NUM_CHANNELS,
  parameter int unsigned LATENCY = CAM_CYCLES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ins_valid,
  input  logic [31:0]             ins_key,
  output logic                    ins_ok,
  output logic [$clog2(N_CH)-1:0] ins_chan,
  input  logic                    lk_valid,
  input  logic [31:0]             lk_key,
  output logic                    lk_busy,
  output logic                    lk_done,
  output logic                    lk_hit,
  output logic [$clog2(N_CH)-1:0] lk_chan,
  input  logic                    rm_valid,
  input  logic [$clog2(N_CH)-1:0] rm_chan,
  output logic [N_CH-1:0]         used
);
  localparam int unsigned CW = $clog2(N_CH);

  logic [31:0]   keys [N_CH];
  logic          hit_c;
  logic [CW-1:0] chan_c;
  logic [15:0]   wait_cnt;

  always_comb begin
    ins_ok   = 1'b0;
    ins_chan = '0;
    for (int i = N_CH - 1; i >= 0; i--)
      if (!used[i]) begin ins_ok = 1'b1; ins_chan = CW'(i); end
    hit_c  = 1'b0;
    chan_c = '0;
    for (int i = 0; i < N_CH; i++)
      if (used[i] && keys[i] == lk_key) begin hit_c = 1'b1; chan_c = CW'(i); end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used     <= '0;
      for (int i = 0; i < N_CH; i++) keys[i] <= '0;
      lk_busy  <= 1'b0;
      lk_done  <= 1'b0;
      lk_hit   <= 1'b0;
      lk_chan  <= '0;
      wait_cnt <= '0;
    end else begin
      lk_done <= 1'b0;
      if (lk_valid && !lk_busy) begin
        lk_hit  <= hit_c;
        lk_chan <= chan_c;
        if (LATENCY <= 1) lk_done <= 1'b1;
        else begin
          lk_busy  <= 1'b1;
          wait_cnt <= 16'(LATENCY - 2);
        end
      end else if (lk_busy) begin
        if (wait_cnt == 0) begin
          lk_busy <= 1'b0;
          lk_done <= 1'b1;
        end else wait_cnt <= wait_cnt - 1'b1;
      end
      if (rm_valid) used[rm_chan] <= 1'b0;
      if (ins_valid && ins_ok) begin
        used[ins_chan] <= 1'b1;
        keys[ins_chan] <= ins_key;
      end
    end
  end
endmodule
