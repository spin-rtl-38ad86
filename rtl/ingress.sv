// ingress: packet reception into the fast packet buffer.
//
// Arriving packets are written, 64 bits per beat, into a free slot of the
// packet buffer, which lives in the low addresses of the shared HPU
// memory (slot s starts at word s*SLOT_WORDS; a slot holds one packet of
// up to 4 KiB). When the last beat is written, a descriptor (header, slot)
// goes to the packet scheduler, so a handler can start on the packet as
// soon as it is complete in the buffer. A packet that finds no free slot
// is not stored: its beats are consumed and a descriptor with stored = 0
// is still sent, so the scheduler can account its bytes as dropped and
// put the portal entry into flow control.
//
// Interface: rx_* is a valid/ready beat stream; the header travels beside
// the first beat (rx_sop). A packet of length 0 is a single beat whose
// data is ignored. mem_req/mem_gnt is one port of hpu_mem. desc_* is a
// valid/ready stream (a 4-entry queue decouples it). free_valid returns a
// slot when the scheduler is done with its packet.
//
// Timing: one beat per cycle while the memory bank grants the write.
// Slot allocation is lowest-free-first. The paper asks for packets to be
// in a fast buffer when their handler starts; beat width, slot size and
// the drop-on-full policy are this design's choices.
module ingress
  import spin_pkg::*;
#(
  parameter int unsigned N_SLOTS = NUM_SLOTS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rx_valid,
  output logic                      rx_ready,
  input  logic                      rx_sop,
  input  logic                      rx_eop,
  input  pkt_hdr_t                  rx_hdr,
  input  logic [63:0]               rx_data,
  output mem_req_t                  mem_req,
  input  logic                      mem_gnt,
  output logic                      desc_valid,
  output pkt_desc_t                 desc,
  input  logic                      desc_ready,
  input  logic                      free_valid,
  input  logic [SLOTW-1:0]          free_slot,
  output logic [N_SLOTS-1:0]        slot_busy
);
  typedef enum logic [1:0] {S_IDLE, S_STORE, S_DROP} state_e;

  state_e            state;
  pkt_hdr_t          hdr_q;
  logic [SLOTW-1:0]  slot_q;
  logic [PLENW-1:0]  widx;       // word index inside the slot
  logic              have_free;
  logic [SLOTW-1:0]  free_idx;
  logic              q_full, q_empty;
  logic              push;
  pkt_desc_t         push_desc;

  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = N_SLOTS - 1; i >= 0; i--)
      if (!slot_busy[i]) begin have_free = 1'b1; free_idx = SLOTW'(i); end
  end

  // which slot, header and word index the current beat belongs to
  logic             beat_store;
  logic [SLOTW-1:0] beat_slot;
  logic [PLENW-1:0] beat_widx;
  pkt_hdr_t         beat_hdr;
  logic             beat_write;

  always_comb begin
    beat_hdr   = (state == S_IDLE) ? rx_hdr : hdr_q;
    beat_slot  = (state == S_IDLE) ? free_idx : slot_q;
    beat_widx  = (state == S_IDLE) ? '0 : widx;
    beat_store = (state == S_IDLE) ? have_free : (state == S_STORE);
    // a beat carries data only below the packet length
    beat_write = beat_store && ({beat_widx, 3'b000} < ($bits(beat_widx) + 3)'(beat_hdr.pkt_len));
    mem_req        = '0;
    mem_req.valid  = rx_valid && beat_write && !(state == S_IDLE && (!rx_sop || q_full));
    mem_req.op     = M_WRITE;
    mem_req.addr   = MAW'(beat_slot) * MAW'(SLOT_WORDS) + MAW'(beat_widx);
    mem_req.wdata  = rx_data;
    if (state == S_IDLE)
      rx_ready = !q_full && (!rx_sop || !beat_write || mem_gnt);
    else
      rx_ready = !beat_write || mem_gnt;
  end

  wire beat_fire = rx_valid && rx_ready;

  always_comb begin
    push             = beat_fire && rx_eop && (state != S_IDLE || rx_sop);
    push_desc.stored = beat_store;
    push_desc.slot   = beat_slot;
    push_desc.hdr    = beat_hdr;
  end

  sync_fifo #(.WIDTH($bits(pkt_desc_t)), .DEPTH(4)) u_q (
    .clk, .rst_n, .push, .din(push_desc), .pop(desc_valid && desc_ready),
    .dout(desc), .empty(q_empty), .full(q_full), .count(), .overflows()
  );
  assign desc_valid = !q_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      hdr_q     <= '0;
      slot_q    <= '0;
      widx      <= '0;
      slot_busy <= '0;
    end else begin
      if (free_valid) slot_busy[free_slot] <= 1'b0;
      if (beat_fire) begin
        if (state == S_IDLE) begin
          if (rx_sop) begin
            hdr_q  <= rx_hdr;
            slot_q <= free_idx;
            widx   <= PLENW'(1);
            if (have_free) slot_busy[free_idx] <= 1'b1;
            if (!rx_eop) state <= have_free ? S_STORE : S_DROP;
          end
        end else begin
          widx <= widx + 1'b1;
          if (rx_eop) state <= S_IDLE;
        end
      end
    end
  end
endmodule
