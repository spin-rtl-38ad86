// put_unit: messages sent by handlers.
//
// Handlers send either from HPU memory (PutFromDevice) or from host memory
// (PutFromHost). A PutFromDevice is a single packet of at most 4 KiB: the
// unit reads it word by word from the shared HPU memory and sends it on
// the tx stream with a header built from the command; the HPU is told
// done when the last beat has been taken by the transmitter, which is the
// blocking behaviour the paper allows. A PutFromHost is handed to the
// NIC's normal send queue (hsq_*), as if the host had posted it, and is
// done as soon as it is queued (non-blocking).
//
// Interface: req[h] is held by HPU h until done[h] (one-cycle pulse). One
// command is handled at a time, round-robin over the HPUs. Every message
// gets a new msg_id so the receiver can tell messages apart; source_id is
// the NIC's own id. tx_* is the same beat format as the receive side.
// Timing: a word takes three cycles (read, memory answer, beat), a
// simplicity of this design; length over 4 KiB is cut to 4 KiB.
module put_unit
  import spin_pkg::*;
#(
  parameter int unsigned N_HPU = NUM_HPUS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] my_id,
  input  put_req_t    req  [N_HPU],
  output logic        done [N_HPU],
  output mem_req_t    mem_req,
  input  logic        mem_gnt,
  input  mem_rsp_t    mem_rsp,
  output logic        tx_valid,
  input  logic        tx_ready,
  output logic        tx_sop,
  output logic        tx_eop,
  output pkt_hdr_t    tx_hdr,
  output logic [63:0] tx_data,
  output logic        hsq_valid,
  input  logic        hsq_ready,
  output put_req_t    hsq_req
);
  localparam int unsigned HW = $clog2(N_HPU);
  typedef enum logic [2:0] {S_IDLE, S_READ, S_WAIT, S_SEND, S_HOST} state_e;

  state_e           st;
  put_req_t         cmd;
  logic [HW-1:0]    who;
  logic [PLENW-1:0] nwords, widx;
  logic [15:0]      msg_cnt;
  logic [63:0]      beat;
  logic [N_HPU-1:0] rq, g;
  logic [HW-1:0]    sel;
  logic             any, take;

  always_comb for (int h = 0; h < N_HPU; h++) rq[h] = req[h].valid;
  assign take = any && st == S_IDLE;
  rr_arbiter #(.N(N_HPU)) u_arb (.clk, .rst_n, .req(rq), .advance(take),
                                 .gnt(g), .gnt_idx(sel), .any(any));

  wire [LENW-1:0] len_c = (cmd.len > LENW'(MAX_PAYLOAD_BYTES)) ? LENW'(MAX_PAYLOAD_BYTES) : cmd.len;

  always_comb begin
    mem_req       = '0;
    mem_req.valid = (st == S_READ);
    mem_req.op    = M_READ;
    mem_req.addr  = cmd.local_addr + MAW'(widx);

    tx_hdr            = '0;
    tx_hdr.is_header  = 1'b1;
    tx_hdr.req_type   = REQ_PUT;
    tx_hdr.source_id  = my_id;
    tx_hdr.target_id  = cmd.target_id;
    tx_hdr.msg_id     = msg_cnt;
    tx_hdr.match_bits = cmd.match_bits;
    tx_hdr.length     = len_c;
    tx_hdr.offset     = cmd.remote_offset;
    tx_hdr.hdr_data   = cmd.hdr_data;
    tx_hdr.pkt_offset = '0;
    tx_hdr.pkt_len    = PLENW'(len_c);
    tx_valid = (st == S_SEND);
    tx_sop   = (widx == 0);
    tx_eop   = (widx + 1'b1 >= nwords);
    tx_data  = beat;

    hsq_valid = (st == S_HOST);
    hsq_req   = cmd;
    for (int h = 0; h < N_HPU; h++)
      done[h] = (who == HW'(h)) &&
                ((st == S_SEND && tx_ready && tx_eop) || (st == S_HOST && hsq_ready));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cmd <= '0; who <= '0; nwords <= '0; widx <= '0;
      msg_cnt <= '0; beat <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (take) begin
          cmd <= req[sel];
          who <= sel;
          widx <= '0;
          if (!req[sel].from_device) st <= S_HOST;
          else begin
            logic [LENW-1:0] l;
            l = (req[sel].len > LENW'(MAX_PAYLOAD_BYTES)) ? LENW'(MAX_PAYLOAD_BYTES) : req[sel].len;
            nwords <= PLENW'((l + 7) >> 3);
            if (l == 0) begin beat <= '0; st <= S_SEND; end
            else st <= S_READ;
          end
        end
        S_READ: if (mem_gnt) st <= S_WAIT;
        S_WAIT: begin beat <= mem_rsp.rdata; st <= S_SEND; end
        S_SEND: if (tx_ready) begin
          if (tx_eop) begin
            st <= S_IDLE;
            msg_cnt <= msg_cnt + 1'b1;
          end else begin
            widx <= widx + 1'b1;
            st <= S_READ;
          end
        end
        default: if (hsq_ready) st <= S_IDLE;
      endcase
    end
  end
endmodule
