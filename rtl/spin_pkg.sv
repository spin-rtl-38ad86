// spin_pkg: types and constants shared by the sPIN NIC blocks.
//
// A sPIN NIC runs short user handlers on handler processing units (HPUs)
// for the packets of each incoming message: one header handler, then
// payload handlers (possibly in parallel), then one completion handler.
// This package holds the packet header as seen by the NIC, the matching
// entry (ME) that carries the three handlers, the handler return codes and
// the request formats of the shared HPU memory, the DMA unit, the counters
// and the put unit.
//
// Numbers taken from the paper: 4 HPUs (simulated configuration), 4 KiB
// maximum payload per packet, 64-bit match bits, 30 ns header matching and
// 2 ns channel lookup at 2.5 GHz (75 and 5 cycles). Everything else (slot
// count, ME count, field widths, word width 64 bit) is this design's own.
package spin_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned NUM_HPUS          = 4;
  parameter int unsigned MAX_PAYLOAD_BYTES = 4096;
  parameter int unsigned MATCH_CYCLES      = 75;   // 30 ns at 2.5 GHz
  parameter int unsigned CAM_CYCLES        = 5;    // 2 ns at 2.5 GHz
  parameter int unsigned NUM_SLOTS         = 8;    // packet buffer slots
  parameter int unsigned NUM_ME            = 64;
  parameter int unsigned NUM_CHANNELS      = 16;
  parameter int unsigned NUM_PT            = 4;    // portal table entries
  parameter int unsigned NUM_CT            = 16;   // counting events
  parameter int unsigned MEM_WORDS         = 8192; // 64-bit words = 64 KiB

  parameter int unsigned SLOT_WORDS = MAX_PAYLOAD_BYTES / 8;
  parameter int unsigned MAW        = $clog2(MEM_WORDS);  // word address
  parameter int unsigned SLOTW      = $clog2(NUM_SLOTS);
  parameter int unsigned MEW        = $clog2(NUM_ME);
  parameter int unsigned CHW        = $clog2(NUM_CHANNELS);
  parameter int unsigned PTW        = $clog2(NUM_PT);
  parameter int unsigned CTW        = $clog2(NUM_CT);
  parameter int unsigned LENW       = 32;                 // byte lengths
  parameter int unsigned PLENW      = $clog2(MAX_PAYLOAD_BYTES) + 1;

  // ------------------------------------------------------- packet header
  typedef enum logic [1:0] {REQ_PUT = 2'd0, REQ_GET = 2'd1, REQ_ATOMIC = 2'd2} req_type_e;

  // ptl_header_t of the paper plus the transport fields the NIC needs to
  // tell packets of one message apart (msg_id, pkt_offset, pkt_len).
  typedef struct packed {
    logic             is_header;   // first packet of the message
    req_type_e        req_type;
    logic [PTW-1:0]   pt_index;
    logic [15:0]      source_id;
    logic [15:0]      target_id;
    logic [15:0]      msg_id;      // message number chosen by the sender
    logic [63:0]      match_bits;
    logic [LENW-1:0]  length;      // message payload length in bytes
    logic [LENW-1:0]  offset;      // offset in ME
    logic [63:0]      hdr_data;
    logic [LENW-1:0]  pkt_offset;  // offset of this packet in the message
    logic [PLENW-1:0] pkt_len;     // payload bytes in this packet
  } pkt_hdr_t;

  // ------------------------------------------------------ matching entry
  typedef struct packed {
    logic             valid;
    logic [PTW-1:0]   pt_index;
    logic [63:0]      match_bits;
    logic [63:0]      ignore_bits;
    logic             hh_en, ph_en, ch_en;   // handler installed (not NULL)
    logic [15:0]      hh_pc, ph_pc, ch_pc;   // handler entry points
    logic [MAW-1:0]   state_addr;            // HPU memory of the handlers
    logic [PLENW-1:0] user_hdr_bytes;        // user header at payload start
    logic [63:0]      host_base;             // ME host memory
    logic [LENW-1:0]  host_len;
    logic [63:0]      hhost_base;            // handler host memory
    logic [LENW-1:0]  hhost_len;
    logic [CTW-1:0]   ct_index;
  } me_t;

  // --------------------------------------------------------- return codes
  typedef enum logic [3:0] {
    RC_DROP                 = 4'd0,
    RC_DROP_PENDING         = 4'd1,
    RC_PROCESS_DATA         = 4'd2,
    RC_PROCESS_DATA_PENDING = 4'd3,
    RC_PROCEED              = 4'd4,
    RC_PROCEED_PENDING      = 4'd5,
    RC_SUCCESS              = 4'd6,
    RC_SUCCESS_PENDING      = 4'd7,
    RC_SEGV                 = 4'd8,
    RC_FAIL                 = 4'd9
  } ret_code_e;

  // -------------------------------------------------------- handler task
  typedef enum logic [1:0] {H_HEADER = 2'd0, H_PAYLOAD = 2'd1, H_COMPLETION = 2'd2} hkind_e;

  typedef struct packed {
    hkind_e           kind;
    logic [CHW-1:0]   chan;
    logic [MEW-1:0]   me_idx;
    logic [15:0]      pc;             // handler entry point
    logic [MAW-1:0]   state_addr;     // shared state in HPU memory
    logic [MAW-1:0]   data_addr;      // packet data in the buffer (word)
    logic [PLENW-1:0] data_len;       // bytes of data passed
    logic [LENW-1:0]  data_offset;    // offset of the data in the message
    logic [LENW-1:0]  dropped_bytes;  // completion handler argument
    logic             fc_triggered;   // completion handler argument
    logic [63:0]      me_host_base;   // host memory the handler may reach:
    logic [LENW-1:0]  me_host_len;    //   the ME's buffer ...
    logic [63:0]      h_host_base;    //   ... and the handler host memory
    logic [LENW-1:0]  h_host_len;
    pkt_hdr_t         hdr;            // header handler argument
  } hpu_task_t;

  // ----------------------------------------------------- HPU memory port
  typedef enum logic [1:0] {M_READ = 2'd0, M_WRITE = 2'd1, M_CAS = 2'd2, M_FADD = 2'd3} mem_op_e;

  typedef struct packed {
    logic           valid;
    mem_op_e        op;
    logic [MAW-1:0] addr;
    logic [63:0]    wdata;   // write data, swap value or increment
    logic [63:0]    cmp;     // compare value of CAS
  } mem_req_t;

  typedef struct packed {
    logic        valid;
    logic [63:0] rdata;      // read data or value before the atomic
  } mem_rsp_t;

  // ------------------------------------------------------------ DMA unit
  typedef enum logic [1:0] {D_TO_HOST = 2'd0, D_FROM_HOST = 2'd1, D_CAS = 2'd2, D_FADD = 2'd3} dma_op_e;

  typedef struct packed {
    logic            valid;
    dma_op_e         op;
    logic [MAW-1:0]  local_addr;  // word address in HPU memory
    logic [63:0]     host_addr;   // byte address, 8-byte aligned
    logic [LENW-1:0] len;         // bytes, multiple of 8
    logic [63:0]     cmp;         // CAS compare value
    logic [63:0]     operand;     // CAS swap value or fetch-add increment
    logic [7:0]      tag;         // returned on completion (handle)
  } dma_req_t;

  // a handler's DMA call: host memory is named by an offset into the ME's
  // buffer (space 0) or into the handler host memory (space 1)
  typedef enum logic {SP_ME = 1'b0, SP_HANDLER = 1'b1} host_space_e;

  typedef struct packed {
    logic            valid;
    dma_op_e         op;
    host_space_e     space;
    logic [MAW-1:0]  local_addr;  // word address in HPU memory
    logic [LENW-1:0] offset;      // byte offset in the space, 8-byte aligned
    logic [LENW-1:0] len;         // bytes, multiple of 8 (8 for atomics)
    logic [63:0]     cmp;
    logic [63:0]     operand;
    logic [7:0]      tag;
  } hdma_req_t;

  typedef enum logic [1:0] {HM_READ = 2'd0, HM_WRITE = 2'd1, HM_CAS = 2'd2, HM_FADD = 2'd3} host_op_e;

  typedef struct packed {
    logic        valid;
    host_op_e    op;
    logic [63:0] addr;
    logic [63:0] wdata;
    logic [63:0] cmp;
  } host_req_t;

  // --------------------------------------------------------- counters
  typedef enum logic [1:0] {CT_INC = 2'd0, CT_GET = 2'd1, CT_SET = 2'd2} ct_op_e;

  typedef struct packed {
    logic           valid;
    ct_op_e         op;
    logic [CTW-1:0] idx;
    logic [63:0]    val;
  } ct_req_t;

  // --------------------------------------------------------- put unit
  typedef struct packed {
    logic            valid;
    logic            from_device;  // 1: PutFromDevice, 0: PutFromHost
    logic [MAW-1:0]  local_addr;   // device: word address in HPU memory
    logic [LENW-1:0] host_offset;  // host: offset relative to the ME
    logic [LENW-1:0] len;
    logic [15:0]     target_id;
    logic [63:0]     match_bits;
    logic [LENW-1:0] remote_offset;
    logic [63:0]     hdr_data;
  } put_req_t;

  // ----------------------------------------------------------- events
  typedef enum logic [1:0] {EV_COMPLETE = 2'd0, EV_ERROR = 2'd1, EV_FLOWCTL = 2'd2, EV_NOMATCH = 2'd3} ev_kind_e;

  typedef struct packed {
    ev_kind_e        kind;
    logic [MEW-1:0]  me_idx;
    logic [PTW-1:0]  pt_index;
    ret_code_e       rc;
    logic [LENW-1:0] dropped_bytes;
    logic            fc_triggered;
  } event_t;

  // ---------------------------------------------- ingress -> scheduler
  typedef struct packed {
    logic             stored;   // 0: dropped for lack of a buffer slot
    logic [SLOTW-1:0] slot;
    pkt_hdr_t         hdr;
  } pkt_desc_t;

endpackage
