// fh_pkg -- types and constants shared by the FpgaHub hub logic.
//
// The hub moves 64-byte beats: one beat is the width of a message-stream
// word, of a DMA word and of an on-board memory word. Messages are tagged
// with a flow number; each flow has a descriptor that tells the
// split/assemble logic where the message goes. The NVMe definitions
// (64-byte submission entry, 16-byte completion entry, phase tag, doorbell
// offsets, opcodes) follow the NVMe base specification; the paper only says
// that the submission and completion queues live in on-chip memory.
// Beat width, flow count and all field layouts of descriptors, doorbells
// and storage-request messages are this design's own choices.
//
// Lint note: a module that imports this package uses only part of it, so
// a lint run on one module reports the constants it does not use and the
// bits that each completion-entry field function ignores; both are
// intended.
package fh_pkg;

  localparam int DATA_W     = 512;           // beat width in bits (64 bytes)
  localparam int BEAT_BYTES = DATA_W / 8;
  localparam int FLOW_W     = 4;             // flow number width
  localparam int N_FLOWS    = 1 << FLOW_W;   // 16 flows
  localparam int LEN_W      = 16;            // length in beats

  // Where a received message of a flow is delivered.
  typedef enum logic [1:0] {
    DEST_USER  = 2'd0,   // whole message to the NIC-initiated user logic
    DEST_PCIE  = 2'd1,   // whole message DMA-written to a PCIe address (CPU/GPU)
    DEST_SPLIT = 2'd2    // header to PCIe address, payload stays in FPGA memory
  } dest_e;

  // Per-flow descriptor, written by the host over MMIO.
  typedef struct packed {
    dest_e             dest;
    logic [7:0]        hdr_beats;   // header size in beats (DEST_SPLIT)
    logic [63:0]       host_addr;   // PCIe byte address for header / whole message
    logic [63:0]       mem_base;    // on-board memory beat address of payload ring
    logic [LEN_W-1:0]  mem_beats;   // payload ring size in beats (0 = 65536)
  } desc_t;

  // Request to assemble one outgoing message (rung by the host doorbell).
  typedef struct packed {
    logic [FLOW_W-1:0] flow;
    logic [63:0]       hdr_addr;    // PCIe byte address of the header
    logic [7:0]        hdr_beats;
    logic [63:0]       pay_addr;    // on-board memory beat address of the payload
    logic [LEN_W-1:0]  pay_beats;
  } tx_req_t;

  // Notification to the host that a whole message has arrived.
  typedef struct packed {
    logic [FLOW_W-1:0] flow;
    dest_e             dest;
    logic [LEN_W-1:0]  total_beats;
    logic [LEN_W-1:0]  hdr_beats;   // beats written to PCIe
    logic [LEN_W-1:0]  pay_beats;   // beats written to FPGA memory
    logic [63:0]       pay_addr;    // memory beat address of first payload beat
  } rx_note_t;

  // ---------------- NVMe -----------------------------------------------
  localparam logic [7:0] NVME_OP_WRITE = 8'h01;
  localparam logic [7:0] NVME_OP_READ  = 8'h02;
  localparam int SQE_BITS = 512;   // 64-byte submission queue entry
  localparam int CQE_BITS = 128;   // 16-byte completion queue entry

  // Fields of an I/O command that the user logic supplies.
  typedef struct packed {
    logic [7:0]  opcode;
    logic [31:0] nsid;
    logic [63:0] prp1;   // PCIe address of the data buffer (CPU, GPU or FPGA)
    logic [63:0] prp2;
    logic [63:0] slba;   // starting logical block
    logic [15:0] nlb;    // number of logical blocks, 0-based
  } nvme_cmd_t;

  // Completion handed to the user logic.
  typedef struct packed {
    logic [15:0] cid;
    logic [14:0] status;
    logic [15:0] sq_head;
  } nvme_cpl_t;

  // Build the 64-byte submission queue entry (NVMe command layout:
  // DW0 opcode/CID, DW1 NSID, DW6-7 PRP1, DW8-9 PRP2, DW10-11 SLBA, DW12 NLB).
  function automatic logic [SQE_BITS-1:0] build_sqe(nvme_cmd_t c, logic [15:0] cid);
    logic [SQE_BITS-1:0] e;
    e = '0;
    e[7:0]     = c.opcode;
    e[31:16]   = cid;
    e[63:32]   = c.nsid;
    e[255:192] = c.prp1;
    e[319:256] = c.prp2;
    e[383:320] = c.slba;
    e[399:384] = c.nlb;
    return e;
  endfunction

  // Fields of a 16-byte completion queue entry.
  function automatic logic [15:0] cqe_sq_head(logic [CQE_BITS-1:0] e); return e[79:64];   endfunction
  function automatic logic [15:0] cqe_cid    (logic [CQE_BITS-1:0] e); return e[111:96];  endfunction
  function automatic logic        cqe_phase  (logic [CQE_BITS-1:0] e); return e[112];     endfunction
  function automatic logic [14:0] cqe_status (logic [CQE_BITS-1:0] e); return e[127:113]; endfunction

  // Doorbell register offsets inside an SSD's BAR0 (doorbell stride 0):
  // SQ y tail at 0x1000 + 8*y, CQ y head at 0x1000 + 8*y + 4.
  localparam logic [15:0] NVME_IO_QID = 16'd1;
  function automatic logic [63:0] sq_db_off(logic [15:0] qid); return 64'h1000 + 64'(qid) * 8;     endfunction
  function automatic logic [63:0] cq_db_off(logic [15:0] qid); return 64'h1000 + 64'(qid) * 8 + 4; endfunction

  // ---------------- storage request messages (user logic) -----------------
  // First beat of a request message from the network:
  //   [7:0] NVMe opcode, [15:8] SSD index, [31:16] request id,
  //   [47:32] NLB (0-based), [127:64] SLBA, [191:128] PRP1, [255:192] PRP2.
  // Response message (one beat), sent back on the same flow:
  //   [7:0] 8'h80, [15:8] SSD index, [31:16] request id, [46:32] status.
  localparam logic [7:0] RESP_TAG = 8'h80;

endpackage
