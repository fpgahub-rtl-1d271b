// nic_user_logic -- NIC-initiated user logic: storage requests from the
// network served by the FPGA's own NVMe control plane.
//
// A remote node sends a request message on some flow whose descriptor
// delivers it to the user logic. The first beat of the message carries an
// NVMe opcode (read 0x02 or write 0x01), an SSD index, a request id, the
// starting block, the block count and the PCIe address of the data buffer
// (in CPU, GPU or FPGA memory); further beats are ignored. The block turns
// it into an NVMe command (namespace 1) for the SSD controller, remembers
// (SSD, CID) -> (flow, request id), and when the SSD's completion arrives
// sends a one-beat response message on the same flow back through the
// assembler. The host CPU takes no part. Requests with another opcode are
// dropped and counted. The paper gives this behaviour as its example of the
// user logic; the message layout (fh_pkg) is this design's own. Its other
// example, offloading collective communication, is not described enough to
// build and is not part of this block.
//
// Timing: a request is held in one register until the SSD controller takes
// it; while it waits, urx_ready is low. Completions pass to the response
// port combinationally (cpl_ready = utx_ready).
//
// Lint note: only the request fields listed above are read, so the other
// bits of the first beat, the CID bits above log2(DEPTH) and the sq_head
// field of a completion are reported as unused.
module nic_user_logic
  import fh_pkg::*;
#(
  parameter int N_SSD = 10,
  parameter int DEPTH = 64,
  localparam int SW   = (N_SSD > 1) ? $clog2(N_SSD) : 1,
  localparam int IW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // request messages from split
  input  logic              urx_valid,
  output logic              urx_ready,
  input  logic [DATA_W-1:0] urx_data,
  input  logic [FLOW_W-1:0] urx_flow,
  input  logic              urx_last,
  // commands to the SSD controller
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output logic [SW-1:0]     cmd_ssd,
  output nvme_cmd_t         cmd,
  input  logic [15:0]       cmd_cid,
  // completions from the SSD controller
  input  logic              cpl_valid,
  output logic              cpl_ready,
  input  logic [SW-1:0]     cpl_ssd,
  input  nvme_cpl_t         cpl,
  // response messages to assemble
  output logic              utx_valid,
  input  logic              utx_ready,
  output logic [DATA_W-1:0] utx_data,
  output logic [FLOW_W-1:0] utx_flow,
  output logic              utx_last,
  // statistics
  output logic [31:0]       n_reqs,
  output logic [31:0]       n_resps,
  output logic [31:0]       n_dropped
);
  typedef struct packed {
    logic [FLOW_W-1:0] flow;
    logic [15:0]       req_id;
  } tag_t;

  tag_t          tags [N_SSD * DEPTH];
  logic          in_msg;        // inside a message, past its first beat
  logic          pend;          // a command waits for the SSD controller
  nvme_cmd_t     pend_cmd;
  logic [SW-1:0] pend_ssd;
  tag_t          pend_tag;

  logic        first_fire;
  logic [7:0]  op;
  logic        op_ok;
  tag_t        rtag;

  assign urx_ready  = !pend;
  assign first_fire = urx_valid && urx_ready && !in_msg;
  assign op    = urx_data[7:0];
  assign op_ok = (op == NVME_OP_READ || op == NVME_OP_WRITE) && int'(urx_data[15:8]) < N_SSD;

  assign cmd_valid = pend;
  assign cmd       = pend_cmd;
  assign cmd_ssd   = pend_ssd;

  assign rtag      = tags[int'(cpl_ssd) * DEPTH + int'(cpl.cid[IW-1:0])];
  assign utx_valid = cpl_valid;
  assign cpl_ready = utx_ready;
  assign utx_flow  = rtag.flow;
  assign utx_last  = 1'b1;
  always_comb begin
    utx_data        = '0;
    utx_data[7:0]   = RESP_TAG;
    utx_data[15:8]  = 8'(cpl_ssd);
    utx_data[31:16] = rtag.req_id;
    utx_data[46:32] = cpl.status;
  end

  always_ff @(posedge clk) begin
    if (cmd_valid && cmd_ready)
      tags[int'(pend_ssd) * DEPTH + int'(cmd_cid[IW-1:0])] <= pend_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_msg    <= 1'b0;
      pend      <= 1'b0;
      pend_cmd  <= '0;
      pend_ssd  <= '0;
      pend_tag  <= '0;
      n_reqs    <= '0;
      n_resps   <= '0;
      n_dropped <= '0;
    end else begin
      if (urx_valid && urx_ready) in_msg <= !urx_last;
      if (cmd_valid && cmd_ready) pend <= 1'b0;
      if (first_fire) begin
        if (op_ok) begin
          pend            <= 1'b1;
          pend_cmd.opcode <= op;
          pend_cmd.nsid   <= 32'd1;
          pend_cmd.nlb    <= urx_data[47:32];
          pend_cmd.slba   <= urx_data[127:64];
          pend_cmd.prp1   <= urx_data[191:128];
          pend_cmd.prp2   <= urx_data[255:192];
          pend_ssd        <= SW'(urx_data[15:8]);
          pend_tag.flow   <= urx_flow;
          pend_tag.req_id <= urx_data[31:16];
          n_reqs          <= n_reqs + 1;
        end else begin
          n_dropped <= n_dropped + 1;
        end
      end
      if (cpl_valid && cpl_ready) n_resps <= n_resps + 1;
    end
  end

endmodule
