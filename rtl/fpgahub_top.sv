// fpgahub_top -- the FPGA hub: a SmartNIC-style FPGA that sits between the
// network and the PCIe devices of a server (CPUs, GPUs, NVMe SSDs) and
// moves data among them itself.
//
// Blocks and how they connect (left: PCIe side, right: network side):
//
//   bar_*  --> mmio_regs --+--> descriptor_table --> split_assemble (lookup)
//   (MMIO master)          +--> TX doorbell queue  --> split_assemble (TX)
//                          +--> ssd_controller (SSD BARs, NVMe queues)
//   ssd_db_* <-- ssd_controller doorbells (FPGA-initiated MMIO writes)
//   c2h_*  <-- split_assemble (headers / whole messages to CPU or GPU)
//   h2c_*  --> split_assemble (headers read from CPU or GPU memory)
//   mem*_* <-> split_assemble (payloads in on-board HBM/DDR)
//   net_rx_* / net_tx_* <-> split_assemble (transport's message stream)
//   split_assemble <-> nic_user_logic <-> ssd_controller
//
// The PCIe core (DMA and MMIO), the network transport with its Ethernet
// MAC, and the on-board memory are not part of this RTL: their streams are
// the ports of this module. All handshakes are valid/ready; addresses on
// c2h/h2c are PCIe byte addresses, on mem* 64-byte beat addresses. The
// structure follows the paper's initial design; every port format,
// register map and message layout is this design's own (see fh_pkg and the
// blocks' headers).
//
// Lint note: rst_n also disables the assertions inside the blocks; this
// is reported by lint as a reset used both synchronously and asynchronously.
// Unused bits reported on this hierarchy are message or address bits that
// the formats leave free (see fh_pkg and mmio_regs).
module fpgahub_top
  import fh_pkg::*;
#(
  parameter int N_SSD = 10,   // SSDs driven by the SSD controller
  parameter int DEPTH = 64,   // entries per NVMe SQ and CQ
  parameter int TXQ   = 8,    // queued assemble requests
  localparam int SW   = (N_SSD > 1) ? $clog2(N_SSD) : 1,
  localparam int QA_W = $clog2(DEPTH) + 7 + SW
) (
  input  logic                clk,
  input  logic                rst_n,
  // MMIO master: accesses to the FPGA BAR (CPU, GPU, SSD peer-to-peer)
  input  logic                bar_valid,
  output logic                bar_ready,
  input  logic                bar_write,
  input  logic [31:0]         bar_addr,
  input  logic [127:0]        bar_wdata,
  output logic                bar_rsp_valid,
  output logic [SQE_BITS-1:0] bar_rsp_data,
  // MMIO slave: doorbell writes to SSDs
  output logic                ssd_db_valid,
  input  logic                ssd_db_ready,
  output logic [63:0]         ssd_db_addr,
  output logic [31:0]         ssd_db_data,
  // DMA card-to-host writes
  output logic                c2h_valid,
  input  logic                c2h_ready,
  output logic [63:0]         c2h_addr,
  output logic [DATA_W-1:0]   c2h_data,
  output logic                c2h_last,
  // DMA host-to-card reads
  output logic                h2c_req_valid,
  input  logic                h2c_req_ready,
  output logic [63:0]         h2c_req_addr,
  output logic [7:0]          h2c_req_beats,
  input  logic                h2c_valid,
  output logic                h2c_ready,
  input  logic [DATA_W-1:0]   h2c_data,
  input  logic                h2c_last,
  // message-complete notifications for the host
  output logic                note_valid,
  input  logic                note_ready,
  output rx_note_t            note,
  // on-board memory
  output logic                memw_valid,
  input  logic                memw_ready,
  output logic [63:0]         memw_addr,
  output logic [DATA_W-1:0]   memw_data,
  output logic                memr_req_valid,
  input  logic                memr_req_ready,
  output logic [63:0]         memr_req_addr,
  output logic [LEN_W-1:0]    memr_req_beats,
  input  logic                memr_valid,
  output logic                memr_ready,
  input  logic [DATA_W-1:0]   memr_data,
  input  logic                memr_last,
  // network transport message stream
  input  logic                net_rx_valid,
  output logic                net_rx_ready,
  input  logic [DATA_W-1:0]   net_rx_data,
  input  logic [FLOW_W-1:0]   net_rx_flow,
  input  logic                net_rx_last,
  output logic                net_tx_valid,
  input  logic                net_tx_ready,
  output logic [DATA_W-1:0]   net_tx_data,
  output logic [FLOW_W-1:0]   net_tx_flow,
  output logic                net_tx_last
);
  localparam int N_STATS = 13;

  // descriptor table
  logic              desc_wr_valid;
  logic [FLOW_W+4:0] desc_addr;
  logic [63:0]       desc_wr_data, desc_rd_data;
  logic [FLOW_W-1:0] lk_flow;
  desc_t             lk_desc;
  // SSD controller
  logic                ssd_cfg_valid, q_wr_valid;
  logic [SW-1:0]       ssd_cfg_idx;
  logic [63:0]         ssd_cfg_data;
  logic [QA_W-1:0]     q_addr;
  logic [CQE_BITS-1:0] q_wr_data;
  logic [SQE_BITS-1:0] q_rd_data;
  logic                cmd_valid, cmd_ready, cpl_valid, cpl_ready;
  logic [SW-1:0]       cmd_ssd, cpl_ssd;
  nvme_cmd_t           cmd;
  nvme_cpl_t           cpl;
  logic [15:0]         cmd_cid;
  // assemble requests
  logic                txreq_valid, txreq_ready;
  tx_req_t             txreq;
  // user logic streams
  logic                urx_valid, urx_ready, urx_last, utx_valid, utx_ready, utx_last;
  logic [DATA_W-1:0]   urx_data, utx_data;
  logic [FLOW_W-1:0]   urx_flow, utx_flow;
  // statistics
  logic [31:0] stats [N_STATS];
  logic [31:0] n_rx_msgs, n_user_msgs, n_asm_msgs, n_cmds, n_cpls, n_dbs,
               n_full_stalls, n_outstanding, n_reqs, n_resps, n_dropped,
               n_doorbells, n_db_stalls;

  assign stats = '{n_rx_msgs, n_user_msgs, n_asm_msgs, n_cmds, n_cpls, n_dbs,
                   n_full_stalls, n_outstanding, n_reqs, n_resps, n_dropped,
                   n_db_stalls, n_doorbells};

  mmio_regs #(.N_SSD(N_SSD), .QA_W(QA_W), .TXQ(TXQ), .N_STATS(N_STATS)) u_mmio (
    .clk, .rst_n,
    .bar_valid, .bar_ready, .bar_write, .bar_addr, .bar_wdata,
    .bar_rsp_valid, .bar_rsp_data,
    .desc_wr_valid, .desc_addr, .desc_wr_data, .desc_rd_data,
    .ssd_cfg_valid, .ssd_cfg_idx, .ssd_cfg_data,
    .q_wr_valid, .q_addr, .q_wr_data, .q_rd_data,
    .txreq_valid, .txreq_ready, .txreq,
    .stats, .n_doorbells, .n_db_stalls
  );

  descriptor_table #(.NFLOWS(N_FLOWS)) u_desc (
    .clk, .rst_n,
    .wr_valid(desc_wr_valid), .wr_addr(desc_addr), .wr_data(desc_wr_data),
    .rd_addr (desc_addr),     .rd_data(desc_rd_data),
    .lk_flow, .lk_desc
  );

  split_assemble u_sa (
    .clk, .rst_n,
    .rx_valid(net_rx_valid), .rx_ready(net_rx_ready), .rx_data(net_rx_data),
    .rx_flow (net_rx_flow),  .rx_last (net_rx_last),
    .lk_flow, .lk_desc,
    .urx_valid, .urx_ready, .urx_data, .urx_flow, .urx_last,
    .c2h_valid, .c2h_ready, .c2h_addr, .c2h_data, .c2h_last,
    .memw_valid, .memw_ready, .memw_addr, .memw_data,
    .note_valid, .note_ready, .note,
    .utx_valid, .utx_ready, .utx_data, .utx_flow, .utx_last,
    .txreq_valid, .txreq_ready, .txreq,
    .h2c_req_valid, .h2c_req_ready, .h2c_req_addr, .h2c_req_beats,
    .h2c_valid, .h2c_ready, .h2c_data, .h2c_last,
    .memr_req_valid, .memr_req_ready, .memr_req_addr, .memr_req_beats,
    .memr_valid, .memr_ready, .memr_data, .memr_last,
    .tx_valid(net_tx_valid), .tx_ready(net_tx_ready), .tx_data(net_tx_data),
    .tx_flow (net_tx_flow),  .tx_last (net_tx_last),
    .n_rx_msgs, .n_user_msgs, .n_asm_msgs
  );

  nic_user_logic #(.N_SSD(N_SSD), .DEPTH(DEPTH)) u_user (
    .clk, .rst_n,
    .urx_valid, .urx_ready, .urx_data, .urx_flow, .urx_last,
    .cmd_valid, .cmd_ready, .cmd_ssd, .cmd, .cmd_cid,
    .cpl_valid, .cpl_ready, .cpl_ssd, .cpl,
    .utx_valid, .utx_ready, .utx_data, .utx_flow, .utx_last,
    .n_reqs, .n_resps, .n_dropped
  );

  ssd_controller #(.N_SSD(N_SSD), .DEPTH(DEPTH)) u_ssd (
    .clk, .rst_n,
    .cfg_wr_valid(ssd_cfg_valid), .cfg_wr_idx(ssd_cfg_idx), .cfg_wr_data(ssd_cfg_data),
    .cmd_valid, .cmd_ready, .cmd_ssd, .cmd, .cmd_cid,
    .cpl_valid, .cpl_ready, .cpl_ssd, .cpl,
    .db_valid(ssd_db_valid), .db_ready(ssd_db_ready),
    .db_addr (ssd_db_addr),  .db_data (ssd_db_data),
    .q_wr_valid, .q_wr_addr(q_addr), .q_wr_data, .q_rd_addr(q_addr), .q_rd_data,
    .n_cmds, .n_cpls, .n_dbs, .n_full_stalls, .n_outstanding
  );

endmodule
