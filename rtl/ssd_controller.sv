// ssd_controller -- FPGA-side NVMe control plane for N_SSD SSDs.
//
// One nvme_queue_pair (SQ/CQ controlling unit) per SSD, so that the user
// logic can drive all SSDs at once without a CPU. The controller
//   * routes each command to the queue pair of the SSD it names,
//   * merges the SSDs' completions towards the user logic (round robin),
//   * merges the queue pairs' doorbell writes into one FPGA-initiated MMIO
//     write port (round robin), which the PCIe core sends to the SSDs,
//   * decodes the SSDs' peer-to-peer accesses to the queues in the FPGA
//     BAR: SSD s owns a window of 2*64*DEPTH bytes at s*2*64*DEPTH; its SQ
//     (64-byte entries) fills the lower half and its CQ (16-byte entries)
//     starts at the upper half.
// The BAR0 address of each SSD is written by the host during set-up
// (cfg_*). The host driver is also expected to have created each SSD's I/O
// queue pair with these BAR addresses; that admin step is outside this
// block. The paper gives the count (10 SSDs in its evaluation) and the
// on-chip queues; window layout and arbitration are this design's own.
//
// Timing: commands, completions and doorbells are valid/ready handshakes
// with combinational routing; queue reads (q_rd_*) are combinational and
// queue writes take effect on the next edge.
//
// Lint note: rst_n drives asynchronous resets and also the 'disable iff'
// of the queue pairs' assertions, which Verilator reports as a net used
// both synchronously and asynchronously; the assertions are not logic.
module ssd_controller
  import fh_pkg::*;
#(
  parameter int N_SSD = 10,
  parameter int DEPTH = 64,
  localparam int SW   = (N_SSD > 1) ? $clog2(N_SSD) : 1,
  localparam int IW   = $clog2(DEPTH),
  localparam int WINB = IW + 7,          // log2 of one SSD's window in bytes
  localparam int QA_W = WINB + SW
) (
  input  logic                clk,
  input  logic                rst_n,
  // set-up: BAR0 address of each SSD
  input  logic                cfg_wr_valid,
  input  logic [SW-1:0]       cfg_wr_idx,
  input  logic [63:0]         cfg_wr_data,
  // commands from user logic
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic [SW-1:0]       cmd_ssd,
  input  nvme_cmd_t           cmd,
  output logic [15:0]         cmd_cid,
  // completions to user logic
  output logic                cpl_valid,
  input  logic                cpl_ready,
  output logic [SW-1:0]       cpl_ssd,
  output nvme_cpl_t           cpl,
  // doorbell writes to SSDs
  output logic                db_valid,
  input  logic                db_ready,
  output logic [63:0]         db_addr,
  output logic [31:0]         db_data,
  // peer-to-peer queue accesses from SSDs (byte offset in the queue region)
  input  logic                q_wr_valid,
  input  logic [QA_W-1:0]     q_wr_addr,
  input  logic [CQE_BITS-1:0] q_wr_data,
  input  logic [QA_W-1:0]     q_rd_addr,
  output logic [SQE_BITS-1:0] q_rd_data,
  // statistics
  output logic [31:0]         n_cmds,
  output logic [31:0]         n_cpls,
  output logic [31:0]         n_dbs,
  output logic [31:0]         n_full_stalls,
  output logic [31:0]         n_outstanding   // commands in flight, all SSDs
);
  logic [63:0]         bar      [N_SSD];
  logic [N_SSD-1:0]    qp_cmd_ready, qp_db_valid, qp_cpl_valid, qp_full;
  logic [$clog2(DEPTH):0] qp_outstanding [N_SSD];
  logic [15:0]         qp_cid   [N_SSD];
  logic [63:0]         qp_db_addr [N_SSD];
  logic [31:0]         qp_db_data [N_SSD];
  logic [SQE_BITS-1:0] qp_sq_data [N_SSD];
  nvme_cpl_t           qp_cpl   [N_SSD];
  logic [N_SSD-1:0]    db_grant, cpl_grant;
  logic [SW-1:0]       db_idx, cpl_idx;

  logic [SW-1:0] wr_ssd, rd_ssd;
  assign wr_ssd = q_wr_addr[WINB +: SW];
  assign rd_ssd = q_rd_addr[WINB +: SW];

  for (genvar s = 0; s < N_SSD; s++) begin : g_qp
    nvme_queue_pair #(.DEPTH(DEPTH)) u_qp (
      .clk, .rst_n,
      .ssd_bar    (bar[s]),
      .cmd_valid  (cmd_valid && cmd_ssd == SW'(s)),
      .cmd_ready  (qp_cmd_ready[s]),
      .cmd        (cmd),
      .cmd_cid    (qp_cid[s]),
      .db_valid   (qp_db_valid[s]),
      .db_ready   (db_ready && db_grant[s]),
      .db_addr    (qp_db_addr[s]),
      .db_data    (qp_db_data[s]),
      .sq_rd_idx  (q_rd_addr[6 +: IW]),
      .sq_rd_data (qp_sq_data[s]),
      .cq_wr_valid(q_wr_valid && wr_ssd == SW'(s) && q_wr_addr[WINB-1]),
      .cq_wr_idx  (q_wr_addr[4 +: IW]),
      .cq_wr_data (q_wr_data),
      .cpl_valid  (qp_cpl_valid[s]),
      .cpl_ready  (cpl_ready && cpl_grant[s]),
      .cpl        (qp_cpl[s]),
      .outstanding(qp_outstanding[s]),
      .full       (qp_full[s])
    );
  end

  // command routing
  logic cmd_ssd_ok;
  assign cmd_ssd_ok = (int'(cmd_ssd) < N_SSD);
  assign cmd_ready  = cmd_ssd_ok && qp_cmd_ready[cmd_ssd_ok ? cmd_ssd : '0];
  assign cmd_cid    = qp_cid[cmd_ssd_ok ? cmd_ssd : '0];

  // queue reads: only SQ entries are readable
  assign q_rd_data = (int'(rd_ssd) < N_SSD && !q_rd_addr[WINB-1]) ?
                     qp_sq_data[(int'(rd_ssd) < N_SSD) ? rd_ssd : '0] : '0;

  // doorbell merge
  rr_arbiter #(.N(N_SSD)) u_db_arb (
    .clk, .rst_n, .req(qp_db_valid), .adv(db_ready),
    .grant(db_grant), .grant_idx(db_idx));
  assign db_valid = |qp_db_valid;
  assign db_addr  = qp_db_addr[db_idx];
  assign db_data  = qp_db_data[db_idx];

  // completion merge
  rr_arbiter #(.N(N_SSD)) u_cpl_arb (
    .clk, .rst_n, .req(qp_cpl_valid), .adv(cpl_ready),
    .grant(cpl_grant), .grant_idx(cpl_idx));
  assign cpl_valid = |qp_cpl_valid;
  assign cpl_ssd   = cpl_idx;
  assign cpl       = qp_cpl[cpl_idx];

  always_comb begin
    n_outstanding = '0;
    for (int s = 0; s < N_SSD; s++) n_outstanding += 32'(qp_outstanding[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N_SSD; s++) bar[s] <= '0;
      n_cmds        <= '0;
      n_cpls        <= '0;
      n_dbs         <= '0;
      n_full_stalls <= '0;
    end else begin
      if (cfg_wr_valid && int'(cfg_wr_idx) < N_SSD) bar[cfg_wr_idx] <= cfg_wr_data;
      if (cmd_valid && cmd_ready) n_cmds <= n_cmds + 1;
      if (cmd_valid && cmd_ssd_ok && qp_full[cmd_ssd]) n_full_stalls <= n_full_stalls + 1;
      if (cpl_valid && cpl_ready) n_cpls <= n_cpls + 1;
      if (db_valid && db_ready)   n_dbs  <= n_dbs + 1;
    end
  end

endmodule
