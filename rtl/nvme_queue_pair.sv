// nvme_queue_pair -- one SQ/CQ controlling unit of the SSD controller.
//
// Holds one NVMe I/O submission queue (SQ) and its completion queue (CQ) in
// on-chip memory, as the paper proposes, so that the SSD reaches them by
// peer-to-peer PCIe accesses to the FPGA's BAR instead of host memory:
//   1. The user logic hands over a command (nvme_cmd_t). It is written as a
//      64-byte entry at the SQ tail with a command id (CID) taken from a
//      pool of free ids (lowest free first); the id returns to the pool
//      when its completion is handed on. Ids, not slots, identify commands
//      because an SSD may complete them out of order.
//   2. The SQ tail doorbell of the SSD (BAR0 + 0x1000 + 8*qid) is written
//      with the new tail. Doorbells are posted through db_*; commands that
//      arrive while a doorbell waits are covered by one doorbell.
//   3. The SSD reads the entry through sq_rd_* (peer-to-peer DMA) and moves
//      the data itself.
//   4. The SSD writes a 16-byte completion into the CQ through cq_wr_*.
//   5. The unit sees the entry at the CQ head whose phase tag matches the
//      expected phase, hands it to the user logic (no polling of host
//      memory), advances the head (flipping the expected phase on wrap) and
//      rings the CQ head doorbell (BAR0 + 0x1000 + 8*qid + 4).
// At most DEPTH-1 commands are outstanding, which keeps both rings from
// overflowing and guarantees a free id for every accepted command. The queue entry formats, doorbell
// offsets and phase rule are those of the NVMe specification; the paper
// gives steps 1-5 (its Figure 4b) but no depth, which is chosen here.
//
// Timing: a command is accepted in one cycle when cmd_ready is high; the
// SQ tail doorbell is offered from the next cycle. A completion written at
// cycle t is offered on cpl_* from cycle t+1. sq_rd_data is combinational.
module nvme_queue_pair
  import fh_pkg::*;
#(
  parameter int          DEPTH = 64,
  parameter logic [15:0] QID   = NVME_IO_QID
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [63:0]              ssd_bar,     // PCIe address of the SSD's BAR0
  // commands from user logic
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  nvme_cmd_t                cmd,
  output logic [15:0]              cmd_cid,     // CID given to the command offered
  // doorbell writes to the SSD (FPGA-initiated MMIO)
  output logic                     db_valid,
  input  logic                     db_ready,
  output logic [63:0]              db_addr,
  output logic [31:0]              db_data,
  // peer-to-peer SQ fetch by the SSD
  input  logic [$clog2(DEPTH)-1:0] sq_rd_idx,
  output logic [SQE_BITS-1:0]      sq_rd_data,
  // peer-to-peer CQ write by the SSD
  input  logic                     cq_wr_valid,
  input  logic [$clog2(DEPTH)-1:0] cq_wr_idx,
  input  logic [CQE_BITS-1:0]      cq_wr_data,
  // completions to user logic
  output logic                     cpl_valid,
  input  logic                     cpl_ready,
  output nvme_cpl_t                cpl,
  // status
  output logic [$clog2(DEPTH):0]   outstanding,
  output logic                     full
);
  localparam int IW = $clog2(DEPTH);

  logic [SQE_BITS-1:0] sq_mem [DEPTH];
  logic [CQE_BITS-1:0] cq_mem [DEPTH];
  logic [DEPTH-1:0]    cq_phase;          // phase tags, kept apart for reset
  logic [IW-1:0]       sq_tail, cq_head;
  logic                exp_phase;
  logic                sq_db_pend, cq_db_pend, last_db_cq;
  logic [DEPTH-1:0]    cid_busy;          // ids of outstanding commands
  logic [IW-1:0]       free_cid;

  logic cmd_fire, cpl_fire, db_fire, send_cq;
  logic [CQE_BITS-1:0] head_cqe;

  assign full      = (outstanding >= (IW+1)'(DEPTH - 1));
  assign cmd_ready = !full;
  always_comb begin
    free_cid = '0;
    for (int i = DEPTH - 1; i >= 0; i--) if (!cid_busy[i]) free_cid = IW'(i);
  end
  assign cmd_cid   = 16'(free_cid);
  assign cmd_fire  = cmd_valid && cmd_ready;

  assign sq_rd_data = sq_mem[sq_rd_idx];

  assign head_cqe  = cq_mem[cq_head];
  assign cpl_valid = (cq_phase[cq_head] == exp_phase);
  assign cpl.cid     = cqe_cid(head_cqe);
  assign cpl.status  = cqe_status(head_cqe);
  assign cpl.sq_head = cqe_sq_head(head_cqe);
  assign cpl_fire  = cpl_valid && cpl_ready;

  // doorbell port: alternate between SQ tail and CQ head when both wait
  assign send_cq  = cq_db_pend && (!sq_db_pend || !last_db_cq);
  assign db_valid = sq_db_pend || cq_db_pend;
  assign db_addr  = ssd_bar + (send_cq ? cq_db_off(QID) : sq_db_off(QID));
  assign db_data  = send_cq ? 32'(cq_head) : 32'(sq_tail);
  assign db_fire  = db_valid && db_ready;

  always_ff @(posedge clk) begin
    if (cmd_fire)    sq_mem[sq_tail]   <= build_sqe(cmd, 16'(free_cid));
    if (cq_wr_valid) cq_mem[cq_wr_idx] <= cq_wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cq_phase    <= '0;
      sq_tail     <= '0;
      cq_head     <= '0;
      exp_phase   <= 1'b1;
      sq_db_pend  <= 1'b0;
      cq_db_pend  <= 1'b0;
      last_db_cq  <= 1'b0;
      outstanding <= '0;
      cid_busy    <= '0;
    end else begin
      if (cpl_fire) cid_busy[cpl.cid[IW-1:0]] <= 1'b0;
      if (cmd_fire) cid_busy[free_cid]        <= 1'b1;
      if (cq_wr_valid) cq_phase[cq_wr_idx] <= cqe_phase(cq_wr_data);
      if (cmd_fire) sq_tail <= (sq_tail == IW'(DEPTH - 1)) ? '0 : sq_tail + 1'b1;
      if (cpl_fire) begin
        cq_head <= (cq_head == IW'(DEPTH - 1)) ? '0 : cq_head + 1'b1;
        if (cq_head == IW'(DEPTH - 1)) exp_phase <= ~exp_phase;
      end
      outstanding <= outstanding + (IW+1)'(cmd_fire) - (IW+1)'(cpl_fire);
      // pending doorbells: set by new work, cleared when sent
      sq_db_pend <= cmd_fire || (sq_db_pend && !(db_fire && !send_cq));
      cq_db_pend <= cpl_fire || (cq_db_pend && !(db_fire &&  send_cq));
      if (db_fire) last_db_cq <= send_cq;
    end
  end

  // A completion must not arrive with nothing outstanding.
  a_no_spurious_cpl: assert property (@(posedge clk) disable iff (!rst_n)
                                       cpl_fire |-> outstanding != '0);

endmodule
