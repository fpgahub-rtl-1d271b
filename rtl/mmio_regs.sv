// mmio_regs -- the hub's BAR: address decoder, TX doorbell and status.
//
// Every access that reaches the FPGA through the PCIe core's MMIO master
// interface comes here: register writes of the CPU or GPU, and the SSDs'
// peer-to-peer reads and writes of the on-chip NVMe queues. The address
// selects a region (bits [23:20]):
//   0  descriptor table (see descriptor_table), read/write
//   1  TX doorbell: +0x00 header PCIe address, +0x08 payload memory address,
//      +0x10 doorbell {[47:32] payload beats, [23:16] header beats,
//      [3:0] flow}. One store to +0x10 queues an assemble request, so a GPU
//      kernel can start a transfer with a single store instruction.
//   2  SSD BAR0 addresses, one 64-bit word per SSD, write only
//   3  NVMe queues of the SSD controller (SSD peer-to-peer accesses)
//   4  statistics, one 64-bit word per counter, read only
// When the request queue is full a doorbell store is held off (bar_ready
// low) until a slot frees. Region numbers, offsets and the doorbell layout
// are this design's own; the paper names the MMIO path, the descriptor, the
// doorbell and the SSD controller behind it.
//
// Timing: one access per cycle; a read answers on bar_rsp_* in the cycle
// after it is accepted. Write data is 128 bits wide so that a 16-byte
// completion entry arrives in one access; register writes use bits [63:0].
//
// Lint note: address bits [31:24] are not decoded (the BAR is 16 MB), so
// lint reports them as unused.
module mmio_regs
  import fh_pkg::*;
#(
  parameter int N_SSD    = 10,
  parameter int QA_W     = 17,      // queue region address width (ssd_controller)
  parameter int TXQ      = 8,       // assemble request queue depth
  parameter int N_STATS  = 8,
  localparam int SW      = (N_SSD > 1) ? $clog2(N_SSD) : 1,
  localparam int DA_W    = FLOW_W + 5,
  localparam int STW     = (N_STATS > 1) ? $clog2(N_STATS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // BAR access from the PCIe core
  input  logic                bar_valid,
  output logic                bar_ready,
  input  logic                bar_write,
  input  logic [31:0]         bar_addr,
  input  logic [127:0]        bar_wdata,
  output logic                bar_rsp_valid,
  output logic [SQE_BITS-1:0] bar_rsp_data,
  // descriptor table
  output logic                desc_wr_valid,
  output logic [DA_W-1:0]     desc_addr,
  output logic [63:0]         desc_wr_data,
  input  logic [63:0]         desc_rd_data,
  // SSD controller
  output logic                ssd_cfg_valid,
  output logic [SW-1:0]       ssd_cfg_idx,
  output logic [63:0]         ssd_cfg_data,
  output logic                q_wr_valid,
  output logic [QA_W-1:0]     q_addr,
  output logic [CQE_BITS-1:0] q_wr_data,
  input  logic [SQE_BITS-1:0] q_rd_data,
  // assemble requests
  output logic                txreq_valid,
  input  logic                txreq_ready,
  output tx_req_t             txreq,
  // statistics
  input  logic [31:0]         stats [N_STATS],
  output logic [31:0]         n_doorbells,
  output logic [31:0]         n_db_stalls
);
  logic [3:0]  region;
  logic [19:0] off;
  logic        is_db, q_in_ready, wr_fire, rd_fire;
  logic [63:0] hdr_addr_r, pay_addr_r;
  tx_req_t     new_req;

  assign region = bar_addr[23:20];
  assign off    = bar_addr[19:0];
  logic [STW-1:0] st_idx;
  logic           st_hit;
  assign st_idx = off[STW+2:3];
  assign st_hit = int'(off[19:3]) < N_STATS;
  assign is_db  = bar_write && region == 4'd1 && off[4:3] == 2'd2;

  assign bar_ready = !is_db || q_in_ready;
  assign wr_fire   = bar_valid && bar_ready && bar_write;
  assign rd_fire   = bar_valid && bar_ready && !bar_write;

  assign desc_wr_valid = wr_fire && region == 4'd0;
  assign desc_addr     = off[DA_W-1:0];
  assign desc_wr_data  = bar_wdata[63:0];

  assign ssd_cfg_valid = wr_fire && region == 4'd2;
  assign ssd_cfg_idx   = off[3 +: SW];
  assign ssd_cfg_data  = bar_wdata[63:0];

  assign q_wr_valid = wr_fire && region == 4'd3;
  assign q_addr     = off[QA_W-1:0];
  assign q_wr_data  = bar_wdata;

  assign new_req.flow      = bar_wdata[FLOW_W-1:0];
  assign new_req.hdr_addr  = hdr_addr_r;
  assign new_req.hdr_beats = bar_wdata[23:16];
  assign new_req.pay_addr  = pay_addr_r;
  assign new_req.pay_beats = bar_wdata[32 +: LEN_W];

  sync_fifo #(.T(tx_req_t), .DEPTH(TXQ)) u_txq (
    .clk, .rst_n,
    .in_valid (bar_valid && is_db), .in_ready(q_in_ready), .in_data(new_req),
    .out_valid(txreq_valid), .out_ready(txreq_ready), .out_data(txreq));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hdr_addr_r    <= '0;
      pay_addr_r    <= '0;
      bar_rsp_valid <= 1'b0;
      bar_rsp_data  <= '0;
      n_doorbells   <= '0;
      n_db_stalls   <= '0;
    end else begin
      if (wr_fire && region == 4'd1 && off[4:3] == 2'd0) hdr_addr_r <= bar_wdata[63:0];
      if (wr_fire && region == 4'd1 && off[4:3] == 2'd1) pay_addr_r <= bar_wdata[63:0];
      if (wr_fire && is_db) n_doorbells <= n_doorbells + 1;
      if (bar_valid && is_db && !q_in_ready) n_db_stalls <= n_db_stalls + 1;
      bar_rsp_valid <= rd_fire;
      if (rd_fire) begin
        unique case (region)
          4'd0:    bar_rsp_data <= SQE_BITS'(desc_rd_data);
          4'd3:    bar_rsp_data <= q_rd_data;
          4'd4:    bar_rsp_data <= st_hit ? SQE_BITS'(stats[st_idx]) : '0;
          default: bar_rsp_data <= '0;
        endcase
      end
    end
  end

endmodule
