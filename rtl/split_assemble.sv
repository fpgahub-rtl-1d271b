// split_assemble -- the split/assemble component between the network
// transport's reliable message stream and the rest of the hub.
//
// Receive side (msg_split): splits each incoming message, according to its
// flow's descriptor, to the user logic, to a PCIe device (CPU/GPU memory) by
// DMA, or header to PCIe and payload to on-board memory, and notifies the
// host when a message is complete.
// Transmit side (msg_assemble): sends messages of the user logic and
// messages reassembled from a header in PCIe memory and a payload in
// on-board memory.
// The descriptor table itself is a separate block; this one only looks a
// descriptor up. Counters report what each path carried.
module split_assemble
  import fh_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // ---- receive: from transport
  input  logic              rx_valid,
  output logic              rx_ready,
  input  logic [DATA_W-1:0] rx_data,
  input  logic [FLOW_W-1:0] rx_flow,
  input  logic              rx_last,
  output logic [FLOW_W-1:0] lk_flow,
  input  desc_t             lk_desc,
  output logic              urx_valid,
  input  logic              urx_ready,
  output logic [DATA_W-1:0] urx_data,
  output logic [FLOW_W-1:0] urx_flow,
  output logic              urx_last,
  output logic              c2h_valid,
  input  logic              c2h_ready,
  output logic [63:0]       c2h_addr,
  output logic [DATA_W-1:0] c2h_data,
  output logic              c2h_last,
  output logic              memw_valid,
  input  logic              memw_ready,
  output logic [63:0]       memw_addr,
  output logic [DATA_W-1:0] memw_data,
  output logic              note_valid,
  input  logic              note_ready,
  output rx_note_t          note,
  // ---- transmit: to transport
  input  logic              utx_valid,
  output logic              utx_ready,
  input  logic [DATA_W-1:0] utx_data,
  input  logic [FLOW_W-1:0] utx_flow,
  input  logic              utx_last,
  input  logic              txreq_valid,
  output logic              txreq_ready,
  input  tx_req_t           txreq,
  output logic              h2c_req_valid,
  input  logic              h2c_req_ready,
  output logic [63:0]       h2c_req_addr,
  output logic [7:0]        h2c_req_beats,
  input  logic              h2c_valid,
  output logic              h2c_ready,
  input  logic [DATA_W-1:0] h2c_data,
  input  logic              h2c_last,
  output logic              memr_req_valid,
  input  logic              memr_req_ready,
  output logic [63:0]       memr_req_addr,
  output logic [LEN_W-1:0]  memr_req_beats,
  input  logic              memr_valid,
  output logic              memr_ready,
  input  logic [DATA_W-1:0] memr_data,
  input  logic              memr_last,
  output logic              tx_valid,
  input  logic              tx_ready,
  output logic [DATA_W-1:0] tx_data,
  output logic [FLOW_W-1:0] tx_flow,
  output logic              tx_last,
  // ---- statistics
  output logic [31:0]       n_rx_msgs,
  output logic [31:0]       n_user_msgs,
  output logic [31:0]       n_asm_msgs
);

  msg_split u_split (
    .clk, .rst_n,
    .in_valid (rx_valid),  .in_ready (rx_ready), .in_data (rx_data),
    .in_flow  (rx_flow),   .in_last  (rx_last),
    .lk_flow, .lk_desc,
    .usr_valid(urx_valid), .usr_ready(urx_ready), .usr_data(urx_data),
    .usr_flow (urx_flow),  .usr_last (urx_last),
    .dma_valid(c2h_valid), .dma_ready(c2h_ready), .dma_addr(c2h_addr),
    .dma_data (c2h_data),  .dma_last (c2h_last),
    .mem_valid(memw_valid),.mem_ready(memw_ready),.mem_addr(memw_addr),
    .mem_data (memw_data),
    .note_valid, .note_ready, .note
  );

  msg_assemble u_asm (
    .clk, .rst_n,
    .usr_valid(utx_valid), .usr_ready(utx_ready), .usr_data(utx_data),
    .usr_flow (utx_flow),  .usr_last (utx_last),
    .req_valid(txreq_valid), .req_ready(txreq_ready), .req(txreq),
    .dma_req_valid(h2c_req_valid), .dma_req_ready(h2c_req_ready),
    .dma_req_addr (h2c_req_addr),  .dma_req_beats(h2c_req_beats),
    .dma_rd_valid (h2c_valid), .dma_rd_ready(h2c_ready),
    .dma_rd_data  (h2c_data),  .dma_rd_last (h2c_last),
    .mem_req_valid(memr_req_valid), .mem_req_ready(memr_req_ready),
    .mem_req_addr (memr_req_addr),  .mem_req_beats(memr_req_beats),
    .mem_rd_valid (memr_valid), .mem_rd_ready(memr_ready),
    .mem_rd_data  (memr_data),  .mem_rd_last (memr_last),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_data(tx_data),
    .out_flow (tx_flow),  .out_last (tx_last),
    .n_user_msgs, .n_asm_msgs
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_rx_msgs <= '0;
    else if (rx_valid && rx_ready && rx_last) n_rx_msgs <= n_rx_msgs + 1;
  end

endmodule
