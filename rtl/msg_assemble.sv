// msg_assemble -- transmit half of the split/assemble component.
//
// Builds the message stream towards the network transport from two sources:
//   * the NIC-initiated user logic, which hands over whole messages, and
//   * assemble requests (tx_req_t) rung by the host through the TX doorbell:
//     the header is read by DMA from a PCIe address (CPU/GPU memory) and the
//     payload from on-board memory, and both are sent back to back as one
//     message on the request's flow.
// A request with no header and no payload beats is discarded.
// Sources are served one whole message at a time, alternating when both
// wait (round robin). The paper names the two sources and the header/payload
// reassembly; the arbitration and request format are this design's own.
//
// Timing: a state machine with states IDLE, USR (pass user beats),
// HREQ/HDAT (issue the header read, pass its beats), MREQ/MDAT (same for the
// payload). Data beats pass combinationally; the first beat of a message
// leaves one cycle after the source is chosen (USR) or after the read is
// requested (HDAT/MDAT) at the earliest.
module msg_assemble
  import fh_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // messages from user logic
  input  logic              usr_valid,
  output logic              usr_ready,
  input  logic [DATA_W-1:0] usr_data,
  input  logic [FLOW_W-1:0] usr_flow,
  input  logic              usr_last,
  // assemble requests from the host doorbell
  input  logic              req_valid,
  output logic              req_ready,
  input  tx_req_t           req,
  // DMA read (H2C) of the header
  output logic              dma_req_valid,
  input  logic              dma_req_ready,
  output logic [63:0]       dma_req_addr,
  output logic [7:0]        dma_req_beats,
  input  logic              dma_rd_valid,
  output logic              dma_rd_ready,
  input  logic [DATA_W-1:0] dma_rd_data,
  input  logic              dma_rd_last,
  // on-board memory read of the payload
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [63:0]       mem_req_addr,
  output logic [LEN_W-1:0]  mem_req_beats,
  input  logic              mem_rd_valid,
  output logic              mem_rd_ready,
  input  logic [DATA_W-1:0] mem_rd_data,
  input  logic              mem_rd_last,
  // message stream to the transport
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output logic [FLOW_W-1:0] out_flow,
  output logic              out_last,
  // statistics
  output logic [31:0]       n_user_msgs,
  output logic [31:0]       n_asm_msgs
);
  typedef enum logic [2:0] {IDLE, USR, HREQ, HDAT, MREQ, MDAT} state_e;
  state_e  state;
  tx_req_t cur;
  logic    prio_req;   // 1: assemble requests win the next tie

  logic pick_req, pick_usr;
  assign pick_req = req_valid && (!usr_valid || prio_req);
  assign pick_usr = usr_valid && !pick_req;

  assign req_ready     = (state == IDLE) && pick_req;
  assign dma_req_valid = (state == HREQ);
  assign dma_req_addr  = cur.hdr_addr;
  assign dma_req_beats = cur.hdr_beats;
  assign mem_req_valid = (state == MREQ);
  assign mem_req_addr  = cur.pay_addr;
  assign mem_req_beats = cur.pay_beats;

  always_comb begin
    out_valid    = 1'b0;
    out_data     = usr_data;
    out_flow     = usr_flow;
    out_last     = usr_last;
    usr_ready    = 1'b0;
    dma_rd_ready = 1'b0;
    mem_rd_ready = 1'b0;
    unique case (state)
      USR: begin
        out_valid = usr_valid;
        usr_ready = out_ready;
      end
      HDAT: begin
        out_valid    = dma_rd_valid;
        out_data     = dma_rd_data;
        out_flow     = cur.flow;
        out_last     = dma_rd_last && (cur.pay_beats == '0);
        dma_rd_ready = out_ready;
      end
      MDAT: begin
        out_valid    = mem_rd_valid;
        out_data     = mem_rd_data;
        out_flow     = cur.flow;
        out_last     = mem_rd_last;
        mem_rd_ready = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= IDLE;
      cur         <= '0;
      prio_req    <= 1'b0;
      n_user_msgs <= '0;
      n_asm_msgs  <= '0;
    end else begin
      unique case (state)
        IDLE: begin
          if (pick_req) begin
            cur      <= req;
            prio_req <= 1'b0;
            if (req.hdr_beats != '0)      state <= HREQ;
            else if (req.pay_beats != '0) state <= MREQ;
          end else if (pick_usr) begin
            state    <= USR;
          end
        end
        USR: if (usr_valid && out_ready && usr_last) begin
          state       <= IDLE;
          prio_req    <= 1'b1;
          n_user_msgs <= n_user_msgs + 1;
        end
        HREQ: if (dma_req_ready) state <= HDAT;
        HDAT: if (dma_rd_valid && out_ready && dma_rd_last) begin
          if (cur.pay_beats != '0) state <= MREQ;
          else begin
            state      <= IDLE;
            n_asm_msgs <= n_asm_msgs + 1;
          end
        end
        MREQ: if (mem_req_ready) state <= MDAT;
        MDAT: if (mem_rd_valid && out_ready && mem_rd_last) begin
          state      <= IDLE;
          n_asm_msgs <= n_asm_msgs + 1;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
