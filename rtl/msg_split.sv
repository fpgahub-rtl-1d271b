// msg_split -- receive half of the split/assemble component.
//
// Each beat of a message arriving from the network transport is steered by
// the descriptor of its flow (read from descriptor_table on the message's
// first beat and held until its last beat):
//   DEST_USER  : every beat goes to the NIC-initiated user logic.
//   DEST_PCIE  : every beat is DMA-written to host_addr + 64*beat (CPU/GPU).
//   DEST_SPLIT : the first hdr_beats beats (the header) are DMA-written to
//                host_addr + 64*beat; the rest (the payload) is written to
//                on-board memory, into a per-flow ring at mem_base.
// When the last beat of a DEST_PCIE or DEST_SPLIT message is accepted a
// notification (rx_note_t) tells the host that the message is complete and
// where its payload sits. This is the "control plane on CPU, data plane on
// FPGA" split of the paper: the header goes to the CPU, the payload stays in
// FPGA memory. Header size in whole beats, the ring and the notification
// format are this design's choices.
//
// Timing: no storage on the data path. A beat passes in the cycle it is
// presented if the selected output (and, on a last beat, the notification
// output) is ready; otherwise in_ready stays low.
module msg_split
  import fh_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // message stream from the transport
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  input  logic [FLOW_W-1:0] in_flow,
  input  logic              in_last,
  // descriptor lookup
  output logic [FLOW_W-1:0] lk_flow,
  input  desc_t             lk_desc,
  // to user logic
  output logic              usr_valid,
  input  logic              usr_ready,
  output logic [DATA_W-1:0] usr_data,
  output logic [FLOW_W-1:0] usr_flow,
  output logic              usr_last,
  // DMA write (C2H) to a PCIe address
  output logic              dma_valid,
  input  logic              dma_ready,
  output logic [63:0]       dma_addr,
  output logic [DATA_W-1:0] dma_data,
  output logic              dma_last,
  // on-board memory write (beat address)
  output logic              mem_valid,
  input  logic              mem_ready,
  output logic [63:0]       mem_addr,
  output logic [DATA_W-1:0] mem_data,
  // message-complete notification to the host
  output logic              note_valid,
  input  logic              note_ready,
  output rx_note_t          note
);
  logic [LEN_W-1:0] beat_cnt;       // beats of the current message already taken
  desc_t            cur_desc;       // descriptor held for the current message
  logic [LEN_W-1:0] start_ptr;      // ring offset of the message's first payload beat
  logic [LEN_W-1:0] mem_ptr [N_FLOWS];

  logic             first;
  desc_t            d;
  logic [LEN_W-1:0] ptr_now, ptr_start, ptr_next;
  logic             is_hdr, is_pay, is_usr, need_note, out_ready, fire;
  logic [LEN_W-1:0] total, hdr_done;

  assign lk_flow = in_flow;
  assign first   = (beat_cnt == '0);
  assign d       = first ? lk_desc : cur_desc;
  assign ptr_now = mem_ptr[in_flow];
  assign ptr_start = first ? ptr_now : start_ptr;
  assign ptr_next  = (ptr_now + 1'b1 == d.mem_beats) ? '0 : ptr_now + 1'b1;

  always_comb begin
    is_usr = (d.dest != DEST_PCIE) && (d.dest != DEST_SPLIT);
    is_hdr = (d.dest == DEST_PCIE) ||
             ((d.dest == DEST_SPLIT) && (beat_cnt < LEN_W'(d.hdr_beats)));
    is_pay = (d.dest == DEST_SPLIT) && !is_hdr;
  end

  assign need_note = in_last && !is_usr;
  assign out_ready = is_usr ? usr_ready : (is_hdr ? dma_ready : mem_ready);
  assign in_ready  = out_ready && (!need_note || note_ready);
  assign fire      = in_valid && in_ready;

  // outputs
  assign usr_valid = in_valid && is_usr;
  assign usr_data  = in_data;
  assign usr_flow  = in_flow;
  assign usr_last  = in_last;

  assign dma_valid = in_valid && is_hdr && (!need_note || note_ready);
  assign dma_addr  = d.host_addr + 64'(beat_cnt) * BEAT_BYTES;
  assign dma_data  = in_data;
  assign dma_last  = in_last ||
                     ((d.dest == DEST_SPLIT) && (beat_cnt == LEN_W'(d.hdr_beats) - 1'b1));

  assign mem_valid = in_valid && is_pay && (!need_note || note_ready);
  assign mem_addr  = d.mem_base + 64'(ptr_now);
  assign mem_data  = in_data;

  assign total    = beat_cnt + 1'b1;
  assign hdr_done = (d.dest == DEST_PCIE) ? total :
                    ((total < LEN_W'(d.hdr_beats)) ? total : LEN_W'(d.hdr_beats));

  assign note_valid       = in_valid && need_note && out_ready;
  assign note.flow        = in_flow;
  assign note.dest        = d.dest;
  assign note.total_beats = total;
  assign note.hdr_beats   = hdr_done;
  assign note.pay_beats   = total - hdr_done;
  assign note.pay_addr    = d.mem_base + 64'(ptr_start);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_cnt  <= '0;
      cur_desc  <= '0;
      start_ptr <= '0;
      for (int i = 0; i < N_FLOWS; i++) mem_ptr[i] <= '0;
    end else if (fire) begin
      if (first) begin
        cur_desc  <= lk_desc;
        start_ptr <= ptr_now;
      end
      beat_cnt <= in_last ? '0 : beat_cnt + 1'b1;
      if (is_pay) mem_ptr[in_flow] <= ptr_next;
    end
  end

  // A message's flow must not change between its first and its last beat.
  property p_flow_stable;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && in_ready && !in_last) |=> (!in_valid || in_flow == $past(in_flow));
  endproperty
  a_flow_stable: assert property (p_flow_stable);

endmodule
