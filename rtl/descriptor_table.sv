// descriptor_table -- per-flow message descriptors written over MMIO.
//
// The host (CPU or GPU) programs one descriptor per flow through the BAR.
// The split/assemble logic reads the descriptor of a message's flow to
// decide where its beats go. The paper says only that a user-defined
// descriptor is set through MMIO at runtime and that the header size is set
// per flow; the field set and register map below are this design's own.
//
// Register map (byte offset inside the descriptor region, 64-bit words):
//   {flow, field[1:0], 3'b000}
//   field 0: [1:0] destination (dest_e), [15:8] header size in beats
//   field 1: host PCIe byte address for header / whole message
//   field 2: on-board memory beat address of the flow's payload ring
//   field 3: [15:0] payload ring size in beats (0 means 65536)
//
// Timing: a write takes effect on the next clock edge. Lookup and readback
// ports are combinational. Reset clears every descriptor (all flows go to
// the user logic).
//
// Lint note: address bits [2:0] select a byte inside a 64-bit register and
// are ignored, which lint reports as unused.
module descriptor_table
  import fh_pkg::*;
#(
  parameter int NFLOWS = N_FLOWS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // MMIO write / read (byte offset inside the region)
  input  logic                      wr_valid,
  input  logic [$clog2(NFLOWS)+4:0] wr_addr,
  input  logic [63:0]               wr_data,
  input  logic [$clog2(NFLOWS)+4:0] rd_addr,
  output logic [63:0]               rd_data,
  // lookups for the receive path
  input  logic [$clog2(NFLOWS)-1:0] lk_flow,
  output desc_t                     lk_desc
);
  localparam int FW = $clog2(NFLOWS);

  desc_t tbl [NFLOWS];

  logic [FW-1:0] wflow, rflow;
  logic [1:0]    wfield, rfield;
  assign wflow  = wr_addr[FW+4:5];
  assign wfield = wr_addr[4:3];
  assign rflow  = rd_addr[FW+4:5];
  assign rfield = rd_addr[4:3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NFLOWS; i++) tbl[i] <= '0;
    end else if (wr_valid) begin
      unique case (wfield)
        2'd0: begin
          tbl[wflow].dest      <= dest_e'(wr_data[1:0]);
          tbl[wflow].hdr_beats <= wr_data[15:8];
        end
        2'd1: tbl[wflow].host_addr <= wr_data;
        2'd2: tbl[wflow].mem_base  <= wr_data;
        2'd3: tbl[wflow].mem_beats <= wr_data[LEN_W-1:0];
      endcase
    end
  end

  always_comb begin
    rd_data = '0;
    unique case (rfield)
      2'd0: rd_data = {48'd0, tbl[rflow].hdr_beats, 6'd0, tbl[rflow].dest};
      2'd1: rd_data = tbl[rflow].host_addr;
      2'd2: rd_data = tbl[rflow].mem_base;
      2'd3: rd_data = {{(64-LEN_W){1'b0}}, tbl[rflow].mem_beats};
    endcase
  end

  assign lk_desc = tbl[lk_flow];

endmodule
