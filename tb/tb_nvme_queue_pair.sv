// tb_nvme_queue_pair -- self-checking test of one SQ/CQ controlling unit.
//
// The testbench plays the SSD: it watches doorbell writes, fetches new
// submission entries by peer-to-peer reads, checks every field of each entry
// against the command it sent (NVMe layout written out here independently),
// and writes completion entries with the proper phase tag. Checks: doorbell
// addresses and values, command ids, the queue-full stall at DEPTH-1
// outstanding commands, completion delivery one cycle after the CQ write,
// out-of-order completion, and phase inversion over several ring wraps
// (DEPTH reduced to 8).
module tb_nvme_queue_pair;
  import fh_pkg::*;
  localparam int DEPTH = 8;
  localparam logic [63:0] BAR = 64'hF000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, db_valid, db_ready, cq_wr_valid, cpl_valid, cpl_ready, full;
  nvme_cmd_t cmd;
  logic [15:0] cmd_cid;
  logic [63:0] db_addr;
  logic [31:0] db_data;
  logic [2:0]  sq_rd_idx, cq_wr_idx;
  logic [511:0] sq_rd_data;
  logic [127:0] cq_wr_data;
  nvme_cpl_t cpl;
  logic [3:0] outstanding;

  nvme_queue_pair #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .ssd_bar(BAR), .cmd_valid, .cmd_ready,
    .cmd, .cmd_cid, .db_valid, .db_ready, .db_addr, .db_data, .sq_rd_idx, .sq_rd_data,
    .cq_wr_valid, .cq_wr_idx, .cq_wr_data, .cpl_valid, .cpl_ready, .cpl, .outstanding, .full);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected commands by CID
  nvme_cmd_t sent [DEPTH];
  int ssd_sq_head = 0, ssd_sq_tail = 0, ssd_cq_tail = 0;
  bit ssd_phase = 1;
  int cq_db_seen = 0, sq_db_seen = 0;
  int pending_cpl_cids[$];
  bit cid_out [DEPTH];

  // SSD model: take doorbells, fetch entries
  always @(posedge clk) if (rst_n && db_valid && db_ready) begin
    if (db_addr == BAR + 64'h1008) begin
      sq_db_seen++;
      ssd_sq_tail = int'(db_data);
    end else if (db_addr == BAR + 64'h100C) begin
      cq_db_seen++;
    end else begin
      check(0, $sformatf("doorbell to unexpected address %h", db_addr));
    end
  end

  task automatic ssd_fetch_all();
    while (ssd_sq_head != ssd_sq_tail) begin
      logic [511:0] e;
      nvme_cmd_t c;
      sq_rd_idx = 3'(ssd_sq_head);
      #1 e = sq_rd_data;
      c = sent[int'(e[31:16]) % DEPTH];
      check(!cid_out[int'(e[31:16]) % DEPTH], "CID not in use by another outstanding command");
      cid_out[int'(e[31:16]) % DEPTH] = 1;
      check(e[7:0] == c.opcode && e[63:32] == c.nsid && e[255:192] == c.prp1 &&
            e[319:256] == c.prp2 && e[383:320] == c.slba && e[399:384] == c.nlb,
            "SQE fields");
      pending_cpl_cids.push_back(int'(e[31:16]));
      ssd_sq_head = (ssd_sq_head + 1) % DEPTH;
    end
  endtask

  task automatic ssd_complete(int cid, logic [14:0] st);
    @(negedge clk);
    cq_wr_valid = 1;
    cq_wr_idx   = 3'(ssd_cq_tail);
    cq_wr_data  = '0;
    cq_wr_data[79:64]   = 16'(ssd_sq_head);
    cq_wr_data[111:96]  = 16'(cid);
    cq_wr_data[112]     = ssd_phase;
    cq_wr_data[127:113] = st;
    @(negedge clk);
    cq_wr_valid = 0;
    ssd_cq_tail = (ssd_cq_tail + 1) % DEPTH;
    if (ssd_cq_tail == 0) ssd_phase = ~ssd_phase;
  endtask

  int next_seed = 1;
  task automatic submit();
    nvme_cmd_t c;
    c.opcode = (next_seed % 2) ? NVME_OP_READ : NVME_OP_WRITE;
    c.nsid = 1;
    c.prp1 = {32'hA000_0000, 32'(next_seed) << 12};
    c.prp2 = 0;
    c.slba = 64'(next_seed * 8);
    c.nlb  = 16'd7;
    next_seed++;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    #1 check(cmd_ready, "cmd_ready while not full");
    sent[int'(cmd_cid) % DEPTH] = c;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  int got_cpl = 0;
  int exp_cid_q[$];
  logic [14:0] exp_st_q[$];
  always @(posedge clk) if (rst_n && cpl_valid && cpl_ready) begin
    got_cpl++;
    cid_out[int'(cpl.cid) % DEPTH] = 0;
    check(exp_cid_q.size() > 0 && cpl.cid == 16'(exp_cid_q[0]) && cpl.status == exp_st_q[0],
          $sformatf("completion cid %0d status %0d", cpl.cid, cpl.status));
    if (exp_cid_q.size() > 0) begin void'(exp_cid_q.pop_front()); void'(exp_st_q.pop_front()); end
  end

  initial begin
    cmd_valid = 0; cmd = '0; db_ready = 0; cq_wr_valid = 0; cq_wr_idx = 0; cq_wr_data = '0;
    cpl_ready = 1; sq_rd_idx = 0;
    for (int i = 0; i < DEPTH; i++) cid_out[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1) fill to DEPTH-1 and see the stall
    for (int i = 0; i < DEPTH - 1; i++) submit();
    @(negedge clk);
    check(full && !cmd_ready, "queue full at DEPTH-1 outstanding");
    check(outstanding == 4'(DEPTH - 1), "outstanding count");
    check(db_valid && db_addr == BAR + 64'h1008 && db_data == 32'(DEPTH - 1),
          "one waiting SQ doorbell carries the newest tail");
    db_ready = 1;
    repeat (3) @(negedge clk);
    check(ssd_sq_tail == DEPTH - 1, "SQ tail doorbell carries last tail");
    ssd_fetch_all();
    // 2) complete all; check latency of the first
    cpl_ready = 0;
    begin
      int cid; cid = pending_cpl_cids.pop_front();
      exp_cid_q.push_back(cid); exp_st_q.push_back(15'd0);
      ssd_complete(cid, 15'd0);
      check(cpl_valid, "completion offered one cycle after CQ write");
      cpl_ready = 1;
    end
    while (pending_cpl_cids.size() > 0) begin
      int cid; cid = pending_cpl_cids.pop_front();
      exp_cid_q.push_back(cid); exp_st_q.push_back(15'(cid + 3));
      ssd_complete(cid, 15'(cid + 3));
    end
    repeat (4) @(negedge clk);
    check(outstanding == 0 && !full, "all completed");
    // 3) many more rounds to wrap the rings several times (phase flips)
    for (int r = 0; r < 6; r++) begin
      for (int i = 0; i < 3; i++) submit();
      repeat (3) @(negedge clk);
      ssd_fetch_all();
      while (pending_cpl_cids.size() > 0) begin
        // odd rounds: the SSD completes in reverse order
        int cid; cid = (r % 2) ? pending_cpl_cids.pop_back() : pending_cpl_cids.pop_front();
        exp_cid_q.push_back(cid); exp_st_q.push_back(15'(r));
        ssd_complete(cid, 15'(r));
      end
      repeat (3) @(negedge clk);
    end
    // a stale entry (old phase) at the head must not be taken
    cq_wr_valid = 1; cq_wr_idx = 3'(ssd_cq_tail); cq_wr_data = '0; cq_wr_data[112] = ~ssd_phase;
    @(negedge clk); cq_wr_valid = 0;
    @(negedge clk);
    check(!cpl_valid, "stale phase entry ignored");
    check(got_cpl == (DEPTH - 1) + 18, $sformatf("completion count %0d", got_cpl));
    check(cq_db_seen > 0 && sq_db_seen > 0, "both doorbells rung");
    check(sq_db_seen <= 1 + 18, $sformatf("SQ doorbells coalesced (%0d)", sq_db_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
