// tb_ssd_controller -- self-checking test of the SSD controller with three
// SSDs (queue depth 4).
//
// The testbench models three NVMe SSDs. Each takes doorbells addressed to
// its own BAR, fetches new submission entries from its window of the
// queue region by peer-to-peer reads, and later writes completions (with
// phase tags) into its CQ window in random order across SSDs. Checks:
// commands reach the SSD they name, doorbell addresses, the per-SSD queue
// full stall while other SSDs still take commands, that every command is
// completed exactly once with the right SSD index and CID, and the
// statistics counters.
module tb_ssd_controller;
  import fh_pkg::*;
  localparam int NS = 3, D = 4, QA = 2 + 7 + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_wr_valid, cmd_valid, cmd_ready, cpl_valid, cpl_ready, db_valid, db_ready, q_wr_valid;
  logic [1:0] cfg_wr_idx, cmd_ssd, cpl_ssd;
  logic [63:0] cfg_wr_data, db_addr;
  logic [31:0] db_data;
  nvme_cmd_t cmd;
  nvme_cpl_t cpl;
  logic [15:0] cmd_cid;
  logic [QA-1:0] q_wr_addr, q_rd_addr;
  logic [127:0] q_wr_data;
  logic [511:0] q_rd_data;
  logic [31:0] n_cmds, n_cpls, n_dbs, n_full_stalls, n_outstanding;

  ssd_controller #(.N_SSD(NS), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] bar_of(int s); return 64'hE000_0000 + 64'(s) * 64'h10_0000; endfunction

  int sq_head[NS], sq_tail[NS], cq_tail[NS];
  bit phase[NS];
  int to_complete_s[$], to_complete_c[$];
  bit expect_cpl [NS][D];
  bit cid_out [NS][D];

  always @(posedge clk) if (rst_n && db_valid && db_ready) begin
    bit hit = 0;
    for (int s = 0; s < NS; s++) begin
      if (db_addr == bar_of(s) + 64'h1008) begin sq_tail[s] = int'(db_data); hit = 1; end
      if (db_addr == bar_of(s) + 64'h100C) hit = 1;
    end
    check(hit, $sformatf("doorbell address %h", db_addr));
  end

  always @(posedge clk) if (rst_n && cpl_valid && cpl_ready) begin
    check(expect_cpl[cpl_ssd][cpl.cid[1:0]], $sformatf("completion ssd %0d cid %0d expected", cpl_ssd, cpl.cid));
    check(cpl.status == 15'(cpl_ssd + 1), "status from the right SSD");
    expect_cpl[cpl_ssd][cpl.cid[1:0]] = 0;
    cid_out[cpl_ssd][cpl.cid[1:0]] = 0;
  end

  // the SSDs: fetch and complete
  task automatic ssd_fetch();
    for (int s = 0; s < NS; s++)
      while (sq_head[s] != sq_tail[s]) begin
        logic [511:0] e;
        q_rd_addr = QA'((s << 9) | (sq_head[s] << 6));
        #1 e = q_rd_data;
        check(e[383:376] == 8'(s), $sformatf("SSD %0d got its own command", s));
        check(!cid_out[s][e[17:16]], "CID not in use by another outstanding command");
        cid_out[s][e[17:16]] = 1;
        to_complete_s.push_back(s); to_complete_c.push_back(int'(e[31:16]));
        sq_head[s] = (sq_head[s] + 1) % D;
      end
  endtask

  task automatic ssd_complete_some(int n);
    for (int k = 0; k < n && to_complete_s.size() > 0; k++) begin
      int i, s, c;
      i = $urandom_range(0, to_complete_s.size() - 1);
      s = to_complete_s[i]; c = to_complete_c[i];
      to_complete_s.delete(i); to_complete_c.delete(i);
      @(negedge clk);
      q_wr_valid = 1;
      q_wr_addr  = QA'((s << 9) | 256 | (cq_tail[s] << 4));
      q_wr_data  = '0;
      q_wr_data[111:96] = 16'(c); q_wr_data[112] = phase[s]; q_wr_data[127:113] = 15'(s + 1);
      expect_cpl[s][c] = 1;
      @(negedge clk);
      q_wr_valid = 0;
      cq_tail[s] = (cq_tail[s] + 1) % D;
      if (cq_tail[s] == 0) phase[s] = !phase[s];
    end
  endtask

  int seq = 0;
  task automatic submit(int s, output bit taken);
    @(negedge clk);
    cmd_valid = 1; cmd_ssd = 2'(s);
    cmd = '0; cmd.opcode = NVME_OP_READ; cmd.nsid = 1; cmd.slba = {8'(s), 56'(seq)}; cmd.prp1 = 64'(seq) << 12;
    #1 taken = cmd_ready;
    seq += taken ? 1 : 0;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    bit t;
    cfg_wr_valid = 0; cfg_wr_idx = 0; cfg_wr_data = 0; cmd_valid = 0; cmd_ssd = 0; cmd = '0;
    cpl_ready = 1; db_ready = 1; q_wr_valid = 0; q_wr_addr = 0; q_wr_data = 0; q_rd_addr = 0;
    for (int s = 0; s < NS; s++) begin
      sq_head[s] = 0; sq_tail[s] = 0; cq_tail[s] = 0; phase[s] = 1;
      for (int c = 0; c < D; c++) begin expect_cpl[s][c] = 0; cid_out[s][c] = 0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      @(negedge clk); cfg_wr_valid = 1; cfg_wr_idx = 2'(s); cfg_wr_data = bar_of(s);
    end
    @(negedge clk); cfg_wr_valid = 0;
    // fill SSD 0: three commands fit, the fourth stalls; SSD 1 still takes one
    for (int k = 0; k < 3; k++) begin submit(0, t); check(t, "SSD0 takes command"); end
    submit(0, t); check(!t, "SSD0 full after DEPTH-1 commands");
    submit(1, t); check(t, "SSD1 takes command while SSD0 is full");
    check(n_full_stalls >= 1, "stall counted");
    check(n_outstanding == 4, "outstanding across SSDs");
    repeat (4) @(negedge clk);
    ssd_fetch();
    ssd_complete_some(4);
    repeat (10) @(negedge clk);
    // random traffic with backpressure on completions and doorbells
    for (int r = 0; r < 200; r++) begin
      cpl_ready = ($urandom_range(0, 2) != 0);
      db_ready  = ($urandom_range(0, 2) != 0);
      submit($urandom_range(0, NS - 1), t);
      if (r % 3 == 0) begin
        db_ready = 1; repeat (3) @(negedge clk);
        ssd_fetch();
        ssd_complete_some($urandom_range(1, 3));
      end
    end
    cpl_ready = 1; db_ready = 1;
    repeat (6) @(negedge clk);
    ssd_fetch();
    ssd_complete_some(1000);
    repeat (20) @(negedge clk);
    begin
      int left = 0;
      for (int s = 0; s < NS; s++) for (int c = 0; c < D; c++) left += expect_cpl[s][c];
      check(left == 0, "every completion delivered");
    end
    check(n_cmds == 32'(seq) && n_cpls == 32'(seq), $sformatf("counters %0d %0d %0d", n_cmds, n_cpls, seq));
    check(n_outstanding == 0, "nothing outstanding at the end");
    check(seq > 50, "enough commands went through");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
