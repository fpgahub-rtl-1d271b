// tb_nic_user_logic -- self-checking test of the NIC-initiated user logic.
//
// Sends storage request messages (one to three beats, some with an invalid
// opcode or SSD index) on random flows. A model of the SSD controller
// accepts commands with random stalls, hands out CIDs per SSD, and later
// completes them in random order with a status derived from the request.
// Checks: every valid request becomes exactly one NVMe command with the
// fields of the message; invalid ones are dropped and counted; every
// completion becomes one response message on the request's flow carrying
// the request id, SSD index and status.
module tb_nic_user_logic;
  import fh_pkg::*;
  localparam int NS = 10, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic urx_valid, urx_ready, urx_last, cmd_valid, cmd_ready, cpl_valid, cpl_ready;
  logic utx_valid, utx_ready, utx_last;
  logic [511:0] urx_data, utx_data;
  logic [3:0] urx_flow, utx_flow, cmd_ssd, cpl_ssd;
  nvme_cmd_t cmd;
  nvme_cpl_t cpl;
  logic [15:0] cmd_cid;
  logic [31:0] n_reqs, n_resps, n_dropped;

  nic_user_logic #(.N_SSD(NS), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { int ssd; int req_id; int flow; logic [7:0] op; logic [63:0] slba, prp1, prp2; logic [15:0] nlb; } req_t;
  req_t exp_cmd[$];
  // controller model
  bit   busy [NS][D];
  req_t inflight [NS][D];
  int   cpl_q_s[$], cpl_q_c[$];
  int   n_valid = 0, n_bad = 0, n_got_resp = 0;

  always_comb begin
    cmd_cid = 0;
    for (int c = D - 1; c >= 0; c--) if (!busy[cmd_ssd][c]) cmd_cid = 16'(c);
  end

  always @(negedge clk) begin
    bit any_free;
    any_free = 0;
    for (int c = 0; c < D; c++) if (!busy[cmd_ssd][c]) any_free = 1;
    cmd_ready = any_free && ($urandom_range(0, 2) != 0);
    utx_ready = ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready) begin
      req_t r;
      check(exp_cmd.size() > 0, "command expected");
      if (exp_cmd.size() > 0) begin
        r = exp_cmd.pop_front();
        check(int'(cmd_ssd) == r.ssd && cmd.opcode == r.op && cmd.nsid == 1 && cmd.slba == r.slba &&
              cmd.prp1 == r.prp1 && cmd.prp2 == r.prp2 && cmd.nlb == r.nlb, "command fields");
        busy[cmd_ssd][cmd_cid[1:0]] = 1;
        inflight[cmd_ssd][cmd_cid[1:0]] = r;
        cpl_q_s.push_back(int'(cmd_ssd)); cpl_q_c.push_back(int'(cmd_cid));
      end
    end
    if (utx_valid && utx_ready) begin
      req_t r;
      r = inflight[cpl_ssd][cpl.cid[1:0]];
      n_got_resp++;
      check(utx_last && utx_flow == 4'(r.flow) && utx_data[7:0] == 8'h80 &&
            utx_data[15:8] == 8'(r.ssd) && utx_data[31:16] == 16'(r.req_id) &&
            utx_data[46:32] == 15'(r.req_id ^ 15'h5a), "response message");
      busy[cpl_ssd][cpl.cid[1:0]] = 0;
    end
  end

  // completion driver
  int pick = -1;
  always @(negedge clk) begin
    if (!cpl_valid || (cpl_valid && cpl_ready_q)) begin
      cpl_valid = 0;
      if (cpl_q_s.size() > 0 && $urandom_range(0, 1) == 1) begin
        int i;
        i = $urandom_range(0, cpl_q_s.size() - 1);
        cpl_ssd = 4'(cpl_q_s[i]); cpl = '0; cpl.cid = 16'(cpl_q_c[i]);
        cpl.status = 15'(inflight[cpl_q_s[i]][cpl_q_c[i]].req_id ^ 15'h5a);
        cpl_q_s.delete(i); cpl_q_c.delete(i);
        cpl_valid = 1;
      end
    end
  end
  logic cpl_ready_q;
  always @(posedge clk) cpl_ready_q <= cpl_valid && cpl_ready;

  task automatic send_req(int k);
    req_t r;
    int nb;
    bit bad;
    logic [511:0] b;
    r.ssd = $urandom_range(0, NS - 1); r.req_id = k; r.flow = $urandom_range(0, 15);
    r.op = ($urandom_range(0, 1) == 1) ? NVME_OP_READ : NVME_OP_WRITE;
    bad = ($urandom_range(0, 5) == 0);
    if (bad) begin
      if ($urandom_range(0, 1) == 1) r.op = 8'h09; else r.ssd = 12;
    end
    r.slba = {$urandom, $urandom}; r.prp1 = {$urandom, $urandom}; r.prp2 = {$urandom, $urandom};
    r.nlb = 16'($urandom_range(0, 7));
    b = '0;
    b[7:0] = r.op; b[15:8] = 8'(r.ssd); b[31:16] = 16'(r.req_id); b[47:32] = r.nlb;
    b[127:64] = r.slba; b[191:128] = r.prp1; b[255:192] = r.prp2;
    if (bad) n_bad++; else begin n_valid++; exp_cmd.push_back(r); end
    nb = $urandom_range(1, 3);
    for (int i = 0; i < nb; i++) begin
      @(negedge clk);
      urx_valid = 1; urx_flow = 4'(r.flow); urx_last = (i == nb - 1);
      urx_data = (i == 0) ? b : {$urandom, 480'd0, 8'h02};   // later beats look like requests but are ignored
      @(posedge clk);
      while (!urx_ready) @(posedge clk);
    end
    @(negedge clk); urx_valid = 0;
  endtask

  initial begin
    urx_valid = 0; urx_data = 0; urx_flow = 0; urx_last = 0; cpl_valid = 0; cpl = '0; cpl_ssd = 0;
    for (int s = 0; s < NS; s++) for (int c = 0; c < D; c++) busy[s][c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 150; k++) send_req(k);
    repeat (2000) @(negedge clk);
    check(exp_cmd.size() == 0, "all commands issued");
    check(n_got_resp == n_valid && n_resps == 32'(n_valid), $sformatf("responses %0d of %0d", n_got_resp, n_valid));
    check(n_reqs == 32'(n_valid) && n_dropped == 32'(n_bad) && n_bad > 0, "request counters");
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
