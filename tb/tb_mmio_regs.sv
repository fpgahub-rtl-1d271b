// tb_mmio_regs -- self-checking test of the BAR decoder and TX doorbell.
//
// Drives random register writes and reads into every region and checks
// which side port fires, with which address and data; checks that reads
// answer exactly one cycle later with the addressed source; rings the TX
// doorbell more often than the request queue (depth 2 here) holds and
// checks the stall, the order and the fields of the queued requests.
module tb_mmio_regs;
  import fh_pkg::*;
  localparam int NS = 10, QA = 17, NST = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bar_valid, bar_ready, bar_write, bar_rsp_valid;
  logic [31:0] bar_addr;
  logic [127:0] bar_wdata;
  logic [511:0] bar_rsp_data;
  logic desc_wr_valid, ssd_cfg_valid, q_wr_valid, txreq_valid, txreq_ready;
  logic [8:0] desc_addr;
  logic [63:0] desc_wr_data, desc_rd_data, ssd_cfg_data;
  logic [3:0] ssd_cfg_idx;
  logic [QA-1:0] q_addr;
  logic [127:0] q_wr_data;
  logic [511:0] q_rd_data;
  tx_req_t txreq;
  logic [31:0] stats [NST];
  logic [31:0] n_doorbells, n_db_stalls;

  mmio_regs #(.N_SSD(NS), .QA_W(QA), .TXQ(2), .N_STATS(NST)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  assign desc_rd_data = {55'h1234, desc_addr};
  assign q_rd_data    = {q_addr, 480'hABCD, 15'd0};
  for (genvar i = 0; i < NST; i++) assign stats[i] = 32'h5000 + 32'(i);

  // one access; returns whether it was accepted in the first cycle
  task automatic access(bit wr, logic [31:0] a, logic [127:0] d, output bit first_try);
    @(negedge clk);
    bar_valid = 1; bar_write = wr; bar_addr = a; bar_wdata = d;
    #1 first_try = bar_ready;
    @(posedge clk);
    while (!bar_ready) @(posedge clk);
    #1;
    @(negedge clk);
    bar_valid = 0;
  endtask

  // side-port monitor
  int n_desc = 0, n_cfg = 0, n_q = 0;
  logic [31:0] last_a; logic [127:0] last_d;
  always @(posedge clk) if (rst_n) begin
    if (bar_valid && bar_ready && bar_write) begin last_a = bar_addr; last_d = bar_wdata; end
    if (desc_wr_valid) begin
      n_desc++;
      check(bar_addr[23:20] == 0 && desc_addr == bar_addr[8:0] && desc_wr_data == bar_wdata[63:0], "descriptor write");
    end
    if (ssd_cfg_valid) begin
      n_cfg++;
      check(bar_addr[23:20] == 2 && ssd_cfg_idx == bar_addr[6:3] && ssd_cfg_data == bar_wdata[63:0], "SSD config write");
    end
    if (q_wr_valid) begin
      n_q++;
      check(bar_addr[23:20] == 3 && q_addr == bar_addr[16:0] && q_wr_data == bar_wdata, "queue write");
    end
  end

  // read response monitor
  logic [511:0] exp_rsp[$];
  int n_rsp = 0;
  bit rd_pending = 0;
  always @(posedge clk) if (rst_n) begin
    if (bar_rsp_valid) begin
      n_rsp++;
      check(rd_pending && exp_rsp.size() > 0 && bar_rsp_data == exp_rsp[0], "read data");
      if (exp_rsp.size() > 0) void'(exp_rsp.pop_front());
    end
    rd_pending = bar_valid && bar_ready && !bar_write;
  end

  tx_req_t exp_req[$];
  int n_req = 0;
  always @(posedge clk) if (rst_n && txreq_valid && txreq_ready) begin
    n_req++;
    check(exp_req.size() > 0 && txreq == exp_req[0], "queued assemble request");
    if (exp_req.size() > 0) void'(exp_req.pop_front());
  end

  initial begin
    bit ft;
    bar_valid = 0; bar_write = 0; bar_addr = 0; bar_wdata = 0; txreq_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 120; k++) begin
      int reg_;
      logic [31:0] a;
      logic [127:0] d;
      reg_ = $urandom_range(0, 4);
      d = {$urandom, $urandom, $urandom, $urandom};
      case (reg_)
        0: a = {8'd0, 4'd0, 11'd0, 9'($urandom_range(0, 511))};
        1: a = {8'd0, 4'd2, 13'd0, 4'($urandom_range(0, 9)), 3'd0};
        2: a = {8'd0, 4'd3, 3'd0, 17'($urandom)};
        3: a = {8'd0, 4'd4, 14'd0, 3'($urandom_range(0, NST - 1)), 3'd0};
        default: a = {8'd0, 4'd5, 20'($urandom)};
      endcase
      if ($urandom_range(0, 1) == 1 && reg_ != 3) begin
        access(1, a, d, ft);
        check(ft, "register write accepted at once");
      end else begin
        logic [511:0] e;
        case (reg_)
          0: e = 512'({55'h1234, a[8:0]});
          2: e = {a[16:0], 480'hABCD, 15'd0};
          3: e = 512'(32'h5000 + a[5:3]);
          default: e = '0;
        endcase
        exp_rsp.push_back(e);
        access(0, a, d, ft);
      end
    end
    // doorbells: queue of two, third stalls until a request is taken
    for (int m = 0; m < 6; m++) begin
      tx_req_t r;
      r.flow = 4'(m + 3); r.hdr_addr = 64'hCAFE_0000 + 64'(m); r.hdr_beats = 8'(m);
      r.pay_addr = 64'h77_0000 + 64'(m); r.pay_beats = 16'(m * 3);
      exp_req.push_back(r);
      access(1, 32'h0010_0000, 128'(r.hdr_addr), ft);
      check(ft, "header address write never stalls");
      access(1, 32'h0010_0008, 128'(r.pay_addr), ft);
      if (m == 2) fork
        begin repeat (5) @(negedge clk); txreq_ready = 1; @(negedge clk); txreq_ready = 0; end
      join_none
      if (m == 3) txreq_ready = 1;
      access(1, 32'h0010_0010, {80'd0, r.pay_beats, 8'd0, r.hdr_beats, 12'd0, r.flow}, ft);
      if (m < 2) check(ft, "doorbell accepted while queue has room");
      if (m == 2) check(!ft, "doorbell stalls when the queue is full");
    end
    repeat (10) @(negedge clk);
    check(n_req == 6 && exp_req.size() == 0, "all requests delivered in order");
    check(n_doorbells == 6 && n_db_stalls >= 4, $sformatf("doorbell counters %0d %0d", n_doorbells, n_db_stalls));
    check(exp_rsp.size() == 0 && n_rsp > 20, "all reads answered");
    check(n_desc > 5 && n_cfg > 5 && n_q > 5, "every write region used");
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
