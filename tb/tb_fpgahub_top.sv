// tb_fpgahub_top -- end-to-end test of the whole hub at its default sizes
// (10 SSDs, 64-entry queues, 16 flows).
//
// Around the hub the testbench models: the host, which programs the hub
// through BAR writes and reads; ten NVMe SSDs, which see their doorbells,
// fetch commands from the hub's on-chip SQs and write completions into its
// CQs, both by peer-to-peer BAR accesses; the PCIe DMA (host memory); the
// on-board memory; and the network transport, which delivers and takes
// messages. Scenario:
//   1. set-up: SSD BAR addresses and three flow descriptors, read back;
//   2. storage requests arrive from the network for all SSDs; each must
//      come back as a response message (SSD 0 is held busy first so that
//      its queue fills and stalls, then released; one request is invalid);
//   3. messages arrive on a PCIe flow and on a split flow; headers must
//      land in host memory, payloads in on-board memory, notifications
//      must describe them;
//   4. the host sends each split message back out by ringing the TX
//      doorbell: header from host memory + payload still in FPGA memory;
//      with the network stalled, the request queue fills and the doorbell
//      store stalls.
// Each mechanism is counted; one that never happened is a failure.
module tb_fpgahub_top;
  import fh_pkg::*;
  localparam int NS = 10, D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bar_valid, bar_ready, bar_write, bar_rsp_valid;
  logic [31:0] bar_addr; logic [127:0] bar_wdata; logic [511:0] bar_rsp_data;
  logic ssd_db_valid, ssd_db_ready; logic [63:0] ssd_db_addr; logic [31:0] ssd_db_data;
  logic c2h_valid, c2h_ready, c2h_last; logic [63:0] c2h_addr; logic [511:0] c2h_data;
  logic h2c_req_valid, h2c_req_ready, h2c_valid, h2c_ready, h2c_last;
  logic [63:0] h2c_req_addr; logic [7:0] h2c_req_beats; logic [511:0] h2c_data;
  logic note_valid, note_ready; rx_note_t note;
  logic memw_valid, memw_ready; logic [63:0] memw_addr; logic [511:0] memw_data;
  logic memr_req_valid, memr_req_ready, memr_valid, memr_ready, memr_last;
  logic [63:0] memr_req_addr; logic [15:0] memr_req_beats; logic [511:0] memr_data;
  logic net_rx_valid, net_rx_ready, net_rx_last, net_tx_valid, net_tx_ready, net_tx_last;
  logic [511:0] net_rx_data, net_tx_data; logic [3:0] net_rx_flow, net_tx_flow;

  fpgahub_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ BAR driver
  typedef struct { bit wr; logic [31:0] a; logic [127:0] d; int tag; } bar_op_t;
  bar_op_t bar_q[$];
  int rd_tags[$];
  bit acc;
  always @(posedge clk) acc = bar_valid && bar_ready;
  always @(negedge clk) begin
    if (!(bar_valid && !acc)) begin
      bar_valid = 0;
      if (rst_n && bar_q.size() > 0) begin
        bar_op_t o;
        o = bar_q.pop_front();
        bar_valid = 1; bar_write = o.wr; bar_addr = o.a; bar_wdata = o.d;
        if (!o.wr) rd_tags.push_back(o.tag);
      end
    end
  end
  function automatic void bar_wr(logic [31:0] a, logic [127:0] d);
    bar_op_t o; o.wr = 1; o.a = a; o.d = d; o.tag = 0; bar_q.push_back(o);
  endfunction
  function automatic void bar_rd(logic [31:0] a, int tag);
    bar_op_t o; o.wr = 0; o.a = a; o.d = 0; o.tag = tag; bar_q.push_back(o);
  endfunction

  // host read results (tag < 0)
  logic [511:0] host_rd [int];

  // ------------------------------------------------------------ SSD models
  function automatic logic [63:0] bar_of(int s); return 64'hE000_0000 + 64'(s) * 64'h10_0000; endfunction
  localparam logic [31:0] QREG = 32'h0030_0000;
  int  sq_head[NS], sq_tail[NS], cq_tail[NS];
  bit  phase[NS], hold[NS];
  int  fetched[NS], completed[NS];
  int  cpl_wait_s[$], cpl_wait_c[$];
  int  n_sq_db = 0, n_cq_db = 0;

  always @(posedge clk) if (rst_n && ssd_db_valid && ssd_db_ready) begin
    bit hit; hit = 0;
    for (int s = 0; s < NS; s++) begin
      if (ssd_db_addr == bar_of(s) + 64'h1008) begin
        hit = 1; n_sq_db++;
        while (sq_tail[s] != int'(ssd_db_data)) begin
          bar_rd(QREG | 32'((s << 13) | (sq_tail[s] << 6)), 1000 + s);
          sq_tail[s] = (sq_tail[s] + 1) % D;
        end
      end
      if (ssd_db_addr == bar_of(s) + 64'h100C) begin hit = 1; n_cq_db++; end
    end
    check(hit, "doorbell address belongs to an SSD");
  end

  // a fetched command: check it, remember it for completion
  task automatic ssd_got_sqe(int s, logic [511:0] e);
    fetched[s]++;
    check(e[7:0] == NVME_OP_READ || e[7:0] == NVME_OP_WRITE, "SQE opcode");
    check(e[63:32] == 32'd1, "SQE namespace");
    check(e[383:376] == 8'(s), $sformatf("SSD %0d got its own command", s));
    check(e[255:192] == 64'hD000_0000 + 64'(e[375:320]) * 4096, "SQE data buffer address");
    cpl_wait_s.push_back(s); cpl_wait_c.push_back(int'(e[31:16]));
  endtask

  always @(posedge clk) if (rst_n && bar_rsp_valid) begin
    int t;
    t = rd_tags.pop_front();
    if (t >= 1000) ssd_got_sqe(t - 1000, bar_rsp_data);
    else host_rd[t] = bar_rsp_data;
  end

  // SSDs complete waiting commands, one per few cycles, in random order
  always @(negedge clk) if (rst_n && cpl_wait_s.size() > 0 && $urandom_range(0, 2) == 0) begin
    int i, s, c;
    i = $urandom_range(0, cpl_wait_s.size() - 1);
    s = cpl_wait_s[i]; c = cpl_wait_c[i];
    if (!hold[s]) begin
      logic [127:0] cqe;
      cpl_wait_s.delete(i); cpl_wait_c.delete(i);
      cqe = '0; cqe[79:64] = 16'(sq_tail[s]); cqe[111:96] = 16'(c); cqe[112] = phase[s];
      cqe[127:113] = 15'(s);
      bar_wr(QREG | 32'((s << 13) | 4096 | (cq_tail[s] << 4)), cqe);
      cq_tail[s] = (cq_tail[s] + 1) % D;
      if (cq_tail[s] == 0) phase[s] = !phase[s];
      completed[s]++;
    end
  end

  // ------------------------------------------------------------ DMA and memory models
  logic [511:0] hostmem [longint];
  logic [511:0] fpgamem [longint];
  logic [63:0] h_addr, m_addr; int h_left, m_left;
  int n_c2h = 0, n_memw = 0;
  always @(posedge clk) if (rst_n) begin
    if (c2h_valid && c2h_ready) begin hostmem[longint'(c2h_addr)] = c2h_data; n_c2h++; end
    if (memw_valid && memw_ready) begin fpgamem[longint'(memw_addr)] = memw_data; n_memw++; end
  end
  // read engines: state changes with nonblocking updates at the clock edge
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      h_addr <= '0; m_addr <= '0; h_left <= 0; m_left <= 0;
    end else begin
      if (h2c_req_valid && h2c_req_ready) begin h_addr <= h2c_req_addr; h_left <= int'(h2c_req_beats); end
      else if (h2c_valid && h2c_ready) begin h_addr <= h_addr + 64; h_left <= h_left - 1; end
      if (memr_req_valid && memr_req_ready) begin m_addr <= memr_req_addr; m_left <= int'(memr_req_beats); end
      else if (memr_valid && memr_ready) begin m_addr <= m_addr + 1; m_left <= m_left - 1; end
    end
  end
  always_comb begin
    h2c_valid = h_left > 0; h2c_last = h_left == 1;
    h2c_data  = hostmem.exists(longint'(h_addr)) ? hostmem[longint'(h_addr)] : '0;
    memr_valid = m_left > 0; memr_last = m_left == 1;
    memr_data  = fpgamem.exists(longint'(m_addr)) ? fpgamem[longint'(m_addr)] : '0;
  end
  assign h2c_req_ready = (h_left == 0);
  assign memr_req_ready = (m_left == 0);

  // ------------------------------------------------------------ transport model
  typedef struct { logic [511:0] d[$]; int f; } msg_t;
  msg_t rx_msgs[$];
  bit net_tx_hold = 0;
  always @(negedge clk) begin
    c2h_ready    = ($urandom_range(0, 4) != 0);
    memw_ready   = ($urandom_range(0, 4) != 0);
    note_ready   = ($urandom_range(0, 4) != 0);
    ssd_db_ready = ($urandom_range(0, 3) != 0);
    net_tx_ready = !net_tx_hold && ($urandom_range(0, 4) != 0);
  end

  int rx_beat = 0;
  always @(negedge clk) begin
    if (!(net_rx_valid && !rx_acc)) begin
      net_rx_valid = 0;
      if (rst_n && rx_msgs.size() > 0) begin
        net_rx_valid = 1;
        net_rx_flow  = 4'(rx_msgs[0].f);
        net_rx_data  = rx_msgs[0].d[rx_beat];
        net_rx_last  = (rx_beat == rx_msgs[0].d.size() - 1);
        if (net_rx_last) begin rx_beat = 0; void'(rx_msgs.pop_front()); end
        else rx_beat++;
      end
    end
  end
  bit rx_acc;
  always @(posedge clk) rx_acc = net_rx_valid && net_rx_ready;

  msg_t tx_got[$];
  logic [511:0] tx_cur[$];
  always @(posedge clk) if (rst_n && net_tx_valid && net_tx_ready) begin
    tx_cur.push_back(net_tx_data);
    if (net_tx_last) begin
      msg_t m; m.d = tx_cur; m.f = int'(net_tx_flow); tx_got.push_back(m); tx_cur = {};
    end
  end

  rx_note_t notes[$];
  always @(posedge clk) if (rst_n && note_valid && note_ready) notes.push_back(note);

  // ------------------------------------------------------------ helpers
  function automatic logic [511:0] storage_req(logic [7:0] op, int s, int id, logic [63:0] lba);
    logic [511:0] b; b = '0;
    b[7:0] = 8'(op); b[15:8] = 8'(s); b[31:16] = 16'(id); b[47:32] = 16'd7;   // 8 x 512 B = 4 KB
    b[127:64] = {8'(s), 56'(lba)};
    b[191:128] = 64'hD000_0000 + 64'(lba[55:0]) * 4096;
    return b;
  endfunction
  function automatic logic [511:0] pat(int m, int i); return {32'hFEED_0000 | 32'(m), 448'(i * 13), 32'(m * 100 + i)}; endfunction

  task automatic wait_until(ref int cnt, input int target, input int limit, input string what);
    int t; t = 0;
    while (cnt < target && t < limit) begin @(negedge clk); t++; end
    check(cnt >= target, what);
  endtask

  int n_resp_ok = 0, n_tx_cnt = 0;
  int exp_resp[int];   // request id -> ssd

  initial begin
    int nreq;
    net_rx_valid = 0; net_rx_data = 0; net_rx_flow = 0; net_rx_last = 0;
    bar_valid = 0; bar_write = 0; bar_addr = 0; bar_wdata = 0;
    for (int s = 0; s < NS; s++) begin
      sq_head[s] = 0; sq_tail[s] = 0; cq_tail[s] = 0; phase[s] = 1; hold[s] = 0; fetched[s] = 0; completed[s] = 0;
    end
    repeat (4) @(negedge clk);
    rst_n = 1;

    // ---- 1. set-up
    for (int s = 0; s < NS; s++) bar_wr(32'h0020_0000 | 32'(s << 3), 128'(bar_of(s)));
    bar_wr(32'h0000_0000 | (1 << 5) | (0 << 3), 128'(DEST_USER));
    bar_wr(32'h0000_0000 | (2 << 5) | (0 << 3), 128'(DEST_PCIE));
    bar_wr(32'h0000_0000 | (2 << 5) | (1 << 3), 128'(64'h1_0000_0000));
    bar_wr(32'h0000_0000 | (3 << 5) | (0 << 3), 128'({8'd2, 6'd0, 2'(DEST_SPLIT)}));
    bar_wr(32'h0000_0000 | (3 << 5) | (1 << 3), 128'(64'h2_0000_0000));
    bar_wr(32'h0000_0000 | (3 << 5) | (2 << 3), 128'(64'h1_0000));
    bar_wr(32'h0000_0000 | (3 << 5) | (3 << 3), 128'(64'd1024));
    bar_rd(32'h0000_0000 | (3 << 5) | (0 << 3), -1);
    bar_rd(32'h0000_0000 | (3 << 5) | (1 << 3), -2);
    repeat (40) @(negedge clk);
    check(host_rd.exists(-1) && host_rd[-1][15:0] == {8'd2, 6'd0, 2'(DEST_SPLIT)}, "descriptor readback (dest, header size)");
    check(host_rd.exists(-2) && host_rd[-2][63:0] == 64'h2_0000_0000, "descriptor readback (host address)");

    // ---- 2. storage requests; SSD 0 held so that its queue fills
    hold[0] = 1;
    nreq = 0;
    for (int k = 0; k < 70; k++) begin       // 70 > 63 for SSD 0
      msg_t m; m.d = {}; m.f = 1; m.d.push_back(storage_req(NVME_OP_READ, 0, nreq, 64'(nreq)));
      exp_resp[nreq] = 0; nreq++; rx_msgs.push_back(m);
    end
    begin int t; t = 0; while (dut.u_ssd.n_full_stalls == 0 && t < 20000) begin @(negedge clk); t++; end end
    check(dut.u_ssd.n_full_stalls > 0, "SSD 0 queue filled and stalled");
    hold[0] = 0;
    for (int k = 0; k < 200; k++) begin
      msg_t m; int s;
      m.d = {};
      s = $urandom_range(0, NS - 1);
      m.f = 1;
      m.d.push_back(storage_req((k % 2 == 1) ? NVME_OP_WRITE : NVME_OP_READ, s, nreq, 64'(nreq)));
      if (k % 50 == 7) m.d.push_back('1);    // extra beat, ignored
      exp_resp[nreq] = s; nreq++; rx_msgs.push_back(m);
    end
    begin msg_t m; m.d = {}; m.f = 1; m.d.push_back(storage_req(8'h7F, 1, 9999, 0)); rx_msgs.push_back(m); end
    begin int t; t = 0; while (tx_got.size() < nreq && t < 200000) begin @(negedge clk); t++; end end
    check(tx_got.size() == nreq, $sformatf("responses %0d of %0d", tx_got.size(), nreq));
    while (tx_got.size() > 0) begin
      msg_t m; int id;
      m = tx_got.pop_front();
      id = int'(m.d[0][31:16]);
      check(m.f == 1 && m.d.size() == 1 && m.d[0][7:0] == 8'h80 && exp_resp.exists(id) &&
            int'(m.d[0][15:8]) == exp_resp[id] && int'(m.d[0][46:32]) == exp_resp[id],
            $sformatf("response for request %0d", id));
      if (exp_resp.exists(id)) begin exp_resp.delete(id); n_resp_ok++; end
    end
    check(exp_resp.size() == 0, "every request answered once");

    // ---- 3. PCIe and split messages, one at a time (they reuse host addresses)
    begin
      longint ring;
      ring = 0;
      for (int m = 0; m < 8; m++) begin
        msg_t x; rx_note_t n; int len, t;
        len = 3 + m;
        x.d = {}; x.f = (m % 2 == 1) ? 3 : 2;
        for (int i = 0; i < len; i++) x.d.push_back(pat(m, i));
        rx_msgs.push_back(x);
        t = 0; while (notes.size() < 1 && t < 20000) begin @(negedge clk); t++; end
        check(notes.size() == 1, "notification");
        n = notes.pop_front();
        if (m % 2 == 0) begin
          check(n.flow == 2 && n.dest == DEST_PCIE && n.total_beats == 16'(len) && n.hdr_beats == 16'(len), "PCIe note");
          for (int i = 0; i < len; i++)
            check(hostmem[longint'(64'h1_0000_0000) + longint'(i) * 64] == pat(m, i), "PCIe message in host memory");
        end else begin
          check(n.flow == 3 && n.dest == DEST_SPLIT && n.hdr_beats == 2 && n.pay_beats == 16'(len - 2) &&
                n.pay_addr == 64'h1_0000 + 64'(ring), "split note");
          for (int i = 0; i < 2; i++)
            check(hostmem[longint'(64'h2_0000_0000) + longint'(i) * 64] == pat(m, i), "header in host memory");
          for (int i = 2; i < len; i++)
            check(fpgamem[longint'(n.pay_addr) + longint'(i - 2)] == pat(m, i), "payload in FPGA memory");
          ring += len - 2;
          // ---- 4. send it back out: header from host memory, payload from FPGA memory
          bar_wr(32'h0010_0000, 128'(64'h2_0000_0000));
          bar_wr(32'h0010_0008, 128'(n.pay_addr));
          bar_wr(32'h0010_0010, {80'd0, 16'(len - 2), 8'd0, 8'd2, 12'd0, 4'd5});
          t = 0; while (tx_got.size() < 1 && t < 20000) begin @(negedge clk); t++; end
          check(tx_got.size() == 1, "reassembled message sent");
          x = tx_got.pop_front();
          check(x.f == 5 && x.d.size() == len, "reassembled message length and flow");
          for (int i = 0; i < len && i < x.d.size(); i++) check(x.d[i] == pat(m, i), "reassembled message content");
        end
      end
    end
    // doorbell stall: network stalled, 12 doorbells for an 8-deep queue
    net_tx_hold = 1;
    for (int k = 0; k < 12; k++) begin
      bar_wr(32'h0010_0000, 128'(64'h1_0000_0000));
      bar_wr(32'h0010_0008, 128'(64'h1_0000));
      bar_wr(32'h0010_0010, {80'd0, 16'd1, 8'd0, 8'd1, 12'd0, 4'd6});
    end
    repeat (300) @(negedge clk);
    check(dut.u_mmio.n_db_stalls > 0, "doorbell store stalled on a full request queue");
    net_tx_hold = 0;
    begin int t; t = 0; while (tx_got.size() < 12 && t < 20000) begin @(negedge clk); t++; end end
    check(tx_got.size() == 12, "queued requests all sent after the stall");
    while (tx_got.size() > 0) begin
      msg_t x; x = tx_got.pop_front();
      check(x.f == 6 && x.d.size() == 2 && x.d[0] == pat(6, 0) && x.d[1] == fpgamem[64'h1_0000],
            "stalled request content");
    end
    // statistics through the BAR: completions and responses
    bar_rd(32'h0040_0000 | (4 << 3), -3);
    bar_rd(32'h0040_0000 | (9 << 3), -4);
    repeat (40) @(negedge clk);
    check(host_rd.exists(-3) && host_rd[-3][31:0] == 32'(nreq), "completion counter read over the BAR");
    check(host_rd.exists(-4) && host_rd[-4][31:0] == 32'(nreq), "response counter read over the BAR");

    // ---- mechanisms
    begin
      int wraps; wraps = 0;
      for (int s = 0; s < NS; s++) if (completed[s] > D) wraps++;
      $display("mechanisms: split-to-memory beats=%0d dma-writes=%0d full-stalls=%0d doorbell-stalls=%0d",
               n_memw, n_c2h, dut.u_ssd.n_full_stalls, dut.u_mmio.n_db_stalls);
      $display("mechanisms: sq-doorbells=%0d cq-doorbells=%0d commands=%0d cq-wraps=%0d dropped=%0d assembled=%0d user-msgs=%0d",
               n_sq_db, n_cq_db, nreq, wraps, dut.u_user.n_dropped, dut.u_sa.n_asm_msgs, dut.u_sa.n_user_msgs);
      check(n_memw > 0, "payload split to FPGA memory happened");
      check(n_c2h > 0, "DMA to host happened");
      check(dut.u_user.n_dropped == 1, "invalid request dropped");
      check(n_sq_db < nreq, "SQ doorbells coalesced");
      check(wraps > 0, "a completion queue wrapped (phase flip)");
      check(dut.u_sa.n_asm_msgs == 16, "assembled messages");
      check(dut.u_sa.n_user_msgs == 32'(nreq), "user-logic messages");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
