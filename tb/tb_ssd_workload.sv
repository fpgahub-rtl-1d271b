// tb_ssd_workload -- 4 KB random storage requests from the network against
// ten SSDs, run through the whole hub at its default sizes.
//
// The workload: a remote node streams requests, each one NVMe command
// of 8 x 512 B blocks (4 KB) to a random SSD at a random block address.
// The FPGA turns each request into a command, the SSD fetches it from the
// hub's on-chip SQ, serves it after a fixed service time and writes its
// completion into the hub's CQ, and the hub answers with a response
// message. Every command and response is checked field by field.
//
// Two phases measure the command rate (completions per clock cycle):
//   A. SSDs that answer after 4 cycles: the rate the hub itself sustains.
//   B. SSDs with an 80 us read latency (16000 cycles at 200 MHz), applied
//      to reads and writes alike as the worst case: the rate that 63
//      commands in flight per SSD allow.
// The required rate: ten SSDs saturated at about 25 GiB/s of 4 KB requests
// is 25 * 2^30 / 4096 = 6.55 M commands/s, which at a 200 MHz clock is
// 0.0328 commands per cycle. Both phases must reach it. The 25 GiB/s
// figure is the saturation point reported for this SSD set; the 80 us
// latency and the 200 MHz clock are typical values, not measured ones.
//
// Around the hub: a BAR driver (one access per cycle) carrying the SSDs'
// peer-to-peer queue accesses and the host's set-up writes; ten SSD
// models; a network source that always has the next request ready and a
// sink that always accepts. DMA and on-board memory are idle.
module tb_ssd_workload;
  import fh_pkg::*;
  localparam int NS = 10, D = 64;
  localparam int LAT_FAST = 4, LAT_READ = 16000;
  localparam real NEED = 25.0 * 1073741824.0 / 4096.0 / 200.0e6;   // commands per cycle

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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

  assign c2h_ready = 1'b1;  assign memw_ready = 1'b1;  assign note_ready = 1'b1;
  assign h2c_req_ready = 1'b1;  assign h2c_valid = 1'b0;  assign h2c_last = 1'b0;  assign h2c_data = '0;
  assign memr_req_ready = 1'b1; assign memr_valid = 1'b0; assign memr_last = 1'b0; assign memr_data = '0;
  assign ssd_db_ready = 1'b1;
  assign net_tx_ready = 1'b1;

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

  // ------------------------------------------------------------ SSD models
  function automatic logic [63:0] bar_of(int s); return 64'hE000_0000 + 64'(s) * 64'h10_0000; endfunction
  localparam logic [31:0] QREG = 32'h0030_0000;
  int  sq_tail[NS], cq_tail[NS];
  bit  phase[NS];
  int  lat;                                  // SSD service time in cycles
  // commands being served, in order of their due cycle (same latency for all)
  int     srv_s[$], srv_c[$];
  longint srv_due[$];

  always @(posedge clk) if (rst_n && ssd_db_valid && ssd_db_ready) begin
    bit hit; hit = 0;
    for (int s = 0; s < NS; s++) begin
      if (ssd_db_addr == bar_of(s) + 64'h1008) begin
        hit = 1;
        while (sq_tail[s] != int'(ssd_db_data)) begin
          bar_rd(QREG | 32'((s << 13) | (sq_tail[s] << 6)), s);
          sq_tail[s] = (sq_tail[s] + 1) % D;
        end
      end
      if (ssd_db_addr == bar_of(s) + 64'h100C) hit = 1;
    end
    check(hit, "doorbell address belongs to an SSD");
  end

  // request id -> expected SSD, opcode and block address
  int          req_ssd[int];
  logic [7:0]  req_op[int];
  logic [63:0] req_lba[int];

  always @(posedge clk) if (rst_n && bar_rsp_valid) begin
    int s, id;
    logic [511:0] e;
    s = rd_tags.pop_front();
    e = bar_rsp_data;
    id = int'((e[255:192] - 64'hD000_0000) / 4096);        // buffer address encodes the request id
    check(req_ssd.exists(id) && req_ssd[id] == s && e[7:0] == req_op[id] && e[63:32] == 32'd1 &&
          e[383:320] == req_lba[id] && e[399:384] == 16'd7 && e[255:192] == 64'hD000_0000 + 64'(id) * 4096,
          $sformatf("command of request %0d at SSD %0d", id, s));
    srv_s.push_back(s); srv_c.push_back(int'(e[31:16])); srv_due.push_back(cyc + longint'(lat));
  end

  // completions: at most one new one per cycle, when its service time is over
  always @(negedge clk) if (rst_n && srv_s.size() > 0 && srv_due[0] <= cyc) begin
    int s, c;
    logic [127:0] cqe;
    s = srv_s.pop_front(); c = srv_c.pop_front(); void'(srv_due.pop_front());
    cqe = '0; cqe[79:64] = 16'(sq_tail[s]); cqe[111:96] = 16'(c); cqe[112] = phase[s];
    bar_wr(QREG | 32'((s << 13) | 4096 | (cq_tail[s] << 4)), cqe);
    cq_tail[s] = (cq_tail[s] + 1) % D;
    if (cq_tail[s] == 0) phase[s] = !phase[s];
  end

  // ------------------------------------------------------------ network source and sink
  bit     sending = 0;
  int     next_id = 0, n_sent = 0, n_resp = 0;
  longint t_resp[$];                         // cycle of every response, in order
  bit     rx_acc;
  always @(posedge clk) rx_acc = net_rx_valid && net_rx_ready;
  always @(negedge clk) begin
    if (!(net_rx_valid && !rx_acc)) begin
      net_rx_valid = 0;
      if (rst_n && sending) begin
        logic [511:0] b;
        int s, id;
        logic [63:0] lba;
        id = next_id; next_id++; n_sent++;
        s = $urandom_range(0, NS - 1);
        lba = {32'($urandom), 32'($urandom)} & 64'h0000_00FF_FFFF_FFF8;   // 4 KB aligned
        b = '0;
        b[7:0] = ($urandom_range(0, 1) == 1) ? NVME_OP_WRITE : NVME_OP_READ;
        b[15:8] = 8'(s); b[31:16] = 16'(id); b[47:32] = 16'd7;
        b[127:64] = lba; b[191:128] = 64'hD000_0000 + 64'(id) * 4096;
        req_ssd[id] = s; req_op[id] = b[7:0]; req_lba[id] = lba;
        net_rx_valid = 1; net_rx_flow = 4'd1; net_rx_data = b; net_rx_last = 1;
      end
    end
  end

  always @(posedge clk) if (rst_n && net_tx_valid && net_tx_ready) begin
    int id;
    id = int'(net_tx_data[31:16]);
    check(net_tx_last && net_tx_flow == 4'd1 && net_tx_data[7:0] == 8'h80 && req_ssd.exists(id) &&
          int'(net_tx_data[15:8]) == req_ssd[id] && net_tx_data[46:32] == 15'd0,
          $sformatf("response to request %0d", id));
    if (req_ssd.exists(id)) begin req_ssd.delete(id); req_op.delete(id); req_lba.delete(id); end
    n_resp++;
    t_resp.push_back(cyc);
  end

  // responses per cycle between two response counts
  function automatic real rate(int from, int to);
    return real'(to - from) / real'(t_resp[to - 1] - t_resp[from]);
  endfunction

  task automatic drain(int limit);
    int t; t = 0;
    while (n_resp < n_sent && t < limit) begin @(negedge clk); t++; end
    check(n_resp == n_sent && req_ssd.size() == 0, $sformatf("all %0d requests answered", n_sent));
  endtask

  initial begin
    real ra, rb;
    int  base;
    net_rx_valid = 0; net_rx_data = 0; net_rx_flow = 0; net_rx_last = 0;
    bar_valid = 0; bar_write = 0; bar_addr = 0; bar_wdata = 0;
    for (int s = 0; s < NS; s++) begin sq_tail[s] = 0; cq_tail[s] = 0; phase[s] = 1; end
    lat = LAT_FAST;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NS; s++) bar_wr(32'h0020_0000 | 32'(s << 3), 128'(bar_of(s)));
    bar_wr(32'h0000_0000 | (1 << 5), 128'(DEST_USER));
    repeat (30) @(negedge clk);

    // ---- A: fast SSDs, 3000 requests
    sending = 1;
    while (n_sent < 3000) @(negedge clk);
    sending = 0;
    drain(20000);
    ra = rate(500, 2500);
    $display("phase A: %0d requests, hub-limited rate %.3f commands/cycle (need %.4f)", n_sent, ra, NEED);
    check(ra >= NEED, "hub sustains the rate ten saturated SSDs need");

    // ---- B: 80 us SSDs, stream for 100000 cycles
    lat = LAT_READ;
    base = n_resp;
    sending = 1;
    repeat (100000) @(negedge clk);
    sending = 0;
    // measure from the third service period on, when every queue is in its
    // steady state, up to the moment the source stops
    begin
      int from, to;
      from = base; to = n_resp;
      while (from < to && t_resp[from] < t_resp[base] + 2 * longint'(LAT_READ)) from++;
      rb = (to - from > 100) ? rate(from, to) : 0.0;
    end
    drain(3 * LAT_READ);
    $display("phase B: %0d requests, latency-limited rate %.4f commands/cycle (need %.4f), %0d in flight",
             n_resp - base, rb, NEED, int'(rb * real'(LAT_READ)));
    check(rb >= NEED, "63 commands in flight per SSD cover an 80 us latency at the needed rate");
    check(dut.u_ssd.n_full_stalls > 0, "queues ran full in the latency-limited phase");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (250000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
