// tb_split_assemble -- self-checking test of the split/assemble component.
//
// Receive side: random messages on three flows (to user logic, whole to
// PCIe, split header/payload with a 5-beat payload ring so that it wraps)
// under random backpressure. A reference model computes, beat by beat, what
// each output (user, DMA write, memory write, notification) must carry;
// monitors compare. Also checks that an unstalled message passes at one
// beat per cycle.
// Transmit side: user messages and assemble requests compete; a DMA model
// and a memory model answer reads with address-derived data. Every output
// message is checked against the next expected message of its source.
module tb_split_assemble;
  import fh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---- DUT signals
  logic rx_valid, rx_ready, rx_last, urx_valid, urx_ready, urx_last, c2h_valid, c2h_ready, c2h_last;
  logic memw_valid, memw_ready, note_valid, note_ready;
  logic [511:0] rx_data, urx_data, c2h_data, memw_data;
  logic [3:0] rx_flow, lk_flow, urx_flow;
  logic [63:0] c2h_addr, memw_addr;
  desc_t lk_desc;
  rx_note_t note;
  logic utx_valid, utx_ready, utx_last, txreq_valid, txreq_ready, h2c_req_valid, h2c_req_ready;
  logic h2c_valid, h2c_ready, h2c_last, memr_req_valid, memr_req_ready, memr_valid, memr_ready, memr_last;
  logic tx_valid, tx_ready, tx_last;
  logic [511:0] utx_data, h2c_data, memr_data, tx_data;
  logic [3:0] utx_flow, tx_flow;
  tx_req_t txreq;
  logic [63:0] h2c_req_addr, memr_req_addr;
  logic [7:0] h2c_req_beats;
  logic [15:0] memr_req_beats;
  logic [31:0] n_rx_msgs, n_user_msgs, n_asm_msgs;

  split_assemble dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- descriptors: flow 1 user, flow 2 PCIe, flow 3 split (hdr 2, ring 5)
  desc_t tbl [16];
  assign lk_desc = tbl[lk_flow];

  // ---- expected receive outputs
  typedef struct { logic [511:0] d; logic [63:0] a; logic last; logic [3:0] f; } beat_t;
  beat_t exp_usr[$], exp_c2h[$], exp_mem[$];
  rx_note_t exp_note[$];
  logic [15:0] ring_ptr [16];
  bit bp_on = 1;

  function automatic logic [511:0] pat(int msg, int i);
    return {32'hC0DE_0000 | 32'(msg), 448'(i), 32'(msg * 7 + i)};
  endfunction

  task automatic model_msg(int msg, int f, int len);
    desc_t d;
    int h;
    logic [15:0] start;
    d = tbl[f];
    start = ring_ptr[f];
    h = (d.dest == DEST_PCIE) ? len : ((d.dest == DEST_SPLIT) ? ((len < int'(d.hdr_beats)) ? len : int'(d.hdr_beats)) : 0);
    for (int i = 0; i < len; i++) begin
      beat_t b;
      b.d = pat(msg, i); b.f = 4'(f);
      if (d.dest == DEST_USER) begin
        b.a = 0; b.last = (i == len - 1); exp_usr.push_back(b);
      end else if (i < h) begin
        b.a = d.host_addr + 64'(i) * 64; b.last = (i == h - 1); exp_c2h.push_back(b);
      end else begin
        b.a = d.mem_base + 64'(ring_ptr[f]); b.last = 0; exp_mem.push_back(b);
        ring_ptr[f] = (ring_ptr[f] + 1 == d.mem_beats) ? 16'd0 : ring_ptr[f] + 1;
      end
    end
    if (d.dest != DEST_USER) begin
      rx_note_t n;
      n.flow = 4'(f); n.dest = d.dest; n.total_beats = 16'(len); n.hdr_beats = 16'(h);
      n.pay_beats = 16'(len - h); n.pay_addr = d.mem_base + 64'(start);
      exp_note.push_back(n);
    end
  endtask

  task automatic send_msg(int msg, int f, int len);
    model_msg(msg, f, len);
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      rx_valid = 1; rx_flow = 4'(f); rx_data = pat(msg, i); rx_last = (i == len - 1);
      @(posedge clk);
      while (!rx_ready) @(posedge clk);
    end
    @(negedge clk);
    rx_valid = 0;
  endtask

  always @(negedge clk) begin
    urx_ready  = !bp_on || ($urandom_range(0, 3) != 0);
    c2h_ready  = !bp_on || ($urandom_range(0, 3) != 0);
    memw_ready = !bp_on || ($urandom_range(0, 3) != 0);
    note_ready = !bp_on || ($urandom_range(0, 3) != 0);
    tx_ready   = !bp_on || ($urandom_range(0, 3) != 0);
  end

  int n_usr_beats = 0, n_c2h_beats = 0, n_mem_beats = 0, n_notes = 0;
  always @(posedge clk) if (rst_n) begin
    if (urx_valid && urx_ready) begin
      n_usr_beats++;
      check(exp_usr.size() > 0 && urx_data == exp_usr[0].d && urx_last == exp_usr[0].last &&
            urx_flow == exp_usr[0].f, "user beat");
      if (exp_usr.size() > 0) void'(exp_usr.pop_front());
    end
    if (c2h_valid && c2h_ready) begin
      n_c2h_beats++;
      check(exp_c2h.size() > 0 && c2h_data == exp_c2h[0].d && c2h_last == exp_c2h[0].last &&
            c2h_addr == exp_c2h[0].a, $sformatf("DMA beat addr %h", c2h_addr));
      if (exp_c2h.size() > 0) void'(exp_c2h.pop_front());
    end
    if (memw_valid && memw_ready) begin
      n_mem_beats++;
      check(exp_mem.size() > 0 && memw_data == exp_mem[0].d && memw_addr == exp_mem[0].a,
            $sformatf("memory beat addr %h", memw_addr));
      if (exp_mem.size() > 0) void'(exp_mem.pop_front());
    end
    if (note_valid && note_ready) begin
      n_notes++;
      check(exp_note.size() > 0 && note == exp_note[0], "notification");
      if (exp_note.size() > 0) void'(exp_note.pop_front());
    end
  end

  // ---- transmit side models
  typedef struct { logic [511:0] d; logic [3:0] f; logic last; } obeat_t;
  obeat_t exp_u[$], exp_a[$];
  logic [63:0] h_addr; int h_left;
  logic [63:0] m_addr; int m_left;

  function automatic logic [511:0] hpat(logic [63:0] a); return {8'hDD, 440'(a), 64'(a)}; endfunction
  function automatic logic [511:0] mpat(logic [63:0] a); return {8'hEE, 440'(a), 64'(~a)}; endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin h_left <= 0; m_left <= 0; h_addr <= 0; m_addr <= 0; end
    else begin
      if (h2c_req_valid && h2c_req_ready) begin h_addr <= h2c_req_addr; h_left <= int'(h2c_req_beats); end
      else if (h2c_valid && h2c_ready) begin h_addr <= h_addr + 64; h_left <= h_left - 1; end
      if (memr_req_valid && memr_req_ready) begin m_addr <= memr_req_addr; m_left <= int'(memr_req_beats); end
      else if (memr_valid && memr_ready) begin m_addr <= m_addr + 1; m_left <= m_left - 1; end
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (h2c_req_valid) check(h_left == 0, "header read requested while one is open");
    if (memr_req_valid) check(m_left == 0, "payload read requested while one is open");
  end
  always_comb begin
    h2c_valid = (h_left > 0); h2c_data = hpat(h_addr); h2c_last = (h_left == 1);
    memr_valid = (m_left > 0); memr_data = mpat(m_addr); memr_last = (m_left == 1);
  end
  assign h2c_req_ready = 1'b1;
  assign memr_req_ready = 1'b1;

  int out_msgs_u = 0, out_msgs_a = 0;
  bit in_a = 0, in_u = 0;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    bit is_u;
    is_u = in_u || (!in_a && tx_data[511:504] == 8'hAA);
    if (is_u) begin
      check(exp_u.size() > 0 && tx_data == exp_u[0].d && tx_flow == exp_u[0].f && tx_last == exp_u[0].last, "user TX beat");
      if (exp_u.size() > 0) void'(exp_u.pop_front());
      in_u = !tx_last; if (tx_last) out_msgs_u++;
    end else begin
      check(exp_a.size() > 0 && tx_data == exp_a[0].d && tx_flow == exp_a[0].f && tx_last == exp_a[0].last, "assembled TX beat");
      if (exp_a.size() > 0) void'(exp_a.pop_front());
      in_a = !tx_last; if (tx_last) out_msgs_a++;
    end
  end

  task automatic send_user_tx(int m, int len);
    for (int i = 0; i < len; i++) begin
      obeat_t b;
      b.d = {8'hAA, 472'(m), 32'(i)}; b.f = 4'(m % 16); b.last = (i == len - 1);
      exp_u.push_back(b);
      @(negedge clk);
      utx_valid = 1; utx_data = b.d; utx_flow = b.f; utx_last = b.last;
      @(posedge clk);
      while (!utx_ready) @(posedge clk);
    end
    @(negedge clk); utx_valid = 0;
  endtask

  task automatic send_req(int m, int hb, int pb);
    tx_req_t r;
    r.flow = 4'(m % 16); r.hdr_addr = 64'h8000_0000 + 64'(m) * 4096; r.hdr_beats = 8'(hb);
    r.pay_addr = 64'h100 * 64'(m); r.pay_beats = 16'(pb);
    for (int i = 0; i < hb; i++) begin
      obeat_t b; b.d = hpat(r.hdr_addr + 64'(i) * 64); b.f = r.flow; b.last = (pb == 0 && i == hb - 1);
      exp_a.push_back(b);
    end
    for (int i = 0; i < pb; i++) begin
      obeat_t b; b.d = mpat(r.pay_addr + 64'(i)); b.f = r.flow; b.last = (i == pb - 1);
      exp_a.push_back(b);
    end
    @(negedge clk);
    txreq_valid = 1; txreq = r;
    @(posedge clk);
    while (!txreq_ready) @(posedge clk);
    @(negedge clk); txreq_valid = 0;
  endtask

  initial begin
    rx_valid = 0; rx_data = 0; rx_flow = 0; rx_last = 0;
    utx_valid = 0; utx_data = 0; utx_flow = 0; utx_last = 0; txreq_valid = 0; txreq = '0;
    for (int f = 0; f < 16; f++) begin tbl[f] = '0; ring_ptr[f] = 0; end
    tbl[2].dest = DEST_PCIE;  tbl[2].host_addr = 64'h2_0000_0000;
    tbl[3].dest = DEST_SPLIT; tbl[3].hdr_beats = 8'd2; tbl[3].host_addr = 64'h3_0000_0000;
    tbl[3].mem_base = 64'h40_0000; tbl[3].mem_beats = 16'd5;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- receive, with backpressure
    for (int m = 0; m < 60; m++) begin
      int f;
      f = 1 + (m % 3);
      send_msg(m, f, $urandom_range(1, 6));
    end
    // ---- rate: one 16-beat PCIe message with no backpressure
    bp_on = 0;
    @(negedge clk);
    begin
      int t0, t1;
      model_msg(100, 2, 16);
      t0 = $time;
      for (int i = 0; i < 16; i++) begin
        rx_valid = 1; rx_flow = 4'd2; rx_data = pat(100, i); rx_last = (i == 15);
        @(negedge clk);
      end
      rx_valid = 0;
      t1 = $time;
      check((t1 - t0) / 10 == 16, "16 beats in 16 cycles");
    end
    repeat (5) @(negedge clk);
    check(exp_usr.size() == 0 && exp_c2h.size() == 0 && exp_mem.size() == 0 && exp_note.size() == 0,
          "all receive outputs seen");
    check(n_mem_beats > 5 && n_c2h_beats > 0 && n_usr_beats > 0 && n_notes == 41, "every receive path used");
    check(n_rx_msgs == 61, "receive message counter");
    // ---- transmit, both sources at once, with backpressure
    bp_on = 1;
    fork
      for (int m = 0; m < 20; m++) send_user_tx(m, $urandom_range(1, 4));
      for (int m = 0; m < 20; m++) send_req(m, m % 3, (m % 4 == 3) ? 0 : (m % 5) + 1);
    join
    repeat (200) @(negedge clk);
    check(exp_u.size() == 0 && exp_a.size() == 0, "all transmit beats seen");
    check(out_msgs_u == 20 && n_user_msgs == 20, "user messages sent");
    check(n_asm_msgs == 18 && out_msgs_a == 18, "assembled messages counted (two empty requests discarded)");
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
