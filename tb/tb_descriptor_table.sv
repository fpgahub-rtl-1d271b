// tb_descriptor_table -- self-checking test of the per-flow descriptor table.
//
// Writes random values into every field of every flow in random order,
// keeps its own copy, and checks both the MMIO readback and the lookup port
// for all flows; also checks that a write is seen on the next cycle and that
// reset clears the table.
module tb_descriptor_table;
  import fh_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        wr_valid;
  logic [8:0]  wr_addr, rd_addr;
  logic [63:0] wr_data, rd_data;
  logic [3:0]  lk_flow;
  desc_t       lk_desc;

  descriptor_table dut (.clk, .rst_n, .wr_valid, .wr_addr, .wr_data, .rd_addr, .rd_data,
                        .lk_flow, .lk_desc);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [1:0]  m_dest [16];
  logic [7:0]  m_hdr  [16];
  logic [63:0] m_host [16], m_base [16];
  logic [15:0] m_size [16];

  task automatic wr(int flow, int field, logic [63:0] v);
    @(negedge clk);
    wr_valid = 1; wr_addr = 9'((flow << 5) | (field << 3)); wr_data = v;
    @(negedge clk);
    wr_valid = 0;
  endtask

  initial begin
    wr_valid = 0; wr_addr = 0; wr_data = 0; rd_addr = 0; lk_flow = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 16; f++) begin
      lk_flow = 4'(f); #1;
      check(lk_desc == '0, "reset clears descriptor");
    end
    for (int k = 0; k < 200; k++) begin
      int f, fld;
      logic [63:0] v;
      f = $urandom_range(0, 15); fld = $urandom_range(0, 3);
      v = {$urandom, $urandom};
      if (fld == 0) v[1:0] = 2'($urandom_range(0, 2));
      wr(f, fld, v);
      case (fld)
        0: begin m_dest[f] = v[1:0]; m_hdr[f] = v[15:8]; end
        1: m_host[f] = v;
        2: m_base[f] = v;
        default: m_size[f] = v[15:0];
      endcase
      // seen right after the write
      lk_flow = 4'(f); #1;
      check((fld == 0) ? (lk_desc.dest == dest_e'(v[1:0]) && lk_desc.hdr_beats == v[15:8]) :
            (fld == 1) ? lk_desc.host_addr == v :
            (fld == 2) ? lk_desc.mem_base == v : lk_desc.mem_beats == v[15:0],
            $sformatf("write flow %0d field %0d visible", f, fld));
    end
    // make sure every field was written at least once
    for (int f = 0; f < 16; f++) begin
      wr(f, 0, {48'd0, 8'(f + 1), 6'd0, 2'(f % 3)}); m_dest[f] = 2'(f % 3); m_hdr[f] = 8'(f + 1);
      wr(f, 1, 64'h1000_0000 + 64'(f)); m_host[f] = 64'h1000_0000 + 64'(f);
      wr(f, 2, 64'(f) << 20);           m_base[f] = 64'(f) << 20;
      wr(f, 3, 64'(256 + f));           m_size[f] = 16'(256 + f);
    end
    for (int f = 0; f < 16; f++) begin
      lk_flow = 4'(f);
      for (int fld = 0; fld < 4; fld++) begin
        rd_addr = 9'((f << 5) | (fld << 3)); #1;
        case (fld)
          0: check(rd_data == {48'd0, m_hdr[f], 6'd0, m_dest[f]}, "readback field 0");
          1: check(rd_data == m_host[f], "readback field 1");
          2: check(rd_data == m_base[f], "readback field 2");
          default: check(rd_data == {48'd0, m_size[f]}, "readback field 3");
        endcase
      end
      check(lk_desc.dest == dest_e'(m_dest[f]) && lk_desc.hdr_beats == m_hdr[f] &&
            lk_desc.host_addr == m_host[f] && lk_desc.mem_base == m_base[f] &&
            lk_desc.mem_beats == m_size[f], $sformatf("lookup flow %0d", f));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
