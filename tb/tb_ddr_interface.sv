// tb_ddr_interface: self-checking test of the two-host DDR arbiter.
// A model memory with random waitrequest and a 3-cycle read latency serves a
// writer (40 line writes) and a reader (40 line reads of earlier lines) that
// request at the same time. Checked: all writes land with their byte enables,
// reads return the memory contents in order, a stalled command stays stable,
// and with both requesting the grants alternate (both hosts progress).
`include "tb_common.svh"
module tb_ddr_interface;
  `TB_COMMON(200000)
  localparam int AW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_write = 0, r_read = 0, w_waitrequest, r_waitrequest, r_readdatavalid;
  logic [AW-1:0] w_addr = '0, r_addr = '0, m_addr;
  logic [511:0] w_wdata = '0, r_readdata, m_wdata, m_readdata = '0;
  logic [63:0] w_byteenable = '1, m_byteenable;
  logic m_write, m_read, m_waitrequest = 0, m_readdatavalid = 0;
  ddr_interface #(.DDR_AW(AW)) dut (.clk, .rst_n, .w_write, .w_addr, .w_wdata, .w_byteenable,
    .w_waitrequest, .r_read, .r_addr, .r_waitrequest, .r_readdata, .r_readdatavalid,
    .m_write, .m_read, .m_addr, .m_wdata, .m_byteenable, .m_waitrequest, .m_readdata, .m_readdatavalid);

  logic [511:0] mem [1 << AW];
  logic [511:0] rpipe [$];
  int lat [$];
  logic [511:0] exp_r [$];
  int nr = 0, alt = 0; logic last_w; bit stalled = 0; logic [AW+1:0] st;
  initial for (int i = 0; i < (1 << AW); i++) mem[i] = {16{32'(i)}};
  always @(posedge clk) if (rst_n) begin
    if (stalled) check({m_write, m_read, m_addr} == st, "stable while stalled");
    stalled = (m_write || m_read) && m_waitrequest; st = {m_write, m_read, m_addr};
    m_readdatavalid <= 0;
    if (lat.size() > 0 && lat[0] == 0) begin
      m_readdata <= rpipe.pop_front(); void'(lat.pop_front()); m_readdatavalid <= 1;
    end
    foreach (lat[i]) lat[i]--;
    if (m_write && !m_waitrequest) begin
      for (int b = 0; b < 64; b++) if (m_byteenable[b]) mem[m_addr][8*b +: 8] = m_wdata[8*b +: 8];
      if (w_write && r_read && last_w == 0) alt++;
      last_w = 1;
    end
    if (m_read && !m_waitrequest) begin
      rpipe.push_back(mem[m_addr]); lat.push_back(2);
      if (w_write && r_read && last_w == 1) alt++;
      last_w = 0;
    end
    if (r_readdatavalid) begin
      check(exp_r.size() > 0 && r_readdata == exp_r[0], $sformatf("read %0d", nr));
      if (exp_r.size() > 0) void'(exp_r.pop_front());
      nr++;
    end
  end
  always @(negedge clk) m_waitrequest = ($urandom % 4) == 0;

  initial begin
    logic [511:0] wref [40];
    repeat (3) @(negedge clk); rst_n = 1;
    fork
      for (int k = 0; k < 40; k++) begin
        @(negedge clk);
        w_write = 1; w_addr = AW'(128 + k); w_byteenable = (k % 2) ? 64'h0000_0000_FFFF_FFFF : '1;
        w_wdata = {16{$urandom}};
        wref[k] = w_byteenable[63] ? w_wdata : {mem[128 + k][511:256], w_wdata[255:0]};
        @(posedge clk); while (w_waitrequest) @(posedge clk);
        #1 w_write = 0;
      end
      for (int k = 0; k < 40; k++) begin
        @(negedge clk);
        r_read = 1; r_addr = AW'(k); exp_r.push_back(mem[k]);
        @(posedge clk); while (r_waitrequest) @(posedge clk);
        #1 r_read = 0;
      end
    join
    repeat (10) @(negedge clk);
    for (int k = 0; k < 40; k++) check(mem[128 + k] == wref[k], $sformatf("write %0d", k));
    check(nr == 40, $sformatf("%0d reads returned", nr));
    check(alt > 10, $sformatf("grants alternated %0d times", alt));
    finish();
  end
endmodule
