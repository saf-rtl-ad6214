// tb_mm_cc_bridge: self-checking test of the write-only clock-crossing bridge.
// 100 random commands are written on an 8 ns clock against the source
// waitrequest and delivered on a 13 ns clock with random destination
// waitrequest. Checked: every command arrives once, in order; the source sees
// waitrequest once the 4-deep FIFO is full while the destination is stalled.
`include "tb_common.svh"
module tb_mm_cc_bridge;
  `TB_COMMON(200000)
  logic sclk = 0, mclk = 0, rst_n = 0;
  always #4   sclk = ~sclk;
  always #6.5 mclk = ~mclk;
  logic s_write = 0, s_waitrequest, m_write, m_waitrequest = 1;
  logic [39:0] s_cmd = '0, m_cmd;
  mm_cc_bridge #(.CMD_W(40), .DEPTH_LOG2(2)) dut (.s_clk(sclk), .s_rst_n(rst_n), .s_write, .s_cmd,
    .s_waitrequest, .m_clk(mclk), .m_rst_n(rst_n), .m_write, .m_cmd, .m_waitrequest);
  logic [39:0] exp_q [$];
  int nout = 0;
  bit saw_full = 0;
  always @(posedge mclk) if (rst_n && m_write && !m_waitrequest) begin
    check(exp_q.size() > 0 && m_cmd == exp_q[0], $sformatf("cmd %0d %h", nout, m_cmd));
    if (exp_q.size() > 0) void'(exp_q.pop_front());
    nout++;
  end
  initial begin
    #400 m_waitrequest = 0;
  end
  initial begin
    repeat (3) @(negedge sclk); rst_n = 1;
    // destination stalled: fill
    for (int k = 0; k < 100; k++) begin
      @(negedge sclk);
      s_write = 1; s_cmd = {8'(k), $urandom};
      @(posedge sclk);
      while (s_waitrequest) begin saw_full = 1; @(posedge sclk); end
      exp_q.push_back(s_cmd);
    end
    @(negedge sclk) s_write = 0;
    repeat (60) @(posedge mclk);
    check(saw_full, "waitrequest while full");
    check(nout == 100 && exp_q.size() == 0, $sformatf("%0d delivered", nout));
    finish();
  end
  always @(negedge mclk) if (nout > 0) m_waitrequest = ($urandom % 3) == 0;
endmodule
