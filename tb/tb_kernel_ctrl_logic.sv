// tb_kernel_ctrl_logic: self-checking test of the kernel control logic.
// Eight {addr, data} command words wait in a model CMD FIFO while the kernel
// port applies random waitrequest; a discovery command is raised in the middle.
// Checked: every command is written once, in order, with the address from bits
// 63:32 and data from bits 31:0; the discovery command is written once; address
// and data never change while a write is stalled.
`include "tb_common.svh"
module tb_kernel_ctrl_logic;
  import saf_pkg::*;
  `TB_COMMON(100000)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fifo_word_t q [$];
  fifo_word_t fifo_rdata; logic fifo_empty, fifo_rd;
  logic disc_valid = 0, disc_ready, k_write, k_waitrequest = 0;
  logic [31:0] k_addr, k_wdata;
  logic pop_q = 0;
  always @(negedge clk) if (pop_q) begin q.pop_front(); pop_q = 0; end
  assign fifo_empty = (q.size() == 0);
  assign fifo_rdata = fifo_empty ? '0 : q[0];
  kernel_ctrl_logic dut (.clk, .rst_n, .fifo_rdata, .fifo_empty, .fifo_rd,
    .disc_valid, .disc_addr(32'h0), .disc_data(32'h1), .disc_ready,
    .k_write, .k_addr, .k_wdata, .k_waitrequest);
  logic [63:0] exp_q [$];
  int ndisc = 0, ncmd = 0;
  logic stalled = 0; logic [63:0] stalled_cmd;
  always @(posedge clk) if (rst_n) begin
    if (stalled) check({k_addr, k_wdata} == stalled_cmd, "command stable under waitrequest");
    stalled = k_write && k_waitrequest; stalled_cmd = {k_addr, k_wdata};
    if (k_write && !k_waitrequest) begin
      if (disc_ready) begin
        ndisc++;
        check(k_addr == 0 && k_wdata == 1, "discovery command");
      end else begin
        check(exp_q.size() > 0 && {k_addr, k_wdata} == exp_q[0], $sformatf("command %0d %h_%h", ncmd, k_addr, k_wdata));
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        ncmd++;
      end
    end
    pop_q <= fifo_rd;
    if (disc_ready) disc_valid <= 0;
  end
  always @(negedge clk) k_waitrequest = ($urandom % 2) == 0;

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      logic [63:0] c; c = {32'(k) << 8, $urandom};
      q.push_back('{sop: k == 0, eop: k == 7, data: c}); exp_q.push_back(c);
    end
    repeat (3) @(negedge clk);
    disc_valid = 1;
    repeat (60) @(negedge clk);
    check(ncmd == 8 && exp_q.size() == 0, $sformatf("%0d commands written", ncmd));
    check(ndisc == 1, $sformatf("%0d discovery writes", ndisc));
    finish();
  end
endmodule
