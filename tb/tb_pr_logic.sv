// tb_pr_logic: self-checking test of the PR logic.
// A model FIFO feeds 20 random 64-bit words; the PR write port applies random
// waitrequest. Checked: the 40 32-bit writes seen are the words' upper then
// lower halves in order; busy rises with the first write; an eth_done_tog
// flip gives exactly one pr_done pulse within 4 cycles and clears busy.
`include "tb_common.svh"
module tb_pr_logic;
  import saf_pkg::*;
  `TB_COMMON(100000)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fifo_word_t q [$];
  fifo_word_t fifo_rdata; logic fifo_empty, fifo_rd;
  logic pr_write, pr_waitrequest = 1, eth_done_tog = 0, pr_done, busy;
  logic [31:0] pr_wdata;
  logic pop_q = 0;
  always @(negedge clk) if (pop_q) begin q.pop_front(); pop_q = 0; end
  assign fifo_empty = (q.size() == 0);
  assign fifo_rdata = fifo_empty ? '0 : q[0];
  pr_logic dut (.clk, .rst_n, .fifo_rdata, .fifo_empty, .fifo_rd, .pr_write, .pr_wdata,
                .pr_waitrequest, .eth_done_tog, .pr_done, .busy);
  logic [31:0] exp_h [$];
  int nwr = 0, ndone = 0;
  always @(posedge clk) if (rst_n) begin
    if (pr_write && !pr_waitrequest) begin
      check(exp_h.size() > 0 && pr_wdata == exp_h[0], $sformatf("write %0d data %h", nwr, pr_wdata));
      if (exp_h.size() > 0) void'(exp_h.pop_front());
      nwr++;
    end
    pop_q <= fifo_rd;
    if (pr_done) ndone++;
  end
  always @(negedge clk) pr_waitrequest = ($urandom % 3) == 0;

  initial begin
    int lat;
    repeat (3) @(negedge clk); rst_n = 1;
    check(!busy && !pr_write, "idle after reset");
    for (int k = 0; k < 20; k++) begin
      fifo_word_t w;
      w = '{sop: k == 0, eop: k == 19, data: {$urandom, $urandom}};
      q.push_back(w); exp_h.push_back(w.data[63:32]); exp_h.push_back(w.data[31:0]);
    end
    repeat (4) @(negedge clk);
    check(busy, "busy during programming");
    while (q.size() > 0) @(negedge clk);
    check(nwr == 40 && exp_h.size() == 0, $sformatf("%0d writes", nwr));
    eth_done_tog = 1; lat = 0;
    while (ndone == 0 && lat < 10) begin @(negedge clk); lat++; end
    check(ndone == 1 && lat <= 4, $sformatf("done latency %0d", lat));
    repeat (5) @(negedge clk);
    check(ndone == 1 && !busy, "one done pulse, busy cleared");
    finish();
  end
endmodule
