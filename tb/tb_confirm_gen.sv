// tb_confirm_gen: self-checking test of the confirmation packet builder.
// Checked: a pr_done pulse gives one 0x80AB word and a kin_done pulse one
// 0x80DB word, each a complete packet (last set) with payload
// {16'h0, type, sequence}; simultaneous pulses are both kept, PR first; the
// sequence numbers count per type; nothing is offered when idle.
`include "tb_common.svh"
module tb_confirm_gen;
  import saf_pkg::*;
  `TB_COMMON(100000)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pr_done = 0, kin_done = 0, tx_valid, tx_ready = 0; tx_word_t tx_word;
  confirm_gen dut (.clk, .rst_n, .pr_done, .kin_done, .tx_valid, .tx_word, .tx_ready);
  tx_word_t got [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) got.push_back(tx_word);
  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    check(!tx_valid, "idle");
    pr_done = 1; kin_done = 1; @(negedge clk); pr_done = 0; kin_done = 0;
    repeat (3) @(negedge clk);
    check(tx_valid && tx_word.ptype == PT_PR_CONF, "PR confirmation first, held");
    tx_ready = 1; repeat (3) @(negedge clk); tx_ready = 0;
    kin_done = 1; @(negedge clk); kin_done = 0;
    tx_ready = 1; repeat (3) @(negedge clk);
    check(got.size() == 3, $sformatf("%0d words", got.size()));
    if (got.size() == 3) begin
      check(got[0].ptype == PT_PR_CONF  && got[0].last && got[0].data == {16'h0, PT_PR_CONF, 32'd0}, "PR conf 0");
      check(got[1].ptype == PT_KIN_CONF && got[1].last && got[1].data == {16'h0, PT_KIN_CONF, 32'd0}, "input conf 0");
      check(got[2].ptype == PT_KIN_CONF && got[2].data == {16'h0, PT_KIN_CONF, 32'd1}, "input conf 1");
    end
    check(!tx_valid, "idle at end");
    finish();
  end
endmodule
