// tb_result_kernel: self-checking test of the result packetiser.
// With WORDS_PER_PKT = 5, a stream of 12 words ending with the application's
// last flag must become packets of 5, 5 and 2 words of type 0x80CB; data passes
// unchanged and in order under random back-pressure.
`include "tb_common.svh"
module tb_result_kernel;
  import saf_pkg::*;
  `TB_COMMON(100000)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0, in_ready, tx_valid, tx_ready = 0; logic [63:0] in_data = '0;
  tx_word_t tx_word; logic [31:0] pkt_cnt;
  result_kernel #(.WORDS_PER_PKT(5)) dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .in_ready,
    .tx_valid, .tx_word, .tx_ready, .pkt_cnt);
  tx_word_t got [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) got.push_back(tx_word);
  always @(negedge clk) tx_ready = ($urandom % 3) != 0;
  initial begin
    logic [63:0] d [12];
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      d[k] = {$urandom, $urandom};
      @(negedge clk); in_valid = 1; in_data = d[k]; in_last = (k == 11);
      @(posedge clk); while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
    repeat (5) @(negedge clk);
    check(got.size() == 12, $sformatf("%0d words", got.size()));
    foreach (d[k]) if (got.size() > 0) begin
      automatic tx_word_t t = got.pop_front();
      check(t.ptype == PT_RESULT && t.data == d[k] && t.last == (k == 4 || k == 9 || k == 11),
            $sformatf("word %0d last %b", k, t.last));
    end
    check(pkt_cnt == 3, $sformatf("%0d packets", pkt_cnt));
    finish();
  end
endmodule
