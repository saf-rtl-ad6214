// tb_discovery_kernel: self-checking test of the discovery control kernel.
// Checked: nothing is sent before start; one start gives exactly three words
// of type 0x80EF, the last flagged, whose six 32-bit rows are the discovery
// layout worked out here from the MAC addresses and the fixed IDs
// (0x1172, 0x2494, 0x198A, 0x3852); words wait while ready is low; a start
// during a packet produces one more packet afterwards.
`include "tb_common.svh"
module tb_discovery_kernel;
  import saf_pkg::*;
  `TB_COMMON(100000)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam logic [47:0] M0 = 48'h0C_C4_7A_11_22_33, M1 = 48'h0C_C4_7A_44_55_66;
  logic start = 0, tx_valid, tx_ready = 0; tx_word_t tx_word; logic [15:0] sent_cnt;
  discovery_kernel dut (.clk, .rst_n, .start, .mac0(M0), .mac1(M1), .tx_valid, .tx_word, .tx_ready, .sent_cnt);
  tx_word_t got [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) got.push_back(tx_word);
  always @(negedge clk) tx_ready = ($urandom % 3) != 0;

  initial begin
    logic [31:0] rows [6];
    rows[0] = 32'h0000_80EF;  rows[1] = M0[47:16];
    rows[2] = {M1[47:32], M0[15:0]};  rows[3] = M1[31:0];
    rows[4] = 32'h1172_2494;  rows[5] = 32'h198A_3852;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (10) @(negedge clk);
    check(got.size() == 0, "silent before start");
    start = 1; @(negedge clk); start = 0;
    repeat (2) @(negedge clk);
    start = 1; @(negedge clk); start = 0;     // during the first packet
    repeat (40) @(negedge clk);
    check(got.size() == 6, $sformatf("%0d words", got.size()));
    for (int p = 0; p < 2; p++)
      for (int w = 0; w < 3; w++) if (got.size() > 0) begin
        automatic tx_word_t t = got.pop_front();
        check(t.ptype == PT_DISCOVERY && t.last == (w == 2) && t.data == {rows[2*w], rows[2*w+1]},
              $sformatf("packet %0d word %0d %h", p, w, t.data));
      end
    check(sent_cnt == 2, "two packets counted");
    finish();
  end
endmodule
