// tb_packet_analyzer: self-checking test of the receive-side parser.
// Frames are built byte by byte (dst, src, EtherType, payload) and sent as
// 64-bit beats, first byte in the top bits. Checked: payload words of 0x80AA,
// 0x80CC and 0x80DD frames land in the matching FIFO port with correct data
// and sop/eop flags; frames for another MAC and frames of other types store
// nothing; broadcast frames are accepted; host_mac is learned; pkt_toggle flips
// once per accepted frame; a full FIFO drops words and counts them.
`include "tb_common.svh"
module tb_packet_analyzer;
  import saf_pkg::*;
  `TB_COMMON(100000)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [47:0] MY = 48'h0011_2233_4455, HOST = 48'hA0B1_C2D3_E4F5;
  logic [63:0] rx_data = '0; logic rx_valid = 0, rx_sop = 0, rx_eop = 0; logic [2:0] rx_empty = '0;
  logic rx_ready, pr_wr, cmd_wr, mem_wr, pkt_toggle;
  logic pr_full = 0, cmd_full = 0, mem_full = 0;
  fifo_word_t wdata; logic [47:0] host_mac; logic [31:0] drop_cnt;

  packet_analyzer dut (.clk, .rst_n, .my_mac(MY), .rx_data, .rx_valid, .rx_sop, .rx_eop, .rx_empty,
    .rx_ready, .wdata, .pr_wr, .cmd_wr, .mem_wr, .pr_full, .cmd_full, .mem_full,
    .host_mac, .pkt_toggle, .drop_cnt);

  // captured pushes: {port, word}
  typedef struct { int port; fifo_word_t w; } push_t;
  push_t got [$];
  always @(posedge clk) if (rst_n) begin
    if (pr_wr)  got.push_back('{0, wdata});
    if (cmd_wr) got.push_back('{1, wdata});
    if (mem_wr) got.push_back('{2, wdata});
  end

  task automatic send(input logic [47:0] dst, input logic [15:0] ptype, input logic [63:0] pl [$]);
    logic [7:0] b [$];
    for (int k = 5; k >= 0; k--) b.push_back(dst[8*k +: 8]);
    for (int k = 5; k >= 0; k--) b.push_back(HOST[8*k +: 8]);
    b.push_back(ptype[15:8]); b.push_back(ptype[7:0]);
    foreach (pl[w]) for (int k = 7; k >= 0; k--) b.push_back(pl[w][8*k +: 8]);
    for (int i = 0; i < b.size(); i += 8) begin
      @(negedge clk);
      // an idle cycle now and then
      if (i > 0 && ($urandom % 4) == 0) begin rx_valid = 0; @(negedge clk); end
      rx_valid = 1; rx_sop = (i == 0); rx_eop = (i + 8 >= b.size());
      rx_empty = rx_eop ? 3'(i + 8 - b.size()) : 3'd0;
      rx_data = '0;
      for (int k = 0; k < 8; k++) if (i + k < b.size()) rx_data[63-8*k -: 8] = b[i+k];
    end
    @(negedge clk) rx_valid = 0; rx_sop = 0; rx_eop = 0;
    repeat (3) @(negedge clk);
  endtask

  task automatic expect_words(input int port, input logic [63:0] pl [$]);
    check(got.size() == pl.size(), $sformatf("port %0d got %0d words exp %0d", port, got.size(), pl.size()));
    foreach (pl[k]) if (got.size() > 0) begin
      automatic push_t p = got.pop_front();
      check(p.port == port && p.w.data == pl[k] && p.w.sop == (k == 0) && p.w.eop == (k == pl.size()-1),
            $sformatf("word %0d: port %0d data %h sop %b eop %b", k, p.port, p.w.data, p.w.sop, p.w.eop));
    end
    got.delete();
  endtask

  initial begin
    logic [63:0] pl [$];
    logic t0;
    repeat (3) @(negedge clk); rst_n = 1;
    check(rx_ready, "rx_ready high");
    t0 = pkt_toggle;
    // PR bitstream, 7 words, unicast
    pl.delete(); for (int k = 0; k < 7; k++) pl.push_back({$urandom, $urandom});
    send(MY, PT_PR, pl); expect_words(0, pl);
    check(pkt_toggle != t0, "toggle flips on accepted frame");
    check(host_mac == HOST, "host MAC learned");
    // kernel command, broadcast
    pl.delete(); for (int k = 0; k < 6; k++) pl.push_back({$urandom, $urandom});
    send(MAC_BCAST, PT_KEXEC, pl); expect_words(1, pl);
    // kernel input
    pl.delete(); for (int k = 0; k < 12; k++) pl.push_back({$urandom, $urandom});
    send(MY, PT_KIN, pl); expect_words(2, pl);
    // other MAC: dropped, toggle unchanged
    t0 = pkt_toggle;
    pl.delete(); for (int k = 0; k < 6; k++) pl.push_back({$urandom, $urandom});
    send(48'h0011_2233_4466, PT_PR, pl);
    check(got.size() == 0 && pkt_toggle == t0, "frame for other MAC ignored");
    // other type: accepted (toggle) but stored nowhere
    send(MY, 16'h0800, pl);
    check(got.size() == 0 && pkt_toggle != t0, "unknown type stored nowhere but seen");
    // overflow: MEM FIFO full drops and counts
    mem_full = 1;
    send(MY, PT_KIN, pl);
    check(got.size() == 0, "nothing pushed into full FIFO");
    check(drop_cnt == 6, $sformatf("drop count %0d", drop_cnt));
    mem_full = 0;
    finish();
  end
endmodule
