// tb_tx_framer: self-checking test of the transmit framer.
// Three model sources each queue packets (1 to 5 words) of their own type.
// Every frame leaving the framer is reassembled into bytes and checked against
// the expected frame: host MAC, own MAC 0, EtherType = type, payload words in
// order; sop on the first beat, eop with empty = 2 on the last, and the frame
// length 14 + 8 * words. Also checked: the sources are served round-robin when
// all are ready, and frames survive random tx_ready back-pressure.
`include "tb_common.svh"
module tb_tx_framer;
  import saf_pkg::*;
  `TB_COMMON(200000)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam logic [47:0] MY = 48'h0C_C4_7A_00_00_01, HOST = 48'hA0_B1_C2_D3_E4_F5;
  localparam logic [15:0] TYPES [3] = '{PT_PR_CONF, PT_DISCOVERY, PT_RESULT};
  logic src_valid [3] = '{0, 0, 0}; tx_word_t src_word [3] = '{default: '0}; logic src_ready [3];
  logic [63:0] tx_data; logic tx_valid, tx_sop, tx_eop, tx_ready = 0; logic [2:0] tx_empty;
  logic [31:0] frame_cnt;
  tx_framer dut (.clk, .rst_n, .my_mac(MY), .host_mac(HOST), .src_valid, .src_word, .src_ready,
    .tx_data, .tx_valid, .tx_sop, .tx_eop, .tx_empty, .tx_ready, .frame_cnt);

  tx_word_t q [3][$];
  tx_word_t expf [$];          // words of frames in expected order of each source
  // source model: pop what was taken at the last rising edge, then present
  // the new head of each queue
  logic pop_q [3] = '{0, 0, 0};
  always @(posedge clk) for (int s = 0; s < 3; s++) pop_q[s] <= src_ready[s];
  always @(negedge clk) for (int s = 0; s < 3; s++) begin
    if (pop_q[s]) begin void'(q[s].pop_front()); pop_q[s] = 0; end
    src_valid[s] = q[s].size() > 0;
    src_word[s]  = src_valid[s] ? q[s][0] : '0;
  end
  always @(negedge clk) tx_ready = ($urandom % 4) != 0;

  // reference packets per source
  logic [63:0] refp [3][$][$];
  int order [$];
  logic [7:0] fb [$];
  bit in_frame = 0;
  int nframes = 0;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    check(tx_sop == !in_frame, "sop on first beat only");
    in_frame = 1;
    for (int k = 0; k < 8 - (tx_eop ? int'(tx_empty) : 0); k++) fb.push_back(tx_data[63-8*k -: 8]);
    if (tx_eop) begin
      logic [15:0] t; int s;
      in_frame = 0;
      check(tx_empty == 3'd2, "empty = 2");
      t = {fb[12], fb[13]};
      s = (t == TYPES[0]) ? 0 : (t == TYPES[1]) ? 1 : (t == TYPES[2]) ? 2 : -1;
      check(s >= 0, $sformatf("type %h", t));
      if (s >= 0 && refp[s].size() > 0) begin
        automatic logic [63:0] pl [$];
        logic [47:0] d, sm;
        pl = refp[s].pop_front();
        for (int k = 0; k < 6; k++) begin d[47-8*k -: 8] = fb[k]; sm[47-8*k -: 8] = fb[6+k]; end
        check(d == HOST && sm == MY, "MAC addresses");
        check(fb.size() == 14 + 8 * pl.size(), $sformatf("frame length %0d", fb.size()));
        foreach (pl[w]) begin
          logic [63:0] g;
          for (int k = 0; k < 8; k++) g[63-8*k -: 8] = fb[14 + 8*w + k];
          check(g == pl[w], $sformatf("src %0d word %0d", s, w));
        end
        order.push_back(s);
      end
      fb.delete();
      nframes++;
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int p = 0; p < 4; p++)
      for (int s = 0; s < 3; s++) begin
        automatic logic [63:0] pl [$];
        automatic int n = 1 + ($urandom % 5);
        for (int w = 0; w < n; w++) begin
          pl.push_back({$urandom, $urandom});
          q[s].push_back('{ptype: TYPES[s], last: w == n-1, data: pl[w]});
        end
        refp[s].push_back(pl);
      end
    repeat (400) @(negedge clk);
    check(nframes == 12 && frame_cnt == 12, $sformatf("%0d frames", nframes));
    for (int k = 0; k < order.size(); k++)
      check(order[k] == k % 3, $sformatf("round-robin order at %0d: %0d", k, order[k]));
    finish();
  end
endmodule
