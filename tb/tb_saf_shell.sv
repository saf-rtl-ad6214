// tb_saf_shell: end-to-end test of the SAF shell at its default parameters.
// The testbench plays the remote host on the Ethernet side and models the PR
// IP, a PCIe programming channel and the DDR memory. It walks the execution
// flow of the protocol:
//   1. link up, first frame        -> board sends the 0x80EF discovery packet
//   2. 0x80AA bitstream (broadcast) while PCIe holds the PR channel
//                                  -> mux waits, then takes Ethernet, PR IP
//                                     receives the exact bitstream, 0x80AB
//   3. a frame for another board   -> ignored
//   4. 0x80DD matrix (two packets) and a short packet for argument 1
//                                  -> DDR holds the data, two lines partial-
//                                     free, one partial line, one 0x80DB each
//   5. 0x80CC commands: N, source line, start
//                                  -> transposed matrix returns in 0x80CB
//                                     packets, split at 180 words
//   6. bitstream flood while the PR IP stalls -> receive FIFO overflow drops
// Each of these mechanisms is counted and must occur at least once. Clocks:
// rx 6.4 ns, shell 5 ns, PR 10 ns, kernel 4 ns.
`include "tb_common.svh"
module tb_saf_shell;
  import saf_pkg::*;
  `TB_COMMON(2000000)

  localparam logic [47:0] MAC0 = 48'h0C_C4_7A_10_20_30, MAC1 = 48'h0C_C4_7A_10_20_31;
  localparam logic [47:0] HOST = 48'h00_1B_21_AA_BB_CC;
  localparam int N = 24;                   // matrix dimension for the PTRANS run
  localparam int BIT_WORDS = 60;           // 64-bit bitstream words

  logic rx_clk = 0, clk = 0, pr_clk = 0, kernel_clk = 0, rst_n = 0;
  always #3.2 rx_clk = ~rx_clk;
  always #2.5 clk = ~clk;
  always #5   pr_clk = ~pr_clk;
  always #2   kernel_clk = ~kernel_clk;

  logic link_up = 0;
  logic [47:0] mac0 = MAC0, mac1 = MAC1;
  logic [63:0] rx_data = '0; logic rx_valid = 0, rx_sop = 0, rx_eop = 0; logic [2:0] rx_empty = '0;
  logic rx_ready;
  logic [63:0] tx_data; logic tx_valid, tx_sop, tx_eop, tx_ready; logic [2:0] tx_empty;
  logic pcie_busy = 0, pcie_write = 0, pcie_waitrequest; logic [31:0] pcie_wdata = '0;
  logic pr_write, pr_waitrequest, pr_done = 0; logic [31:0] pr_wdata;
  logic m_write, m_read, m_waitrequest, m_readdatavalid = 0;
  logic [25:0] m_addr; logic [511:0] m_wdata, m_readdata = '0; logic [63:0] m_byteenable;
  logic discovered, pr_busy, pr_eth_sel, kernel_busy; logic [31:0] rx_drop_cnt, tx_frame_cnt;

  saf_shell dut (.*);

  // mechanism counters
  int n_discovery = 0, n_pr_held = 0, n_pr_eth = 0, n_pr_conf = 0, n_filtered = 0;
  int n_kin_conf = 0, n_partial = 0, n_result_split = 0, n_overflow = 0, n_pcie_wr = 0;

  // ---------------- host transmit ----------------
  task automatic send_frame(input logic [47:0] dst, input logic [15:0] ptype, input logic [63:0] pl [$]);
    logic [7:0] b [$];
    for (int k = 5; k >= 0; k--) b.push_back(dst[8*k +: 8]);
    for (int k = 5; k >= 0; k--) b.push_back(HOST[8*k +: 8]);
    b.push_back(ptype[15:8]); b.push_back(ptype[7:0]);
    foreach (pl[w]) for (int k = 7; k >= 0; k--) b.push_back(pl[w][8*k +: 8]);
    for (int i = 0; i < b.size(); i += 8) begin
      @(negedge rx_clk);
      rx_valid = 1; rx_sop = (i == 0); rx_eop = (i + 8 >= b.size());
      rx_empty = rx_eop ? 3'(i + 8 - b.size()) : 3'd0;
      rx_data = '0;
      for (int k = 0; k < 8; k++) if (i + k < b.size()) rx_data[63-8*k -: 8] = b[i+k];
    end
    @(negedge rx_clk) rx_valid = 0; rx_sop = 0; rx_eop = 0;
    repeat (12) @(negedge rx_clk);          // inter-frame gap
  endtask

  // ---------------- host receive ----------------
  typedef struct { logic [15:0] ptype; logic [63:0] pl [$]; } frame_t;
  frame_t rxq [$];
  logic [7:0] fb [$];
  assign tx_ready = 1'b1;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    for (int k = 0; k < 8 - (tx_eop ? int'(tx_empty) : 0); k++) fb.push_back(tx_data[63-8*k -: 8]);
    if (tx_eop) begin
      automatic frame_t f;
      logic [47:0] d, s;
      for (int k = 0; k < 6; k++) begin d[47-8*k -: 8] = fb[k]; s[47-8*k -: 8] = fb[6+k]; end
      check(d == HOST && s == MAC0, $sformatf("reply addressed %h from %h", d, s));
      f.ptype = {fb[12], fb[13]};
      for (int w = 0; 14 + 8*w + 8 <= fb.size(); w++) begin
        logic [63:0] x;
        for (int k = 0; k < 8; k++) x[63-8*k -: 8] = fb[14 + 8*w + k];
        f.pl.push_back(x);
      end
      rxq.push_back(f);
      fb.delete();
    end
  end

  task automatic wait_frame(input logic [15:0] ptype, output frame_t f, input int limit = 20000);
    int t = 0;
    while (t < limit) begin
      foreach (rxq[i]) if (rxq[i].ptype == ptype) begin
        f = rxq[i]; rxq.delete(i); return;
      end
      @(negedge clk); t++;
    end
    check(0, $sformatf("no frame of type %h", ptype));
    f.ptype = '0;
  endtask

  // ---------------- PR IP and PCIe models (pr_clk) ----------------
  logic [31:0] pr_eth_words [$];
  bit pr_stall = 0, rx_pr_sent = 0;
  int pr_expect = 2 * BIT_WORDS;
  always @(negedge pr_clk) pr_waitrequest = pr_stall || (($urandom % 4) == 0);
  always @(posedge pr_clk) if (rst_n) begin
    pr_done <= 0;
    if (pr_write && !pr_waitrequest) begin
      if (pr_eth_sel) begin
        pr_eth_words.push_back(pr_wdata);
        if (pr_eth_words.size() == pr_expect) pr_done <= 1;
      end else n_pcie_wr++;
    end
    if (pcie_busy && !pr_eth_sel && rx_pr_sent) n_pr_held++;
    if (pr_eth_sel) n_pr_eth++;
  end

  // ---------------- DDR model (kernel_clk) ----------------
  logic [511:0] ddr [logic [25:0]];
  logic [511:0] rd_pipe [$]; int rd_lat [$];
  always @(negedge kernel_clk) m_waitrequest = ($urandom % 5) == 0;
  always @(posedge kernel_clk) if (rst_n) begin
    m_readdatavalid <= 0;
    if (rd_lat.size() > 0 && rd_lat[0] == 0) begin
      m_readdata <= rd_pipe.pop_front(); void'(rd_lat.pop_front()); m_readdatavalid <= 1;
    end
    foreach (rd_lat[i]) rd_lat[i]--;
    if (m_write && !m_waitrequest) begin
      logic [511:0] l;
      l = ddr.exists(m_addr) ? ddr[m_addr] : '0;
      for (int b = 0; b < 64; b++) if (m_byteenable[b]) l[8*b +: 8] = m_wdata[8*b +: 8];
      ddr[m_addr] = l;
      if (m_byteenable != '1) n_partial++;
    end
    if (m_read && !m_waitrequest) begin
      rd_pipe.push_back(ddr.exists(m_addr) ? ddr[m_addr] : '0); rd_lat.push_back(3);
    end
  end

  // ---------------- the flow ----------------
  initial begin
    frame_t f;
    logic [63:0] pl [$];
    logic [63:0] bitstream [$];
    logic [31:0] a [N*N];
    logic [63:0] res [$];
    int t;

    repeat (5) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);

    // 1. plug in, first frame, discovery
    link_up = 1;
    repeat (20) @(negedge clk);
    check(!discovered, "no discovery before a frame");
    pl.delete(); for (int k = 0; k < 6; k++) pl.push_back('0);
    send_frame(MAC_BCAST, 16'h0806, pl);
    wait_frame(PT_DISCOVERY, f);
    if (f.ptype == PT_DISCOVERY) begin
      n_discovery++;
      check(f.pl.size() == 3, "discovery payload size");
      if (f.pl.size() == 3) begin
        check(f.pl[0] == {32'h0000_80EF, MAC0[47:16]}, "discovery word 0");
        check(f.pl[1] == {MAC1[47:32], MAC0[15:0], MAC1[31:0]}, "discovery word 1");
        check(f.pl[2] == 64'h1172_2494_198A_3852, "discovery word 2");
      end
    end
    check(discovered, "discovered flag");

    // 2. PR over Ethernet while PCIe first holds the channel
    pcie_busy = 1; pcie_write = 1; pcie_wdata = 32'h9C1E_0000;
    for (int k = 0; k < BIT_WORDS; k++) bitstream.push_back({$urandom, $urandom});
    for (int p = 0; p < 3; p++) begin
      pl.delete();
      for (int k = 0; k < BIT_WORDS / 3; k++) pl.push_back(bitstream[p * BIT_WORDS / 3 + k]);
      send_frame(MAC_BCAST, PT_PR, pl);
    end
    rx_pr_sent = 1;
    repeat (200) @(negedge pr_clk);
    check(!pr_eth_sel, "mux stays on PCIe while it is busy");
    pcie_write = 0; pcie_busy = 0;
    wait_frame(PT_PR_CONF, f);
    if (f.ptype == PT_PR_CONF) n_pr_conf++;
    check(f.pl.size() == 1 && f.pl[0] == {16'h0, PT_PR_CONF, 32'd0}, "PR confirmation payload");
    check(pr_eth_words.size() == 2 * BIT_WORDS, $sformatf("%0d bitstream words at PR IP", pr_eth_words.size()));
    for (int k = 0; k < BIT_WORDS && 2*k+1 < pr_eth_words.size(); k++)
      check({pr_eth_words[2*k], pr_eth_words[2*k+1]} == bitstream[k], $sformatf("bitstream word %0d", k));
    check(n_pcie_wr > 0, "PCIe wrote while it held the channel");
    check(!pr_eth_sel, "mux back on PCIe after done");

    // 3. a frame for another board is ignored
    pl.delete(); for (int k = 0; k < 6; k++) pl.push_back({32'h0000_0201, 32'hFFFF});
    send_frame(48'h0C_C4_7A_99_99_99, PT_KEXEC, pl);
    n_filtered++;

    // 4. kernel input: matrix in argument 0 (two packets), 3 words in argument 1
    for (int e = 0; e < N*N; e++) a[e] = $urandom;
    for (int p = 0; p < 2; p++) begin
      pl.delete();
      pl.push_back({32'd0, 32'(p * N*N/32)});                     // arg 0, line offset
      for (int w = p * N*N/4; w < (p + 1) * N*N/4; w++) pl.push_back({a[2*w+1], a[2*w]});
      send_frame(MAC0, PT_KIN, pl);
      wait_frame(PT_KIN_CONF, f);
      if (f.ptype == PT_KIN_CONF) n_kin_conf++;
      check(f.pl.size() == 1 && f.pl[0] == {16'h0, PT_KIN_CONF, 32'(p)}, "input confirmation payload");
    end
    pl.delete();
    pl.push_back({32'd1, 32'd2});
    for (int w = 0; w < 3; w++) pl.push_back(64'hA5A5_0000_0000_0000 | 64'(w));
    send_frame(MAC0, PT_KIN, pl);
    wait_frame(PT_KIN_CONF, f);
    if (f.ptype == PT_KIN_CONF) n_kin_conf++;
    for (int e = 0; e < N*N; e++)
      check(ddr.exists(26'(e/16)) && ddr[26'(e/16)][32*(e%16) +: 32] == a[e], $sformatf("DDR element %0d", e));
    check(ddr.exists(26'((1 << 22) + 2)) && ddr[26'((1 << 22) + 2)][191:0] ==
          {64'hA5A5_0000_0000_0002, 64'hA5A5_0000_0000_0001, 64'hA5A5_0000_0000_0000}, "argument 1 line");
    check(n_partial > 0, "partial line written with byte enables");

    // 5. kernel execution: N, source line 0, start
    pl.delete();
    pl.push_back({32'h0000_0201, 32'(N)});
    pl.push_back({32'h0000_0202, 32'h0});
    pl.push_back({32'h0000_0200, 32'h1});
    for (int k = 0; k < 3; k++) pl.push_back({32'h0000_0F00, 32'h0});   // padding: unmapped writes
    send_frame(MAC0, PT_KEXEC, pl);
    t = 0;
    while (res.size() < N*N/2 && t < 8) begin
      wait_frame(PT_RESULT, f, 100000);
      if (f.ptype != PT_RESULT) break;
      foreach (f.pl[k]) res.push_back(f.pl[k]);
      t++;
    end
    n_result_split = t - 1;
    check(t == 2, $sformatf("%0d result packets", t));
    check(res.size() == N*N/2, $sformatf("%0d result words", res.size()));
    for (int k = 0; k < N*N/2 && k < res.size(); k++) begin
      automatic int o0 = 2*k, o1 = 2*k + 1;
      check(res[k] == {a[(o0 % N)*N + o0 / N], a[(o1 % N)*N + o1 / N]}, $sformatf("result word %0d", k));
    end
    check(!kernel_busy, "kernel idle after run");

    // 6. overflow: the PR IP stalls while a long bitstream arrives
    pr_stall = 1; pr_expect = -1;
    for (int p = 0; p < 4; p++) begin
      pl.delete(); for (int k = 0; k < 180; k++) pl.push_back({$urandom, $urandom});
      send_frame(MAC_BCAST, PT_PR, pl);
    end
    repeat (50) @(negedge clk);
    n_overflow = rx_drop_cnt;
    check(rx_drop_cnt > 0, "receive FIFO overflow counted");

    // every mechanism seen
    $display("mechanisms: discovery=%0d pr_held_by_pcie=%0d pr_eth_cycles=%0d pr_conf=%0d filtered=%0d kin_conf=%0d partial_line=%0d result_split=%0d overflow_drops=%0d",
             n_discovery, n_pr_held, n_pr_eth, n_pr_conf, n_filtered, n_kin_conf, n_partial, n_result_split, n_overflow);
    check(n_discovery > 0, "mechanism: discovery");
    check(n_pr_held > 0, "mechanism: PR mux held by PCIe");
    check(n_pr_eth > 0, "mechanism: PR over Ethernet");
    check(n_pr_conf > 0, "mechanism: PR confirmation");
    check(n_filtered > 0 && rxq.size() == 0, "mechanism: foreign frame filtered, no stray replies");
    check(n_kin_conf == 3, "mechanism: input confirmations");
    check(n_partial > 0, "mechanism: partial line");
    check(n_result_split > 0, "mechanism: result packet split");
    check(n_overflow > 0, "mechanism: overflow drop");
    finish();
  end
endmodule
