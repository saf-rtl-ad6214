// tb_saf_cluster: four SAF boards behind one switch, driven by one remote
// host. Each board is a full-size saf_shell, with the default parameters. It
// has its own PR IP and DDR models and its own kernel clock. The switch model
// floods every host frame to every board whose link is up, so each board's
// MAC filter decides what it takes. Each board's transmit stream is captured
// separately, as a switch port would.
// The run follows the scaling scenarios the framework is meant for:
//   1. boards 0-2 are plugged in and one broadcast frame triggers all three
//      discovery packets; the host registers the MACs they report
//   2. one broadcast 0x80AA stream reconfigures all three boards at once;
//      each PR IP gets the exact bitstream and each board confirms
//   3. board 3 is hot-plugged later: the next broadcast frame discovers it
//      (only it), and a unicast PR stream configures it alone
//   4. a 2N x 2N matrix is transposed across the four boards: board (p,q)
//      receives block A[q][p] by unicast 0x80DD, and one broadcast 0x80CC
//      packet starts all four kernels together. The host assembles A^T from
//      the four 0x80CB result streams.
// The testbench counts the mechanisms: discoveries, broadcast PR
// confirmations, hot-plug discovery, cycles with all four kernels running,
// and result packets split at the size limit. Each must occur. The block
// layout of the transpose is the host's. The kernels know nothing of it.
`include "tb_common.svh"
module tb_saf_cluster;
  import saf_pkg::*;
  `TB_COMMON(4000000)

  localparam int NB = 4;
  localparam int N = 24;                   // block size; the whole matrix is 2N x 2N
  localparam int BIT_WORDS = 90;           // 64-bit bitstream words
  localparam logic [47:0] HOST = 48'h00_1B_21_AA_BB_CC;

  function automatic logic [47:0] board_mac(input int b, input int port);
    return 48'h0C_C4_7A_10_00_00 | 48'(b << 8) | 48'(port);
  endfunction

  logic rx_clk = 0, clk = 0, pr_clk = 0, rst_n = 0;
  always #3.2 rx_clk = ~rx_clk;
  always #2.5 clk = ~clk;
  always #5   pr_clk = ~pr_clk;

  // host -> switch -> boards
  logic [63:0] h_data = '0; logic h_valid = 0, h_sop = 0, h_eop = 0; logic [2:0] h_empty = '0;
  logic link_up [NB];

  // per-board observations, filled by the board models
  typedef struct { logic [47:0] src; logic [15:0] ptype; logic [63:0] pl [$]; } frame_t;
  frame_t      rxq     [NB][$];
  logic [31:0] pr_words [NB][$];
  int          pr_expect [NB];
  logic        pr_eth_sel_b [NB], kernel_busy_b [NB], discovered_b [NB];
  logic [31:0] drop_b [NB];

  // mechanism counters
  int n_discovery = 0, n_bcast_conf = 0, n_hotplug = 0, n_all_busy = 0, n_split = 0;

  for (genvar b = 0; b < NB; b++) begin : board
    logic kernel_clk = 0;
    always #(2.0 + 0.25 * b) kernel_clk = ~kernel_clk;

    logic [47:0] mac0, mac1;
    assign mac0 = board_mac(b, 0);
    assign mac1 = board_mac(b, 1);
    logic rx_ready;
    logic [63:0] tx_data; logic tx_valid, tx_sop, tx_eop; logic [2:0] tx_empty;
    logic pcie_waitrequest;
    logic pr_write, pr_waitrequest, pr_done = 0; logic [31:0] pr_wdata;
    logic m_write, m_read, m_waitrequest, m_readdatavalid = 0;
    logic [25:0] m_addr; logic [511:0] m_wdata, m_readdata = '0; logic [63:0] m_byteenable;
    logic pr_busy; logic [31:0] tx_frame_cnt;

    saf_shell u_shell (
      .rx_clk, .clk, .pr_clk, .kernel_clk, .rst_n,
      .mac0, .mac1, .link_up(link_up[b]),
      .rx_data(h_data), .rx_valid(h_valid && link_up[b]), .rx_sop(h_sop), .rx_eop(h_eop),
      .rx_empty(h_empty), .rx_ready,
      .tx_data, .tx_valid, .tx_sop, .tx_eop, .tx_empty, .tx_ready(1'b1),
      .pcie_busy(1'b0), .pcie_write(1'b0), .pcie_wdata(32'h0), .pcie_waitrequest,
      .pr_write, .pr_wdata, .pr_waitrequest, .pr_done,
      .m_write, .m_read, .m_addr, .m_wdata, .m_byteenable, .m_waitrequest,
      .m_readdata, .m_readdatavalid,
      .discovered(discovered_b[b]), .pr_busy, .pr_eth_sel(pr_eth_sel_b[b]),
      .kernel_busy(kernel_busy_b[b]), .rx_drop_cnt(drop_b[b]), .tx_frame_cnt
    );

    // switch port towards the host: reassemble this board's frames
    logic [7:0] fb [$];
    always @(posedge clk) if (rst_n && tx_valid) begin
      for (int k = 0; k < 8 - (tx_eop ? int'(tx_empty) : 0); k++) fb.push_back(tx_data[63-8*k -: 8]);
      if (tx_eop) begin
        automatic frame_t f;
        logic [47:0] d;
        for (int k = 0; k < 6; k++) begin d[47-8*k -: 8] = fb[k]; f.src[47-8*k -: 8] = fb[6+k]; end
        check(d == HOST, $sformatf("board %0d reply addressed to %h", b, d));
        f.ptype = {fb[12], fb[13]};
        for (int w = 0; 14 + 8*w + 8 <= fb.size(); w++) begin
          logic [63:0] x;
          for (int k = 0; k < 8; k++) x[63-8*k -: 8] = fb[14 + 8*w + k];
          f.pl.push_back(x);
        end
        rxq[b].push_back(f);
        fb.delete();
      end
    end

    // PR IP model: random stalls, done after the expected number of words
    always @(negedge pr_clk) pr_waitrequest = ($urandom % 4) == 0;
    always @(posedge pr_clk) if (rst_n) begin
      pr_done <= 0;
      if (pr_write && !pr_waitrequest && pr_eth_sel_b[b]) begin
        pr_words[b].push_back(pr_wdata);
        if (pr_words[b].size() == pr_expect[b]) pr_done <= 1;
      end
    end

    // DDR model: random stalls, read latency 3
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
        for (int k = 0; k < 64; k++) if (m_byteenable[k]) l[8*k +: 8] = m_wdata[8*k +: 8];
        ddr[m_addr] = l;
      end
      if (m_read && !m_waitrequest) begin
        rd_pipe.push_back(ddr.exists(m_addr) ? ddr[m_addr] : '0); rd_lat.push_back(3);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    automatic bit all = 1;
    for (int b = 0; b < NB; b++) all &= kernel_busy_b[b];
    if (all) n_all_busy++;
  end

  // ---------------- host transmit (through the flooding switch) ----------------
  task automatic send_frame(input logic [47:0] dst, input logic [15:0] ptype, input logic [63:0] pl [$]);
    logic [7:0] by [$];
    for (int k = 5; k >= 0; k--) by.push_back(dst[8*k +: 8]);
    for (int k = 5; k >= 0; k--) by.push_back(HOST[8*k +: 8]);
    by.push_back(ptype[15:8]); by.push_back(ptype[7:0]);
    foreach (pl[w]) for (int k = 7; k >= 0; k--) by.push_back(pl[w][8*k +: 8]);
    for (int i = 0; i < by.size(); i += 8) begin
      @(negedge rx_clk);
      h_valid = 1; h_sop = (i == 0); h_eop = (i + 8 >= by.size());
      h_empty = h_eop ? 3'(i + 8 - by.size()) : 3'd0;
      h_data = '0;
      for (int k = 0; k < 8; k++) if (i + k < by.size()) h_data[63-8*k -: 8] = by[i+k];
    end
    @(negedge rx_clk) h_valid = 0; h_sop = 0; h_eop = 0;
    repeat (12) @(negedge rx_clk);
  endtask

  task automatic wait_frame(input int b, input logic [15:0] ptype, output frame_t f, input int limit = 40000);
    int t = 0;
    while (t < limit) begin
      foreach (rxq[b][i]) if (rxq[b][i].ptype == ptype) begin
        f = rxq[b][i]; rxq[b].delete(i); return;
      end
      @(negedge clk); t++;
    end
    check(0, $sformatf("board %0d: no frame of type %h", b, ptype));
    f.ptype = '0;
  endtask

  task automatic expect_discovery(input int b);
    frame_t f;
    wait_frame(b, PT_DISCOVERY, f);
    if (f.ptype != PT_DISCOVERY) return;
    n_discovery++;
    check(f.src == board_mac(b, 0), $sformatf("board %0d discovery source MAC", b));
    check(f.pl.size() == 3 &&
          f.pl[0] == {32'h0000_80EF, board_mac(b, 0)[47:16]} &&
          f.pl[1] == {board_mac(b, 1)[47:32], board_mac(b, 0)[15:0], board_mac(b, 1)[31:0]} &&
          f.pl[2] == 64'h1172_2494_198A_3852, $sformatf("board %0d discovery payload", b));
  endtask

  task automatic send_hello();
    logic [63:0] pl [$];
    for (int k = 0; k < 6; k++) pl.push_back('0);
    send_frame(MAC_BCAST, 16'h0806, pl);
  endtask

  task automatic send_bitstream(input logic [47:0] dst, input logic [63:0] bs [$]);
    logic [63:0] pl [$];
    for (int p = 0; p < BIT_WORDS / 45; p++) begin
      pl.delete();
      for (int k = 0; k < 45; k++) pl.push_back(bs[45*p + k]);
      send_frame(dst, PT_PR, pl);
    end
  endtask

  task automatic check_bitstream(input int b, input logic [63:0] bs [$]);
    bit ok = pr_words[b].size() == 2 * BIT_WORDS;
    for (int k = 0; k < BIT_WORDS && ok; k++) ok = {pr_words[b][2*k], pr_words[b][2*k+1]} == bs[k];
    check(ok, $sformatf("board %0d PR IP received the bitstream (%0d words)", b, pr_words[b].size()));
  endtask

  // ---------------- the flow ----------------
  initial begin
    frame_t f;
    logic [63:0] pl [$];
    logic [63:0] bs0 [$], bs1 [$];
    logic [31:0] a [2*N][2*N];
    logic [63:0] res [$];
    int t;

    for (int b = 0; b < NB; b++) begin link_up[b] = 0; pr_expect[b] = 2 * BIT_WORDS; end
    repeat (5) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);

    // 1. three boards plugged in, one broadcast frame discovers all three
    for (int b = 0; b < 3; b++) link_up[b] = 1;
    repeat (20) @(negedge clk);
    send_hello();
    for (int b = 0; b < 3; b++) expect_discovery(b);
    check(!discovered_b[3], "unplugged board stays silent");

    // 2. one broadcast bitstream configures the three boards together
    for (int k = 0; k < BIT_WORDS; k++) bs0.push_back({$urandom, $urandom});
    send_bitstream(MAC_BCAST, bs0);
    for (int b = 0; b < 3; b++) begin
      wait_frame(b, PT_PR_CONF, f);
      if (f.ptype == PT_PR_CONF) n_bcast_conf++;
      check(f.pl.size() == 1 && f.pl[0] == {16'h0, PT_PR_CONF, 32'd0}, $sformatf("board %0d PR confirmation", b));
      check_bitstream(b, bs0);
    end
    check(pr_words[3].size() == 0, "unplugged board received no bitstream");

    // 3. hot plug of board 3: discovered by the next frame, configured alone
    link_up[3] = 1;
    repeat (20) @(negedge clk);
    send_hello();
    expect_discovery(3);
    if (discovered_b[3]) n_hotplug++;
    repeat (200) @(negedge clk);
    for (int b = 0; b < 3; b++) check(rxq[b].size() == 0, $sformatf("board %0d did not announce again", b));
    for (int k = 0; k < BIT_WORDS; k++) bs1.push_back({$urandom, $urandom});
    send_bitstream(board_mac(3, 0), bs1);
    wait_frame(3, PT_PR_CONF, f);
    check(f.pl.size() == 1 && f.pl[0] == {16'h0, PT_PR_CONF, 32'd0}, "board 3 PR confirmation");
    check_bitstream(3, bs1);
    for (int b = 0; b < 3; b++) check(pr_words[b].size() == 2 * BIT_WORDS, $sformatf("board %0d not reprogrammed", b));

    // 4. distributed transpose: board b = 2p+q holds block A[q][p]
    for (int r = 0; r < 2*N; r++) for (int c = 0; c < 2*N; c++) a[r][c] = $urandom;
    for (int b = 0; b < NB; b++) begin
      automatic int p = b / 2, q = b % 2;
      for (int h = 0; h < 2; h++) begin
        pl.delete();
        pl.push_back({32'd0, 32'(h * N*N/32)});
        for (int w = h * N*N/4; w < (h + 1) * N*N/4; w++) begin
          automatic int e0 = 2*w, e1 = 2*w + 1;
          pl.push_back({a[q*N + e1/N][p*N + e1%N], a[q*N + e0/N][p*N + e0%N]});
        end
        send_frame(board_mac(b, 0), PT_KIN, pl);
        wait_frame(b, PT_KIN_CONF, f);
        check(f.pl.size() == 1 && f.pl[0] == {16'h0, PT_KIN_CONF, 32'(h)}, $sformatf("board %0d input confirmation %0d", b, h));
      end
    end
    pl.delete();
    pl.push_back({32'h0000_0201, 32'(N)});
    pl.push_back({32'h0000_0202, 32'h0});
    pl.push_back({32'h0000_0200, 32'h1});
    for (int k = 0; k < 3; k++) pl.push_back({32'h0000_0F00, 32'h0});
    send_frame(MAC_BCAST, PT_KEXEC, pl);
    for (int b = 0; b < NB; b++) begin
      automatic int p = b / 2, q = b % 2;
      bit ok = 1;
      res.delete(); t = 0;
      while (res.size() < N*N/2 && t < 8) begin
        wait_frame(b, PT_RESULT, f, 200000);
        if (f.ptype != PT_RESULT) break;
        foreach (f.pl[k]) res.push_back(f.pl[k]);
        t++;
      end
      if (t > 1) n_split++;
      check(res.size() == N*N/2, $sformatf("board %0d: %0d result words", b, res.size()));
      // result word k of board (p,q) holds elements 2k, 2k+1 of block (p,q) of A^T
      for (int k = 0; k < N*N/2 && k < res.size(); k++) begin
        automatic int o0 = 2*k, o1 = 2*k + 1;
        automatic logic [31:0] t0 = a[q*N + o0%N][p*N + o0/N], t1 = a[q*N + o1%N][p*N + o1/N];
        if (res[k] != {t0, t1}) ok = 0;
      end
      check(ok, $sformatf("board %0d returned block (%0d,%0d) of the transpose", b, p, q));
    end
    for (int b = 0; b < NB; b++) begin
      check(!kernel_busy_b[b], $sformatf("board %0d kernel idle", b));
      check(drop_b[b] == 0, $sformatf("board %0d dropped no words", b));
    end

    $display("mechanisms: discovery=%0d broadcast_pr_conf=%0d hotplug=%0d all_kernels_busy_cycles=%0d split_results=%0d",
             n_discovery, n_bcast_conf, n_hotplug, n_all_busy, n_split);
    check(n_discovery == NB, "mechanism: one discovery per board");
    check(n_bcast_conf == 3, "mechanism: broadcast reconfiguration");
    check(n_hotplug == 1, "mechanism: hot plug");
    check(n_all_busy > 0, "mechanism: all kernels running together");
    check(n_split == NB, "mechanism: result packets split");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
