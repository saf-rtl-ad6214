// saf_shell: top level of the SAF standalone FPGA shell together with the
// role's two control kernels and the PTRANS application kernel.
// The shell lets a remote host drive the FPGA over raw Ethernet without a
// local CPU. Received frames are sorted by packet type into three FIFOs:
// bitstream (0x80AA) to the PR path, kernel commands (0x80CC) to the kernel
// interface, kernel input data (0x80DD) to DDR. After the link comes up, the
// first received frame makes the auto-discovery FSM start the discovery
// kernel, which answers with a 0x80EF packet. The board answers a finished
// reconfiguration with 0x80AB, stored input data with 0x80DB, and streams
// kernel output back as 0x80CB packets. This structure follows the SAF shell;
// the word formats, address map and arbitration are this design's own.
// Clock domains (the split is this design's own):
//   rx_clk      Ethernet receive stream, packet analyzer, FIFO write side
//   clk         shell logic (PR, kernel-control and DDR logic, auto-discovery,
//               confirmations) and the Ethernet transmit stream
//   pr_clk      PR IP, its PCIe/Ethernet multiplexer
//   kernel_clk  kernel interface, kernels, DDR memory port
// Crossings: dual-clock FIFOs after the analyzer and from the kernels to the
// transmitter, write-only clock-crossing bridges on the PR, kernel and DDR
// paths, two-flop synchronisers for the single-bit events. host_mac is
// captured on rx_clk and read on clk without a synchroniser: it is written
// when a frame arrives and read only when a reply is framed, many cycles later.
// rst_n is one asynchronous active-low reset for all domains; release it with
// every clock running.
// Outside this module: Ethernet MAC/PHY, PR IP, PCIe PR channel, DDR memory.
module saf_shell
  import saf_pkg::*;
#(
  parameter int FIFO_DEPTH_LOG2 = 9,
  parameter int DDR_AW          = 26,
  parameter int WORDS_PER_PKT   = 180
) (
  input  logic                rx_clk,
  input  logic                clk,
  input  logic                pr_clk,
  input  logic                kernel_clk,
  input  logic                rst_n,
  // board identity and link
  input  logic [47:0]         mac0,
  input  logic [47:0]         mac1,
  input  logic                link_up,
  // Ethernet MAC receive (rx_clk)
  input  logic [63:0]         rx_data,
  input  logic                rx_valid,
  input  logic                rx_sop,
  input  logic                rx_eop,
  input  logic [2:0]          rx_empty,
  output logic                rx_ready,
  // Ethernet MAC transmit (clk)
  output logic [63:0]         tx_data,
  output logic                tx_valid,
  output logic                tx_sop,
  output logic                tx_eop,
  output logic [2:0]          tx_empty,
  input  logic                tx_ready,
  // PCIe bitstream channel (pr_clk)
  input  logic                pcie_busy,
  input  logic                pcie_write,
  input  logic [31:0]         pcie_wdata,
  output logic                pcie_waitrequest,
  // PR IP (pr_clk)
  output logic                pr_write,
  output logic [31:0]         pr_wdata,
  input  logic                pr_waitrequest,
  input  logic                pr_done,
  // DDR memory port (kernel_clk)
  output logic                m_write,
  output logic                m_read,
  output logic [DDR_AW-1:0]   m_addr,
  output logic [511:0]        m_wdata,
  output logic [63:0]         m_byteenable,
  input  logic                m_waitrequest,
  input  logic [511:0]        m_readdata,
  input  logic                m_readdatavalid,
  // status
  output logic                discovered,
  output logic                pr_busy,
  output logic                pr_eth_sel,
  output logic                kernel_busy,
  output logic [31:0]         rx_drop_cnt,
  output logic [31:0]         tx_frame_cnt
);
  // ---------------- receive: analyzer and the three FIFOs ----------------
  fifo_word_t an_wdata;
  logic       pr_wr, cmd_wr, mem_wr, pr_full, cmd_full, mem_full;
  logic [47:0] host_mac;
  logic        pkt_toggle;

  packet_analyzer u_analyzer (
    .clk(rx_clk), .rst_n, .my_mac(mac0),
    .rx_data, .rx_valid, .rx_sop, .rx_eop, .rx_empty, .rx_ready,
    .wdata(an_wdata), .pr_wr, .cmd_wr, .mem_wr, .pr_full, .cmd_full, .mem_full,
    .host_mac, .pkt_toggle, .drop_cnt(rx_drop_cnt)
  );

  fifo_word_t pr_q, cmd_q, mem_q;
  logic       pr_empty, cmd_empty, mem_empty, pr_rd, cmd_rd, mem_rd;

  async_fifo #(.WIDTH(FIFO_WORD_W), .DEPTH_LOG2(FIFO_DEPTH_LOG2)) u_pr_fifo (
    .wr_clk(rx_clk), .wr_rst_n(rst_n), .wr_en(pr_wr), .wdata(an_wdata), .full(pr_full),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(pr_rd), .rdata(pr_q), .empty(pr_empty));
  async_fifo #(.WIDTH(FIFO_WORD_W), .DEPTH_LOG2(FIFO_DEPTH_LOG2)) u_cmd_fifo (
    .wr_clk(rx_clk), .wr_rst_n(rst_n), .wr_en(cmd_wr), .wdata(an_wdata), .full(cmd_full),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(cmd_rd), .rdata(cmd_q), .empty(cmd_empty));
  async_fifo #(.WIDTH(FIFO_WORD_W), .DEPTH_LOG2(FIFO_DEPTH_LOG2)) u_mem_fifo (
    .wr_clk(rx_clk), .wr_rst_n(rst_n), .wr_en(mem_wr), .wdata(an_wdata), .full(mem_full),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(mem_rd), .rdata(mem_q), .empty(mem_empty));

  // ---------------- PR path ----------------
  logic        prl_write, prl_wait, prb_write, prb_wait, eth_done_tog, prl_done;
  logic [31:0] prl_wdata, prb_wdata;

  pr_logic #(.PR_W(32)) u_pr_logic (
    .clk, .rst_n, .fifo_rdata(pr_q), .fifo_empty(pr_empty), .fifo_rd(pr_rd),
    .pr_write(prl_write), .pr_wdata(prl_wdata), .pr_waitrequest(prl_wait),
    .eth_done_tog, .pr_done(prl_done), .busy(pr_busy));

  mm_cc_bridge #(.CMD_W(32), .DEPTH_LOG2(4)) u_pr_bridge (
    .s_clk(clk), .s_rst_n(rst_n), .s_write(prl_write), .s_cmd(prl_wdata), .s_waitrequest(prl_wait),
    .m_clk(pr_clk), .m_rst_n(rst_n), .m_write(prb_write), .m_cmd(prb_wdata), .m_waitrequest(prb_wait));

  pr_ip_interface #(.PR_W(32)) u_pr_if (
    .clk(pr_clk), .rst_n,
    .pcie_busy, .pcie_write, .pcie_wdata, .pcie_waitrequest,
    .eth_write(prb_write), .eth_wdata(prb_wdata), .eth_waitrequest(prb_wait),
    .pr_write, .pr_wdata, .pr_waitrequest, .pr_done,
    .eth_sel(pr_eth_sel), .eth_done_tog);

  // ---------------- kernel command path ----------------
  logic        disc_valid, disc_ready;
  logic [31:0] disc_addr, disc_data;
  logic        kc_write, kc_wait, kb_write, kb_wait;
  logic [31:0] kc_addr, kc_wdata;
  logic [63:0] kb_cmd;

  auto_discovery_fsm u_autodisc (
    .clk, .rst_n, .link_up, .pkt_toggle,
    .cmd_valid(disc_valid), .cmd_addr(disc_addr), .cmd_data(disc_data), .cmd_ready(disc_ready),
    .launched(discovered));

  kernel_ctrl_logic u_kctrl (
    .clk, .rst_n, .fifo_rdata(cmd_q), .fifo_empty(cmd_empty), .fifo_rd(cmd_rd),
    .disc_valid, .disc_addr, .disc_data, .disc_ready,
    .k_write(kc_write), .k_addr(kc_addr), .k_wdata(kc_wdata), .k_waitrequest(kc_wait));

  mm_cc_bridge #(.CMD_W(64), .DEPTH_LOG2(4)) u_kcmd_bridge (
    .s_clk(clk), .s_rst_n(rst_n), .s_write(kc_write), .s_cmd({kc_addr, kc_wdata}), .s_waitrequest(kc_wait),
    .m_clk(kernel_clk), .m_rst_n(rst_n), .m_write(kb_write), .m_cmd(kb_cmd), .m_waitrequest(kb_wait));

  localparam int NK = 3;
  logic [NK-1:0] kstart;
  logic [31:0]   kargs [NK][8];

  kernel_interface #(.NK(NK), .NREG(8)) u_kif (
    .clk(kernel_clk), .rst_n, .write(kb_write), .addr(kb_cmd[63:32]), .wdata(kb_cmd[31:0]),
    .waitrequest(kb_wait), .start(kstart), .args(kargs));

  // ---------------- DDR path ----------------
  localparam int DCMD_W = DDR_AW + 512 + 64;
  logic               dl_write, dl_wait, kin_done, db_write, db_wait;
  logic [DDR_AW-1:0]  dl_addr;
  logic [511:0]       dl_wdata;
  logic [63:0]        dl_be;
  logic [DCMD_W-1:0]  db_cmd;

  ddr_logic #(.DDR_W(512), .IN_W(64), .DDR_AW(DDR_AW)) u_ddr_logic (
    .clk, .rst_n, .fifo_rdata(mem_q), .fifo_empty(mem_empty), .fifo_rd(mem_rd),
    .d_write(dl_write), .d_addr(dl_addr), .d_wdata(dl_wdata), .d_byteenable(dl_be),
    .d_waitrequest(dl_wait), .kin_done);

  mm_cc_bridge #(.CMD_W(DCMD_W), .DEPTH_LOG2(4)) u_ddr_bridge (
    .s_clk(clk), .s_rst_n(rst_n), .s_write(dl_write), .s_cmd({dl_addr, dl_be, dl_wdata}), .s_waitrequest(dl_wait),
    .m_clk(kernel_clk), .m_rst_n(rst_n), .m_write(db_write), .m_cmd(db_cmd), .m_waitrequest(db_wait));

  logic              k_read, k_rwait, k_rvalid;
  logic [DDR_AW-1:0] k_raddr;
  logic [511:0]      k_rdata;

  ddr_interface #(.DDR_W(512), .DDR_AW(DDR_AW)) u_ddr_if (
    .clk(kernel_clk), .rst_n,
    .w_write(db_write), .w_addr(db_cmd[DCMD_W-1 -: DDR_AW]), .w_wdata(db_cmd[511:0]),
    .w_byteenable(db_cmd[575:512]), .w_waitrequest(db_wait),
    .r_read(k_read), .r_addr(k_raddr), .r_waitrequest(k_rwait), .r_readdata(k_rdata),
    .r_readdatavalid(k_rvalid),
    .m_write, .m_read, .m_addr, .m_wdata, .m_byteenable, .m_waitrequest, .m_readdata, .m_readdatavalid);

  // ---------------- role: kernels ----------------
  logic     dk_valid, dk_ready, rk_valid, rk_ready;
  tx_word_t dk_word, rk_word;
  logic [15:0] dk_cnt;
  logic [31:0] rk_cnt;

  discovery_kernel u_disc_kernel (
    .clk(kernel_clk), .rst_n, .start(kstart[0]), .mac0, .mac1,
    .tx_valid(dk_valid), .tx_word(dk_word), .tx_ready(dk_ready), .sent_cnt(dk_cnt));

  logic        app_valid, app_last, app_ready, app_done;
  logic [63:0] app_data;

  ptrans_kernel #(.DDR_W(512), .DDR_AW(DDR_AW)) u_ptrans (
    .clk(kernel_clk), .rst_n, .start(kstart[2]), .n(kargs[2][1][15:0]),
    .src_line(kargs[2][2][DDR_AW-1:0]), .busy(kernel_busy), .done(app_done),
    .rd_read(k_read), .rd_addr(k_raddr), .rd_waitrequest(k_rwait), .rd_readdata(k_rdata),
    .rd_readdatavalid(k_rvalid),
    .out_valid(app_valid), .out_data(app_data), .out_last(app_last), .out_ready(app_ready));

  result_kernel #(.WORDS_PER_PKT(WORDS_PER_PKT)) u_result_kernel (
    .clk(kernel_clk), .rst_n, .in_valid(app_valid), .in_data(app_data), .in_last(app_last),
    .in_ready(app_ready), .tx_valid(rk_valid), .tx_word(rk_word), .tx_ready(rk_ready),
    .pkt_cnt(rk_cnt));

  // kernel -> shell transmit queues
  tx_word_t dq_word, rq_word;
  logic     dq_full, dq_empty, dq_rd, rq_full, rq_empty, rq_rd;
  assign dk_ready = !dq_full;
  assign rk_ready = !rq_full;

  async_fifo #(.WIDTH(TX_WORD_W), .DEPTH_LOG2(4)) u_disc_txq (
    .wr_clk(kernel_clk), .wr_rst_n(rst_n), .wr_en(dk_valid), .wdata(dk_word), .full(dq_full),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(dq_rd), .rdata(dq_word), .empty(dq_empty));
  async_fifo #(.WIDTH(TX_WORD_W), .DEPTH_LOG2(4)) u_result_txq (
    .wr_clk(kernel_clk), .wr_rst_n(rst_n), .wr_en(rk_valid), .wdata(rk_word), .full(rq_full),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(rq_rd), .rdata(rq_word), .empty(rq_empty));

  // ---------------- transmit ----------------
  logic     cf_valid, cf_ready;
  tx_word_t cf_word;

  confirm_gen u_confirm (
    .clk, .rst_n, .pr_done(prl_done), .kin_done,
    .tx_valid(cf_valid), .tx_word(cf_word), .tx_ready(cf_ready));

  logic     s_valid [3];
  tx_word_t s_word  [3];
  logic     s_ready [3];
  assign s_valid[0] = cf_valid;   assign s_word[0] = cf_word;  assign cf_ready = s_ready[0];
  assign s_valid[1] = !dq_empty;  assign s_word[1] = dq_word;  assign dq_rd    = s_ready[1];
  assign s_valid[2] = !rq_empty;  assign s_word[2] = rq_word;  assign rq_rd    = s_ready[2];

  tx_framer #(.NSRC(3)) u_tx (
    .clk, .rst_n, .my_mac(mac0), .host_mac,
    .src_valid(s_valid), .src_word(s_word), .src_ready(s_ready),
    .tx_data, .tx_valid, .tx_sop, .tx_eop, .tx_empty, .tx_ready, .frame_cnt(tx_frame_cnt));

  // status counters that are observed in simulation only through hierarchy
  logic unused;
  assign unused = ^{dk_cnt, rk_cnt, app_done, kargs[0][1], kargs[1][1]};
endmodule
