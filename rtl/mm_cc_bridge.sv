// mm_cc_bridge: write-only Avalon-MM clock-crossing bridge.
// The SAF shell places a clock-crossing bridge on each memory-mapped path
// because the PR IP, the kernel interface and DDR run on their own clocks. The
// shell only writes across these paths, so this bridge (this design's own, in
// place of the vendor bridge) carries write commands only: a command (address,
// data and any byte enables packed into CMD_W bits) is pushed into an
// async_fifo in the source clock, with s_waitrequest raised while the FIFO is
// full, and replayed on the destination side as m_write/m_cmd, held until
// m_waitrequest is low. Order is kept. Latency is about three destination
// cycles (Gray-pointer synchronisation).
module mm_cc_bridge #(
  parameter int CMD_W      = 32,
  parameter int DEPTH_LOG2 = 4
) (
  input  logic             s_clk,
  input  logic             s_rst_n,
  input  logic             s_write,
  input  logic [CMD_W-1:0] s_cmd,
  output logic             s_waitrequest,
  input  logic             m_clk,
  input  logic             m_rst_n,
  output logic             m_write,
  output logic [CMD_W-1:0] m_cmd,
  input  logic             m_waitrequest
);
  logic empty;

  async_fifo #(.WIDTH(CMD_W), .DEPTH_LOG2(DEPTH_LOG2)) u_fifo (
    .wr_clk(s_clk), .wr_rst_n(s_rst_n), .wr_en(s_write), .wdata(s_cmd), .full(s_waitrequest),
    .rd_clk(m_clk), .rd_rst_n(m_rst_n), .rd_en(m_write && !m_waitrequest), .rdata(m_cmd),
    .empty(empty)
  );

  assign m_write = !empty;
endmodule
