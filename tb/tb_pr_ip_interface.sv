// tb_pr_ip_interface: self-checking test of the PCIe/Ethernet PR multiplexer.
// Checked: PCIe is selected by default and its writes reach the PR IP; an
// Ethernet write while PCIe is busy is held off (waitrequest) and not
// forwarded; once PCIe frees, Ethernet is selected, its writes are forwarded
// and PCIe sees waitrequest; on PR done the selection returns to PCIe and
// eth_done_tog flips; PR IP waitrequest propagates to the selected side.
`include "tb_common.svh"
module tb_pr_ip_interface;
  `TB_COMMON(100000)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pcie_busy = 0, pcie_write = 0, eth_write = 0, pr_waitrequest = 0, pr_done = 0;
  logic [31:0] pcie_wdata = 32'h1111_0000, eth_wdata = 32'hEEEE_0000, pr_wdata;
  logic pcie_waitrequest, eth_waitrequest, pr_write, eth_sel, eth_done_tog;
  pr_ip_interface dut (.clk, .rst_n, .pcie_busy, .pcie_write, .pcie_wdata, .pcie_waitrequest,
    .eth_write, .eth_wdata, .eth_waitrequest, .pr_write, .pr_wdata, .pr_waitrequest, .pr_done,
    .eth_sel, .eth_done_tog);
  int switches = 0;
  always @(posedge clk) if (rst_n && !eth_sel && eth_write && !pcie_busy) switches++;

  initial begin
    logic t0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    check(!eth_sel, "PCIe selected by default");
    pcie_write = 1; pcie_busy = 1; #1;
    check(pr_write && pr_wdata == 32'h1111_0000 && !pcie_waitrequest, "PCIe write forwarded");
    eth_write = 1; #1;
    check(eth_waitrequest, "Ethernet held off while PCIe busy");
    repeat (4) @(negedge clk);
    check(!eth_sel && pr_wdata == 32'h1111_0000, "still PCIe while busy");
    pcie_write = 0; pcie_busy = 0; @(negedge clk);
    check(eth_sel, "Ethernet selected when PCIe free");
    check(pr_write && pr_wdata == 32'hEEEE_0000 && !eth_waitrequest, "Ethernet write forwarded");
    pcie_write = 1; #1;
    check(pcie_waitrequest, "PCIe held off while Ethernet selected");
    pr_waitrequest = 1; #1;
    check(eth_waitrequest, "PR IP waitrequest reaches Ethernet side");
    pr_waitrequest = 0; pcie_write = 0; eth_write = 0;
    t0 = eth_done_tog;
    pr_done = 1; @(negedge clk); pr_done = 0;
    check(!eth_sel && eth_done_tog != t0, "done returns to PCIe and toggles");
    check(switches == 1, "one switch to Ethernet");
    pr_done = 1; @(negedge clk); pr_done = 0;
    check(eth_done_tog != t0, "PCIe-side done does not toggle");
    finish();
  end
endmodule
