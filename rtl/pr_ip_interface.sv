// pr_ip_interface: wrapper in front of the partial-reconfiguration IP that
// lets both the PCIe path and the Ethernet path deliver a bitstream.
// As in the SAF shell, the multiplexer selects PCIe by default and switches to
// Ethernet when Ethernet has bitstream data to write and the PCIe programming
// channel is not occupied (pcie_busy low). Holding the Ethernet selection until
// the PR IP reports done, and returning to PCIe afterwards, is this design's
// choice. The port that is not selected sees waitrequest, so no write is lost.
// Both ports and the PR IP port are Avalon-MM write-only data ports (write,
// writedata, waitrequest). The switch takes effect the cycle after eth_write
// is first seen; eth_done_tog flips once for each completed Ethernet
// reconfiguration so the done event can cross to another clock domain.
// Everything runs on the PR IP clock.
module pr_ip_interface #(
  parameter int PR_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  // PCIe side (default)
  input  logic            pcie_busy,
  input  logic            pcie_write,
  input  logic [PR_W-1:0] pcie_wdata,
  output logic            pcie_waitrequest,
  // Ethernet side
  input  logic            eth_write,
  input  logic [PR_W-1:0] eth_wdata,
  output logic            eth_waitrequest,
  // to the PR IP
  output logic            pr_write,
  output logic [PR_W-1:0] pr_wdata,
  input  logic            pr_waitrequest,
  input  logic            pr_done,
  // status
  output logic            eth_sel,
  output logic            eth_done_tog
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eth_sel      <= 1'b0;
      eth_done_tog <= 1'b0;
    end else if (!eth_sel) begin
      if (eth_write && !pcie_busy) eth_sel <= 1'b1;
    end else if (pr_done) begin
      eth_sel      <= 1'b0;
      eth_done_tog <= ~eth_done_tog;
    end
  end

  assign pr_write         = eth_sel ? eth_write : pcie_write;
  assign pr_wdata         = eth_sel ? eth_wdata : pcie_wdata;
  assign eth_waitrequest  = !eth_sel || pr_waitrequest;
  assign pcie_waitrequest =  eth_sel || pr_waitrequest;
endmodule
