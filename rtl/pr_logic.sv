// pr_logic: moves partial-reconfiguration bitstream words from the PR FIFO to
// the PR IP and reports completion.
// The SAF shell gives this block the reading of the PR FIFO and a done signal
// once programming over Ethernet has finished; the rest is this design's own.
// Each 64-bit FIFO word is written as two PR_W-bit Avalon-MM writes, upper half
// first (the PR IP data port is taken to be 32 bits). A write is held while
// waitrequest is high. The FIFO is show-ahead: the word is popped in the cycle
// its second half is accepted, so one word moves every two accepted writes.
// Completion comes from the PR wrapper as a toggle (eth_done_tog) in the PR
// clock domain; it is synchronised with two flip-flops and turned into a
// one-cycle pr_done pulse, used to send the 0x80AB confirmation. busy is high
// from the first bitstream word until that pulse.
module pr_logic
  import saf_pkg::*;
#(
  parameter int PR_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  // PR FIFO read side
  input  fifo_word_t      fifo_rdata,
  input  logic            fifo_empty,
  output logic            fifo_rd,
  // Avalon-MM write toward the PR wrapper
  output logic            pr_write,
  output logic [PR_W-1:0] pr_wdata,
  input  logic            pr_waitrequest,
  // completion from the PR wrapper (other clock domain)
  input  logic            eth_done_tog,
  output logic            pr_done,
  output logic            busy
);
  logic       half;          // 0: upper half next, 1: lower half next
  logic [2:0] tog_s;

  assign pr_write = !fifo_empty;
  assign pr_wdata = half ? fifo_rdata.data[PR_W-1:0] : fifo_rdata.data[2*PR_W-1:PR_W];
  assign fifo_rd  = !fifo_empty && !pr_waitrequest && half;
  assign pr_done  = tog_s[2] ^ tog_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      half  <= 1'b0;
      tog_s <= '0;
      busy  <= 1'b0;
    end else begin
      tog_s <= {tog_s[1:0], eth_done_tog};
      if (pr_write && !pr_waitrequest) begin
        half <= ~half;
        busy <= 1'b1;
      end
      if (pr_done) busy <= 1'b0;
    end
  end
  // Avalon-MM: a write held off by waitrequest stays unchanged.
  a_pr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    pr_write && pr_waitrequest |=> pr_write && $stable(pr_wdata));
endmodule
