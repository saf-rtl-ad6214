// kernel_ctrl_logic: turns kernel-execution packets into writes on the kernel
// interface.
// Each 64-bit word of a 0x80CC payload is one command {address[63:32],
// data[31:0]} (the SAF protocol says the payload is an address and data; the
// split is this design's). The block reads the CMD FIFO (show-ahead) and issues
// one Avalon-MM write per word. The auto-discovery FSM's launch command shares
// the same port and wins when both are ready. Once a write has been presented
// and stalled by waitrequest, its source is locked until it is accepted, so
// address and data stay stable as Avalon-MM requires. One write per cycle when
// waitrequest is low.
module kernel_ctrl_logic
  import saf_pkg::*;
#(
  parameter int KADDR_W = 32,
  parameter int KDATA_W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  // CMD FIFO read side
  input  fifo_word_t         fifo_rdata,
  input  logic               fifo_empty,
  output logic               fifo_rd,
  // auto-discovery command
  input  logic               disc_valid,
  input  logic [KADDR_W-1:0] disc_addr,
  input  logic [KDATA_W-1:0] disc_data,
  output logic               disc_ready,
  // Avalon-MM write toward the kernel interface
  output logic               k_write,
  output logic [KADDR_W-1:0] k_addr,
  output logic [KDATA_W-1:0] k_wdata,
  input  logic               k_waitrequest
);
  logic locked, lock_disc, use_disc;

  assign use_disc = locked ? lock_disc : disc_valid;
  assign k_write  = use_disc ? disc_valid : !fifo_empty;
  assign k_addr   = use_disc ? disc_addr  : KADDR_W'(fifo_rdata.data[63:32]);
  assign k_wdata  = use_disc ? disc_data  : KDATA_W'(fifo_rdata.data[31:0]);
  assign disc_ready = use_disc && !k_waitrequest;
  assign fifo_rd    = !use_disc && !fifo_empty && !k_waitrequest;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked    <= 1'b0;
      lock_disc <= 1'b0;
    end else if (k_write && k_waitrequest) begin
      locked    <= 1'b1;
      lock_disc <= use_disc;
    end else begin
      locked    <= 1'b0;
    end
  end
  // Avalon-MM: a write held off by waitrequest stays unchanged.
  a_k_hold: assert property (@(posedge clk) disable iff (!rst_n)
    k_write && k_waitrequest |=> k_write && $stable(k_addr) && $stable(k_wdata));
endmodule
