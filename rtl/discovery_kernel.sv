// discovery_kernel: control kernel that announces the board to the host.
// When started (start pulse from the kernel interface) it emits the payload of
// one 0x80EF auto-discovery packet as three 64-bit words. The payload is the
// SAF discovery layout of six 32-bit rows, two rows per word, earlier row in
// the upper half:
//   row 0  {16'h0000, 16'h80EF}             packet type
//   row 1  MAC0[47:16]
//   row 2  {MAC1[47:32], MAC0[15:0]}
//   row 3  MAC1[31:0]
//   row 4  {VID, PID}        = {0x1172, 0x2494}
//   row 5  {SVID, SPID}      = {0x198A, 0x3852}
// Which half of each MAC address sits in which row is this design's reading of
// the layout; the ID values are the layout's own. Words leave as tx_word_t
// (type, last, data) with valid/ready, one per cycle when ready is high. A
// start that arrives while a packet is being sent is remembered and sends one
// more packet afterwards. The original is an OpenCL kernel; this is RTL.
module discovery_kernel
  import saf_pkg::*;
#(
  parameter logic [15:0] VID  = 16'h1172,
  parameter logic [15:0] PID  = 16'h2494,
  parameter logic [15:0] SVID = 16'h198A,
  parameter logic [15:0] SPID = 16'h3852
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [47:0] mac0,
  input  logic [47:0] mac1,
  output logic        tx_valid,
  output tx_word_t    tx_word,
  input  logic        tx_ready,
  output logic [15:0] sent_cnt
);
  logic [1:0] widx;      // 0..2 while sending, 3 idle
  logic       pend;

  always_comb begin
    tx_word.ptype = PT_DISCOVERY;
    tx_word.last  = (widx == 2'd2);
    unique case (widx)
      2'd0:    tx_word.data = {16'h0000, PT_DISCOVERY, mac0[47:16]};
      2'd1:    tx_word.data = {mac1[47:32], mac0[15:0], mac1[31:0]};
      default: tx_word.data = {VID, PID, SVID, SPID};
    endcase
  end
  assign tx_valid = (widx != 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx <= 2'd3; pend <= 1'b0; sent_cnt <= '0;
    end else begin
      if (start) pend <= 1'b1;
      if (widx == 2'd3) begin
        if (pend || start) begin widx <= 2'd0; pend <= 1'b0; end
      end else if (tx_ready) begin
        widx <= (widx == 2'd2) ? 2'd3 : widx + 1'b1;
        if (widx == 2'd2) sent_cnt <= sent_cnt + 1'b1;
      end
    end
  end
  // A payload word not taken stays unchanged.
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_word));
endmodule
