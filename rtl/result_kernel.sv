// result_kernel: control kernel that packs the application kernel's output
// into 0x80CB output-result packets for the host.
// Output words pass from the application stream (in_valid/in_ready) to the
// transmit stream (tx_valid/tx_ready) unchanged, tagged with type 0x80CB. A
// word counter closes a packet (last flag) after WORDS_PER_PKT words or at the
// application's own last word, whichever comes first; 180 words = 1440 payload
// bytes keeps a frame inside the standard 1500-byte MTU (this design's choice).
// It is free-running, like an autorun kernel, and adds no latency.
module result_kernel
  import saf_pkg::*;
#(
  parameter int WORDS_PER_PKT = 180
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] in_data,
  input  logic        in_last,
  output logic        in_ready,
  output logic        tx_valid,
  output tx_word_t    tx_word,
  input  logic        tx_ready,
  output logic [31:0] pkt_cnt
);
  logic [$clog2(WORDS_PER_PKT)-1:0] wcnt;
  logic close;

  assign close    = in_last || (int'(wcnt) == WORDS_PER_PKT - 1);
  assign tx_valid = in_valid;
  assign in_ready = tx_ready;
  assign tx_word  = '{ptype: PT_RESULT, last: close, data: in_data};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt <= '0; pkt_cnt <= '0;
    end else if (in_valid && tx_ready) begin
      if (close) begin
        wcnt    <= '0;
        pkt_cnt <= pkt_cnt + 1'b1;
      end else begin
        wcnt <= wcnt + 1'b1;
      end
    end
  end
  // A payload word not taken stays unchanged.
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_word));
endmodule
