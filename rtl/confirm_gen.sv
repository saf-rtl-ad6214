// confirm_gen: builds the shell's confirmation packets.
// A pr_done pulse requests one 0x80AB PR-confirmation packet and a kin_done
// pulse one 0x80DB input-data confirmation packet, as the SAF protocol
// prescribes. Each is a one-word payload {16'h0000, type, sequence number},
// the sequence counting that type's confirmations from 0 (the payload content
// is this design's own). Requests are held as pending flags, so a pulse that
// arrives while another confirmation waits is not lost; a PR confirmation goes
// first. Output is a tx_word_t stream with valid/ready; the word is offered the
// cycle after the pulse.
module confirm_gen
  import saf_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     pr_done,
  input  logic     kin_done,
  output logic     tx_valid,
  output tx_word_t tx_word,
  input  logic     tx_ready
);
  logic        pend_pr, pend_kin;
  logic [31:0] seq_pr, seq_kin;
  logic        sel_pr;

  assign sel_pr   = pend_pr;
  assign tx_valid = pend_pr || pend_kin;
  assign tx_word  = sel_pr ? '{ptype: PT_PR_CONF,  last: 1'b1, data: {16'h0, PT_PR_CONF,  seq_pr}}
                           : '{ptype: PT_KIN_CONF, last: 1'b1, data: {16'h0, PT_KIN_CONF, seq_kin}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_pr <= 1'b0; pend_kin <= 1'b0; seq_pr <= '0; seq_kin <= '0;
    end else begin
      if (tx_valid && tx_ready) begin
        if (sel_pr) begin pend_pr  <= 1'b0; seq_pr  <= seq_pr + 1'b1; end
        else        begin pend_kin <= 1'b0; seq_kin <= seq_kin + 1'b1; end
      end
      if (pr_done)  pend_pr  <= 1'b1;
      if (kin_done) pend_kin <= 1'b1;
    end
  end
  // A payload word not taken stays unchanged.
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_word));
endmodule
