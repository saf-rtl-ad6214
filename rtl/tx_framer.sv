// tx_framer: transmit side of the SAF shell. It takes outgoing payload streams
// (confirmations, discovery packets, output results), picks one packet at a
// time and sends it to the Ethernet MAC as a frame in 64-bit Avalon-ST beats,
// first byte in data[63:56].
// Frame: destination = host MAC (learned from received frames), source =
// this board's MAC 0, EtherType = the packet type, then the payload words. The
// 14-byte header leaves the payload two bytes off the beat grid, so
//   beat 0       {host_mac, my_mac[47:32]}                     sop
//   beat 1       {my_mac[31:0], type, word0[63:48]}
//   beat k+2     {word k[47:0], word k+1[63:48]}
//   final beat   {last word[47:0], 16'h0}                      eop, empty = 2
// Minimum-size padding and the FCS are left to the MAC. Sources are served
// round-robin at packet boundaries; a packet's words are popped (src_ready) as
// the beats that carry them are accepted, and the frame stalls (tx_valid low)
// while its source has no word ready. The arbitration and framing are this
// design's own; the shell only shows a path from the role to the Ethernet IP.
module tx_framer
  import saf_pkg::*;
#(
  parameter int NSRC = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [47:0]     my_mac,
  input  logic [47:0]     host_mac,
  input  logic            src_valid [NSRC],
  input  tx_word_t        src_word  [NSRC],
  output logic            src_ready [NSRC],
  output logic [63:0]     tx_data,
  output logic            tx_valid,
  output logic            tx_sop,
  output logic            tx_eop,
  output logic [2:0]      tx_empty,
  input  logic            tx_ready,
  output logic [31:0]     frame_cnt
);
  typedef enum logic [2:0] {S_IDLE, S_H0, S_H1, S_BODY, S_TAIL} state_e;
  localparam int SW = (NSRC > 1) ? $clog2(NSRC) : 1;

  state_e        state;
  logic [SW-1:0] g, rr;
  logic [47:0]   prev;
  logic [15:0]   ptype;
  logic          cur_valid;
  tx_word_t      cur;

  assign cur_valid = src_valid[g];
  assign cur       = src_word[g];

  // next source, round-robin starting after the last one served
  logic          found;
  logic [SW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = rr;
    for (int k = 1; k <= NSRC; k++) begin
      int idx;
      idx = (int'(rr) + k) % NSRC;
      if (!found && src_valid[idx]) begin
        found = 1'b1;
        pick  = SW'(idx);
      end
    end
  end

  always_comb begin
    tx_valid = 1'b0; tx_sop = 1'b0; tx_eop = 1'b0; tx_empty = 3'd0; tx_data = '0;
    unique case (state)
      S_H0:   begin tx_valid = 1'b1; tx_sop = 1'b1; tx_data = {host_mac, my_mac[47:32]}; end
      S_H1:   begin tx_valid = cur_valid; tx_data = {my_mac[31:0], ptype, cur.data[63:48]}; end
      S_BODY: begin tx_valid = cur_valid; tx_data = {prev, cur.data[63:48]}; end
      S_TAIL: begin tx_valid = 1'b1; tx_eop = 1'b1; tx_empty = 3'd2; tx_data = {prev, 16'h0}; end
      default: ;
    endcase
  end

  logic pop;
  assign pop = (state == S_H1 || state == S_BODY) && cur_valid && tx_ready;
  always_comb begin
    for (int k = 0; k < NSRC; k++) src_ready[k] = pop && (SW'(k) == g);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; g <= '0; rr <= SW'(NSRC - 1); prev <= '0; ptype <= '0; frame_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (found) begin
          g     <= pick;
          rr    <= pick;
          ptype <= src_word[pick].ptype;
          state <= S_H0;
        end
        S_H0: if (tx_ready) state <= S_H1;
        S_H1, S_BODY: if (pop) begin
          prev  <= cur.data[47:0];
          state <= cur.last ? S_TAIL : S_BODY;
        end
        S_TAIL: if (tx_ready) begin
          state     <= S_IDLE;
          frame_cnt <= frame_cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  // Avalon-ST: a beat not taken stays on the bus unchanged.
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data) && $stable(tx_sop) &&
                              $stable(tx_eop) && $stable(tx_empty));
endmodule
