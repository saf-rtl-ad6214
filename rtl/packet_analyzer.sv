// packet_analyzer: receive-side parser of the SAF shell.
// Each Ethernet frame arrives from the MAC as 64-bit Avalon-ST beats, first
// frame byte in data[63:56], preamble and FCS already removed. Beat 0 holds the
// destination MAC and the top of the source MAC, beat 1 the rest of the source
// MAC and the EtherType, which carries the SAF packet type. Frames addressed to
// this board's MAC 0 or to broadcast are accepted. The payload starts at frame
// byte 14, so every later beat yields one realigned 64-bit payload word: the
// last two bytes of the previous beat followed by the first six of this one.
// Types 0x80AA, 0x80CC and 0x80DD steer the words to the PR, CMD and MEM FIFO
// (the routing follows the SAF shell); other types are not stored.
// Timing: a word is pushed one cycle after the beat that completes it. The sop
// flag marks a packet's first payload word and eop its last. The host is
// expected to pad payloads to a multiple of 8 bytes (last beat empty = 2).
// Raw Ethernet has no flow control, so rx_ready is always 1 and a word whose
// FIFO is full is dropped and counted in drop_cnt.
// Side outputs: host_mac (source MAC of the last accepted frame) and
// pkt_toggle, which flips once per accepted frame of any type.
module packet_analyzer
  import saf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [47:0] my_mac,
  // Avalon-ST from the Ethernet MAC
  input  logic [63:0] rx_data,
  input  logic        rx_valid,
  input  logic        rx_sop,
  input  logic        rx_eop,
  input  logic [2:0]  rx_empty,
  output logic        rx_ready,
  // FIFO write ports
  output fifo_word_t  wdata,
  output logic        pr_wr,
  output logic        cmd_wr,
  output logic        mem_wr,
  input  logic        pr_full,
  input  logic        cmd_full,
  input  logic        mem_full,
  // status
  output logic [47:0] host_mac,
  output logic        pkt_toggle,
  output logic [31:0] drop_cnt
);
  typedef enum logic [1:0] {DST_NONE, DST_PR, DST_CMD, DST_MEM} dst_e;

  logic [1:0]  beat;            // 0, 1, 2 (= payload beats)
  logic [47:0] dst_mac;
  logic [15:0] src_hi, prev;
  logic        accept, first_word;
  dst_e        dst;
  logic        push;

  assign rx_ready = 1'b1;

  function automatic dst_e type2dst(logic [15:0] t);
    case (t)
      PT_PR:    return DST_PR;
      PT_KEXEC: return DST_CMD;
      PT_KIN:   return DST_MEM;
      default:  return DST_NONE;
    endcase
  endfunction

  logic hdr_ok;
  assign hdr_ok = (dst_mac == my_mac) || (dst_mac == MAC_BCAST);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0; dst_mac <= '0; src_hi <= '0; prev <= '0;
      accept <= 1'b0; first_word <= 1'b0; dst <= DST_NONE;
      push <= 1'b0; wdata <= '0; host_mac <= '0; pkt_toggle <= 1'b0;
    end else begin
      push <= 1'b0;
      if (rx_valid) begin
        if (rx_sop) begin
          dst_mac <= rx_data[63:16];
          src_hi  <= rx_data[15:0];
          beat    <= 2'd1;
          accept  <= 1'b0;
        end else if (beat == 2'd1) begin
          accept     <= hdr_ok;
          dst        <= type2dst(rx_data[31:16]);
          prev       <= rx_data[15:0];
          first_word <= 1'b1;
          beat       <= 2'd2;
          if (hdr_ok) begin
            host_mac   <= {src_hi, rx_data[63:32]};
            pkt_toggle <= ~pkt_toggle;
          end
        end else if (beat == 2'd2) begin
          prev       <= rx_data[15:0];
          first_word <= 1'b0;
          wdata      <= '{sop: first_word, eop: rx_eop, data: {prev, rx_data[63:16]}};
          push       <= accept && (dst != DST_NONE);
        end
        if (rx_eop) beat <= 2'd0;
      end
    end
  end

  logic full_sel;
  always_comb begin
    unique case (dst)
      DST_PR:  full_sel = pr_full;
      DST_CMD: full_sel = cmd_full;
      DST_MEM: full_sel = mem_full;
      default: full_sel = 1'b1;
    endcase
  end

  assign pr_wr  = push && dst == DST_PR  && !pr_full;
  assign cmd_wr = push && dst == DST_CMD && !cmd_full;
  assign mem_wr = push && dst == DST_MEM && !mem_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                drop_cnt <= '0;
    else if (push && full_sel) drop_cnt <= drop_cnt + 1'b1;
  end

  // rx_empty is accepted for interface completeness; payloads are 8-byte padded
  logic unused_empty;
  assign unused_empty = ^rx_empty;
endmodule
