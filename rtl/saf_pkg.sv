// saf_pkg: constants and word types shared by the SAF shell blocks.
// The packet-type codes are the seven protocol codes of the standalone
// accelerator protocol set; they travel in the Ethernet EtherType field (this
// design's reading; the protocol only names them "packet types").
// fifo_word_t is one received payload word with its packet-boundary flags, as
// stored in the PR, CMD and MEM FIFOs. tx_word_t is one outgoing payload word
// tagged with its packet type and a last-word flag.
package saf_pkg;
  localparam logic [15:0] PT_DISCOVERY = 16'h80EF;  // FPGA -> host
  localparam logic [15:0] PT_PR        = 16'h80AA;  // host -> FPGA bitstream
  localparam logic [15:0] PT_PR_CONF   = 16'h80AB;  // FPGA -> host
  localparam logic [15:0] PT_KIN       = 16'h80DD;  // host -> FPGA kernel input data
  localparam logic [15:0] PT_KIN_CONF  = 16'h80DB;  // FPGA -> host
  localparam logic [15:0] PT_KEXEC     = 16'h80CC;  // host -> FPGA kernel command
  localparam logic [15:0] PT_RESULT    = 16'h80CB;  // FPGA -> host

  localparam logic [47:0] MAC_BCAST = 48'hFFFF_FFFF_FFFF;

  typedef struct packed {
    logic        sop;
    logic        eop;
    logic [63:0] data;
  } fifo_word_t;           // 66 bits

  typedef struct packed {
    logic [15:0] ptype;
    logic        last;
    logic [63:0] data;
  } tx_word_t;             // 81 bits

  localparam int FIFO_WORD_W = $bits(fifo_word_t);
  localparam int TX_WORD_W   = $bits(tx_word_t);
endpackage
