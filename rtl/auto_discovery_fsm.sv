// auto_discovery_fsm: launches the discovery control kernel once per plug-in.
// Following the SAF shell, the FSM waits, after the link comes up, for the
// first received network packet and then sends one kernel-execution command
// (a start-register write) to the kernel interface; the discovery kernel that
// it starts announces the board to the host. The states and the link_up input
// that stands for "plugged in" are this design's own.
//   IDLE     link down
//   WAIT_PKT link up, waiting for the first accepted frame
//   LAUNCH   cmd_valid held high until cmd_ready (Avalon-MM write/waitrequest)
//   DONE     launched; stays here until the link drops, then back to IDLE
// pkt_toggle comes from the receive clock domain (it flips per accepted frame)
// and is synchronised with two flip-flops; a flip is detected 3 clk cycles
// after it happens.
module auto_discovery_fsm #(
  parameter logic [31:0] LAUNCH_ADDR = 32'h0000_0000,  // kernel 0, register 0
  parameter logic [31:0] LAUNCH_DATA = 32'h0000_0001   // start bit
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        link_up,
  input  logic        pkt_toggle,
  output logic        cmd_valid,
  output logic [31:0] cmd_addr,
  output logic [31:0] cmd_data,
  input  logic        cmd_ready,
  output logic        launched
);
  typedef enum logic [1:0] {IDLE, WAIT_PKT, LAUNCH, DONE} state_e;
  state_e state;
  logic [2:0] tog_s;   // two sync stages plus one history stage
  logic       pkt_seen;

  assign pkt_seen = tog_s[2] ^ tog_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      tog_s <= '0;
    end else begin
      tog_s <= {tog_s[1:0], pkt_toggle};
      if (!link_up) state <= IDLE;
      else unique case (state)
        IDLE:     state <= WAIT_PKT;
        WAIT_PKT: if (pkt_seen)  state <= LAUNCH;
        LAUNCH:   if (cmd_ready) state <= DONE;
        DONE:     ;
      endcase
    end
  end

  assign cmd_valid = (state == LAUNCH);
  assign cmd_addr  = LAUNCH_ADDR;
  assign cmd_data  = LAUNCH_DATA;
  assign launched  = (state == DONE);
endmodule
