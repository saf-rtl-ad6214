// tb_auto_discovery_fsm: self-checking test of the auto-discovery FSM.
// Checked: no command while the link is down, even if packets arrive; after
// link-up the first packet toggle produces exactly one launch write with the
// start address and data, held while cmd_ready is low; later packets cause no
// further launch; dropping and restoring the link re-arms it. The launch must
// appear within 4 cycles of the toggle (two-flop synchroniser plus edge
// detect).
`include "tb_common.svh"
module tb_auto_discovery_fsm;
  `TB_COMMON(100000)
  logic clk = 0, rst_n = 0, link_up = 0, pkt_toggle = 0, cmd_ready = 0;
  logic cmd_valid, launched; logic [31:0] cmd_addr, cmd_data;
  always #5 clk = ~clk;
  auto_discovery_fsm dut (.clk, .rst_n, .link_up, .pkt_toggle, .cmd_valid, .cmd_addr, .cmd_data,
                          .cmd_ready, .launched);
  int launches = 0;
  always @(posedge clk) if (cmd_valid && cmd_ready) launches++;

  task automatic pkt(); @(negedge clk) pkt_toggle = ~pkt_toggle; endtask

  initial begin
    int lat;
    repeat (3) @(negedge clk); rst_n = 1;
    pkt(); repeat (10) @(negedge clk);
    check(!cmd_valid && launches == 0, "no launch while link down");
    link_up = 1; repeat (10) @(negedge clk);
    check(!cmd_valid, "no launch before a packet");
    pkt(); lat = 0;
    while (!cmd_valid && lat < 20) begin @(negedge clk); lat++; end
    check(cmd_valid && lat <= 4, $sformatf("launch latency %0d", lat));
    check(cmd_addr == 32'h0 && cmd_data == 32'h1, "launch address/data");
    repeat (5) @(negedge clk);
    check(cmd_valid, "command held during waitrequest");
    cmd_ready = 1; @(negedge clk); cmd_ready = 0;
    check(launches == 1 && launched && !cmd_valid, "one launch, then DONE");
    pkt(); pkt(); repeat (10) @(negedge clk);
    check(launches == 1 && !cmd_valid, "later packets ignored");
    link_up = 0; repeat (3) @(negedge clk);
    check(!launched, "re-armed on link loss");
    link_up = 1; cmd_ready = 1; repeat (5) @(negedge clk);
    check(launches == 1, "no launch without a new packet");
    pkt(); repeat (8) @(negedge clk);
    check(launches == 2 && launched, "second plug-in launches again");
    finish();
  end
endmodule
