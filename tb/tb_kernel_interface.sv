// tb_kernel_interface: self-checking test of the kernel control registers.
// Checked: argument writes land in args[k][r] for each kernel; a start-register
// write with bit 0 set gives one start pulse for that kernel only, on the next
// cycle; writes to an unmapped kernel index or upper address bits change
// nothing; waitrequest stays low.
`include "tb_common.svh"
module tb_kernel_interface;
  `TB_COMMON(100000)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic write = 0, waitrequest; logic [31:0] addr = '0, wdata = '0;
  logic [2:0] start; logic [31:0] args [3][8];
  kernel_interface dut (.clk, .rst_n, .write, .addr, .wdata, .waitrequest, .start, .args);
  int pulses [3] = '{0, 0, 0};
  always @(posedge clk) if (rst_n) for (int k = 0; k < 3; k++) if (start[k]) pulses[k]++;
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk) write = 1; addr = a; wdata = d;
    @(negedge clk) write = 0;
    @(negedge clk);
  endtask
  initial begin
    logic [31:0] ref_args [3][8];
    repeat (3) @(negedge clk); rst_n = 1;
    check(!waitrequest, "no waitrequest");
    for (int k = 0; k < 3; k++) for (int r = 1; r < 8; r++) begin
      ref_args[k][r] = $urandom; wr({20'h0, 4'(k), 5'h0, 3'(r)}, ref_args[k][r]);
    end
    wr(32'h0000_0301, 32'hDEAD);       // kernel 3 does not exist
    wr(32'h0001_0201, 32'hBEEF);       // upper bits set
    for (int k = 0; k < 3; k++) for (int r = 1; r < 8; r++)
      check(args[k][r] == ref_args[k][r], $sformatf("arg %0d/%0d", k, r));
    wr(32'h0000_0200, 32'h1);
    check(pulses[2] == 1 && pulses[0] == 0 && pulses[1] == 0, $sformatf("start kernel 2 only %0d %0d %0d", pulses[0], pulses[1], pulses[2]));
    wr(32'h0000_0000, 32'h0);
    check(pulses[0] == 0, "start bit 0 clear gives no pulse");
    wr(32'h0000_0000, 32'h1);
    check(pulses[0] == 1, "start kernel 0");
    finish();
  end
endmodule
