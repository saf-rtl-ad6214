// tb_ddr_logic: self-checking test of the DDR logic (64-to-512-bit packing).
// Three kernel-input packets pass through a model MEM FIFO into a model line
// memory with random waitrequest: arg 0 offset 0 with 16 words (two full
// lines), arg 1 offset 5 with 11 words (one full and one partial line), and a
// header-only packet. Checked: each line lands at (arg << ARG_REGION_LOG2) +
// offset + n with word i in bits [64i+63:64i]; the partial line's byte enables
// cover only its 3 valid words; kin_done pulses once per packet; the best-case
// rate is one FIFO word per cycle (a full line in at most 9 cycles without
// waitrequest).
`include "tb_common.svh"
module tb_ddr_logic;
  import saf_pkg::*;
  `TB_COMMON(200000)
  localparam int AW = 12, ARL = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fifo_word_t q [$];
  fifo_word_t fifo_rdata; logic fifo_empty, fifo_rd;
  logic d_write, d_waitrequest = 0, kin_done;
  logic [AW-1:0] d_addr; logic [511:0] d_wdata; logic [63:0] d_byteenable;
  logic pop_q = 0;
  always @(negedge clk) if (pop_q) begin q.pop_front(); pop_q = 0; end
  assign fifo_empty = (q.size() == 0);
  assign fifo_rdata = fifo_empty ? '0 : q[0];
  ddr_logic #(.DDR_AW(AW), .ARG_REGION_LOG2(ARL)) dut (.clk, .rst_n, .fifo_rdata, .fifo_empty,
    .fifo_rd, .d_write, .d_addr, .d_wdata, .d_byteenable, .d_waitrequest, .kin_done);

  logic [63:0] mem [logic [AW-1:0]][8];
  logic [63:0] bemem [logic [AW-1:0]];
  int ndone = 0, nlines = 0;
  bit random_wait = 0;
  always @(posedge clk) if (rst_n) begin
    if (d_write && !d_waitrequest) begin
      for (int i = 0; i < 8; i++) if (d_byteenable[8*i]) mem[d_addr][i] = d_wdata[64*i +: 64];
      bemem[d_addr] = d_byteenable;
      nlines++;
    end
    pop_q <= fifo_rd;
    if (kin_done) ndone++;
  end
  always @(negedge clk) d_waitrequest = random_wait && (($urandom % 3) == 0);

  task automatic packet(input int arg, input int off, input logic [63:0] w [$]);
    q.push_back('{sop: 1, eop: w.size() == 0, data: {32'(arg), 32'(off)}});
    foreach (w[k]) q.push_back('{sop: 0, eop: k == w.size()-1, data: w[k]});
  endtask

  initial begin
    logic [63:0] a [$], b [$], none [$];
    int t;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 16; k++) a.push_back({$urandom, $urandom});
    for (int k = 0; k < 11; k++) b.push_back({$urandom, $urandom});
    // timing: first full line without waitrequest
    packet(0, 0, a);
    t = 0;
    while (nlines == 0 && t < 50) begin @(negedge clk); t++; end
    check(t <= 11, $sformatf("first line after %0d cycles", t));
    while (ndone == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    random_wait = 1;
    packet(1, 5, b);
    packet(2, 0, none);
    repeat (80) @(negedge clk);
    for (int k = 0; k < 16; k++) check(mem[AW'(k/8)][k%8] == a[k], $sformatf("arg0 word %0d", k));
    for (int k = 0; k < 11; k++) check(mem[AW'((1 << ARL) + 5 + k/8)][k%8] == b[k], $sformatf("arg1 word %0d", k));
    check(bemem[(1 << ARL) + 6] == 64'h0000_0000_00FF_FFFF, $sformatf("partial byteenable %h", bemem[(1 << ARL) + 6]));
    check(bemem[0] == '1, "full byteenable");
    check(nlines == 4, $sformatf("%0d lines written", nlines));
    check(ndone == 3, $sformatf("%0d kin_done pulses", ndone));
    finish();
  end
endmodule
