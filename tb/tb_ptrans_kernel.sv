// tb_ptrans_kernel: self-checking test of the transpose kernel.
// A model DDR with random waitrequest and 2-cycle read latency holds a 6 x 6
// matrix of random 32-bit elements at line 4, row-major, 16 per line. Checked:
// the 18 output words are the transpose in row-major order, two elements per
// word (first in the upper half); out_last only on the final word; busy and
// done. Memory and output stalls are random, so completion is only checked
// against a bound of 2000 cycles.
`include "tb_common.svh"
module tb_ptrans_kernel;
  `TB_COMMON(200000)
  localparam int AW = 8, N = 6, BASE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, rd_read, rd_waitrequest = 0, rd_readdatavalid = 0;
  logic [AW-1:0] rd_addr; logic [511:0] rd_readdata = '0;
  logic out_valid, out_last, out_ready = 0; logic [63:0] out_data;
  ptrans_kernel #(.DDR_AW(AW)) dut (.clk, .rst_n, .start, .n(16'(N)), .src_line(AW'(BASE)), .busy, .done,
    .rd_read, .rd_addr, .rd_waitrequest, .rd_readdata, .rd_readdatavalid,
    .out_valid, .out_data, .out_last, .out_ready);
  logic [31:0] a [N*N];
  logic [511:0] mem [1 << AW];
  logic [AW-1:0] pend [$]; int lat [$];
  logic [63:0] got [$]; bit lastflag [$];
  int ndone = 0;
  always @(posedge clk) if (rst_n) begin
    rd_readdatavalid <= 0;
    if (lat.size() > 0 && lat[0] == 0) begin
      rd_readdata <= mem[pend.pop_front()]; void'(lat.pop_front()); rd_readdatavalid <= 1;
    end
    foreach (lat[i]) lat[i]--;
    if (rd_read && !rd_waitrequest) begin pend.push_back(rd_addr); lat.push_back(1); end
    if (out_valid && out_ready) begin got.push_back(out_data); lastflag.push_back(out_last); end
    if (done) ndone++;
  end
  always @(negedge clk) begin
    rd_waitrequest = ($urandom % 4) == 0;
    out_ready = ($urandom % 3) != 0;
  end
  initial begin
    int t = 0;
    foreach (mem[i]) mem[i] = '0;
    for (int e = 0; e < N*N; e++) begin a[e] = $urandom; mem[BASE + e/16][32*(e%16) +: 32] = a[e]; end
    repeat (3) @(negedge clk); rst_n = 1;
    check(!busy, "idle after reset");
    start = 1; @(negedge clk); start = 0;
    check(busy, "busy after start");
    while (ndone == 0 && t < 2000) begin @(negedge clk); t++; end
    check(ndone == 1 && !busy, $sformatf("done after %0d cycles", t));
    check(got.size() == N*N/2, $sformatf("%0d words", got.size()));
    for (int k = 0; k < N*N/2 && got.size() > 0; k++) begin
      automatic int e0 = 2*k, e1 = 2*k + 1;   // output element indices i*N + j
      automatic logic [63:0] exp_w = {a[(e0 % N)*N + e0 / N], a[(e1 % N)*N + e1 / N]};
      check(got[k] == exp_w, $sformatf("word %0d %h exp %h", k, got[k], exp_w));
      check(lastflag[k] == (k == N*N/2 - 1), $sformatf("last flag word %0d", k));
    end
    finish();
  end
endmodule
