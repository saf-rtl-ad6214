// tb_async_fifo: self-checking test of the dual-clock FIFO.
// A 16-deep FIFO is written on a 10 ns clock and read on a 7 ns clock. Phase 1
// fills it without reading and checks that full rises after exactly 16 words
// and that a 17th write is ignored. Phase 2 drains it and then streams 300
// random words with random write and read enables; every word read is compared
// with a queue model, and the count of words out must equal words in.
module tb_async_fifo;
  localparam int W = 20, DL = 4, DEPTH = 1 << DL;
  logic wclk = 0, rclk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  always #5   wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  async_fifo #(.WIDTH(W), .DEPTH_LOG2(DL)) dut (
    .wr_clk(wclk), .wr_rst_n(rst_n), .wr_en, .wdata, .full,
    .rd_clk(rclk), .rd_rst_n(rst_n), .rd_en, .rdata, .empty);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nin = 0, nout = 0;
  logic [W-1:0] exp_w;
  // reader: pops whenever rd_en && !empty at a read edge
  always @(posedge rclk) if (rst_n && rd_en && !empty) begin
    exp_w = model.pop_front();
    check(rdata == exp_w, $sformatf("data %h exp %h", rdata, exp_w));
    nout++;
  end

  initial begin
    repeat (3) @(posedge wclk);
    rst_n = 1;
    repeat (2) @(posedge wclk);
    check(empty && !full, "empty after reset");
    // phase 1: fill
    for (int k = 0; k < DEPTH + 1; k++) begin
      @(negedge wclk);
      wdata = W'($urandom);
      wr_en = 1;
      if (!full) begin model.push_back(wdata); nin++; end
      else check(k == DEPTH, $sformatf("full early at %0d", k));
      @(posedge wclk);
    end
    @(negedge wclk) wr_en = 0;
    check(full, "full after DEPTH writes");
    check(nin == DEPTH, "accepted DEPTH words");
    // phase 2: drain and random stream
    fork
      begin
        for (int k = 0; k < 300; k++) begin
          @(negedge wclk);
          wr_en = ($urandom % 3) != 0;
          wdata = W'($urandom);
          @(posedge wclk);
          if (wr_en && !full) begin model.push_back(wdata); nin++; end
        end
        @(negedge wclk) wr_en = 0;
      end
      begin
        repeat (400) begin
          @(negedge rclk) rd_en = ($urandom % 4) != 0;
        end
        @(negedge rclk) rd_en = 1;
        repeat (200) @(posedge rclk);
      end
    join
    check(empty, "empty at end");
    check(nout == nin, $sformatf("out %0d in %0d", nout, nin));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
