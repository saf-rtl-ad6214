// async_fifo: dual-clock FIFO (stands in for the vendor asynchronous FIFO of the
// SAF shell; this implementation is this design's own).
// Binary pointers with one extra wrap bit are kept in each domain and passed to
// the other domain as Gray code through two flip-flops. The write side sees
// `full` against the synchronised read pointer, the read side sees `empty`
// against the synchronised write pointer, so both flags are pessimistic and
// safe. Show-ahead read: rdata is the head word whenever !empty; rd_en pops it.
// Writes while full and reads while empty are ignored. Each side has its own
// active-low reset; reset both together.
module async_fifo #(
  parameter int WIDTH      = 66,
  parameter int DEPTH_LOG2 = 9
) (
  input  logic             wr_clk,
  input  logic             wr_rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rd_clk,
  input  logic             rd_rst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);
  localparam int DEPTH = 1 << DEPTH_LOG2;
  typedef logic [DEPTH_LOG2:0] ptr_t;

  logic [WIDTH-1:0] mem [DEPTH];
  ptr_t wbin, rbin, wgray, rgray;
  ptr_t rgray_s1, rgray_s2, wgray_s1, wgray_s2;

  function automatic ptr_t bin2gray(ptr_t b);
    return b ^ (b >> 1);
  endfunction
  function automatic ptr_t gray2bin(ptr_t g);
    ptr_t b;
    for (int i = DEPTH_LOG2; i >= 0; i--)
      b[i] = (i == DEPTH_LOG2) ? g[i] : (b[i+1] ^ g[i]);
    return b;
  endfunction

  // write domain
  ptr_t rbin_w;
  assign rbin_w = gray2bin(rgray_s2);
  assign full   = (wbin[DEPTH_LOG2] != rbin_w[DEPTH_LOG2]) &&
                  (wbin[DEPTH_LOG2-1:0] == rbin_w[DEPTH_LOG2-1:0]);

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wbin[DEPTH_LOG2-1:0]] <= wdata;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin <= '0; wgray <= '0; rgray_s1 <= '0; rgray_s2 <= '0;
    end else begin
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
      if (wr_en && !full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  // read domain
  assign empty = (rgray == wgray_s2);
  assign rdata = mem[rbin[DEPTH_LOG2-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin <= '0; rgray <= '0; wgray_s1 <= '0; wgray_s2 <= '0;
    end else begin
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
      if (rd_en && !empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end
  // Each pointer that crosses clocks changes by at most one bit per clock.
  a_wgray_one_bit: assert property (@(posedge wr_clk) disable iff (!wr_rst_n)
    $countones(wgray ^ $past(wgray)) <= 1);
  a_rgray_one_bit: assert property (@(posedge rd_clk) disable iff (!rd_rst_n)
    $countones(rgray ^ $past(rgray)) <= 1);
endmodule
