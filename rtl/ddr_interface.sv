// ddr_interface: shares the DDR memory port between the shell's DDR logic
// (line writes of kernel input data) and the application kernel (line reads).
// The SAF shell names a DDR interface connected to the DDR logic, the memory
// and the kernels; this arbiter is this design's own. When both hosts request
// in the same cycle they alternate (round-robin); a command stalled by
// m_waitrequest keeps its grant until accepted, so it stays stable. Only the
// kernel reads, so read data and readdatavalid go straight back to it. The
// write host is granted in the cycle it asks when the memory is free.
module ddr_interface #(
  parameter int DDR_W  = 512,
  parameter int DDR_AW = 26
) (
  input  logic               clk,
  input  logic               rst_n,
  // write host (DDR logic)
  input  logic               w_write,
  input  logic [DDR_AW-1:0]  w_addr,
  input  logic [DDR_W-1:0]   w_wdata,
  input  logic [DDR_W/8-1:0] w_byteenable,
  output logic               w_waitrequest,
  // read host (application kernel)
  input  logic               r_read,
  input  logic [DDR_AW-1:0]  r_addr,
  output logic               r_waitrequest,
  output logic [DDR_W-1:0]   r_readdata,
  output logic               r_readdatavalid,
  // memory port
  output logic               m_write,
  output logic               m_read,
  output logic [DDR_AW-1:0]  m_addr,
  output logic [DDR_W-1:0]   m_wdata,
  output logic [DDR_W/8-1:0] m_byteenable,
  input  logic               m_waitrequest,
  input  logic [DDR_W-1:0]   m_readdata,
  input  logic               m_readdatavalid
);
  logic last_was_w, locked, lock_w, gnt_w;

  always_comb begin
    if (locked)                gnt_w = lock_w;
    else if (w_write && r_read) gnt_w = !last_was_w;
    else                       gnt_w = w_write;
  end

  assign m_write       = gnt_w && w_write;
  assign m_read        = !gnt_w && r_read;
  assign m_addr        = gnt_w ? w_addr : r_addr;
  assign m_wdata       = w_wdata;
  assign m_byteenable  = gnt_w ? w_byteenable : '1;
  assign w_waitrequest = !gnt_w || m_waitrequest;
  assign r_waitrequest =  gnt_w || m_waitrequest;
  assign r_readdata      = m_readdata;
  assign r_readdatavalid = m_readdatavalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_was_w <= 1'b0; locked <= 1'b0; lock_w <= 1'b0;
    end else begin
      locked <= (m_write || m_read) && m_waitrequest;
      lock_w <= gnt_w;
      if ((m_write || m_read) && !m_waitrequest) last_was_w <= gnt_w;
    end
  end
  // Avalon-MM: a command held off by waitrequest stays unchanged.
  a_m_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_write || m_read) && m_waitrequest |=> $stable(m_write) && $stable(m_read) &&
                                             $stable(m_addr));
endmodule
