// kernel_interface: control-register block through which commands reach the
// kernels in the role.
// In the SAF shell the kernel interface receives the kernel-execution writes
// (address and data) and passes them to the kernels; its register map is this
// design's own. An Avalon-MM write with addr[11:8] = k selects kernel k
// (k < NK) and addr[2:0] = r selects its register r. Register 0 is the start
// register: writing it with data bit 0 set gives a one-cycle start[k] pulse the
// next cycle. Registers 1..NREG-1 are 32-bit arguments held in args[k][r].
// Writes to other addresses are ignored. waitrequest is always low, so one
// write is taken per cycle.
module kernel_interface #(
  parameter int NK   = 3,
  parameter int NREG = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        write,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        waitrequest,
  output logic [NK-1:0]   start,
  output logic [31:0]     args [NK][NREG]
);
  logic [3:0] kidx;
  logic [2:0] ridx;
  logic       addr_ok;

  assign waitrequest = 1'b0;
  assign kidx    = addr[11:8];
  assign ridx    = addr[2:0];
  assign addr_ok = (int'(kidx) < NK) && (int'(ridx) < NREG) && (addr[31:12] == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start <= '0;
      for (int k = 0; k < NK; k++)
        for (int r = 0; r < NREG; r++) args[k][r] <= '0;
    end else begin
      start <= '0;
      for (int k = 0; k < NK; k++) begin
        if (write && addr_ok && int'(kidx) == k) begin
          if (ridx == 3'd0) start[k] <= wdata[0];
          else              args[k][ridx] <= wdata;
        end
      end
    end
  end
endmodule
