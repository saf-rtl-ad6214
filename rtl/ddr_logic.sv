// ddr_logic: writes kernel-input data (0x80DD packets) from the MEM FIFO into
// DDR memory.
// Following the SAF shell, 64-bit payload words are popped from the MEM FIFO,
// packed eight at a time into 512-bit lines and written at an address chosen
// by the kernel argument the data belongs to. How the argument is named is this
// design's own: the first word of every packet is a header
// {arg_index[63:32], line_offset[31:0]}, and the packet's lines go to line
// address (arg_index << ARG_REGION_LOG2) + line_offset, +1 per line. Word i of
// a line sits in bits [64*i+63 : 64*i]. A line is written when it is full or
// when the packet ends; a partial last line carries byte enables for its valid
// words only. kin_done pulses for one cycle when a packet's last line has been
// accepted (used for the 0x80DB confirmation).
// Timing: one FIFO word per cycle while filling, then one Avalon-MM write that
// is held while waitrequest is high, so a full line takes 9 cycles at best.
module ddr_logic
  import saf_pkg::*;
#(
  parameter int DDR_W           = 512,
  parameter int IN_W            = 64,
  parameter int DDR_AW          = 26,
  parameter int ARG_REGION_LOG2 = 22
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // MEM FIFO read side
  input  fifo_word_t            fifo_rdata,
  input  logic                  fifo_empty,
  output logic                  fifo_rd,
  // Avalon-MM line write toward DDR
  output logic                  d_write,
  output logic [DDR_AW-1:0]     d_addr,
  output logic [DDR_W-1:0]      d_wdata,
  output logic [DDR_W/8-1:0]    d_byteenable,
  input  logic                  d_waitrequest,
  output logic                  kin_done
);
  localparam int WPL = DDR_W / IN_W;          // words per line
  localparam int BPW = IN_W / 8;              // bytes per word
  typedef enum logic [1:0] {S_HDR, S_FILL, S_WRITE} state_e;

  state_e                  state;
  logic [$clog2(WPL)-1:0]  idx;
  logic                    last_line;

  assign fifo_rd = !fifo_empty && (state == S_HDR || state == S_FILL);
  assign d_write = (state == S_WRITE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_HDR; idx <= '0; last_line <= 1'b0; kin_done <= 1'b0;
      d_addr <= '0; d_wdata <= '0; d_byteenable <= '0;
    end else begin
      kin_done <= 1'b0;
      unique case (state)
        S_HDR: if (!fifo_empty) begin
          // a header-only packet carries no data; it is acknowledged at once
          d_addr       <= DDR_AW'((fifo_rdata.data[63:32] << ARG_REGION_LOG2) + fifo_rdata.data[31:0]);
          idx          <= '0;
          d_byteenable <= '0;
          d_wdata      <= '0;
          if (fifo_rdata.eop) kin_done <= 1'b1;
          else                state    <= S_FILL;
        end
        S_FILL: if (!fifo_empty) begin
          d_wdata[idx*IN_W +: IN_W]    <= fifo_rdata.data;
          d_byteenable[idx*BPW +: BPW] <= '1;
          idx <= idx + 1'b1;
          if (fifo_rdata.eop || int'(idx) == WPL-1) begin
            state     <= S_WRITE;
            last_line <= fifo_rdata.eop;
          end
        end
        S_WRITE: if (!d_waitrequest) begin
          d_addr       <= d_addr + 1'b1;
          d_byteenable <= '0;
          d_wdata      <= '0;
          idx          <= '0;
          if (last_line) begin
            kin_done <= 1'b1;
            state    <= S_HDR;
          end else begin
            state    <= S_FILL;
          end
        end
        default: state <= S_HDR;
      endcase
    end
  end
  // Avalon-MM: a write held off by waitrequest stays unchanged.
  a_d_hold: assert property (@(posedge clk) disable iff (!rst_n)
    d_write && d_waitrequest |=> d_write && $stable(d_addr) && $stable(d_wdata) &&
                                 $stable(d_byteenable));
endmodule
