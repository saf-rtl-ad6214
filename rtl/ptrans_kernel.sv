// ptrans_kernel: application kernel of the PTRANS workload: it transposes an
// N x N matrix of 32-bit elements held in DDR and streams the result out.
// The matrix is stored row-major from line address src_line, sixteen elements
// per 512-bit line, element e in bits [32*(e%16)+31 : 32*(e%16)]. The result is
// produced in row-major order of the transpose, out[i][j] = A[j][i], two
// elements per 64-bit output word (first in the upper half), with out_last on
// the final word; N*N must be even. This is a plain one-read-per-element
// implementation (this design's own; the benchmark kernel itself is not
// described): each element costs one line read, one cycle for the read data
// and, every second element, one output handshake. start launches a run with
// the current n and src_line; busy is high until the last word is taken, and
// done pulses once then.
module ptrans_kernel #(
  parameter int DDR_W  = 512,
  parameter int DDR_AW = 26
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       n,
  input  logic [DDR_AW-1:0] src_line,
  output logic              busy,
  output logic              done,
  // DDR read port
  output logic              rd_read,
  output logic [DDR_AW-1:0] rd_addr,
  input  logic              rd_waitrequest,
  input  logic [DDR_W-1:0]  rd_readdata,
  input  logic              rd_readdatavalid,
  // output stream to the result kernel
  output logic              out_valid,
  output logic [63:0]       out_data,
  output logic              out_last,
  input  logic              out_ready
);
  localparam int EPL = DDR_W / 32;   // elements per line
  typedef enum logic [1:0] {S_IDLE, S_READ, S_WAIT, S_OUT} state_e;

  state_e      state;
  logic [15:0] i, j;                 // output row, output column
  logic [31:0] e;                    // source element index j*N + i
  logic [31:0] hi;                   // first element of the pending pair
  logic        half;                 // 1: hi holds a valid element
  logic        fin;                  // the element just read is the last one

  assign rd_read  = (state == S_READ);
  assign rd_addr  = src_line + DDR_AW'(e / EPL);
  assign out_valid = (state == S_OUT);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; i <= '0; j <= '0; e <= '0; hi <= '0; half <= 1'b0;
      fin <= 1'b0; done <= 1'b0; out_data <= '0; out_last <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start && n != 0) begin
          i <= '0; j <= '0; e <= '0; half <= 1'b0; state <= S_READ;
        end
        S_READ: if (!rd_waitrequest) begin
          fin   <= (i == n - 1) && (j == n - 1);
          state <= S_WAIT;
        end
        S_WAIT: if (rd_readdatavalid) begin
          // advance to the next source element
          if (j == n - 1) begin
            j <= '0; i <= i + 1'b1; e <= 32'(i) + 1;
          end else begin
            j <= j + 1'b1; e <= e + 32'(n);
          end
          if (!half) begin
            hi    <= rd_readdata[(e % EPL) * 32 +: 32];
            half  <= 1'b1;
            state <= S_READ;
          end else begin
            out_data <= {hi, rd_readdata[(e % EPL) * 32 +: 32]};
            out_last <= fin;
            half     <= 1'b0;
            state    <= S_OUT;
          end
        end
        S_OUT: if (out_ready) begin
          if (out_last) begin state <= S_IDLE; done <= 1'b1; end
          else          state <= S_READ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  // Avalon-MM read held by waitrequest, and output word held until taken.
  a_rd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rd_read && rd_waitrequest |=> rd_read && $stable(rd_addr));
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_last));
endmodule
