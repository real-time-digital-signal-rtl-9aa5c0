// peak_finder: maximum of the current pulse.
//
// Reads the pulse memory from address 0 to len-1, one word per clock, and
// keeps the largest signed value and the address where it first occurs.
// start to done takes len+1 clocks; peak_val and peak_addr hold until the
// next start. Finding the maximum first follows the paper; keeping the first
// of equal maxima is this design's choice.
module peak_finder
  import psd_pkg::*;
#(
  parameter int unsigned ADDR_W = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W:0]   len,
  output logic [ADDR_W-1:0] raddr,
  input  sample_t           rdata,
  output sample_t           peak_val,
  output logic [ADDR_W-1:0] peak_addr,
  output logic              done
);
  logic              run;
  logic [ADDR_W-1:0] i;

  assign raddr = i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      i         <= '0;
      peak_val  <= '0;
      peak_addr <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run      <= 1'b1;
          i        <= '0;
          peak_val <= -16'sh8000;
        end
      end else begin
        if (rdata > peak_val) begin
          peak_val  <= rdata;
          peak_addr <= i;
        end
        if ({1'b0, i} == len - 1'b1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          i <= i + 1'b1;
        end
      end
    end
  end
endmodule
