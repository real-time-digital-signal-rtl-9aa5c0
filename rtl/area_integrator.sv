// area_integrator: midpoint and front/back areas of the pulse window.
//
// The midpoint is N_mid = N0 + ((N - N0) >> 1), the halved window length
// added to the start. The unit then reads the window N0..N, one sample per
// clock, and adds each sample to the front area F while the address is below
// N_mid and to the back area B from N_mid on. Both sums are 32-bit signed, as
// the DSP used 32-bit add-with-carry for them. start to done takes
// (N - N0) + 2 clocks. The asymmetry (F-B)/(F+B) is formed from F and B by
// the divider that follows.
module area_integrator
  import psd_pkg::*;
#(
  parameter int unsigned ADDR_W = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [ADDR_W-1:0]  n0,
  input  logic [ADDR_W-1:0]  n1,
  output logic [ADDR_W-1:0]  raddr,
  input  sample_t            rdata,
  output logic [ADDR_W-1:0]  nmid,
  output logic signed [31:0] front,
  output logic signed [31:0] back,
  output logic               done
);
  logic              run;
  logic [ADDR_W-1:0] i;

  assign raddr = i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      i     <= '0;
      nmid  <= '0;
      front <= '0;
      back  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run   <= 1'b1;
          i     <= n0;
          nmid  <= n0 + ((n1 - n0) >> 1);
          front <= '0;
          back  <= '0;
        end
      end else begin
        if (i < nmid) front <= front + 32'(rdata);
        else          back  <= back + 32'(rdata);
        if (i == n1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          i <= i + 1'b1;
        end
      end
    end
  end
endmodule
