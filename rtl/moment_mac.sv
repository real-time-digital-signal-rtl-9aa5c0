// moment_mac: numerator of the normalized moment.
//
// Computes num = 12 * sum_{i=N0..N} j_i * (i - N_mid)^2 with one multiplier,
// the way the DSP used its multiplier-accumulator: for each sample one clock
// squares the offset (i - N_mid) through the multiplier's feedback path, and
// the next clock multiplies the square by the sample j_i and adds it to a
// 40-bit accumulator. A last clock multiplies the sum by 12. The result is
// kept as a 32-bit unsigned word (two 16-bit registers on the DSP); larger
// values, and negative ones, are clipped and flagged with ovf.
// start to done takes 2*(N - N0 + 1) + 2 clocks.
//
// The square is held 32 bits wide rather than in a 16-bit feedback register,
// because offsets in a long trace can exceed 255; the clipping is this
// design's choice.
module moment_mac
  import psd_pkg::*;
#(
  parameter int unsigned ADDR_W = 10,
  parameter int unsigned ACC_W  = 40
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] n0,
  input  logic [ADDR_W-1:0] n1,
  input  logic [ADDR_W-1:0] nmid,
  output logic [ADDR_W-1:0] raddr,
  input  sample_t           rdata,
  output logic [31:0]       num,
  output logic              ovf,
  output logic              done
);
  typedef enum logic [1:0] {S_IDLE, S_SQ, S_MAC, S_X12} state_t;
  state_t state;

  logic [ADDR_W-1:0]         i;
  logic signed [ADDR_W:0]    d;
  logic [31:0]               sq;
  logic signed [ACC_W-1:0]   acc;
  logic signed [ACC_W+3:0]   x12;

  assign raddr = i;
  assign d     = $signed({1'b0, i}) - $signed({1'b0, nmid});
  assign x12   = (ACC_W+4)'(acc) * (ACC_W+4)'(12);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      i     <= '0;
      sq    <= '0;
      acc   <= '0;
      num   <= '0;
      ovf   <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          i     <= n0;
          acc   <= '0;
          state <= S_SQ;
        end
        S_SQ: begin
          sq    <= 32'(d * d);
          state <= S_MAC;
        end
        S_MAC: begin
          acc <= acc + ACC_W'($signed({1'b0, sq}) * rdata);
          if (i == n1) begin
            state <= S_X12;
          end else begin
            i     <= i + 1'b1;
            state <= S_SQ;
          end
        end
        S_X12: begin
          if (x12 < 0) begin
            num <= '0;           ovf <= 1'b1;
          end else if (x12 > (ACC_W+4)'(33'h0_ffff_ffff)) begin
            num <= 32'hffff_ffff; ovf <= 1'b1;
          end else begin
            num <= x12[31:0];    ovf <= 1'b0;
          end
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
