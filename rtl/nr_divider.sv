// nr_divider: non-restoring division, one quotient bit per clock.
//
// Divides a 32-bit dividend by a 16-bit divisor and gives a 16-bit quotient,
// truncated toward zero, using the conditional add/subtract (non-restoring)
// algorithm of the DSP's DIVS/DIVQ instructions. The partial remainder starts
// as the upper half of the dividend; in each of 16 steps it is shifted left,
// takes in the next dividend bit, and the divisor is subtracted from it if it
// was not negative or added if it was. The sign of the new remainder gives the
// next quotient bit.
//
// With SIGNED = 1 the magnitudes are divided and the sign is applied at the
// end; the quotient is then limited to -32768..32767. With SIGNED = 0 it is
// 0..65535. When the quotient does not fit (the upper half of the dividend's
// magnitude is not below the divisor's) or the divisor is zero, the result is
// the largest value of the right sign and ovf is set.
// Timing: start is taken when the unit is idle; done pulses 17 clocks later
// with quotient and ovf valid until the next start.
//
// The algorithm, operand widths and bit count follow the paper. Dividing
// magnitudes instead of the DIVS sign step, and the saturation, are this
// design's choices.
module nr_divider #(
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned DVD_W  = 32,
  parameter int unsigned DVS_W  = 16,
  parameter int unsigned Q_W    = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DVD_W-1:0] dividend,
  input  logic [DVS_W-1:0] divisor,
  output logic [Q_W-1:0]   quotient,
  output logic             ovf,
  output logic             done
);
  localparam int unsigned LO_W = DVD_W - DVS_W;   // bits shifted in, one per step
  localparam logic [Q_W-1:0] QMAX_U = '1;
  localparam logic [Q_W-1:0] QMAX_P = {1'b0, {(Q_W-1){1'b1}}};
  localparam logic [Q_W-1:0] QMIN_N = {1'b1, {(Q_W-1){1'b0}}};

  logic                      run;
  logic [$clog2(Q_W+1)-1:0]  step;
  logic signed [DVS_W+1:0]   rem;
  logic [LO_W-1:0]           lo;
  logic [DVS_W-1:0]          dvs;
  logic [Q_W-1:0]            q;
  logic                      neg;

  // magnitudes of the operands
  logic [DVD_W-1:0] a_mag;
  logic [DVS_W-1:0] b_mag;
  logic             a_neg, b_neg;
  assign a_neg = SIGNED && dividend[DVD_W-1];
  assign b_neg = SIGNED && divisor[DVS_W-1];
  assign a_mag = a_neg ? (~dividend + 1'b1) : dividend;
  assign b_mag = b_neg ? (~divisor + 1'b1) : divisor;

  logic signed [DVS_W+1:0] rem_sh, rem_nx;
  assign rem_sh = {rem[DVS_W:0], lo[LO_W-1]};
  assign rem_nx = rem[DVS_W+1] ? rem_sh + $signed({2'b00, dvs})
                               : rem_sh - $signed({2'b00, dvs});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run      <= 1'b0;
      step     <= '0;
      rem      <= '0;
      lo       <= '0;
      dvs      <= '0;
      q        <= '0;
      neg      <= 1'b0;
      quotient <= '0;
      ovf      <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run  <= 1'b1;
          step <= '0;
          rem  <= $signed({2'b00, a_mag[DVD_W-1 -: DVS_W]});
          lo   <= a_mag[LO_W-1:0];
          dvs  <= b_mag;
          q    <= '0;
          neg  <= a_neg ^ b_neg;
          ovf  <= (b_mag == '0) || (a_mag[DVD_W-1 -: DVS_W] >= b_mag);
        end
      end else begin
        rem  <= rem_nx;
        lo   <= lo << 1;
        q    <= {q[Q_W-2:0], ~rem_nx[DVS_W+1]};
        step <= step + 1'b1;
        if (step == ($clog2(Q_W+1))'(Q_W - 1)) begin
          logic [Q_W-1:0] qf;
          logic           big;
          run  <= 1'b0;
          done <= 1'b1;
          qf   = {q[Q_W-2:0], ~rem_nx[DVS_W+1]};
          if (!SIGNED) begin
            quotient <= ovf ? QMAX_U : qf;
          end else begin
            big = ovf || (neg ? (qf > QMIN_N) : (qf > QMAX_P));
            if (big) quotient <= neg ? QMIN_N : QMAX_P;
            else     quotient <= neg ? (~qf + 1'b1) : qf;
            ovf <= big;
          end
        end
      end
    end
  end
endmodule
