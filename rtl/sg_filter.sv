// sg_filter: in-place Savitzky-Golay filter with a circular buffer.
//
// With a first-derivative coefficient set this turns the charge trace from the
// preamplifier into the current pulse; with a smoothing set it only smooths.
// For a window of TAPS = 2h+1 samples (default 9, so h = 4), sample n of the
// result is
//     S_n = sat16( (C1*U_{n-h} + ... + C_{h+1}*U_n + ... + C_TAPS*U_{n+h}) >>> SG_SHIFT )
// where U are the unaltered input samples and C are 1.15 coefficients.
//
// The filter works in place, as the original processor routine did: each
// result overwrites its own input word. So that later results still see
// unaltered inputs, the h unaltered samples behind the centre are kept in an
// h-entry circular buffer. When S_n is written, U_n is copied into the slot of
// the oldest entry and the buffer pointer advances; the next result then reads
// the h buffered samples starting at the pointer, followed by h+1 words of the
// pulse memory starting at the centre.
//
// One multiplier-accumulator does one product per clock: TAPS product clocks
// and one write clock per sample, plus one clock to preload the buffer, so a
// trace of len samples takes (TAPS+1)*len+1 clocks after the clock that takes
// start (10*len+1 for 9 taps). The in-place scheme, the 9-tap window with its
// 4-entry buffer and the user-chosen window length follow the paper. The edge
// treatment (the buffer is preloaded with the first sample, reads past the
// end repeat the last sample), the 40-bit accumulator and the clipping are
// choices of this design.
module sg_filter
  import psd_pkg::*;
#(
  parameter int unsigned ADDR_W   = 10,
  parameter int unsigned SG_SHIFT = 15,
  parameter int unsigned TAPS     = NTAPS,
  localparam int unsigned HALF    = (TAPS - 1) / 2,
  localparam int unsigned HALF_W  = (HALF > 1) ? $clog2(HALF) : 1,
  localparam int unsigned T_W     = $clog2(TAPS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W:0]   len,
  input  sample_t           coef [TAPS],
  output logic [ADDR_W-1:0] raddr,
  input  sample_t           rdata,
  output logic              we,
  output logic [ADDR_W-1:0] waddr,
  output sample_t           wdata,
  output logic              busy,
  output logic              done,
  output logic              sat
);
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_MAC, S_WR} state_t;
  state_t state;

  sample_t                    cbuf [HALF];
  logic [HALF_W-1:0]          cptr;
  logic [HALF_W:0]            csum;      // cptr + t before wrapping
  logic [HALF_W-1:0]          cidx;
  logic [ADDR_W-1:0]          n;
  logic [T_W-1:0]             t;
  logic signed [39:0]         acc;
  logic [ADDR_W:0]            ahead;     // n + t - 4, may run past the end
  logic [ADDR_W-1:0]          last;
  sample_t                    operand;
  logic signed [39:0]         shifted;
  sample_t                    result;
  logic                       clip;

  assign last  = ADDR_W'(len - 1'b1);
  assign ahead = {1'b0, n} + (ADDR_W+1)'(t) - (ADDR_W+1)'(HALF);
  assign csum  = {1'b0, cptr} + (HALF_W+1)'(t);
  assign cidx  = (csum >= (HALF_W+1)'(HALF)) ? HALF_W'(csum - (HALF_W+1)'(HALF)) : HALF_W'(csum);

  always_comb begin
    raddr = '0;
    unique case (state)
      S_INIT:  raddr = '0;
      S_MAC:   raddr = (ahead > {1'b0, last}) ? last : ahead[ADDR_W-1:0];
      S_WR:    raddr = n;
      default: raddr = '0;
    endcase
  end

  always_comb begin
    if (32'(t) < HALF) operand = cbuf[cidx];
    else          operand = rdata;
  end

  assign shifted = acc >>> SG_SHIFT;
  always_comb begin
    clip = 1'b0;
    if (shifted > 40'sd32767) begin
      result = 16'sh7fff; clip = 1'b1;
    end else if (shifted < -40'sd32768) begin
      result = -16'sh8000; clip = 1'b1;
    end else begin
      result = shifted[15:0];
    end
  end

  assign we    = (state == S_WR);
  assign waddr = n;
  assign wdata = result;
  assign busy  = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cptr  <= '0;
      n     <= '0;
      t     <= '0;
      acc   <= '0;
      done  <= 1'b0;
      sat   <= 1'b0;
      for (int i = 0; i < HALF; i++) cbuf[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_INIT;
          sat   <= 1'b0;
        end
        S_INIT: begin
          for (int i = 0; i < HALF; i++) cbuf[i] <= rdata;
          cptr  <= '0;
          n     <= '0;
          t     <= '0;
          acc   <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          acc <= acc + 40'(coef[t] * operand);
          if (t == T_W'(TAPS - 1)) state <= S_WR;
          t <= t + 1'b1;
        end
        S_WR: begin
          cbuf[cptr] <= rdata;           // unaltered U_n into the oldest slot
          cptr       <= (32'(cptr) == HALF - 1) ? '0 : cptr + 1'b1;
          sat        <= sat | clip;
          acc        <= '0;
          t          <= '0;
          if (n == last) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            n     <= n + 1'b1;
            state <= S_MAC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
