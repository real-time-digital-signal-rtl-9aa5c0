// psd_histogram: self-calibrating acceptance region in parameter space.
//
// The three pulse-shape parameters of an event place it in one bin of a 3-D
// histogram: WB width bins of 2**W_SHIFT samples (the last bin also takes all
// wider pulses), AB asymmetry bins over -1..1 and MB normalized-moment bins
// over 0..2. Before binning, each quotient is brought to a common fixed point
// (value * 2**15) using its divisor shift.
//
// Calibration (mode = 1): each event adds one to its bin (counters saturate)
//   and to the event total.
// Build (build pulse): the acceptance region is chosen as the paper does it by
//   sorting bins by count: repeatedly the fullest bin not yet accepted is
//   found by a scan of all bins (lowest index wins ties) and accepted as long
//   as the accepted counts together stay at or below accept_pct percent of
//   the total. The comparison is done as (sum + count) * 100 <= total * pct,
//   with no division. One scan takes WB*AB*MB clocks, so building takes
//   (accepted bins + 1) scans plus one clearing pass.
// Run (mode = 0): each event is looked up; acc_valid pulses the clock after
//   ev_valid with accept set if its bin is in the region.
// clear empties the histogram (it also runs by itself after reset, taking
// WB*AB*MB clocks). Events that arrive while busy is high are ignored; an
// event offered in the same clock as a clear or build pulse is served first
// and the command is remembered and started on the next clock. A build asked
// for while busy runs after the current operation.
//
// The calibration procedure and the acceptance rule are the paper's. The
// number and placement of bins, the tie rule, counter widths and the
// selection-by-scan form of the sort are this design's choices; the axis
// ranges are those of the parameter-space plot in the paper.
module psd_histogram
  import psd_pkg::*;
#(
  parameter int unsigned WB      = 16,
  parameter int unsigned AB      = 16,
  parameter int unsigned MB      = 16,
  parameter int unsigned W_SHIFT = 2,
  parameter int unsigned CNT_W   = 16,
  localparam int unsigned NB     = WB * AB * MB,
  localparam int unsigned IDX_W  = $clog2(NB)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mode,
  input  logic             clear,
  input  logic             build,
  input  logic [6:0]       accept_pct,
  input  logic             ev_valid,
  input  psd_params_t      ev,
  output logic             acc_valid,
  output logic             accept,
  output logic             busy,
  output logic             build_done,
  output logic [31:0]      total,
  output logic [IDX_W:0]   accepted_bins
);
  localparam int unsigned WB_W = $clog2(WB);
  localparam int unsigned AB_W = $clog2(AB);
  localparam int unsigned MB_W = $clog2(MB);

  logic [CNT_W-1:0] counts  [NB];
  logic             acc_map [NB];

  typedef enum logic [2:0] {S_CLEAR, S_IDLE, S_BCLR, S_SCAN, S_PICK} state_t;
  state_t state;

  // ---------------- binning ----------------
  function automatic logic signed [47:0] to_q15(input logic signed [47:0] v,
                                                input logic [SHIFT_W-1:0] s);
    if (s <= SHIFT_W'(15)) return v <<< (15 - s);
    else                   return v >>> (s - 15);
  endfunction

  logic signed [47:0] a15, m15;
  logic [15:0]        a_off, m_cl;
  logic [WB_W-1:0]    wbin;
  logic [AB_W-1:0]    abin;
  logic [MB_W-1:0]    mbin;
  logic [IDX_W-1:0]   ev_idx;

  always_comb begin
    a15 = to_q15(48'(ev.asym_q), ev.asym_shift);
    m15 = to_q15($signed({32'b0, ev.mom_q}), ev.mom_shift);
    if      (a15 >  48'sd32767) a_off = 16'hffff;
    else if (a15 < -48'sd32768) a_off = 16'h0000;
    else                        a_off = 16'(a15 + 48'sd32768);
    if (m15 > 48'sd65535) m_cl = 16'hffff;
    else                  m_cl = m15[15:0];
    if ((ev.width >> W_SHIFT) >= 16'(WB)) wbin = WB_W'(WB - 1);
    else                                  wbin = WB_W'(ev.width >> W_SHIFT);
    abin   = a_off[15 -: AB_W];
    mbin   = m_cl[15 -: MB_W];
    ev_idx = {wbin, abin, mbin};
  end

  // ---------------- acceptance selection ----------------
  logic [IDX_W-1:0] j;
  logic [CNT_W-1:0] best;
  logic [IDX_W-1:0] best_idx;
  logic [31:0]      cum;
  logic [39:0]      lhs, rhs;
  logic             clear_pend, build_pend;   // commands not yet served

  assign lhs  = 40'(cum + 32'(best)) * 40'd100;
  assign rhs  = 40'(total) * 40'(accept_pct);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_CLEAR;
      j             <= '0;
      best          <= '0;
      best_idx      <= '0;
      cum           <= '0;
      total         <= '0;
      accepted_bins <= '0;
      acc_valid     <= 1'b0;
      accept        <= 1'b0;
      build_done    <= 1'b0;
      clear_pend    <= 1'b0;
      build_pend    <= 1'b0;
    end else begin
      acc_valid  <= 1'b0;
      build_done <= 1'b0;
      if (clear) clear_pend <= 1'b1;
      if (build) build_pend <= 1'b1;
      unique case (state)
        S_CLEAR: begin
          if (!clear) clear_pend <= 1'b0;   // a clear asked for during a clear is served by it
          counts[j]  <= '0;
          acc_map[j] <= 1'b0;
          total      <= '0;
          accepted_bins <= '0;
          j          <= j + 1'b1;
          if (j == IDX_W'(NB - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          j <= '0;
          if (ev_valid) begin
            if (mode) begin
              if (counts[ev_idx] != '1) counts[ev_idx] <= counts[ev_idx] + 1'b1;
              total <= total + 1'b1;
            end else begin
              acc_valid <= 1'b1;
              accept    <= acc_map[ev_idx];
            end
          end else if (clear || clear_pend) begin
            clear_pend <= 1'b0;
            state      <= S_CLEAR;
          end else if (build || build_pend) begin
            build_pend <= 1'b0;
            state      <= S_BCLR;
          end
        end
        S_BCLR: begin
          acc_map[j] <= 1'b0;
          j          <= j + 1'b1;
          cum        <= '0;
          accepted_bins <= '0;
          best       <= '0;
          if (j == IDX_W'(NB - 1)) state <= S_SCAN;
        end
        S_SCAN: begin
          if (!acc_map[j] && counts[j] > best) begin
            best     <= counts[j];
            best_idx <= j;
          end
          j <= j + 1'b1;
          if (j == IDX_W'(NB - 1)) state <= S_PICK;
        end
        S_PICK: begin
          if (best != '0 && lhs <= rhs) begin
            acc_map[best_idx] <= 1'b1;
            cum               <= cum + 32'(best);
            accepted_bins     <= accepted_bins + 1'b1;
            best              <= '0;
            j                 <= '0;
            state             <= S_SCAN;
          end else begin
            build_done <= 1'b1;
            state      <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
