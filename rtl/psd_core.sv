// psd_core: real-time pulse-shape parameter engine and discriminator.
//
// For every triggered pulse the engine reduces a digitised charge trace to
// three numbers that describe the shape of its current pulse - width,
// asymmetry and normalized moment - and, once calibrated, decides whether the
// event lies in the region of parameter space that calibration events (for
// example double-escape events, which are mostly single-site) fill most
// densely. Only the parameters need to be stored per event instead of the
// whole trace.
//
// Flow for one trace (one stage after another, all on one pulse memory):
//   LOAD  trace samples arrive on trace_valid/trace_data; trace_last ends it.
//   SG    sg_filter differentiates the charge trace in place (if sg_enable);
//         its window is SG_TAPS samples long (9 by default).
//   PEAK  peak_finder finds the maximum of the current pulse.
//   CFD   cfd_width finds N0 and N at 8 % of the peak; width = N - N0.
//   AREA  area_integrator: N_mid, front area F and back area B.
//   MOM   moment_mac: 12 * sum j_i (i - N_mid)^2.
//   DIV   two nr_dividers run together:
//           asymmetry = (F - B) / ((F + B) >> sa)           (signed)
//           moment    = 12 M   / (((F + B) * W^2) >> sm)   (unsigned)
//         where div_normalizer picks sa and sm so each divisor fits 16 bits.
//   HIST  the parameters go to psd_histogram: counted when cal_mode is 1,
//         classified when it is 0. The engine waits here while the histogram
//         is clearing or building its acceptance region.
//   EMIT  rec_valid pulses for one clock with the record.
// With psd_enable low the trace is only stored and a record with
// computed = 0 is emitted at once, so the engine can be switched off as the
// paper's runs with the processor off did.
//
// Timing for a trace of L samples and a window of K = N - N0 + 1 samples:
// loading takes L clocks; from the clock that takes the last sample to the
// clock where rec_valid is high is 11*L + 4*K + 34 clocks for 9 taps
// (L + 4*K + 31 with the SG filter bypassed): 10L for the filter, L for the peak search,
// K for the window walk, K for the areas, 2K for the moment, 17 for the two
// divisions in parallel, and one clock of hand-over per stage. The HIST
// stage adds the remaining time of a clear or build if one is running.
// trace_ready is high only in LOAD; the source must hold samples otherwise.
//
// The stage order, the arithmetic and the operand widths follow the paper's
// processor routine. Running the stages as dedicated logic instead of a
// program, the trace stream interface, the memory depth and the on/off and
// SG-bypass inputs are this design's choices.
module psd_core
  import psd_pkg::*;
#(
  parameter int unsigned ADDR_W      = 10,
  parameter int unsigned CFD_PERCENT = 8,
  parameter int unsigned SG_SHIFT    = 15,
  parameter int unsigned SG_TAPS     = NTAPS,
  parameter int unsigned WB          = 16,
  parameter int unsigned AB          = 16,
  parameter int unsigned MB          = 16,
  parameter int unsigned W_SHIFT     = 2,
  localparam int unsigned NB_W       = $clog2(WB * AB * MB)
) (
  input  logic          clk,
  input  logic          rst_n,
  // trace from the trigger logic
  input  logic          trace_valid,
  input  sample_t       trace_data,
  input  logic          trace_last,
  output logic          trace_ready,
  // configuration
  input  logic          psd_enable,
  input  logic          sg_enable,
  input  sample_t       sg_coef [SG_TAPS],
  // calibration control
  input  logic          cal_mode,
  input  logic          cal_clear,
  input  logic          cal_build,
  input  logic [6:0]    accept_pct,
  output logic          hist_busy,
  output logic          cal_build_done,
  output logic [31:0]   cal_total,
  output logic [NB_W:0] accepted_bins,
  // result
  output logic          rec_valid,
  output psd_record_t   rec
);
  typedef enum logic [3:0] {
    S_LOAD, S_SG, S_PEAK, S_CFD, S_AREA, S_MOM, S_DIV, S_HIST, S_CLS, S_EMIT
  } state_t;
  state_t state;
  logic   go;           // first clock of a stage: starts its unit

  // ---------------- pulse memory ----------------
  logic              we;
  logic [ADDR_W-1:0] waddr, raddr, wptr;
  sample_t           wdata, rdata;
  logic [ADDR_W:0]   len;

  pulse_ram #(.DATA_W(DATA_W), .DEPTH(1 << ADDR_W)) u_ram (
    .clk, .we, .waddr, .wdata(wdata), .raddr, .rdata(rdata)
  );

  // ---------------- stages ----------------
  logic              sg_we, sg_done, sg_sat;
  logic [ADDR_W-1:0] sg_raddr, sg_waddr;
  sample_t           sg_wdata;
  sg_filter #(.ADDR_W(ADDR_W), .SG_SHIFT(SG_SHIFT), .TAPS(SG_TAPS)) u_sg (
    .clk, .rst_n, .start(go && state == S_SG), .len, .coef(sg_coef),
    .raddr(sg_raddr), .rdata, .we(sg_we), .waddr(sg_waddr), .wdata(sg_wdata),
    .busy(), .done(sg_done), .sat(sg_sat)
  );

  logic              pk_done;
  logic [ADDR_W-1:0] pk_raddr, pk_addr;
  sample_t           pk_val;
  peak_finder #(.ADDR_W(ADDR_W)) u_peak (
    .clk, .rst_n, .start(go && state == S_PEAK), .len, .raddr(pk_raddr), .rdata,
    .peak_val(pk_val), .peak_addr(pk_addr), .done(pk_done)
  );

  logic              cf_done;
  logic [ADDR_W-1:0] cf_raddr, n0, n1;
  logic [15:0]       width;
  cfd_width #(.ADDR_W(ADDR_W), .CFD_PERCENT(CFD_PERCENT)) u_cfd (
    .clk, .rst_n, .start(go && state == S_CFD), .len, .peak_val(pk_val), .peak_addr(pk_addr),
    .raddr(cf_raddr), .rdata, .n0, .n1, .width, .done(cf_done)
  );

  logic               ar_done;
  logic [ADDR_W-1:0]  ar_raddr, nmid;
  logic signed [31:0] front, back;
  area_integrator #(.ADDR_W(ADDR_W)) u_area (
    .clk, .rst_n, .start(go && state == S_AREA), .n0, .n1, .raddr(ar_raddr), .rdata,
    .nmid, .front, .back, .done(ar_done)
  );

  logic              mm_done, mm_ovf;
  logic [ADDR_W-1:0] mm_raddr;
  logic [31:0]       mnum;
  moment_mac #(.ADDR_W(ADDR_W)) u_mom (
    .clk, .rst_n, .start(go && state == S_MOM), .n0, .n1, .nmid, .raddr(mm_raddr), .rdata,
    .num(mnum), .ovf(mm_ovf), .done(mm_done)
  );

  // ---------------- divisor scaling and division ----------------
  logic signed [32:0] total_area;
  logic [31:0]        area_pos;
  logic [63:0]        mom_den;
  logic [14:0]        asym_dvs;
  logic [15:0]        mom_dvs;
  logic [SHIFT_W-1:0] asym_sh, mom_sh;

  assign total_area = 33'(front) + 33'(back);
  assign area_pos   = (total_area > 0) ? total_area[31:0] : '0;
  assign mom_den    = 64'(area_pos) * 64'(32'(width) * 32'(width));

  div_normalizer #(.IN_W(64), .OUT_W(15)) u_norm_a (
    .value(64'(area_pos)), .scaled(asym_dvs), .shift(asym_sh)
  );
  div_normalizer #(.IN_W(64), .OUT_W(16)) u_norm_m (
    .value(mom_den), .scaled(mom_dvs), .shift(mom_sh)
  );

  logic        da_done, da_ovf, dm_done, dm_ovf;
  logic [15:0] asym_q, mom_q;
  nr_divider #(.SIGNED(1'b1)) u_div_a (
    .clk, .rst_n, .start(go && state == S_DIV), .dividend(32'(front - back)),
    .divisor({1'b0, asym_dvs}), .quotient(asym_q), .ovf(da_ovf), .done(da_done)
  );
  nr_divider #(.SIGNED(1'b0)) u_div_m (
    .clk, .rst_n, .start(go && state == S_DIV), .dividend(mnum),
    .divisor(mom_dvs), .quotient(mom_q), .ovf(dm_ovf), .done(dm_done)
  );

  // ---------------- calibration histogram ----------------
  psd_params_t params;
  logic        h_acc_valid, h_accept;
  assign params.width      = width;
  assign params.asym_q     = asym_q;
  assign params.asym_shift = asym_sh;
  assign params.mom_q      = mom_q;
  assign params.mom_shift  = mom_sh;

  psd_histogram #(.WB(WB), .AB(AB), .MB(MB), .W_SHIFT(W_SHIFT)) u_hist (
    .clk, .rst_n, .mode(cal_mode), .clear(cal_clear), .build(cal_build), .accept_pct,
    .ev_valid(state == S_HIST && !hist_busy), .ev(params),
    .acc_valid(h_acc_valid), .accept(h_accept), .busy(hist_busy),
    .build_done(cal_build_done), .total(cal_total), .accepted_bins
  );

  // ---------------- memory port sharing ----------------
  assign trace_ready = (state == S_LOAD);
  always_comb begin
    we    = 1'b0;
    waddr = wptr;
    wdata = trace_data;
    if (state == S_LOAD) begin
      we = trace_valid;
    end else if (state == S_SG) begin
      we    = sg_we;
      waddr = sg_waddr;
      wdata = sg_wdata;
    end
    unique case (state)
      S_SG:    raddr = sg_raddr;
      S_PEAK:  raddr = pk_raddr;
      S_CFD:   raddr = cf_raddr;
      S_AREA:  raddr = ar_raddr;
      S_MOM:   raddr = mm_raddr;
      default: raddr = '0;
    endcase
  end

  // ---------------- sequencer ----------------
  logic da_seen, dm_seen;
  logic mode_at_hist;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_LOAD;
      go           <= 1'b0;
      wptr         <= '0;
      len          <= '0;
      da_seen      <= 1'b0;
      dm_seen      <= 1'b0;
      mode_at_hist <= 1'b0;
      rec_valid    <= 1'b0;
      rec          <= '0;
    end else begin
      go        <= 1'b0;
      rec_valid <= 1'b0;
      unique case (state)
        S_LOAD: if (trace_valid) begin
          if (trace_last || wptr == '1) begin
            len  <= {1'b0, wptr} + 1'b1;
            wptr <= '0;
            go   <= 1'b1;
            rec  <= '0;
            if (!psd_enable)    state <= S_EMIT;
            else if (sg_enable) state <= S_SG;
            else                state <= S_PEAK;
          end else begin
            wptr <= wptr + 1'b1;
          end
        end
        S_SG:   if (sg_done) begin state <= S_PEAK; go <= 1'b1; rec.sg_sat <= sg_sat; end
        S_PEAK: if (pk_done) begin state <= S_CFD;  go <= 1'b1; end
        S_CFD:  if (cf_done) begin state <= S_AREA; go <= 1'b1; end
        S_AREA: if (ar_done) begin state <= S_MOM;  go <= 1'b1; end
        S_MOM:  if (mm_done) begin
          state   <= S_DIV;
          go      <= 1'b1;
          da_seen <= 1'b0;
          dm_seen <= 1'b0;
        end
        S_DIV: begin
          if (da_done) da_seen <= 1'b1;
          if (dm_done) dm_seen <= 1'b1;
          if ((da_seen || da_done) && (dm_seen || dm_done)) state <= S_HIST;
        end
        S_HIST: if (!hist_busy) begin
          mode_at_hist <= cal_mode;
          rec.p        <= params;
          rec.peak     <= pk_val;
          rec.n0       <= 16'(n0);
          rec.n1       <= 16'(n1);
          rec.nmid     <= 16'(nmid);
          rec.computed <= 1'b1;
          rec.asym_ovf <= da_ovf;
          rec.mom_ovf  <= dm_ovf || mm_ovf;
          state        <= S_CLS;
        end
        S_CLS: begin
          // the histogram answers one clock after the event in run mode
          if (!mode_at_hist) begin
            rec.classified <= 1'b1;
            rec.accept     <= h_accept;
          end
          state <= S_EMIT;
        end
        S_EMIT: begin
          rec_valid <= 1'b1;
          state     <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // the histogram must answer in run mode exactly one clock after the event
  a_cls: assert property (@(posedge clk) disable iff (!rst_n)
                          state == S_CLS && !mode_at_hist |-> h_acc_valid);
endmodule
