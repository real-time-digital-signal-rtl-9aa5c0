// tb_psd_core: end-to-end test of the pulse-shape engine at its default size.
//
// Synthetic preamplifier traces go in through the trace port; every record
// that comes out is compared field by field with the reference chain
// (filter, peak, 8 % window, areas, moment, divisor scaling, division,
// binning). The test walks through the whole use of the engine:
//   1. the engine switched off (record with computed = 0);
//   2. calibration with mostly single-site-like pulses, a few small ones so
//      that divisors are left unscaled, and one trace sent while a region is
//      being built, so the engine has to wait for the histogram;
//   3. building the acceptance region at 85 % and checking the number of
//      accepted bins against a reference sort;
//   4. run mode with single- and multi-site-like pulses, checking every
//      accept decision, one trace without the SG filter, and one trace that
//      fills the whole 1024-word memory.
// Each mechanism is counted and must have happened at least once. The
// latency from the clock that takes the last sample to rec_valid must be
// exactly 11*L + 4*K + 34 clocks (L + 4*K + 31 without the SG filter), for
// L trace samples and K = N - N0 + 1 window samples, when the histogram is
// free.
module tb_psd_core;
  import psd_pkg::*;
  import psd_ref_pkg::*;
  localparam int WB = 16, AB = 16, MB = 16, WS = 2, NB = WB * AB * MB;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        trace_valid, trace_last, trace_ready;
  sample_t     trace_data;
  logic        psd_enable, sg_enable, cal_mode, cal_clear, cal_build;
  coef_arr_t   sg_coef;
  logic [6:0]  accept_pct;
  logic        hist_busy, cal_build_done, rec_valid;
  logic [31:0] cal_total;
  logic [12:0] accepted_bins;
  psd_record_t rec;

  psd_core dut (.*);

  // mechanism counters
  int n_off, n_cal, n_run_acc, n_run_rej, n_nosg, n_stall, n_build;
  int n_asym_scaled, n_asym_intact, n_mom_scaled, n_mom_intact, n_wide_area, n_full;

  int cnt [NB];
  bit racc [NB];

  always @(posedge clk) if (dut.state == 4'd7 && hist_busy) n_stall++;

  // expected record for one trace
  task automatic expect_rec(input trace_t q, input int L, input bit sgon, input bit on,
                            output psd_record_t e, output int bin, output int k);
    trace_t j; bit s; longint pv, f, b, num, aq, mq; int pa, n0, n1, nm, ash, msh;
    longint unsigned ad, md; bit mo, ao, dmo;
    longint area;
    e = '0; bin = 0; k = 0;
    if (!on) return;
    if (sgon) ref_sg(q, L, sg_coef, 15, j, s); else begin j = q; s = 0; end
    ref_peak(j, L, pv, pa);
    ref_cfd(j, L, pv, pa, 8, n0, n1);
    ref_area(j, n0, n1, nm, f, b);
    ref_moment(j, n0, n1, nm, num, mo);
    area = (f + b > 0) ? f + b : 0;
    ref_norm(longint'(area), 15, ad, ash);
    ref_div(f - b, longint'(ad), 1, aq, ao);
    ref_norm(longint'(area) * longint'((n1 - n0) * (n1 - n0)), 16, md, msh);
    ref_div(num, longint'(md), 0, mq, dmo);
    e.p.width = 16'(n1 - n0); e.p.asym_q = 16'(aq); e.p.asym_shift = 7'(ash);
    e.p.mom_q = 16'(mq); e.p.mom_shift = 7'(msh);
    e.peak = 16'(pv); e.n0 = 16'(n0); e.n1 = 16'(n1); e.nmid = 16'(nm);
    e.computed = 1; e.sg_sat = s; e.asym_ovf = ao; e.mom_ovf = mo | dmo;
    bin = ref_bin(n1 - n0, aq, ash, mq, msh, WB, AB, MB, WS);
    k = n1 - n0 + 1;
    if (ash > 0) n_asym_scaled++; else n_asym_intact++;
    if (msh > 0) n_mom_scaled++; else n_mom_intact++;
    if (f > 32767 || b > 32767) n_wide_area++;
  endtask

  // send one trace and check the record that comes back
  task automatic run_trace(input int L, input int nsites, input int amp, input bit sgon,
                           input bit on, input bit build_during);
    trace_t q; psd_record_t e; int bin, k, lat;
    make_trace(L, L / 3, nsites, amp, 2, q);
    for (int i = 0; i < L; i++) q[i] = longint'(sample_t'(q[i]));
    psd_enable = on; sg_enable = sgon;
    expect_rec(q, L, sgon, on, e, bin, k);
    for (int i = 0; i < L; i++) begin
      @(negedge clk);
      while (!trace_ready) @(negedge clk);
      trace_valid = 1; trace_data = sample_t'(q[i]); trace_last = (i == L - 1);
    end
    @(negedge clk);
    trace_valid = 0; trace_last = 0;
    if (build_during) begin cal_build = 1; @(negedge clk) cal_build = 0; end
    lat = 1;
    while (!rec_valid) begin @(negedge clk); lat++; end
    if (on && !cal_mode) begin
      e.classified = 1;
      e.accept = racc[bin];
    end
    check(rec == e, $sformatf("record L=%0d sites=%0d: got w=%0d a=%0d/%0d m=%0d/%0d acc=%0d, exp w=%0d a=%0d/%0d m=%0d/%0d acc=%0d",
          L, nsites, rec.p.width, $signed(rec.p.asym_q), rec.p.asym_shift, rec.p.mom_q, rec.p.mom_shift, rec.accept,
          e.p.width, $signed(e.p.asym_q), e.p.asym_shift, e.p.mom_q, e.p.mom_shift, e.accept));
    if (on && !build_during)
      check(lat == (sgon ? 11 * L + 35 : L + 32) + 4 * k,
            $sformatf("latency %0d for L=%0d K=%0d", lat, L, k));
    if (!on) n_off++;
    else if (cal_mode) begin
      n_cal++;
      if (cnt[bin] < 65535) cnt[bin]++;
    end else if (e.accept) n_run_acc++;
    else n_run_rej++;
    if (on && !sgon) n_nosg++;
    if (L == 1024) n_full++;
  endtask

  function automatic int ref_build(int pct, int tot);
    longint cum = 0;
    int n = 0;
    for (int b = 0; b < NB; b++) racc[b] = 0;
    forever begin
      int best = 0, bi = 0;
      for (int b = 0; b < NB; b++) if (!racc[b] && cnt[b] > best) begin best = cnt[b]; bi = b; end
      if (best == 0 || (cum + best) * 100 > longint'(tot) * pct) break;
      racc[bi] = 1; cum += best; n++;
    end
    return n;
  endfunction

  initial begin
    int nacc;
    trace_valid = 0; trace_last = 0; trace_data = 0;
    psd_enable = 1; sg_enable = 1; cal_mode = 1; cal_clear = 0; cal_build = 0; accept_pct = 85;
    sg_coef = sg_deriv_coefs(8);
    for (int b = 0; b < NB; b++) begin cnt[b] = 0; racc[b] = 0; end
    {n_off, n_cal, n_run_acc, n_run_rej, n_nosg, n_stall, n_build} = '0;
    {n_asym_scaled, n_asym_intact, n_mom_scaled, n_mom_intact, n_wide_area, n_full} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (hist_busy) @(negedge clk);

    // 1. engine off
    run_trace(300, 1, 300, 1, 0, 0);
    // 2. calibration
    for (int t = 0; t < 120; t++) begin
      automatic int amp = (t % 10 == 3) ? 6 : (t % 10 == 7) ? 2000 : 400;
      run_trace(400, (t % 5 == 4) ? 2 : 1, amp, 1, 1, 0);
    end
    check(cal_total == 32'(n_cal), $sformatf("calibration total %0d exp %0d", cal_total, n_cal));
    // a trace arriving while the region is built: engine waits, event still counted
    run_trace(400, 1, 400, 1, 1, 1);
    while (hist_busy) @(negedge clk);
    // 3. build at 85 %
    nacc = ref_build(85, n_cal);
    @(negedge clk) cal_build = 1;
    @(negedge clk) cal_build = 0;
    while (!cal_build_done) @(negedge clk);
    n_build++;
    check(int'(accepted_bins) == nacc, $sformatf("accepted bins %0d exp %0d", accepted_bins, nacc));
    // 4. run mode
    cal_mode = 0;
    for (int t = 0; t < 60; t++) run_trace(400, 1 + t % 3, 400, 1, 1, 0);
    run_trace(200, 1, 400, 0, 1, 0);
    run_trace(1024, 1, 400, 1, 1, 0);

    $display("off=%0d cal=%0d acc=%0d rej=%0d nosg=%0d stall=%0d build=%0d asym scaled/intact=%0d/%0d mom scaled/intact=%0d/%0d wide=%0d full=%0d bins=%0d",
             n_off, n_cal, n_run_acc, n_run_rej, n_nosg, n_stall, n_build, n_asym_scaled, n_asym_intact,
             n_mom_scaled, n_mom_intact, n_wide_area, n_full, nacc);
    check(n_off > 0, "engine switched off");
    check(n_cal > 0, "calibration events");
    check(n_build > 0, "acceptance region built");
    check(n_run_acc > 0, "events accepted");
    check(n_run_rej > 0, "events rejected");
    check(n_nosg > 0, "SG filter bypassed");
    check(n_stall > 0, "engine waited for the histogram");
    check(n_asym_scaled > 0 && n_asym_intact > 0, "asymmetry divisor scaled and left intact");
    check(n_mom_scaled > 0 && n_mom_intact > 0, "moment divisor scaled and left intact");
    check(n_wide_area > 0, "areas beyond 16 bits");
    check(n_full > 0, "full-length trace");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
