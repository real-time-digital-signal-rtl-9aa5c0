// tb_workload_dep: calibration-then-discrimination run, as in a double-escape
// peak experiment, at the engine's default size.
//
// Calibration set: 600 synthetic events, about 56 % single-site-like (one
// current pulse) and the rest multi-site-like (two or three pulses), the
// mixture expected under a double-escape peak. The region is built at 85 %.
// Then 250 single-site-like and 250 multi-site-like events are classified
// separately, like the peak and continuum regions of a spectrum. Every
// record is checked against the reference chain and the reference region.
// The run reports the two retained fractions. It requires the calibration
// class to be retained more often than the other, and the calibration set
// itself to be retained at no more than the chosen 85 %.
module tb_workload_dep;
  import psd_pkg::*;
  import psd_ref_pkg::*;
  localparam int WB = 16, AB = 16, MB = 16, WS = 2, NB = WB * AB * MB, L = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (30000000) @(posedge clk);
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

  int cnt [NB];
  bit racc [NB];

  // send one trace, check the record, return the reference bin
  task automatic one_event(input int nsites, output int bin, output bit acc);
    trace_t q, j; bit s; longint pv, f, b, num, aq, mq; int pa, n0, n1, nm, ash, msh;
    longint unsigned ad, md; bit mo, ao, dmo; longint area;
    make_trace(L, 60, nsites, 1500, 3, q);
    for (int i = 0; i < L; i++) q[i] = longint'(sample_t'(q[i]));
    ref_sg(q, L, sg_coef, 15, j, s);
    ref_peak(j, L, pv, pa);
    ref_cfd(j, L, pv, pa, 8, n0, n1);
    ref_area(j, n0, n1, nm, f, b);
    ref_moment(j, n0, n1, nm, num, mo);
    area = (f + b > 0) ? f + b : 0;
    ref_norm(longint'(area), 15, ad, ash);
    ref_div(f - b, longint'(ad), 1, aq, ao);
    ref_norm(longint'(area) * longint'((n1 - n0) * (n1 - n0)), 16, md, msh);
    ref_div(num, longint'(md), 0, mq, dmo);
    bin = ref_bin(n1 - n0, aq, ash, mq, msh, WB, AB, MB, WS);
    for (int i = 0; i < L; i++) begin
      @(negedge clk);
      while (!trace_ready) @(negedge clk);
      trace_valid = 1; trace_data = sample_t'(q[i]); trace_last = (i == L - 1);
    end
    @(negedge clk);
    trace_valid = 0; trace_last = 0;
    while (!rec_valid) @(negedge clk);
    check(rec.p.width == 16'(n1 - n0) && rec.p.asym_q == 16'(aq) && rec.p.asym_shift == 7'(ash)
          && rec.p.mom_q == 16'(mq) && rec.p.mom_shift == 7'(msh),
          $sformatf("parameters of a %0d-site event", nsites));
    acc = rec.accept;
    if (!cal_mode) check(rec.classified && rec.accept == racc[bin], "decision");
  endtask

  initial begin
    int bin; bit acc;
    static int n_cal = 0, ret_cal = 0, ret_ss = 0, ret_ms = 0, nacc = 0;
    static longint cum = 0;
    int nsites [600];
    trace_valid = 0; trace_last = 0; trace_data = 0;
    psd_enable = 1; sg_enable = 1; cal_mode = 1; cal_clear = 0; cal_build = 0; accept_pct = 85;
    sg_coef = sg_deriv_coefs(16);
    for (int b = 0; b < NB; b++) begin cnt[b] = 0; racc[b] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (hist_busy) @(negedge clk);

    // calibration: ~56 % single-site-like
    for (int e = 0; e < 600; e++) begin
      nsites[e] = ($urandom_range(0, 99) < 56) ? 1 : 2 + int'($urandom_range(0, 1));
      one_event(nsites[e], bin, acc);
      if (cnt[bin] < 65535) cnt[bin]++;
      n_cal++;
    end
    check(cal_total == 32'(n_cal), "calibration total");
    // reference region
    forever begin
      automatic int best = 0, bi = 0;
      for (int b = 0; b < NB; b++) if (!racc[b] && cnt[b] > best) begin best = cnt[b]; bi = b; end
      if (best == 0 || (cum + best) * 100 > longint'(n_cal) * 85) break;
      racc[bi] = 1; cum += best; nacc++;
    end
    @(negedge clk) cal_build = 1;
    @(negedge clk) cal_build = 0;
    while (!cal_build_done) @(negedge clk);
    check(int'(accepted_bins) == nacc, $sformatf("accepted bins %0d exp %0d", accepted_bins, nacc));
    for (int b = 0; b < NB; b++) ret_cal += racc[b] ? cnt[b] : 0;
    check(ret_cal * 100 <= n_cal * 85 && ret_cal > 0, "calibration set retained at most 85 %");

    // discrimination
    cal_mode = 0;
    for (int e = 0; e < 250; e++) begin one_event(1, bin, acc); ret_ss += int'(acc); end
    for (int e = 0; e < 250; e++) begin one_event(2 + e % 2, bin, acc); ret_ms += int'(acc); end
    $display("region: %0d bins; retained: calibration %0d/%0d, single-site-like %0d/250, multi-site-like %0d/250",
             nacc, ret_cal, n_cal, ret_ss, ret_ms);
    check(ret_ss > ret_ms, "single-site-like events retained more often than multi-site-like ones");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
