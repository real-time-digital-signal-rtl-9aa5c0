// tb_psd_histogram: checks calibration, region building and classification.
//
// A reduced histogram (4 x 4 x 4 bins, 8-bit counters) is filled with
// calibration events drawn mostly from a few clusters, so some bins are
// full, one saturates and many stay empty. A reference model bins the same
// events, sorts the bins by count and accepts them while the running sum
// stays within the chosen percentage. The testbench then checks the total,
// the number of accepted bins, the build time ((accepted+1) scans of
// NB+1 clocks after an NB-clock clearing pass), and the decision for random
// events in run mode, for several percentages. It finally checks that clear
// empties the histogram, and that a bin whose count brings the sum to
// exactly the chosen percentage is accepted, and that a build requested in
// the same clock as an event is remembered and run after it.
module tb_psd_histogram;
  import psd_pkg::*;
  import psd_ref_pkg::*;
  localparam int WB = 4, AB = 4, MB = 4, WS = 3, NB = WB * AB * MB, CW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        mode, clear, build, ev_valid, acc_valid, accept, busy, build_done;
  logic [6:0]  accept_pct;
  psd_params_t ev;
  logic [31:0] total;
  logic [6:0]  accepted_bins;
  psd_histogram #(.WB(WB), .AB(AB), .MB(MB), .W_SHIFT(WS), .CNT_W(CW)) dut (.*);

  int cnt [NB];
  bit racc [NB];

  function automatic psd_params_t rand_ev(int cluster);
    psd_params_t p;
    static int base_w [4] = '{10, 20, 5, 28};
    p.width      = 16'(cluster < 4 ? base_w[cluster] + int'($urandom_range(0, 3)) : $urandom_range(0, 60));
    p.asym_shift = 7'($urandom_range(0, 20));
    p.asym_q     = 16'(cluster < 4 ? ((cluster - 2) * 3000 + int'($urandom_range(0, 500))) >>> (15 - ((p.asym_shift > 15) ? 15 : p.asym_shift)) : $urandom);
    p.mom_shift  = 7'($urandom_range(0, 16));
    p.mom_q      = 16'(cluster < 4 ? (20000 + cluster * 9000) >> (15 - ((p.mom_shift > 15) ? 15 : p.mom_shift)) : $urandom);
    return p;
  endfunction

  function automatic int bin_of(psd_params_t p);
    return ref_bin(int'(p.width), longint'(p.asym_q), int'(p.asym_shift), longint'(p.mom_q),
                   int'(p.mom_shift), WB, AB, MB, WS);
  endfunction

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
    static int tot = 0;
    static int pcts [3] = '{85, 50, 100};
    mode = 1; clear = 0; build = 0; ev_valid = 0; accept_pct = 85; ev = '0;
    for (int b = 0; b < NB; b++) cnt[b] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (busy) @(negedge clk);
    check(total == 0, "empty after reset");
    // calibration
    for (int e = 0; e < 850; e++) begin
      automatic int cl = (e < 450) ? 0 : int'($urandom_range(0, 5));
      automatic psd_params_t p = rand_ev(cl);
      automatic int b = bin_of(p);
      @(negedge clk);
      ev = p; ev_valid = 1;
      if (cnt[b] < (1 << CW) - 1) cnt[b]++;
      tot++;
    end
    @(negedge clk) ev_valid = 0;
    @(negedge clk);
    check(total == 32'(tot), $sformatf("total %0d exp %0d", total, tot));
    begin
      automatic int mx = 0;
      for (int b = 0; b < NB; b++) if (cnt[b] > mx) mx = cnt[b];
      check(mx == (1 << CW) - 1, $sformatf("a counter saturated (max %0d)", mx));
    end
    // build and classify at several percentages
    foreach (pcts[k]) begin
      automatic int nacc = ref_build(pcts[k], tot);
      automatic int cyc = 0, hits = 0;
      accept_pct = 7'(pcts[k]);
      mode = 0;
      @(negedge clk) build = 1;
      @(negedge clk) build = 0;
      cyc = 1;
      while (!build_done) begin @(negedge clk); cyc++; end
      check(int'(accepted_bins) == nacc, $sformatf("pct %0d: %0d bins exp %0d", pcts[k], accepted_bins, nacc));
      check(cyc == 1 + NB + (nacc + 1) * (NB + 1), $sformatf("build took %0d", cyc));
      @(negedge clk);
      for (int e = 0; e < 300; e++) begin
        automatic psd_params_t p = rand_ev(int'($urandom_range(0, 5)));
        ev = p; ev_valid = 1;
        @(negedge clk);
        ev_valid = 0;
        check(acc_valid, "decision one clock after the event");
        check(accept == racc[bin_of(p)], $sformatf("pct %0d bin %0d accept %0d", pcts[k], bin_of(p), accept));
        hits += int'(accept);
      end
      check(hits > 0 && (pcts[k] == 100 || hits < 300), "some accepted, some rejected");
    end
    // clear
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    while (busy) @(negedge clk);
    check(total == 0, "clear empties the histogram");
    // exact boundary: 17 of 20 events in one bin is exactly 85 %, so that bin
    // is accepted and the bin holding the other 3 is not
    mode = 1;
    for (int e = 0; e < 20; e++) begin
      automatic psd_params_t p = '0;
      p.width = (e < 17) ? 16'd0 : 16'd31;
      @(negedge clk);
      ev = p; ev_valid = 1;
    end
    @(negedge clk) ev_valid = 0;
    accept_pct = 85; mode = 0;
    @(negedge clk) build = 1;
    @(negedge clk) build = 0;
    while (!build_done) @(negedge clk);
    check(accepted_bins == 1, $sformatf("boundary: %0d bins accepted, exp 1", accepted_bins));
    @(negedge clk);
    ev = '0; ev_valid = 1;
    @(negedge clk) ev_valid = 0;
    check(accept, "boundary bin accepted");
    ev.width = 16'd31; ev_valid = 1;
    @(negedge clk) ev_valid = 0;
    check(!accept, "other bin rejected");
    // an event and a build pulse in the same clock: event first, build after
    @(negedge clk);
    ev = '0; ev_valid = 1; build = 1;
    @(negedge clk) ev_valid = 0; build = 0;
    check(acc_valid && accept, "event served in the clock of a build request");
    @(negedge clk);
    check(busy, "remembered build starts on the next clock");
    while (!build_done) @(negedge clk);
    check(accepted_bins == 1, "remembered build gives the same region");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
