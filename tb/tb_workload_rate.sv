// tb_workload_rate: event throughput with the engine on and off.
//
// Streams 40 full-length (1024-sample) traces back to back with the engine
// on, then 40 with it off, and measures the clocks from one trace's first
// sample to the next trace's first sample. With the engine on, each event
// must fit the budget that an event rate of 140 per second leaves at a
// 33 MHz clock (235714 clocks). With it off, only the load and the
// one idle clock the stimulus leaves between traces remain (L + 1 clocks). Every engine-on record is checked to
// carry computed parameters, and every engine-off record to carry none.
module tb_workload_rate;
  import psd_pkg::*;
  import psd_ref_pkg::*;
  localparam int L = 1024;
  localparam int BUDGET = 33000000 / 140;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (2000000) @(posedge clk);
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

  // count clocks; note first-sample times and collect records
  longint now = 0;
  always @(posedge clk) now <= now + 1;
  int n_rec = 0, n_bad = 0;
  always @(posedge clk) if (rec_valid) begin
    n_rec++;
    if (rec.computed != psd_enable) n_bad++;
  end

  task automatic stream(input bit on, output longint worst, output longint best);
    trace_t q;
    longint t_prev = -1;
    worst = 0; best = 64'h7fffffffffffffff;
    psd_enable = on;
    make_trace(L, 300, 1, 1200, 3, q);
    for (int e = 0; e < 40; e++) begin
      for (int i = 0; i < L; i++) begin
        @(negedge clk);
        while (!trace_ready) @(negedge clk);
        trace_valid = 1; trace_data = sample_t'(q[i]); trace_last = (i == L - 1);
        if (i == 0) begin
          if (t_prev >= 0) begin
            if (now - t_prev > worst) worst = now - t_prev;
            if (now - t_prev < best)  best  = now - t_prev;
          end
          t_prev = now;
        end
      end
      @(negedge clk);
      trace_valid = 0; trace_last = 0;
    end
    while (!trace_ready) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    longint w_on, b_on, w_off, b_off;
    trace_valid = 0; trace_last = 0; trace_data = 0;
    psd_enable = 1; sg_enable = 1; cal_mode = 1; cal_clear = 0; cal_build = 0; accept_pct = 85;
    sg_coef = sg_deriv_coefs(8);
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (hist_busy) @(negedge clk);
    stream(1, w_on, b_on);
    stream(0, w_off, b_off);
    $display("clocks per event: engine on %0d..%0d (budget %0d), engine off %0d..%0d",
             b_on, w_on, BUDGET, b_off, w_off);
    check(w_on <= BUDGET, "engine-on event fits the 140/s budget at 33 MHz");
    check(w_on > 10 * L, "engine-on time includes the filter pass");
    check(w_off == L + 1 && b_off == L + 1, "engine off: no overhead beyond the load");
    check(n_rec == 80, $sformatf("%0d records", n_rec));
    check(n_bad == 0, "computed flag follows the engine switch");
    check(cal_total == 40, "only engine-on events reach the histogram");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
