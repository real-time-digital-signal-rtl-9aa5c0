// tb_peak_finder: checks the maximum search.
//
// Random current pulses (and one trace with two equal maxima) are put in a
// behavioural memory; the unit's maximum and its address must match a
// direct search that keeps the first maximum, and each run must take
// len+1 clocks counting the start clock.
module tb_peak_finder;
  import psd_pkg::*;
  import psd_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic        start, done;
  logic [10:0] len;
  logic [9:0]  raddr, peak_addr;
  sample_t     rdata, peak_val;
  sample_t     mem [1024];
  assign rdata = mem[raddr];
  peak_finder dut (.*);

  initial begin
    trace_t j;
    start = 0; len = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      automatic int L = (t == 0) ? 1 : int'($urandom_range(2, 1024));
      automatic int cyc = 0, pa;
      automatic longint pv;
      for (int i = 0; i < 1024; i++) begin
        mem[i] = sample_t'($urandom_range(0, 2000)) - 16'sd1000;
        if (t == 5) mem[i] = -16'sd500;
      end
      if (t == 3) begin mem[L/3] = 16'sd30000; mem[L/2 + 1] = 16'sd30000; end
      for (int i = 0; i < MAXN; i++) j[i] = mem[i];
      ref_peak(j, L, pv, pa);
      len = 11'(L);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == L + 1, $sformatf("len %0d took %0d", L, cyc));
      check(longint'(peak_val) == pv, $sformatf("peak %0d exp %0d", peak_val, pv));
      check(int'(peak_addr) == pa, $sformatf("addr %0d exp %0d", peak_addr, pa));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
