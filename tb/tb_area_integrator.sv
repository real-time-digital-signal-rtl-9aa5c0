// tb_area_integrator: checks the midpoint and front/back areas.
//
// Random windows over random signed samples, including one-sample and
// two-sample windows, are integrated; N_mid, F and B must match a direct
// sum, and the run must take N-N0+2 clocks including the start clock.
module tb_area_integrator;
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
  logic [9:0]  n0, n1, raddr, nmid;
  sample_t     rdata;
  logic signed [31:0] front, back;
  sample_t     mem [1024];
  assign rdata = mem[raddr];
  area_integrator dut (.*);

  initial begin
    trace_t j;
    start = 0; n0 = 0; n1 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int a = int'($urandom_range(0, 1000));
      automatic int w = (t < 3) ? t : int'($urandom_range(0, 1023 - a));
      automatic int cyc = 0, em;
      automatic longint ef, eb;
      for (int i = 0; i < 1024; i++) begin
        mem[i] = sample_t'($urandom_range(0, 65535));
        j[i]   = mem[i];
      end
      ref_area(j, a, a + w, em, ef, eb);
      n0 = 10'(a); n1 = 10'(a + w);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(int'(nmid) == em, "midpoint");
      check(longint'(front) == ef && longint'(back) == eb,
            $sformatf("F %0d B %0d exp %0d %0d", front, back, ef, eb));
      check(cyc == w + 2, $sformatf("took %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
