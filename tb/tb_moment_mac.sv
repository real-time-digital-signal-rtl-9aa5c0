// tb_moment_mac: checks the normalized-moment numerator.
//
// Random windows of positive current samples, and a few large windows of
// full-scale samples that must clip, are accumulated; 12*sum j (i-Nmid)^2
// and the clip flag must match a direct computation, and the run must take
// 2*(N-N0+1)+2 clocks including the start clock.
module tb_moment_mac;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic        start, done, ovf;
  logic [9:0]  n0, n1, nmid, raddr;
  sample_t     rdata;
  logic [31:0] num;
  sample_t     mem [1024];
  assign rdata = mem[raddr];
  moment_mac dut (.*);

  initial begin
    trace_t j;
    int n_ovf = 0;
    start = 0; n0 = 0; n1 = 0; nmid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int a = int'($urandom_range(0, 800));
      automatic int w = (t < 2) ? t : (t < 5) ? 200 : int'($urandom_range(0, 120));
      automatic int m = a + (w >> 1);
      automatic int cyc = 0;
      automatic longint en;
      automatic bit eo;
      for (int i = 0; i < 1024; i++) begin
        mem[i] = (t >= 2 && t < 5) ? 16'sd32767 : sample_t'($urandom_range(0, 3000));
        j[i]   = mem[i];
      end
      ref_moment(j, a, a + w, m, en, eo);
      n0 = 10'(a); n1 = 10'(a + w); nmid = 10'(m);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(longint'(num) == en, $sformatf("num %0d exp %0d", num, en));
      check(ovf == eo, "clip flag");
      check(cyc == 2 * (w + 1) + 2, $sformatf("took %0d", cyc));
      n_ovf += int'(eo);
    end
    check(n_ovf > 0, "clipping was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
