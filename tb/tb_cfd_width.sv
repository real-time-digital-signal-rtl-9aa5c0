// tb_cfd_width: checks the 8 percent window search.
//
// Synthetic current pulses of one to three sites, some placed at the very
// start or end of the trace, are searched from their true peak. N0, N and
// the width must match a direct walk at floor(8 % of the peak), and the run
// must take (peak-N0)+(N-peak)+3 clocks including the start clock.
module tb_cfd_width;
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
  sample_t     peak_val, rdata;
  logic [9:0]  peak_addr, raddr, n0, n1;
  logic [15:0] width;
  sample_t     mem [1024];
  assign rdata = mem[raddr];
  cfd_width dut (.*);

  initial begin
    trace_t q, j;
    bit s;
    coef_arr_t c = sg_deriv_coefs(1);
    start = 0; len = 0; peak_val = 0; peak_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int L = int'($urandom_range(60, 400));
      automatic int st = (t == 1) ? -10 : (t == 2) ? L - 20 : int'($urandom_range(5, L - 60));
      automatic int cyc = 0, pa, e0, e1;
      automatic longint pv;
      make_trace(L, st, 1 + t % 3, 400, 4, q);
      ref_sg(q, L, c, 15, j, s);
      for (int i = 0; i < 1024; i++) mem[i] = sample_t'(j[i]);
      ref_peak(j, L, pv, pa);
      ref_cfd(j, L, pv, pa, 8, e0, e1);
      len = 11'(L); peak_val = sample_t'(pv); peak_addr = 10'(pa);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(int'(n0) == e0 && int'(n1) == e1, $sformatf("window %0d..%0d exp %0d..%0d", n0, n1, e0, e1));
      check(int'(width) == e1 - e0, "width");
      check(cyc == (pa - e0) + (e1 - pa) + 3, $sformatf("took %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
