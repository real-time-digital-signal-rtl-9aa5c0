// tb_nr_divider: checks the non-restoring divider, signed and unsigned.
//
// Random operands over the whole range, operands chosen so the quotient just
// fits or just overflows, and zero divisors are divided by both variants.
// The quotient (truncated toward zero, saturated on overflow) and the
// overflow flag must match integer division, and done must come 17 clocks
// after the start clock.
module tb_nr_divider;
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
  logic        start;
  logic [31:0] dividend;
  logic [15:0] divisor;
  logic [15:0] qs, qu;
  logic        os, ou, ds, du;
  nr_divider #(.SIGNED(1'b1)) u_s (.clk, .rst_n, .start, .dividend, .divisor, .quotient(qs), .ovf(os), .done(ds));
  nr_divider #(.SIGNED(1'b0)) u_u (.clk, .rst_n, .start, .dividend, .divisor, .quotient(qu), .ovf(ou), .done(du));

  initial begin
    int n_ovf = 0;
    start = 0; dividend = 0; divisor = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      automatic int cyc = 0;
      automatic longint eq_s, eq_u;
      automatic bit eo_s, eo_u;
      automatic logic [15:0] d = 16'($urandom);
      automatic logic [31:0] a = $urandom;
      case (t % 6)
        1: a = 32'($signed(d) * $signed(16'($urandom_range(0, 32767))));
        2: a = {16'($urandom_range(0, int'(d[14:0]))), 16'($urandom)};
        3: d = 16'($urandom_range(0, 255));
        4: d = 0;
        default: ;
      endcase
      dividend = a; divisor = d;
      ref_div(longint'($signed(a)), longint'($signed(d)), 1, eq_s, eo_s);
      ref_div(longint'(a), longint'(d), 0, eq_u, eo_u);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!ds) begin @(negedge clk); cyc++; end
      check(cyc == 17, $sformatf("took %0d", cyc));
      check(du, "both variants take the same time");
      check(longint'($signed(qs)) == eq_s && os == eo_s,
            $sformatf("signed %0d/%0d = %0d ovf %0d exp %0d %0d", $signed(a), $signed(d), $signed(qs), os, eq_s, eo_s));
      check(longint'(qu) == eq_u && ou == eo_u,
            $sformatf("unsigned %0d/%0d = %0d ovf %0d exp %0d %0d", a, d, qu, ou, eq_u, eo_u));
      n_ovf += int'(eo_s);
    end
    check(n_ovf > 0 && n_ovf < 550, "mix of fitting and overflowing quotients");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
