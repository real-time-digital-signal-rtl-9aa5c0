// sg_harness: runs the in-place filter checks for one window length.
//
// Holds one sg_filter with TAPS taps and a behavioural memory. For random
// synthetic charge traces of several lengths (including very short ones, so
// the edge rules are hit) the memory after the run must equal the reference
// filter computed from an untouched copy, the clip flag must match, and the
// run must take (TAPS+1)*len+1 clocks after the clock that takes start.
// It counts its checks and failures and raises finished when done.
module sg_harness
  import psd_pkg::*;
  import psd_ref_pkg::*;
#(
  parameter int unsigned TAPS = 9
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int AW = 10;
  logic              start;
  logic [AW:0]       len;
  sample_t           coef [TAPS];
  logic [AW-1:0]     raddr, waddr;
  sample_t           rdata, wdata;
  logic              we, busy, done, sat;
  sample_t           mem [1 << AW];

  assign rdata = mem[raddr];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  sg_filter #(.ADDR_W(AW), .TAPS(TAPS)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL taps=%0d %s", TAPS, what); end
  endtask

  initial begin
    trace_t u, s;
    coef_arr_t c;
    bit     rsat;
    static int lens [6] = '{1, 3, 9, 64, 200, 37};
    static int gains[6] = '{1, 1, 2, 1, 40, 3};
    checks = 0; failures = 0; finished = 0;
    start = 0; len = 0;
    for (int k = 0; k < TAPS; k++) coef[k] = '0;
    @(posedge rst_n);
    for (int t = 0; t < 6; t++) begin
      automatic int L = lens[t];
      automatic int cyc = 0;
      // antisymmetric derivative-like set (k - centre) * gain / 60
      for (int k = 0; k < NTAPS; k++) c[k] = '0;
      for (int k = 0; k < TAPS; k++) begin
        coef[k] = 16'((k - int'(TAPS - 1) / 2) * 32768 * gains[t] / 60);
        if (k < NTAPS) c[k] = coef[k];
      end
      make_trace(L, L / 4, 1 + t % 3, 300, 3, u);
      for (int i = 0; i < (1 << AW); i++) mem[i] = sample_t'(u[i]);
      for (int i = 0; i < MAXN; i++) u[i] = mem[i];
      ref_sg(u, L, c, 15, s, rsat, TAPS);
      len = (AW+1)'(L);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc - 1 == (TAPS + 1) * L + 1, $sformatf("len %0d took %0d clocks", L, cyc - 1));
      for (int i = 0; i < L; i++)
        check(longint'(mem[i]) == s[i], $sformatf("len %0d S[%0d]=%0d exp %0d", L, i, mem[i], s[i]));
      check(mem[L] == sample_t'(u[L]), "word past the end untouched");
      check(sat == rsat, $sformatf("sat flag %0d exp %0d", sat, rsat));
    end
    finished = 1;
  end
endmodule
