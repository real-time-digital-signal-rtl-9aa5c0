// tb_sg_filter: checks the in-place Savitzky-Golay filter.
//
// Runs the filter checks of sg_harness for the default 9-tap window and for
// 5- and 7-tap windows; the 7-tap one has a 3-entry circular buffer, so the
// pointer wrap is not a power of two. See sg_harness for what is checked.
module tb_sg_filter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int   c9, f9, c5, f5, c7, f7;
  logic d9, d5, d7;
  sg_harness #(.TAPS(9)) h9 (.clk, .rst_n, .checks(c9), .failures(f9), .finished(d9));
  sg_harness #(.TAPS(5)) h5 (.clk, .rst_n, .checks(c5), .failures(f5), .finished(d5));
  sg_harness #(.TAPS(7)) h7 (.clk, .rst_n, .checks(c7), .failures(f7), .finished(d7));

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c9 + c5 + c7, f9 + f5 + f7 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d9 && d5 && d7);
    $display("TB_RESULT checks=%0d failures=%0d", c9 + c5 + c7, f9 + f5 + f7);
    $finish;
  end
endmodule
