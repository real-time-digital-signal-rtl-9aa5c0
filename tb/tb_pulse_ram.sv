// tb_pulse_ram: checks the pulse memory.
//
// Writes a pseudo-random word to every address, reads every address back
// through the combinational port, then overwrites a few words and checks
// that a write lands on the next clock and leaves its neighbours alone.
module tb_pulse_ram;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic        we;
  logic [9:0]  waddr, raddr;
  logic [15:0] wdata, rdata;
  logic [15:0] model [1024];
  pulse_ram dut (.*);

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    rst_n = 1;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      we = 1; waddr = 10'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 1024; i++) begin
      raddr = 10'(1023 - i); #1;
      check(rdata == model[1023 - i], $sformatf("addr %0d", 1023 - i));
    end
    for (int k = 0; k < 20; k++) begin
      automatic int a = int'($urandom_range(1, 1022));
      @(negedge clk);
      we = 1; waddr = 10'(a); wdata = ~model[a]; raddr = 10'(a); #1;
      check(rdata == model[a], "old value before the clock");
      @(negedge clk) we = 0; model[a] = ~model[a]; #1;
      check(rdata == model[a], "new value after the clock");
      raddr = 10'(a + 1); #1;
      check(rdata == model[a + 1], "neighbour untouched");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
