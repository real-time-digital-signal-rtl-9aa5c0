// tb_div_normalizer: checks the divisor scaling.
//
// Values of every bit length from 0 to 64 (plus random ones) go through the
// signed (15-bit) and unsigned (16-bit) scalers; the shift must make the
// value fit with its leading one on the top bit, and values that already fit
// must pass unchanged.
module tb_div_normalizer;
  import psd_ref_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] value;
  logic [14:0] s15;
  logic [15:0] s16;
  logic [6:0]  sh15, sh16;
  div_normalizer #(.IN_W(64), .OUT_W(15)) u15 (.value, .scaled(s15), .shift(sh15));
  div_normalizer #(.IN_W(64), .OUT_W(16)) u16 (.value, .scaled(s16), .shift(sh16));

  initial begin
    for (int t = 0; t < 400; t++) begin
      automatic longint unsigned v, e15, e16;
      automatic int k15, k16;
      automatic int bl = t % 65;
      v = {$urandom, $urandom};
      if (bl == 0) v = 0;
      else v = (v & ((bl == 64) ? '1 : ((64'd1 << bl) - 1))) | (64'd1 << (bl - 1));
      value = v; #1;
      ref_norm(v, 15, e15, k15);
      ref_norm(v, 16, e16, k16);
      check(s15 == 15'(e15) && int'(sh15) == k15, $sformatf("15-bit %h -> %h/%0d", v, s15, sh15));
      check(s16 == 16'(e16) && int'(sh16) == k16, $sformatf("16-bit %h -> %h/%0d", v, s16, sh16));
      if (bl > 16) check(s16[15] == 1'b1, "leading one on bit 15");
      if (bl > 15) check(s15[14] == 1'b1, "leading one on bit 14");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
