// lockin_demod_tb: self-checking test of the lock-in mixer. Random and extreme
// signal and reference samples; the product, scaled by 2^-13 with floor rounding,
// must appear one clock later.
module lockin_demod_tb;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1;
  logic signed [13:0] sig, ref_sin;
  logic signed [14:0] mix;
  int checks = 0, failures = 0;
  longint exp_q[$];

  lockin_demod dut (.*);

  always #4 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint p, e;
    sig = '0; ref_sin = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int k = 0; k < 20000; k++) begin
      sig = 14'($urandom); ref_sin = 14'($urandom);
      if (k % 13 == 0) begin sig = -14'sd8192; ref_sin = -14'sd8192; end
      if (k % 17 == 0) begin sig = 14'sd8191; ref_sin = -14'sd8191; end
      p = longint'(sig) * longint'(ref_sin);
      e = p / 8192;
      if (p < 0 && e * 8192 != p) e = e - 1;
      @(posedge clk); #1;
      checks++;
      if (longint'(mix) != e) begin
        failures++;
        if (failures < 10) $display("FAIL sig=%0d ref=%0d mix=%0d exp=%0d", sig, ref_sin, mix, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
