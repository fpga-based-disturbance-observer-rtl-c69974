// dds_tb: self-checking test of the DDS. The carrier and reference are compared
// with round(8191 * sin(2 pi a / 1024)) computed here in floating point, where a is
// the top ten bits of a phase accumulator kept by the testbench (the accumulator register and the table register). With the 5 MHz tuning word the carrier must show 2 zero crossings per
// 25 clocks (125 MHz / 5 MHz), and a quarter-turn reference offset must give a
// cosine.
module dds_tb;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1;
  logic [31:0] ftw, ref_phase;
  logic signed [13:0] carrier, ref_sin;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979;

  dds dut (.*);

  always #4 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sine_ref(logic [31:0] ph);
    return int'($floor(8191.0 * $sin(2.0 * PI * real'(ph[31:22]) / 1024.0) + 0.5));
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] ph, ph_d;
    int crossings;
    logic signed [13:0] prev;
    ftw = 32'd171798692;      // 5 MHz at 125 MHz
    ref_phase = 32'h4000_0000; // +90 degrees
    @(posedge clk); @(posedge clk);
    #1 rst = 0;
    ph = 0;
    crossings = 0;
    prev = 0;
    // accumulator starts at 0 after reset; table output lags by one more clock
    for (int k = 0; k < 2500; k++) begin
      @(posedge clk); #1;
      ph_d = ph;           // phase whose sample is now on the outputs
      ph = ph + ftw;
      if (k >= 1) begin
        check("carrier", int'(carrier), sine_ref(ph_d));
        check("ref", int'(ref_sin), sine_ref(ph_d + ref_phase));
        if ((prev < 0) != (carrier < 0)) crossings++;
      end
      prev = carrier;
    end
    // 2499 compared samples = 99.96 periods of 5 MHz: 199 or 200 sign changes
    checks++;
    if (crossings < 199 || crossings > 200) begin
      failures++;
      $display("FAIL crossings=%0d", crossings);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
