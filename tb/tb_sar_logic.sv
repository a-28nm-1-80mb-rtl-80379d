// tb_sar_logic: an ideal comparator in the testbench (cmp = code <= target)
// drives the SAR. For every target from -70 to +70 (beyond the range at both
// ends) the result must be the target clamped to -64..+63, the first trial
// code must be 0x40, and `valid` must come exactly 7 conversion cycles after
// the sampling cycle.
module tb_sar_logic;
  logic clk = 0, rst_n = 0, smp = 0, cnv = 0, cmp, valid;
  logic [6:0] dac_code;
  logic signed [6:0] d_acim;
  int target;
  int checks = 0, failures = 0;

  sar_logic #(.BITS(7)) dut (.*);

  always #5 clk = ~clk;
  always_comb cmp = (int'(dac_code) - 64) <= target;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s target=%0d got %0d exp %0d", what, target, got, exp);
    end
  endtask

  initial begin
    target = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = -70; t <= 70; t++) begin
      automatic int cycles = 0; int e;
      target = t;
      @(negedge clk); smp = 1;
      @(negedge clk); smp = 0; cnv = 1;
      chk("first trial", int'(dac_code), 64);
      while (!valid && cycles < 20) begin
        @(negedge clk);
        cycles++;
      end
      cnv = 0;
      e = (t > 63) ? 63 : (t < -64) ? -64 : t;
      chk("result", int'(d_acim), e);
      chk("cycles", cycles, 7);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
