// tb_adc_cdac_cmp: samples a random charge, moves to a second random charge,
// and checks the comparator for every one of the 128 DAC codes against
// (q - q_sampled + 1024) >= (code - 64) * 2048.
module tb_adc_cdac_cmp;
  logic clk = 0, smp = 0, cmp;
  logic signed [19:0] q;
  logic [6:0] dac_code;
  int checks = 0, failures = 0;

  adc_cdac_cmp dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    q = '0; dac_code = 7'h40;
    for (int t = 0; t < 100; t++) begin
      int q0, q1;
      q0 = $urandom_range(0, 130000) - 65000;
      q1 = $urandom_range(0, 130000) - 65000;
      @(negedge clk); smp = 1; q = 20'(q0);
      @(negedge clk); smp = 0; q = 20'(q1);
      for (int c = 0; c < 128; c++) begin
        bit e;
        dac_code = 7'(c);
        #1;
        e = (q1 - q0 + 1024) >= (c - 64) * 2048;
        checks++;
        if (cmp !== e) begin
          failures++;
          $display("FAIL q0=%0d q1=%0d code=%0d cmp=%b", q0, q1, c, cmp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
