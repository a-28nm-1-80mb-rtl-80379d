// tb_post_adder: every D_DCIM value of the 8-bit range against every 7-bit
// D_ACIM value; checks the saturated sum (saturation occurs at the ends of
// the 8-bit D_DCIM range).
module tb_post_adder;
  import tb_ccim_ref_pkg::*;
  logic signed [7:0] d_dcim, cimo;
  logic signed [6:0] d_acim;
  int checks = 0, failures = 0, sat_hits = 0;

  post_adder #(.DW(8), .AW(7), .OW(8)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = -128; d <= 127; d++)
      for (int a = -64; a <= 63; a++) begin
        d_dcim = 8'(d); d_acim = 7'(a);
        #1;
        checks++;
        if (d + a > 127 || d + a < -128) sat_hits++;
        if (int'(cimo) != sat8(d + a)) begin
          failures++;
          $display("FAIL %0d + %0d = %0d", d, a, cimo);
        end
      end
    if (sat_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
