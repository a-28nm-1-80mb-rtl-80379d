// tb_dcim_count: exhaustive check of the first-stage counting cell against
// the DCIM part of the integer product of the two magnitudes' top bits.
module tb_dcim_count;
  import tb_ccim_ref_pkg::*;
  logic sgnclk, i6, i5, w6, w5;
  logic [2:0] out;
  int checks = 0, failures = 0;

  dcim_count dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      int e;
      {sgnclk, i6, i5, w6, w5} = 5'(v);
      #1;
      e = sgnclk ? top({1'b0, i6, i5, 5'b0}, {1'b0, w6, w5, 5'b0}) : 0;
      checks++;
      if (int'(out) != e) begin
        failures++;
        $display("FAIL v=%b out=%0d exp=%0d", 5'(v), out, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
