// tb_acim_cap_array: random operands and SGNCLK patterns for 16 units; the
// model's charge must equal the sum, over units with SGNCLK high, of the
// product magnitude minus its DCIM part and its truncated part.
module tb_acim_cap_array;
  import tb_ccim_ref_pkg::*;
  localparam int N = 16;
  logic [N-1:0] sgnclk;
  logic [N-1:0][6:0] in_mag, w_mag;
  logic signed [19:0] q;
  int checks = 0, failures = 0;

  acim_cap_array #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      automatic int e = 0;
      for (int u = 0; u < N; u++) begin
        in_mag[u] = (t == 0) ? 7'h7f : 7'($urandom);
        w_mag[u]  = (t == 0) ? 7'h7f : 7'($urandom);
        sgnclk[u] = (t == 0) ? 1'b1 : 1'($urandom);
        if (sgnclk[u]) e += acim({1'b0, in_mag[u]}, {1'b0, w_mag[u]});
      end
      #1;
      checks++;
      if (int'(q) != e) begin
        failures++;
        $display("FAIL t=%0d q=%0d exp=%0d", t, q, e);
      end
      // full scale: 16 x (127*127 - 4*2048 - 49) = 126208
      if (t == 0) begin
        checks++;
        if (int'(q) != 126208) begin failures++; $display("FAIL full scale %0d", q); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
