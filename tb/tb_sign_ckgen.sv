// tb_sign_ckgen: exhaustive check of the Sign CKGEN: the product sign and
// SGNCLK (CNVCLK for a positive product, inverted for a negative one) for all
// 16 combinations of input sign, weight sign, negate and CNVCLK.
module tb_sign_ckgen;
  logic in_sign, w_sign, negate, cnvclk, neg, sgnclk;
  int checks = 0, failures = 0;

  sign_ckgen dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      bit exp_neg, exp_clk;
      {in_sign, w_sign, negate, cnvclk} = 4'(v);
      #1;
      // negative: exactly one of the two signs set, unless negated
      exp_neg = ((in_sign != w_sign) && !negate) || ((in_sign == w_sign) && negate);
      exp_clk = exp_neg ? !cnvclk : cnvclk;
      checks += 2;
      if (neg !== exp_neg) begin failures++; $display("FAIL neg v=%0d", v); end
      if (sgnclk !== exp_clk) begin failures++; $display("FAIL sgnclk v=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
