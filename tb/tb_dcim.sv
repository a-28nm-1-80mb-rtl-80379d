// tb_dcim: random signed operand sets for 16 units. The testbench plays the
// sampling phase (SGNCLK = product is negative, cap_neg) and the conversion
// phase (SGNCLK = product is positive, cap_pos, then res_load) and checks
// D_NEG, D_POS and D_DCIM against sums of the reference DCIM part. Includes
// the all-positive and all-negative full-scale corners (+64 and -64).
module tb_dcim;
  import tb_ccim_ref_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, cap_neg = 0, cap_pos = 0, res_load = 0;
  logic [N-1:0] sgnclk, i6, i5, w6, w5;
  logic [6:0] d_pos, d_neg;
  logic signed [7:0] d_dcim;
  logic [7:0] a [N], b [N];
  logic [N-1:0] negu;
  int checks = 0, failures = 0;

  dcim #(.N(N)) dut (.*);

  always #5 clk = ~clk;

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
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    sgnclk = '0; {i6, i5, w6, w5} = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int ep = 0, en = 0;
      for (int u = 0; u < N; u++) begin
        if (t == 0)      begin a[u] = 8'h7f; b[u] = 8'h7f; end
        else if (t == 1) begin a[u] = 8'hff; b[u] = 8'h7f; end
        else             begin a[u] = 8'($urandom); b[u] = 8'($urandom); end
        negu[u] = a[u][7] ^ b[u][7];
        i6[u] = a[u][6]; i5[u] = a[u][5]; w6[u] = b[u][6]; w5[u] = b[u][5];
        if (negu[u]) en += top(a[u], b[u]); else ep += top(a[u], b[u]);
      end
      // sampling phase: negative units active
      @(negedge clk); sgnclk = negu; cap_neg = 1;
      // conversion phase: positive units active
      @(negedge clk); cap_neg = 0; sgnclk = ~negu; cap_pos = 1;
      @(negedge clk); cap_pos = 0; res_load = 1;
      @(negedge clk); res_load = 0;
      chk("d_neg", int'(d_neg), en);
      chk("d_pos", int'(d_pos), ep);
      chk("d_dcim", int'(d_dcim), ep - en);
      if (t == 0) chk("full +", int'(d_dcim), 64);
      if (t == 1) chk("full -", int'(d_dcim), -64);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
