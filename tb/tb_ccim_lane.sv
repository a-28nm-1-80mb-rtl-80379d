// tb_ccim_lane: one lane of 16 product units. The testbench drives the phase
// strobes (1 sampling + 7 conversion cycles) itself and checks D_DCIM, D_ACIM
// and CIMO against the reference arithmetic, and that CIMO is within one LSB
// of the exact signed MAC divided by 2^11. Operand sets: full-scale positive
// and negative, zero, random, and random with random negate flags.
module tb_ccim_lane;
  import tb_ccim_ref_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic smp = 0, cnv = 0, cnvclk = 0, cap_neg = 0, cap_pos = 0, res_load = 0;
  logic [N-1:0][7:0] op_in, op_w;
  logic [N-1:0] negate;
  logic signed [7:0] d_dcim;
  logic signed [6:0] d_acim;
  logic signed [7:0] cimo;
  int checks = 0, failures = 0;

  ccim_lane #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
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

  task automatic run_op();
    @(negedge clk); smp = 1; cap_neg = 1; cnvclk = 0;
    @(negedge clk); smp = 0; cap_neg = 0; cnv = 1; cnvclk = 1; cap_pos = 1;
    for (int c = 1; c < 7; c++) begin
      @(negedge clk); cap_pos = 0; res_load = (c == 6);
    end
    @(negedge clk); cnv = 0; cnvclk = 0; res_load = 0;
  endtask

  initial begin
    op_in = '0; op_w = '0; negate = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      automatic int dp = 0, dn = 0, q = 0, ex = 0; int e_acim, e_cimo, err;
      for (int u = 0; u < N; u++) begin
        case (t)
          0: begin op_in[u] = 8'h7f; op_w[u] = 8'h7f; negate[u] = 0; end
          1: begin op_in[u] = 8'h7f; op_w[u] = 8'hff; negate[u] = 0; end
          2: begin op_in[u] = 8'h00; op_w[u] = 8'h80; negate[u] = 0; end
          default: begin
            op_in[u] = 8'($urandom); op_w[u] = 8'($urandom);
            negate[u] = (t > 200) ? 1'($urandom) : 1'b0;
          end
        endcase
        if (is_neg(op_in[u], op_w[u], negate[u])) begin
          dn += top(op_in[u], op_w[u]); q -= acim(op_in[u], op_w[u]);
        end else begin
          dp += top(op_in[u], op_w[u]); q += acim(op_in[u], op_w[u]);
        end
        ex += exact(op_in[u], op_w[u], negate[u]);
      end
      run_op();
      e_acim = adc_code(q);
      e_cimo = sat8(dp - dn + e_acim);
      chk("d_dcim", int'(d_dcim), dp - dn);
      chk("d_acim", int'(d_acim), e_acim);
      chk("cimo", int'(cimo), e_cimo);
      err = int'(cimo) * 2048 - ex;
      checks++;
      if (err > 2048 || err < -2048) begin
        failures++;
        $display("FAIL accuracy cimo=%0d exact=%0d", cimo, ex);
      end
      if (t == 0) chk("full scale +", int'(cimo), 126);
      if (t == 1) chk("full scale -", int'(cimo), -126);
      if (t == 2) chk("zero", int'(cimo), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
