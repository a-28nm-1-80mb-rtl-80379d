// tb_ccim_channel: one complex CIM unit with its 8 CIM-SRAMs of 64 words.
// Writes random complex weights to every row, then runs operations on random
// rows with random complex inputs (phase strobes driven by the testbench) and
// checks CIMO_re and CIMO_im against the reference, built from the complex
// product (Ir + jIi)(Wr + jWi) term by term, and their distance from the
// exact complex dot product (at most 1 LSB = 2^11).
module tb_ccim_channel;
  import tb_ccim_ref_pkg::*;
  localparam int NE = 8, NR = 64;
  logic clk = 0, rst_n = 0;
  logic smp = 0, cnv = 0, cnvclk = 0, cap_neg = 0, cap_pos = 0, res_load = 0;
  logic [NE-1:0][7:0] in_re, in_im;
  logic [NR-1:0] wlr, wlw;
  logic [NE-1:0] we;
  logic [15:0] wr_data;
  logic signed [7:0] cimo_re, cimo_im;
  logic [15:0] wsh [NE][NR];
  int checks = 0, failures = 0;

  ccim_channel #(.NE(NE), .NROWS(NR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
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
    in_re = '0; in_im = '0; wlr = '0; wlr[0] = 1'b1; wlw = '0; we = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NR; r++)
      for (int k = 0; k < NE; k++) begin
        @(negedge clk);
        we = '0; we[k] = 1'b1; wlw = '0; wlw[r] = 1'b1;
        wr_data = (r == 0) ? 16'hffff : 16'($urandom);   // row 0: -127 - j127
        wsh[k][r] = wr_data;
      end
    @(negedge clk); we = '0; wlw = '0;
    for (int t = 0; t < 200; t++) begin
      int r, ere, eim, xre, xim;
      ops16_t a_re, b_re, a_im, b_im;
      logic [15:0] n_re;
      r = (t < 4) ? 0 : $urandom_range(0, NR - 1);
      for (int k = 0; k < NE; k++) begin
        case (t)
          0: begin in_re[k] = 8'h7f; in_im[k] = 8'h7f; end   // in phase
          1: begin in_re[k] = 8'h7f; in_im[k] = 8'hff; end   // out of phase
          2: begin in_re[k] = 8'hff; in_im[k] = 8'h7f; end
          3: begin in_re[k] = 8'h00; in_im[k] = 8'h00; end
          default: begin in_re[k] = 8'($urandom); in_im[k] = 8'($urandom); end
        endcase
        a_re[2*k] = in_re[k]; b_re[2*k] = wsh[k][r][7:0];  n_re[2*k] = 1'b0;
        a_re[2*k+1] = in_im[k]; b_re[2*k+1] = wsh[k][r][15:8]; n_re[2*k+1] = 1'b1;
        a_im[2*k] = in_re[k]; b_im[2*k] = wsh[k][r][15:8];
        a_im[2*k+1] = in_im[k]; b_im[2*k+1] = wsh[k][r][7:0];
      end
      wlr = '0; wlr[r] = 1'b1;
      run_op();
      ere = lane_cimo(a_re, b_re, n_re);
      eim = lane_cimo(a_im, b_im, 16'h0);
      chk("cimo_re", int'(cimo_re), ere);
      chk("cimo_im", int'(cimo_im), eim);
      // exact complex dot product from the signed operand values
      xre = 0; xim = 0;
      for (int k = 0; k < NE; k++) begin
        xre += smf_val(in_re[k]) * smf_val(wsh[k][r][7:0])
             - smf_val(in_im[k]) * smf_val(wsh[k][r][15:8]);
        xim += smf_val(in_re[k]) * smf_val(wsh[k][r][15:8])
             + smf_val(in_im[k]) * smf_val(wsh[k][r][7:0]);
      end
      checks += 2;
      if (int'(cimo_re) * 2048 - xre > 2048 || int'(cimo_re) * 2048 - xre < -2048) begin
        failures++; $display("FAIL re accuracy %0d vs %0d", cimo_re, xre);
      end
      if (int'(cimo_im) * 2048 - xim > 2048 || int'(cimo_im) * 2048 - xim < -2048) begin
        failures++; $display("FAIL im accuracy %0d vs %0d", cimo_im, xim);
      end
      // with w = -127(1+j): in phase gives Re = 0, out of phase gives Im = 0
      if (t == 0) chk("in-phase re", int'(cimo_re), 0);
      if (t == 1) chk("out-of-phase im", int'(cimo_im), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
