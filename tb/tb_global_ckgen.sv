// tb_global_ckgen: checks the phase sequence of single and back-to-back
// operations: 1 sampling cycle (cap_neg), 7 conversion cycles with CNVCLK high
// (cap_pos on the first, res_load on the last), `done` 8 cycles after the
// accepting edge, and a new operation accepted in the last conversion cycle.
module tb_global_ckgen;
  logic clk = 0, rst_n = 0, start = 0;
  logic accept, busy, smp, cnv, cnvclk, cap_neg, cap_pos, res_load, done;
  int checks = 0, failures = 0;

  global_ckgen #(.SMP_CYCLES(1), .CNV_CYCLES(7)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // expects the cycle right after an accepting edge
  task automatic check_op(bit next_start);
    chk("smp", smp && !cnv && !cnvclk && cap_neg && busy);
    for (int c = 0; c < 7; c++) begin
      @(negedge clk);
      start = (c == 6) ? next_start : 1'b0;
      #1;
      chk("cnv", cnv && cnvclk && !smp && busy);
      chk("cap_pos", cap_pos == (c == 0));
      chk("res_load", res_load == (c == 6));
      chk("accept", accept == (c == 6 && next_start));
    end
    @(negedge clk);
    start = 0;
    chk("done", done);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("idle", !busy && !smp && !cnv && !done);
    start = 1; #1;
    chk("accept idle", accept);
    @(negedge clk); start = 0; #1;
    check_op(1'b1);       // second operation issued back-to-back
    check_op(1'b0);
    chk("idle again", !busy);
    repeat (3) begin
      @(negedge clk);
      chk("stays idle", !busy && !done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
