// tb_dcim_adder_tree: random and corner (all zero, all four) vectors of 16
// counts, compared with a plain loop sum.
module tb_dcim_adder_tree;
  localparam int N = 16;
  logic [N-1:0][2:0] in;
  logic [6:0] sum;
  int checks = 0, failures = 0;

  dcim_adder_tree #(.N(N), .IN_W(3), .OUT_W(7)) dut (.in, .sum);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1002; t++) begin
      automatic int e = 0;
      for (int k = 0; k < N; k++) begin
        in[k] = (t == 0) ? 3'd0 : (t == 1) ? 3'd4 : 3'($urandom_range(0, 4));
        e += int'(in[k]);
      end
      #1;
      checks++;
      if (int'(sum) != e) begin
        failures++;
        $display("FAIL t=%0d sum=%0d exp=%0d", t, sum, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
