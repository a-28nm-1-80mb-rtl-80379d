// tb_cim_sram: writes random words into all 64 rows through WLW, reads every
// row back through a one-hot WLR, checks that a write with the enable low does
// nothing and that CIM reads do not change the contents.
module tb_cim_sram;
  localparam int ROWS = 64, BITS = 16;
  logic clk = 0, we;
  logic [ROWS-1:0] wlw, wlr;
  logic [BITS-1:0] wr_data, rd_word;
  logic [BITS-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  cim_sram #(.ROWS(ROWS), .BITS(BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int k = 0; k < ROWS; k++) begin
      wlr = '0; wlr[k] = 1'b1;
      #1;
      checks++;
      if (rd_word !== shadow[k]) begin
        failures++;
        $display("FAIL row %0d: %h exp %h", k, rd_word, shadow[k]);
      end
    end
  endtask

  initial begin
    we = 0; wlw = '0; wlr = '0; wr_data = '0;
    for (int k = 0; k < ROWS; k++) begin
      @(negedge clk);
      we = 1; wlw = '0; wlw[k] = 1'b1; wr_data = 16'($urandom);
      shadow[k] = wr_data;
    end
    @(negedge clk); we = 0; wlw = '0;
    check_all();
    // write lines without enable must not write
    @(negedge clk); wlw = '1; wr_data = 16'hdead;
    @(negedge clk); wlw = '0;
    check_all();
    // rewrite a few rows
    for (int n = 0; n < 20; n++) begin
      automatic int k = $urandom_range(0, ROWS - 1);
      @(negedge clk);
      we = 1; wlw = '0; wlw[k] = 1'b1; wr_data = 16'($urandom);
      shadow[k] = wr_data;
    end
    @(negedge clk); we = 0; wlw = '0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
