// sar_logic: 7-bit successive-approximation register of the ACIM ADC.
//
// In the sampling phase (`smp`) the trial code is set to 0x40, the value the
// CDAC samples. Each conversion cycle (`cnv`) keeps or clears the bit under
// test according to the comparator and sets the next lower bit to try, MSB
// first, so a conversion takes exactly ADC_BITS cycles. On the last decision
// the finished code is stored as D_ACIM in two's complement, code - 0x40
// (range -64..+63), and `valid` pulses in the following cycle, when D_ACIM
// has its new value. Synchronous active-low reset. The SAR algorithm is
// standard; that the result is offset-binary around 0x40 follows from the
// paper's 0x40 sampling code, the register timing is this design's choice.
module sar_logic #(
  parameter int unsigned BITS = 7
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    smp,
  input  logic                    cnv,
  input  logic                    cmp,
  output logic [BITS-1:0]         dac_code,   // current trial code (DACSW)
  output logic signed [BITS-1:0]  d_acim,
  output logic                    valid
);
  logic [BITS-1:0] code, ptr, decided;

  always_comb begin
    decided = (code & ~ptr) | (cmp ? ptr : '0);
    dac_code = code;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      code   <= BITS'(1) << (BITS - 1);
      ptr    <= '0;
      d_acim <= '0;
      valid  <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (smp) begin
        code <= BITS'(1) << (BITS - 1);
        ptr  <= BITS'(1) << (BITS - 1);
      end else if (cnv && ptr != '0) begin
        code <= decided | (ptr >> 1);
        ptr  <= ptr >> 1;
        if (ptr[0]) begin
          d_acim <= $signed({~decided[BITS-1], decided[BITS-2:0]});
          valid  <= 1'b1;
        end
      end
    end
  end
endmodule
