// dcim_count: first-stage counting logic of the digital CIM for one unit.
//
// Counts the three heaviest partial products of one SMF product in units of
// 2^11: OUT = 2*I6*W6 + I6*W5 + I5*W6 (0..4), and only while SGNCLK is high;
// with SGNCLK low the output is 0. This is the truth table of the paper's
// custom counting cell (which is built from HVT PMOS and SVT NMOS networks);
// here it is written as logic. Combinational.
module dcim_count (
  input  logic       sgnclk,
  input  logic       i6, i5,   // input magnitude bits 6 and 5
  input  logic       w6, w5,   // weight magnitude bits 6 and 5
  output logic [2:0] out
);
  always_comb begin
    if (sgnclk)
      out = {1'b0, i6 & w6, 1'b0} + {2'b0, i6 & w5} + {2'b0, i5 & w6};
    else
      out = '0;
  end
endmodule
