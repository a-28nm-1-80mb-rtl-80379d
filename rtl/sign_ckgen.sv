// sign_ckgen: Sign CKGEN of one product unit.
//
// The sign of an input x weight product is the XOR of the two SMF sign bits;
// `negate` flips it once more for the -Ii*Wi term of the real output. SGNCLK
// is CNVCLK when the product is positive and CNVCLK inverted when it is
// negative, so a positive unit is active (SGNCLK high) in the conversion phase
// and a negative unit in the sampling phase. The paper states the function
// (inverting CNVCLK according to the sign bit); the gate-level form here is a
// plain XOR. Purely combinational.
module sign_ckgen (
  input  logic in_sign,   // I[7]
  input  logic w_sign,    // W[7]
  input  logic negate,    // 1 for a subtracted cross term
  input  logic cnvclk,
  output logic neg,       // product is negative
  output logic sgnclk
);
  always_comb begin
    neg    = in_sign ^ w_sign ^ negate;
    sgnclk = cnvclk ^ neg;
  end
endmodule
