// post_adder: post digital adder of one lane.
//
// CIMO = D_DCIM + D_ACIM, with the 7-bit ACIM result sign-extended and both
// aligned at the same LSB (2^11 of the MAC), as the paper draws it. The sum
// of the two ranges (-64..+64 and -64..+63) could in principle leave the 8-bit
// output range; the result saturates at -128/+127 (this design's choice; with
// the paper's operand ranges the sum stays within -126..+126). Combinational.
module post_adder #(
  parameter int unsigned DW = 8,   // D_DCIM width
  parameter int unsigned AW = 7,   // D_ACIM width
  parameter int unsigned OW = 8    // CIMO width
) (
  input  logic signed [DW-1:0] d_dcim,
  input  logic signed [AW-1:0] d_acim,
  output logic signed [OW-1:0] cimo
);
  localparam int unsigned SW = ((DW > AW) ? DW : AW) + 1;
  localparam logic signed [SW-1:0] MAXV = SW'((1 << (OW - 1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(1 << (OW - 1));

  logic signed [SW-1:0] s;

  always_comb begin
    s = SW'(d_dcim) + SW'(d_acim);
    if (s > MAXV)      cimo = OW'(MAXV);
    else if (s < MINV) cimo = OW'(MINV);
    else               cimo = OW'(s);
  end
endmodule
