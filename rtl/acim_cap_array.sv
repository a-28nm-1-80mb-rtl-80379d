// acim_cap_array: behavioural model (not synthesizable hardware) of the
// multi-bit I x W pass-transistor multipliers and the 2D binary-weighted split
// capacitor array of one lane.
//
// In silicon every partial product I[i]*W[j] of the ACIM group drives the
// bottom plate of a capacitor of relative weight 2^(i+j) through NMOS pass
// transistors: the plate sees VREFSR (via the unit's SGNCLK) only when both
// bits are 1. The array is split (a bridge capacitor joins an MSB and an LSB
// sub-array) to save unit capacitors; this model uses the equivalent ideal
// weights 2^(i+j). Which partial products each weight row holds is taken from
// the labels of the paper's array drawing:
//   W6: I4..I0   W5: I5..I0   W4: I6..I0   W3: I6..I1
//   W2: I6..I2   W1: I6..I3   W0: I6..I4
// i.e. all i+j >= 4 except I6W6, I6W5 and I5W6, which the DCIM handles.
//
// Output q is the total bottom-plate charge of the lane in units of
// (unit capacitor x VREFSR): sum over units with SGNCLK high of their ACIM
// partial-product sum. The ADC converts the change of q between the sampling
// and the conversion phase. The model is ideal (no mismatch, no parasitics)
// and combinational.
module acim_cap_array
  import ccim_pkg::*;
#(
  parameter int unsigned N = UNITS
) (
  input  logic [N-1:0]                 sgnclk,
  input  logic [N-1:0][MAG_BITS-1:0]   in_mag,   // I[6:0] per unit
  input  logic [N-1:0][MAG_BITS-1:0]   w_mag,    // W[6:0] per unit
  output logic signed [Q_BITS-1:0]     q
);
  // 1 where partial product I[i]*W[j] has a capacitor in the 2D array
  function automatic logic in_array(int i, int j);
    if (i + j <= int'(TRUNC_MAX)) return 1'b0;
    if (i == 6 && j == 6) return 1'b0;
    if (i == 6 && j == 5) return 1'b0;
    if (i == 5 && j == 6) return 1'b0;
    return 1'b1;
  endfunction

  always_comb begin
    q = '0;
    for (int u = 0; u < int'(N); u++)
      for (int j = 0; j < int'(MAG_BITS); j++)
        for (int i = 0; i < int'(MAG_BITS); i++)
          if (in_array(i, j) && sgnclk[u] && in_mag[u][i] && w_mag[u][j])
            q = q + (Q_BITS'(1) << (i + j));
  end
endmodule
