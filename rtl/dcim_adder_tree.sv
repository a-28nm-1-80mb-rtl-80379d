// dcim_adder_tree: adder tree of the digital CIM.
//
// Sums the N first-stage counts (0..4 each) of one lane into one number,
// 0..64 for the paper's 16 units, as a balanced binary tree of adders whose
// width grows by one bit per level. Combinational.
module dcim_adder_tree #(
  parameter int unsigned N    = 16,
  parameter int unsigned IN_W = 3,
  parameter int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic [N-1:0][IN_W-1:0] in,
  output logic [OUT_W-1:0]       sum
);
  localparam int unsigned LEVELS = $clog2(N);
  localparam int unsigned NP     = 1 << LEVELS;   // padded leaf count

  // node[l][k]: k-th partial sum of level l (level 0 = leaves)
  logic [LEVELS:0][NP-1:0][OUT_W-1:0] node;

  always_comb begin
    node = '0;
    for (int k = 0; k < N; k++) node[0][k] = OUT_W'(in[k]);
    for (int l = 1; l <= LEVELS; l++)
      for (int k = 0; k < (NP >> l); k++)
        node[l][k] = node[l-1][2*k] + node[l-1][2*k+1];
    sum = node[LEVELS][0];
  end
endmodule
