// ccim_lane: one hybrid digital/analog CIM output (real or imaginary part).
//
// Computes CIMO ~= (sum over N units of s_u * |I_u| * |W_u|) / 2^11 for N SMF
// operand pairs, where s_u is the product sign (flipped by negate[u]).
// Per unit, sign_ckgen makes SGNCLK from CNVCLK and the sign. The three
// heaviest partial products go to the digital CIM (dcim), the other partial
// products with i+j >= 4 to the 2D capacitor array (acim_cap_array model),
// whose charge step between sampling and conversion the SAR ADC
// (adc_cdac_cmp model + sar_logic) converts to 7 bits. The post adder sums
// both into the 8-bit CIMO. This is the paper's block diagram.
//
// Timing: the operands must be stable from the sampling cycle to the last
// conversion cycle. Strobes come from global_ckgen: smp (1 cycle), cnv and
// cnvclk (ADC_BITS cycles), cap_neg, cap_pos, res_load. CIMO changes on the
// clock edge that ends the last conversion cycle and then holds.
module ccim_lane
  import ccim_pkg::*;
#(
  parameter int unsigned N = UNITS,
  localparam int unsigned SW = 3 + $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  smp,
  input  logic                  cnv,
  input  logic                  cnvclk,
  input  logic                  cap_neg,
  input  logic                  cap_pos,
  input  logic                  res_load,
  input  smf_t [N-1:0]          op_in,    // input operands (SMF)
  input  smf_t [N-1:0]          op_w,     // weight operands (SMF)
  input  logic [N-1:0]          negate,   // subtract this product
  output logic signed [SW:0]    d_dcim,
  output logic signed [ADC_BITS-1:0] d_acim,
  output cimo_t                 cimo
);
  logic [N-1:0]                 sgnclk, neg;
  logic [N-1:0]                 i6, i5, w6, w5;
  logic [N-1:0][MAG_BITS-1:0]   in_mag, w_mag;
  logic [SW-1:0]                d_pos, d_neg;
  logic signed [Q_BITS-1:0]     q;
  logic [ADC_BITS-1:0]          dac_code;
  logic                         cmp, acim_valid;

  for (genvar u = 0; u < N; u++) begin : g_unit
    sign_ckgen u_sgn (
      .in_sign(op_in[u][OP_BITS-1]), .w_sign(op_w[u][OP_BITS-1]),
      .negate(negate[u]), .cnvclk(cnvclk), .neg(neg[u]), .sgnclk(sgnclk[u])
    );
    assign in_mag[u] = op_in[u][MAG_BITS-1:0];
    assign w_mag[u]  = op_w[u][MAG_BITS-1:0];
    assign i6[u] = op_in[u][6];
    assign i5[u] = op_in[u][5];
    assign w6[u] = op_w[u][6];
    assign w5[u] = op_w[u][5];
  end

  dcim #(.N(N)) u_dcim (
    .clk, .rst_n, .cap_neg, .cap_pos, .res_load,
    .sgnclk, .i6, .i5, .w6, .w5,
    .d_pos, .d_neg, .d_dcim
  );

  acim_cap_array #(.N(N)) u_array (
    .sgnclk, .in_mag, .w_mag, .q
  );

  adc_cdac_cmp u_cdac (
    .clk, .smp, .q, .dac_code, .cmp
  );

  sar_logic #(.BITS(ADC_BITS)) u_sar (
    .clk, .rst_n, .smp, .cnv, .cmp, .dac_code, .d_acim, .valid(acim_valid)
  );

  post_adder #(.DW(SW + 1), .AW(ADC_BITS), .OW(8)) u_padd (
    .d_dcim, .d_acim, .cimo
  );

  // the SAR finishes on the same edge that loads D_DCIM
  a_sar_aligned : assert property (@(posedge clk) disable iff (!rst_n)
                                   res_load |=> acim_valid)
    else $error("ccim_lane: ADC result not aligned with DCIM result");
endmodule
