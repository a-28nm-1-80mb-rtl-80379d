// dcim: digital CIM of one lane (the MSB group of all N product units).
//
// Each unit's counting cell (dcim_count) reports 2*I6*W6 + I6*W5 + I5*W6 while
// its SGNCLK is high; the adder tree sums the N counts. Because SGNCLK of a
// negative product is high in the sampling phase and that of a positive
// product in the conversion phase, the tree output is the negative magnitude
// sum during sampling and the positive one during conversion. The two are
// captured in D_NEG and D_POS (time multiplexing, as in the paper) and
// subtracted: D_DCIM = D_POS - D_NEG, -64..+64 for N = 16, in units of 2^11.
//
// Timing (this design's choice of strobes, driven by global_ckgen):
//   cap_neg  - last cycle of the sampling phase: D_NEG <= tree sum
//   cap_pos  - first conversion cycle:             D_POS <= tree sum
//   res_load - last conversion cycle:              D_DCIM <= D_POS - D_NEG
// D_DCIM thus changes at the start of the next sampling phase, together with
// the ADC result. Synchronous active-low reset clears all three registers.
module dcim #(
  parameter int unsigned N = 16,
  localparam int unsigned SW = 3 + $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cap_neg,
  input  logic                 cap_pos,
  input  logic                 res_load,
  input  logic [N-1:0]         sgnclk,
  input  logic [N-1:0]         i6, i5,    // input magnitude bits per unit
  input  logic [N-1:0]         w6, w5,    // weight magnitude bits per unit
  output logic [SW-1:0]        d_pos,
  output logic [SW-1:0]        d_neg,
  output logic signed [SW:0]   d_dcim
);
  logic [N-1:0][2:0] cnt;
  logic [SW-1:0]     sum;

  for (genvar u = 0; u < N; u++) begin : g_cnt
    dcim_count u_cnt (
      .sgnclk(sgnclk[u]), .i6(i6[u]), .i5(i5[u]), .w6(w6[u]), .w5(w5[u]),
      .out(cnt[u])
    );
  end

  dcim_adder_tree #(.N(N), .IN_W(3), .OUT_W(SW)) u_tree (.in(cnt), .sum(sum));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_pos  <= '0;
      d_neg  <= '0;
      d_dcim <= '0;
    end else begin
      if (cap_neg)  d_neg  <= sum;
      if (cap_pos)  d_pos  <= sum;
      if (res_load) d_dcim <= $signed({1'b0, d_pos}) - $signed({1'b0, d_neg});
    end
  end
endmodule
