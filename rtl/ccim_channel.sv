// ccim_channel: one complex CIM unit (one output channel of the macro).
//
// Holds ELEMS CIM-SRAMs, one per complex element k, each word {W_im, W_re}.
// The row selected by the one-hot WLR gives the complex weight vector w; with
// the broadcast complex input vector I the channel computes
//   CIMO_re ~= sum_k (Ir_k*Wr_k - Ii_k*Wi_k) / 2^11
//   CIMO_im ~= sum_k (Ir_k*Wi_k + Ii_k*Wr_k) / 2^11
// in parallel. Each stored weight bit feeds both lanes (the paper's complex
// bit cell shares one SRAM cell between the real and imaginary products), so
// no weight is duplicated and no extra cycle is needed. Unit 2k of a lane
// takes Ir_k, unit 2k+1 takes Ii_k; the -Ii*Wi term is formed by flipping the
// product sign (negate) in the real lane. Timing as in ccim_lane.
module ccim_channel
  import ccim_pkg::*;
#(
  parameter int unsigned NE    = ELEMS,
  parameter int unsigned NROWS = ROWS
) (
  input  logic               clk,
  input  logic               rst_n,
  // phase strobes from global_ckgen
  input  logic               smp,
  input  logic               cnv,
  input  logic               cnvclk,
  input  logic               cap_neg,
  input  logic               cap_pos,
  input  logic               res_load,
  // compute operands
  input  smf_t [NE-1:0]      in_re,
  input  smf_t [NE-1:0]      in_im,
  input  logic [NROWS-1:0]   wlr,
  // weight write
  input  logic [NE-1:0]      we,       // write enable per element SRAM
  input  logic [NROWS-1:0]   wlw,
  input  logic [WORD_BITS-1:0] wr_data,
  // results
  output cimo_t              cimo_re,
  output cimo_t              cimo_im
);
  localparam int unsigned N  = 2 * NE;
  localparam int unsigned SW = 3 + $clog2(N);

  smf_t [NE-1:0] w_re, w_im;
  smf_t [N-1:0]  re_in, re_w, im_in, im_w;
  logic [N-1:0]  re_neg;

  logic signed [SW:0]          re_dcim, im_dcim;
  logic signed [ADC_BITS-1:0]  re_acim, im_acim;

  for (genvar k = 0; k < NE; k++) begin : g_elem
    logic [WORD_BITS-1:0] word;
    cim_sram #(.ROWS(NROWS), .BITS(WORD_BITS)) u_sram (
      .clk, .we(we[k]), .wlw, .wr_data, .wlr, .rd_word(word)
    );
    assign w_re[k] = word[OP_BITS-1:0];
    assign w_im[k] = word[WORD_BITS-1:OP_BITS];

    // real lane: Ir*Wr and -(Ii*Wi)
    assign re_in[2*k]    = in_re[k];
    assign re_w[2*k]     = w_re[k];
    assign re_neg[2*k]   = 1'b0;
    assign re_in[2*k+1]  = in_im[k];
    assign re_w[2*k+1]   = w_im[k];
    assign re_neg[2*k+1] = 1'b1;
    // imaginary lane: Ir*Wi and Ii*Wr
    assign im_in[2*k]    = in_re[k];
    assign im_w[2*k]     = w_im[k];
    assign im_in[2*k+1]  = in_im[k];
    assign im_w[2*k+1]   = w_re[k];
  end

  ccim_lane #(.N(N)) u_re (
    .clk, .rst_n, .smp, .cnv, .cnvclk, .cap_neg, .cap_pos, .res_load,
    .op_in(re_in), .op_w(re_w), .negate(re_neg),
    .d_dcim(re_dcim), .d_acim(re_acim), .cimo(cimo_re)
  );

  ccim_lane #(.N(N)) u_im (
    .clk, .rst_n, .smp, .cnv, .cnvclk, .cap_neg, .cap_pos, .res_load,
    .op_in(im_in), .op_w(im_w), .negate('0),
    .d_dcim(im_dcim), .d_acim(im_acim), .cimo(cimo_im)
  );
endmodule
