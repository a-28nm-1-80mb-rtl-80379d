// ccim_macro: complex-number hybrid digital/analog SRAM-CIM macro (top).
//
// NCH complex CIM channels (8) share one complex input vector of NE (8) SMF
// elements; each holds NROWS (64) complex weight vectors, 64 kb in total.
// One operation selects a weight row and produces, per channel, the 8-bit
// real and imaginary parts of the complex dot product I . w, scaled by 2^-11.
//
// Interface (this design's choice; on the chip these signals come from the
// test-time I2C and I/O SRAM logic, which is not part of this RTL):
//   start/row/in_re/in_im - an operation request; sampled when `accept` is
//       high (idle, or the last conversion cycle of the running operation).
//       Inputs and row are held in registers for the whole operation, as the
//       paper requires (updated at the start of the sampling phase).
//   wr_en/wr_ch/wr_elem/wr_row/wr_data - write one 16-bit complex weight
//       {W_im, W_re} into channel wr_ch, element wr_elem, row wr_row at the
//       clock edge. Writes are accepted at any time but must not target the
//       row in use while busy (asserted).
//   busy, done, cimo_re/cimo_im - results change on the edge that ends the
//       conversion phase; `done` is high for the following cycle.
// Timing: SMP_CYCLES + ADC_BITS = 8 clock cycles from the accepting edge to
// new results, and one operation per 8 cycles back-to-back. The paper gives a
// 91 MHz clock; how many clocks an operation takes is this design's choice.
// Synchronous active-low reset clears control and result registers, not the
// weight memory.
module ccim_macro
  import ccim_pkg::*;
#(
  parameter int unsigned NCH   = CHANNELS,
  parameter int unsigned NE    = ELEMS,
  parameter int unsigned NROWS = ROWS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // operation request
  input  logic                      start,
  input  logic [$clog2(NROWS)-1:0]  row,
  input  smf_t [NE-1:0]             in_re,
  input  smf_t [NE-1:0]             in_im,
  output logic                      accept,
  output logic                      busy,
  output logic                      done,
  // weight write port
  input  logic                      wr_en,
  input  logic [$clog2(NCH)-1:0]    wr_ch,
  input  logic [$clog2(NE)-1:0]     wr_elem,
  input  logic [$clog2(NROWS)-1:0]  wr_row,
  input  logic [WORD_BITS-1:0]      wr_data,
  // results
  output cimo_t [NCH-1:0]           cimo_re,
  output cimo_t [NCH-1:0]           cimo_im
);
  logic smp, cnv, cnvclk, cap_neg, cap_pos, res_load;

  smf_t [NE-1:0]               in_re_q, in_im_q;
  logic [$clog2(NROWS)-1:0]    row_q;
  logic [NROWS-1:0]            wlr, wlw;

  global_ckgen #(.SMP_CYCLES(1), .CNV_CYCLES(ADC_BITS)) u_ckgen (
    .clk, .rst_n, .start, .accept, .busy, .smp, .cnv, .cnvclk,
    .cap_neg, .cap_pos, .res_load, .done
  );

  // input vector and WLR registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_re_q <= '0;
      in_im_q <= '0;
      row_q   <= '0;
    end else if (accept) begin
      in_re_q <= in_re;
      in_im_q <= in_im;
      row_q   <= row;
    end
  end

  // word-line decoders
  always_comb begin
    wlr = '0;
    wlr[row_q] = 1'b1;
    wlw = '0;
    wlw[wr_row] = 1'b1;
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [NE-1:0] we;
    always_comb begin
      we = '0;
      if (wr_en && wr_ch == c) we[wr_elem] = 1'b1;
    end

    ccim_channel #(.NE(NE), .NROWS(NROWS)) u_ch (
      .clk, .rst_n, .smp, .cnv, .cnvclk, .cap_neg, .cap_pos, .res_load,
      .in_re(in_re_q), .in_im(in_im_q), .wlr,
      .we, .wlw, .wr_data,
      .cimo_re(cimo_re[c]), .cimo_im(cimo_im[c])
    );
  end

  a_no_active_row_write : assert property (@(posedge clk) disable iff (!rst_n)
                                           !(busy && wr_en && wr_row == row_q))
    else $error("ccim_macro: weight row in use was written during an operation");
endmodule
