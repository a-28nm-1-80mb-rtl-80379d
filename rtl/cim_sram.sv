// cim_sram: double-word-line 6T CIM-SRAM of one complex element.
//
// ROWS words of BITS bits (64 x 16 in the paper: 8-bit SMF real weight in
// bits 7:0, 8-bit SMF imaginary weight in bits 15:8 - the bit order is this
// design's choice). Each row has a read word line WLR and a write word line
// WLW, as in the paper's double word-line cell, which keeps a CIM read from
// disturbing the cell:
//   CIM read : write enable low, WLR[k] on, all WLW off -> word k drives the
//              product logic continuously (no sense amplifier, no clock);
//   write    : write enable high, WLW[k] on -> word k takes wr_data at the
//              rising clock edge.
// The paper's write circuit (an inverter and a butterfly switch per column)
// is represented by the synchronous write; in the paper WLR[k] is also on in
// write mode, here the read port is independent of the write. At most one WLR
// bit should be set; several set bits OR their words, as wired bit lines
// would not, so an assertion flags that case. No reset: contents are random
// until written.
module cim_sram #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned BITS = 16
) (
  input  logic             clk,
  input  logic             we,         // write enable
  input  logic [ROWS-1:0]  wlw,        // write word lines
  input  logic [BITS-1:0]  wr_data,
  input  logic [ROWS-1:0]  wlr,        // read word lines (one-hot)
  output logic [BITS-1:0]  rd_word     // to the DCIM/ACIM product logic
);
  logic [BITS-1:0] mem [ROWS];

  always_ff @(posedge clk)
    if (we)
      for (int k = 0; k < int'(ROWS); k++)
        if (wlw[k]) mem[k] <= wr_data;

  always_comb begin
    rd_word = '0;
    for (int k = 0; k < int'(ROWS); k++)
      if (wlr[k]) rd_word = rd_word | mem[k];
  end

  a_wlr_onehot : assert property (@(posedge clk) $onehot0(wlr))
    else $error("cim_sram: more than one read word line on");
endmodule
