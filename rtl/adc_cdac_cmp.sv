// adc_cdac_cmp: behavioural model (not synthesizable hardware) of the SAR
// ADC's capacitive DAC and comparator for one lane.
//
// Sampling: while `smp` is high the CDAC samples the fixed mid-scale code 0x40
// and the top plate tracks the 2D array; the array charge present at the last
// clock edge of the sampling phase is held (q_hold). Conversion: the 2D array's
// bottom plates switch (SGNCLK edges), so the top-plate voltage moves by
// q - q_hold, and the SAR's trial code on the DACSW switches moves it back by
// (code - 0x40) ADC LSBs. `cmp` is 1 when the array side is at or above the
// DAC side, i.e. the trial bit is kept.
//
// Scaling: one ADC LSB equals 2^11 units of array charge, the same weight as
// one DCIM count, so that the post adder can add the two results directly.
// In silicon this follows from the 16C CDAC LSB and VREFAD = 2 x VREFSR; the
// model states it as the parameter LSB_Q. A half-LSB offset (HALF_Q) makes the
// conversion round to nearest instead of truncating: this is the model's
// choice, the paper gives no transfer-function offset. Comparator decisions
// are ideal and taken on the rising clock edge by the SAR logic.
module adc_cdac_cmp
  import ccim_pkg::*;
#(
  parameter int LSB_Q  = 1 << LSB_SHIFT,
  parameter int HALF_Q = LSB_Q / 2
) (
  input  logic                         clk,       // comparator clock
  input  logic                         smp,       // sampling phase
  input  logic signed [Q_BITS-1:0]     q,         // 2D array charge
  input  logic [ADC_BITS-1:0]          dac_code,  // DACSW setting from the SAR
  output logic                         cmp
);
  localparam int MID = 1 << (ADC_BITS - 1);   // 0x40

  logic signed [Q_BITS-1:0] q_hold;
  logic signed [31:0]       v_array, v_dac;

  always_ff @(posedge clk)
    if (smp) q_hold <= q;

  always_comb begin
    v_array = 32'(q) - 32'(q_hold) + HALF_Q;
    v_dac   = (32'(dac_code) - MID) * LSB_Q;
    cmp     = (v_array >= v_dac);
  end
endmodule
