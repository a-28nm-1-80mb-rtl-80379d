// global_ckgen: global clock/phase generator of the macro.
//
// One CIM operation is a sampling phase (PHI_SMP, SMP_CYCLES clock cycles,
// CNVCLK low) followed by a conversion phase (PHI_CNV, CNV_CYCLES = ADC bits
// clock cycles, CNVCLK high, one comparator decision per cycle). The paper
// names this block and shows the two phases and the single CNVCLK level
// change per operation; the cycle counts, the strobes and the start/busy/done
// handshake are this design's choices.
//
//   start    - request; accepted when idle or in the last conversion cycle
//              (back-to-back operations). `accept` marks the accepting cycle:
//              the input and WLR registers load on that edge.
//   smp      - sampling phase; cap_neg on its last cycle (D_NEG capture)
//   cnv      - conversion phase; cnvclk = cnv; cap_pos on its first cycle
//   res_load - last conversion cycle: results load on its closing edge
//   done     - one-cycle pulse in the cycle after res_load: CIMO is new
//   busy     - an operation is in progress
// Latency from the accepting edge to the edge that updates CIMO is
// SMP_CYCLES + CNV_CYCLES (8 clocks by default); the issue interval of
// back-to-back operations is the same. Synchronous active-low reset to idle.
module global_ckgen #(
  parameter int unsigned SMP_CYCLES = 1,
  parameter int unsigned CNV_CYCLES = 7
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic accept,
  output logic busy,
  output logic smp,
  output logic cnv,
  output logic cnvclk,
  output logic cap_neg,
  output logic cap_pos,
  output logic res_load,
  output logic done
);
  typedef enum logic [1:0] {S_IDLE, S_SMP, S_CNV} phase_e;

  localparam int unsigned CW = $clog2(SMP_CYCLES + CNV_CYCLES + 1);

  phase_e        phase;
  logic [CW-1:0] cnt;    // cycle index within the phase

  always_comb begin
    smp      = (phase == S_SMP);
    cnv      = (phase == S_CNV);
    cnvclk   = cnv;
    busy     = (phase != S_IDLE);
    cap_neg  = smp && (cnt == CW'(SMP_CYCLES - 1));
    cap_pos  = cnv && (cnt == '0);
    res_load = cnv && (cnt == CW'(CNV_CYCLES - 1));
    accept   = start && (phase == S_IDLE || res_load);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= res_load;
      unique case (phase)
        S_IDLE: if (accept) begin phase <= S_SMP; cnt <= '0; end
        S_SMP:
          if (cnt == CW'(SMP_CYCLES - 1)) begin phase <= S_CNV; cnt <= '0; end
          else cnt <= cnt + 1'b1;
        S_CNV:
          if (res_load) begin
            phase <= accept ? S_SMP : S_IDLE;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        default: begin phase <= S_IDLE; cnt <= '0; end
      endcase
    end
  end

  a_cnv_len : assert property (@(posedge clk) disable iff (!rst_n)
                               cap_pos |-> ##(CNV_CYCLES-1) res_load)
    else $error("global_ckgen: conversion phase has the wrong length");
endmodule
