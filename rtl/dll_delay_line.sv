`timescale 1ps/1ps
// dll_delay_line: BEHAVIOURAL MODEL (not synthesizable) of the 16-stage delay
// line locked to the 520 MHz reference clock.
//
// In the FPGA the reference clock runs through a chain of STAGES delay elements
// whose delay is servoed so that the chain spans exactly one clock period; each
// element then delays by t0 = T_ref / STAGES = 120 ps regardless of
// temperature, supply or ageing. This model stands for that analog, device-
// specific circuit: a chain of elements of T0_PS each, so that tap k is the
// reference clock delayed by k * T0_PS (tap 0 is the clock itself), with the
// loop assumed already locked (the lock loop itself is not modelled).
//
// Interface: ref_clk in, taps[STAGES-1:0] out. Timing: continuous, ideal
// delays in picoseconds. The stage count and t0 follow the published figures;
// the ideal, always-locked behaviour is this model's simplification.
module dll_delay_line #(
  parameter int unsigned STAGES = 16,
  parameter int unsigned T0_PS  = 120
) (
  input  logic              ref_clk,
  output logic [STAGES-1:0] taps
);

  assign taps[0] = ref_clk;
  for (genvar k = 1; k < STAGES; k++) begin : g_stage
    assign #(T0_PS) taps[k] = taps[k-1];
  end

endmodule
