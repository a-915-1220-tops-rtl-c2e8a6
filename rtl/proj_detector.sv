// proj_detector: behavioural model of a bank of N projection detectors (PD),
// one per projection line. In the chip each PD is a pull-up network, a
// pull-down network and a sense amplifier (SA) that compares the line with
// Vref, the output of a 4-bit DAC. Here the line level comes from the array
// model (VW bits, VDD = all ones), the DAC maps code k to k * VDD/16, and the
// SA output is 1 when the level is above Vref. A pulled-down line therefore
// reads 0 and a pulled-up line reads 1. The output is registered (the SA is
// clocked), so det reflects the level of the previous cycle. The DAC transfer
// and the clocked SA are this model's choices.
module proj_detector
  import cram_pkg::*;
#(
  parameter int unsigned N = ARR_H,
  parameter int unsigned V = VW
) (
  input  logic         clk,
  input  logic [3:0]   vref,
  input  logic [V-1:0] lvl [N],
  output logic [N-1:0] det
);
  logic [V-1:0] vref_lvl;
  assign vref_lvl = V'({vref, {(V-4){1'b0}}});

  always_ff @(posedge clk)
    for (int k = 0; k < N; k++)
      det[k] <= lvl[k] > vref_lvl;
endmodule
