// Zero-value discriminator ("==0?" in front of each PE).
//
// Looks at the activation the VGM selected for one PE and raises `en` when it is
// nonzero. The PE uses `en` as the enable of its accumulator register, which on an
// FPGA maps to the clock enable of the DSP/flip-flops: a zero activation leaves the
// PE idle for that cycle (zero gating). In 8-bit mode a 16-bit lane carries two
// activations, so `en_lo` / `en_hi` report each byte; `en` is their OR.
// Purely combinational, no latency. The per-byte outputs are this design's addition.
module zero_discriminator #(
  parameter int unsigned AW = 16
) (
  input  logic [AW-1:0] act,
  output logic          en,
  output logic          en_lo,
  output logic          en_hi
);
  always_comb begin
    en_lo = (act[AW/2-1:0] != '0);
    en_hi = (act[AW-1:AW/2] != '0);
    en    = en_lo | en_hi;
  end
endmodule
