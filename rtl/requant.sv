// requant: one output lane of the integer-only rescaling stage.
//
// Implements RES = (ACC*MULT) >> SHIFT + RES0 and OUT = clamp(RES, MIN, MAX),
// the fixed-point replacement for the real scale factor m1*m2/m3 that every
// engine applies to its accumulator. The 32-bit ACC is multiplied by the
// unsigned 32-bit MULT into a 65-bit signed product, shifted arithmetically
// (truncation toward minus infinity; rounding is not specified, so none is
// done), offset by the output zero point and clamped. Purely combinational;
// engines instantiate 16 of these after their accumulators.
module requant
  import ss_pkg::*;
(
  input  logic signed [31:0] acc,
  input  rq_t                rq,
  output logic [7:0]         out
);
  always_comb out = requantize(acc, rq);
endmodule
