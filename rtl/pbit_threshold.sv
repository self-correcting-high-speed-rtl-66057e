// Digital p-bit state decision.
//
// A logical p-bit takes its new state from one digitised difference
// sample j of a physical p-bit and a threshold c: the state is +1 when
// j <= c and -1 when j > c. Raising c moves the probability of +1 along
// a sigmoid, which is how the bias is applied in the digital domain. The
// comparison rule is the one of the design; making c one bit wider and
// signed, so that c = -1 yields a p-bit that is always -1, is this
// design's own choice.
//
// Interface: sample (unsigned), thr (signed), m_pos = 1 for m = +1.
// Timing: purely combinational.
module pbit_threshold #(
  parameter int ADC_BITS = 8
) (
  input  logic [ADC_BITS-1:0]        sample,
  input  logic signed [ADC_BITS:0]   thr,
  output logic                       m_pos
);
  always_comb m_pos = $signed({1'b0, sample}) <= thr;
endmodule
