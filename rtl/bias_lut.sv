// Bias-to-threshold table of one physical p-bit.
//
// The p-bit rule m = sgn(tanh(beta*I) - r) asks for P(m=+1) =
// (1 + tanh(beta*I))/2. With digital control the only knob is the
// threshold c that the digitised sample is compared against, and the
// state-vs-threshold curve follows the cumulative distribution of the
// source's samples. This table holds, for each saturated value of
// beta*I, the threshold that yields the wanted probability for the
// calibrated source: c(x) = F^-1((1 + tanh(x))/2), F the sample CDF.
// Programming the table from a calibration is the host's task. Using a
// table for this mapping is this design's choice; the design only says
// that the threshold is varied digitally.
//
// Interface: write port (we, waddr, wdata) in two's-complement address
// order; read address bi is the signed beta*I. Timing: synchronous read,
// thr is valid one clock after bi. Contents are not reset.
module bias_lut #(
  parameter int ADC_BITS = 8,
  parameter int IN_BITS  = 8
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [IN_BITS-1:0]        waddr,
  input  logic signed [ADC_BITS:0]  wdata,
  input  logic signed [IN_BITS-1:0] bi,
  output logic signed [ADC_BITS:0]  thr
);
  logic signed [ADC_BITS:0] tbl [2**IN_BITS];

  always_ff @(posedge clk) begin
    if (we) tbl[waddr] <= wdata;
    thr <= tbl[$unsigned(bi)];
  end
endmodule
