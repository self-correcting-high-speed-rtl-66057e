// Certification gate of one physical p-bit (self-correction).
//
// Each physical p-bit delivers two samples per conversion: the difference
// of its two detector currents, which carries the randomness, and their
// sum, which bounds from below the number of photons that reached the
// beamsplitter. A difference sample is only trusted when that bound is
// high enough for the p-bit's distribution to be the calibrated one. This
// block compares the sum sample with a programmable bound n_min; samples
// at or above it are passed on, others are dropped and counted. The use
// of the sum measurement as a quality check follows the design; the
// per-sample comparison and the counters are this design's choice.
//
// Interface: in_valid qualifies diff_sample/cert_sample; out_valid marks
// a certified out_sample. Counters saturate at all ones and clear on
// rst_n or clr. Timing: one register stage (out_* follow in_* by one clock).
module sdi_certifier #(
  parameter int ADC_BITS = 8,
  parameter int CNT_BITS = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic [ADC_BITS-1:0] diff_sample,
  input  logic [ADC_BITS-1:0] cert_sample,
  input  logic                in_valid,
  input  logic [ADC_BITS-1:0] n_min,
  output logic [ADC_BITS-1:0] out_sample,
  output logic                out_valid,
  output logic [CNT_BITS-1:0] accept_cnt,
  output logic [CNT_BITS-1:0] reject_cnt
);
  logic ok;
  always_comb ok = cert_sample >= n_min;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      out_valid  <= 1'b0;
      out_sample <= '0;
      accept_cnt <= '0;
      reject_cnt <= '0;
    end else begin
      out_valid  <= in_valid && ok;
      out_sample <= diff_sample;
      if (in_valid && ok && !(&accept_cnt))  accept_cnt <= accept_cnt + 1'b1;
      if (in_valid && !ok && !(&reject_cnt)) reject_cnt <= reject_cnt + 1'b1;
    end
  end
endmodule
