// Behavioural model of one physical p-bit with its two ADC channels (not
// synthesizable; for testbenches only).
//
// Difference channel: the sum of four independent uniform integers in
// 0..63, an 8-bit sample in 0..252 with mean 126 and a bell-shaped
// distribution, standing in for the smeared binomial distribution of a
// balanced difference measurement. Certification (sum) channel: uniform
// in SUM_LO..255, except that with probability drop_pct/100 it falls to
// 0..SUM_LO-1, modelling moments where too few photons reach the
// beamsplitter. One sample pair per clock while enable is high.
module sdi_source_model #(
  parameter int SUM_LO = 160
) (
  input  logic       clk,
  input  logic       enable,
  input  int         drop_pct,
  output logic [7:0] diff,
  output logic [7:0] sum,
  output logic       valid
);
  initial begin
    diff = 8'd0; sum = 8'd0; valid = 1'b0;
  end
  always @(posedge clk) begin
    valid <= enable;
    diff  <= 8'($urandom_range(0, 63) + $urandom_range(0, 63) +
                $urandom_range(0, 63) + $urandom_range(0, 63));
    if (int'($urandom_range(0, 99)) < drop_pct) sum <= 8'($urandom_range(0, SUM_LO - 1));
    else                                        sum <= 8'($urandom_range(SUM_LO, 255));
  end
endmodule
