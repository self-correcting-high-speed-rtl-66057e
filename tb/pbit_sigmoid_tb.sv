// Bias-sweep workload: the p-bit activation curve at full size.
//
// All 64000 logical p-bits are uncoupled (all weights 0) and receive
// constant biases h = (i mod 97) - 48, so that with beta = 1 the lanes
// apply 97 bias levels. Three sweeps are run on the behavioural sources
// with calibrated threshold tables. For each level the average state
// <m> is compared with the value the quantised threshold should give
// (2 P(j <= c) - 1, within 5 standard errors) and with the ideal
// tanh(beta*h/16); the RMS and largest deviation from tanh are printed.
module pbit_sigmoid_tb;
  import pbit_pkg::*;
  import pbit_tb_pkg::*;
  localparam int N = N_PBITS_DEF, L = LANES_DEF, K = K_NBR_DEF, NL = N / L;
  localparam int LEVELS = 97, SWEEPS = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  sample_t   adc_diff [L], adc_sum [L];
  logic      adc_valid [L];
  host_req_t host_req;
  logic [31:0] host_rdata, flip_cnt;
  logic busy, done;
  logic lane_flip [L];
  sample_t lane_smp [L];
  logic src_en = 0;
  int   drop = 5;

  pbit_ctrl_top dut (.*);

  for (genvar l = 0; l < L; l++) begin : g_src
    sdi_source_model u_src (.clk, .enable(src_en), .drop_pct(drop),
      .diff(adc_diff[l]), .sum(adc_sum[l]), .valid(adc_valid[l]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] adr(region_e r, int lane, int off);
    return {r, 4'(lane), 24'(off)};
  endfunction
  task automatic hwrite(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    host_req = '{we: 1'b1, re: 1'b0, addr: a, wdata: d};
    @(negedge clk);
    host_req = '0;
  endtask

  real cdf [257];
  int  lut [256];
  int  n_tot [LEVELS], n_pos [LEVELS];
  int  p_exp [L];

  always @(negedge clk)
    for (int l = 0; l < L; l++)
      if (lane_flip[l]) begin
        int lvl;
        lvl = (l * NL + p_exp[l]) % LEVELS;
        n_tot[lvl]++;
        n_pos[lvl] += int'(dut.st_wdata[l]);
        p_exp[l] = (p_exp[l] + 1) % NL;
      end

  initial begin
    real mean, ideal, quant, se, rms, worst;
    host_req = '0;
    for (int i = 0; i < LEVELS; i++) begin n_tot[i] = 0; n_pos[i] = 0; end
    for (int l = 0; l < L; l++) p_exp[l] = 0;
    source_cdf(cdf);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    hwrite(adr(REG_CTRL, 0, int'(CR_BETA)), 32'(16));
    hwrite(adr(REG_CTRL, 0, int'(CR_NMIN)), 32'(140));
    hwrite(adr(REG_CTRL, 0, int'(CR_SWEEPS)), 32'(SWEEPS));
    for (int x = -128; x < 128; x++) begin
      lut[x & 255] = threshold_for(x, cdf);
      for (int l = 0; l < L; l++) hwrite(adr(REG_LUT, l, x & 255), 32'(lut[x & 255] & 511));
    end
    for (int g = 0; g < N; g++) begin
      for (int k = 0; k < K; k++) hwrite(adr(REG_NBR, g / NL, (g % NL) * K + k), 32'(g << 8));
      hwrite(adr(REG_BIAS, g / NL, g % NL), 32'(((g % LEVELS) - 48) & 255));
    end
    src_en = 1;
    hwrite(adr(REG_CTRL, 0, int'(CR_START)), 0);
    while (busy) @(negedge clk);
    src_en = 0;
    rms = 0.0; worst = 0.0;
    for (int i = 0; i < LEVELS; i++) begin
      int h;
      h = i - 48;
      mean  = 2.0 * real'(n_pos[i]) / real'(n_tot[i]) - 1.0;
      quant = 2.0 * p_of_thr(lut[h & 255], cdf) - 1.0;
      ideal = $tanh(real'(h) / X_SCALE);
      se    = 2.0 * $sqrt((1.0 - quant * quant) / 4.0 / real'(n_tot[i])) + 1e-3;
      checks++;
      if ((mean - quant) > 5.0 * se || (quant - mean) > 5.0 * se) begin
        failures++;
        $display("FAIL h=%0d <m>=%f expected %f (se %f)", h, mean, quant, se);
      end
      rms += (mean - ideal) * (mean - ideal);
      if ((mean - ideal) > worst) worst = mean - ideal;
      if ((ideal - mean) > worst) worst = ideal - mean;
      if (i % 12 == 0) $display("h=%4d  <m>=%7.4f  tanh=%7.4f  samples=%0d", h, mean, ideal, n_tot[i]);
    end
    rms = $sqrt(rms / LEVELS);
    $display("deviation from tanh: rms=%f max=%f", rms, worst);
    checks++;
    if (rms > 0.03) begin failures++; $display("FAIL rms deviation %f", rms); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
