// Full-size run of pbit_ctrl_top with its default parameters: 64000
// logical p-bits on 4 physical p-bits, 4 neighbour entries each.
//
// The logical p-bits of each lane form a ring with couplings to the
// neighbours at distance 1 and 2 (random signed weights, random biases);
// the threshold tables are calibrated to the behavioural source so that
// P(+1) = (1 + tanh(beta*I/16))/2. One full sweep is run with 10 % of
// the samples failing certification. Every one of the 64000 updates is
// checked against a reference computed here, then all states are read
// back through the host port.
module pbit_ctrl_top_full_tb;
  import pbit_pkg::*;
  import pbit_tb_pkg::*;
  localparam int N = N_PBITS_DEF, L = LANES_DEF, K = K_NBR_DEF, NL = N / L;
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
  int   drop = 10;

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

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  function automatic logic [31:0] adr(region_e r, int lane, int off);
    return {r, 4'(lane), 24'(off)};
  endfunction
  task automatic hwrite(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    host_req = '{we: 1'b1, re: 1'b0, addr: a, wdata: d};
    @(negedge clk);
    host_req = '0;
  endtask
  task automatic hread(logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    host_req = '{we: 1'b0, re: 1'b1, addr: a, wdata: 0};
    @(negedge clk);
    host_req = '0;
    d = host_rdata;
  endtask

  logic shadow [N];
  int   wgt [N][K];
  int   hb [N];
  int   lut [256];
  int   p_exp [L];
  int   beta_v = 16, nmin_v = 140;
  int   n_plus, n_reject;
  real  cdf [257];

  function automatic int nbr_of(int g, int k);
    int l, p, d;
    l = g / NL; p = g % NL;
    d = (k == 0) ? NL - 1 : (k == 1) ? 1 : (k == 2) ? NL - 2 : 2;
    return l * NL + (p + d) % NL;
  endfunction

  always @(negedge clk) begin
    int m [L];
    for (int l = 0; l < L; l++) begin
      m[l] = 0;
      if (lane_flip[l]) begin
        int g, acc, x;
        g = l * NL + p_exp[l];
        acc = hb[g];
        for (int k = 0; k < K; k++) acc += shadow[nbr_of(g, k)] ? wgt[g][k] : -wgt[g][k];
        x = (acc * beta_v) >>> 4;
        x = (x > 127) ? 127 : (x < -128) ? -128 : x;
        m[l] = (int'(lane_smp[l]) <= lut[x & 255]) ? 1 : 0;
        check("state update", int'(dut.st_wdata[l]), m[l]);
        check("update index", int'(dut.st_waddr[l]), g);
      end
    end
    for (int l = 0; l < L; l++)
      if (lane_flip[l]) begin
        shadow[l * NL + p_exp[l]] = m[l][0];
        p_exp[l]++;
      end
  end

  always @(posedge clk)
    for (int l = 0; l < L; l++)
      if (adc_valid[l] && adc_sum[l] < 8'(nmin_v)) n_reject++;

  initial begin
    logic [31:0] d;
    int t;
    host_req = '0;
    n_reject = 0;
    for (int l = 0; l < L; l++) p_exp[l] = 0;
    source_cdf(cdf);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    hwrite(adr(REG_CTRL, 0, int'(CR_BETA)), 32'(beta_v));
    hwrite(adr(REG_CTRL, 0, int'(CR_NMIN)), 32'(nmin_v));
    hwrite(adr(REG_CTRL, 0, int'(CR_SWEEPS)), 1);
    for (int x = -128; x < 128; x++) begin
      lut[x & 255] = threshold_for(x, cdf);
      for (int l = 0; l < L; l++) hwrite(adr(REG_LUT, l, x & 255), 32'(lut[x & 255] & 511));
    end
    for (int g = 0; g < N; g++) begin
      int l, p;
      l = g / NL; p = g % NL;
      for (int k = 0; k < K; k++) begin
        wgt[g][k] = int'($urandom % 33) - 16;
        hwrite(adr(REG_NBR, l, p * K + k), 32'((nbr_of(g, k) << 8) | (wgt[g][k] & 255)));
      end
      hb[g] = int'($urandom % 33) - 16;
      hwrite(adr(REG_BIAS, l, p), 32'(hb[g] & 255));
      shadow[g] = 1'($urandom);
      hwrite(adr(REG_STATE, 0, g), 32'(shadow[g]));
    end
    $display("programmed %0d logical p-bits", N);
    src_en = 1;
    hwrite(adr(REG_CTRL, 0, int'(CR_START)), 0);
    t = 0;
    while (busy && t < 1000000) begin @(negedge clk); t++; end
    src_en = 0;
    $display("sweep took %0d clocks (%0d per lane update)", t, t / NL);
    for (int l = 0; l < L; l++) check("lane finished its block", p_exp[l], NL);
    repeat (3) @(negedge clk);
    hread(adr(REG_CTRL, 0, int'(CR_FLIPS)), d);
    check("flip count", d, N);
    n_plus = 0;
    for (int g = 0; g < N; g++) begin
      hread(adr(REG_STATE, 0, g), d);
      check("state read-back", d[0], shadow[g]);
      n_plus += d[0];
    end
    $display("states +1: %0d of %0d, rejected samples: %0d", n_plus, N, n_reject);
    check("rejections happened", n_reject > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
