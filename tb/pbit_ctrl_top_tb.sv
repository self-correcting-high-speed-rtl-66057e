// End-to-end test of pbit_ctrl_top at a reduced size (32 logical p-bits,
// 2 physical p-bits, 2 neighbour entries), driven by two behavioural
// sources and programmed only through the host port.
//  Phase 1: neighbours inside each lane's block; every state update is
//           checked against a reference computed here from a shadow copy
//           of the states, the tables and the certified sample consumed.
//  Phase 2: neighbours across lanes (shared state memory), host read-back
//           of all states checked against the shadow copy.
//  Phase 3: beta = 0 (all p-bits use the table entry for x = 0).
// Also checked: flip, reject and clip counters, status register. Each
// mechanism (sample rejection, waiting for a certified sample, beta*I
// saturation, multi-sweep runs, cross-lane reads, host load/read-back)
// is counted and must occur at least once.
module pbit_ctrl_top_tb;
  import pbit_pkg::*;
  localparam int N = 32, L = 2, K = 2, NL = N / L;
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
  int   drop = 20;

  pbit_ctrl_top #(.N_PBITS(N), .LANES(L), .K_NBR(K)) dut (.*);

  for (genvar l = 0; l < L; l++) begin : g_src
    sdi_source_model u_src (.clk, .enable(src_en), .drop_pct(drop),
      .diff(adc_diff[l]), .sum(adc_sum[l]), .valid(adc_valid[l]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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

  // ---------------- host access ----------------
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

  // ---------------- shadow model ----------------
  logic shadow [N];
  int nbr_idx [N*K], nbr_w [N*K], hb [N];
  int lut [L][256];
  int beta_v, nmin_v;
  int p_exp [L];
  bit exact;             // per-update checks enabled
  int tb_rej, tb_acc, clip_exp;
  int n_clip, n_stall, n_reject, n_xlane, n_sweeps_multi, n_readback, n_beta0;

  function automatic int expect_m(int l, int p, int j);
    int g, acc, x;
    g = l * NL + p;
    acc = hb[g];
    for (int k = 0; k < K; k++) acc += shadow[nbr_idx[g*K+k]] ? nbr_w[g*K+k] : -nbr_w[g*K+k];
    x = (acc * beta_v) >>> 4;
    if (x > 127 || x < -128) clip_exp++;
    x = (x > 127) ? 127 : (x < -128) ? -128 : x;
    return (j <= lut[l][x & 255]) ? 1 : 0;
  endfunction

  // Update checks: evaluated before the clock edge that writes the state.
  always @(negedge clk) begin
    int m [L];
    for (int l = 0; l < L; l++) begin
      m[l] = -1;
      if (lane_flip[l]) begin
        m[l] = expect_m(l, p_exp[l], int'(lane_smp[l]));
        if (exact) check("state update", int'(dut.st_wdata[l]), m[l]);
        check("update index", int'(dut.st_waddr[l]), l * NL + p_exp[l]);
      end
    end
    for (int l = 0; l < L; l++)
      if (lane_flip[l]) begin
        shadow[l * NL + p_exp[l]] = exact ? m[l][0] : dut.st_wdata[l];
        p_exp[l] = (p_exp[l] + 1) % NL;
      end
  end

  // Independent counts of certification outcomes and mechanisms.
  always @(posedge clk) begin
    if (dut.start) begin
      tb_rej <= 0; tb_acc <= 0;
    end else
      for (int l = 0; l < L; l++)
        if (adc_valid[l] && l == 0) begin
          if (adc_sum[l] < 8'(nmin_v)) tb_rej <= tb_rej + 1; else tb_acc <= tb_acc + 1;
        end
    for (int l = 0; l < L; l++)
      if (adc_valid[l] && adc_sum[l] < 8'(nmin_v)) n_reject++;
  end

  // per-lane monitors of internal lane events
  int stall_l [L], xlane_l [L];
  for (genvar l = 0; l < L; l++) begin : g_mon
    initial begin stall_l[l] = 0; xlane_l[l] = 0; end
    always @(posedge clk) begin
      if (dut.g_lane[l].u_lane.state == 3'd4 && !lane_flip[l]) stall_l[l]++;  // waiting in S_SAMPLE
      if (!exact && dut.g_lane[l].u_lane.rd_valid && int'(dut.st_raddr[l]) / NL != l) xlane_l[l]++;
    end
  end
  always_comb begin
    n_stall = 0; n_xlane = 0;
    for (int l = 0; l < L; l++) begin n_stall += stall_l[l]; n_xlane += xlane_l[l]; end
  end

  task automatic program_tables(bit cross_lane);
    for (int g = 0; g < N; g++) begin
      int l, p;
      l = g / NL; p = g % NL;
      for (int k = 0; k < K; k++) begin
        int a;
        a = g * K + k;
        nbr_idx[a] = cross_lane ? int'($urandom % N) : l * NL + (p + (k ? 1 : NL - 1)) % NL;
        nbr_w[a]   = int'($urandom % 256) - 128;
        hwrite(adr(REG_NBR, l, p * K + k), 32'((nbr_idx[a] << 8) | (nbr_w[a] & 255)));
      end
      hb[g] = int'($urandom % 256) - 128;
      hwrite(adr(REG_BIAS, l, p), 32'(hb[g] & 255));
    end
  endtask

  task automatic run(int nsw);
    logic [31:0] d;
    int flips0, t;
    hwrite(adr(REG_CTRL, 0, int'(CR_SWEEPS)), 32'(nsw));
    for (int l = 0; l < L; l++) p_exp[l] = 0;
    clip_exp = 0;
    src_en = 1;
    hwrite(adr(REG_CTRL, 0, int'(CR_START)), 0);
    t = 0;
    while (busy && t < 100000) begin @(negedge clk); t++; end
    src_en = 0;
    repeat (3) @(negedge clk);
    hread(adr(REG_CTRL, 0, int'(CR_FLIPS)), d);
    check("flip count", d, N * nsw);
    hread(adr(REG_CTRL, 0, int'(CR_STATUS)), d);
    check("status idle", d[0], 0);
    hread(adr(REG_CTRL, 0, int'(CR_REJ)), d);
    check("lane0 rejects", d, tb_rej);
    hread(adr(REG_CTRL, 0, int'(CR_ACC)), d);
    check("lane0 accepts", d, tb_acc);
    hread(adr(REG_CTRL, 0, int'(CR_CLIPS)), d);
    // with cross-lane neighbours a neighbour may change during accumulation
    if (exact) check("clip count", d, clip_exp);
    n_clip += d;
    if (nsw > 1) n_sweeps_multi++;
  endtask

  task automatic readback();
    logic [31:0] d;
    for (int g = 0; g < N; g++) begin
      hread(adr(REG_STATE, 0, g), d);
      check("state read-back", d[0], shadow[g]);
    end
    n_readback++;
  endtask

  initial begin
    host_req = '0;
    for (int l = 0; l < L; l++) p_exp[l] = 0;
    tb_rej = 0; tb_acc = 0; clip_exp = 0; n_reject = 0;
    n_clip = 0; n_sweeps_multi = 0; n_readback = 0; n_beta0 = 0; exact = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // configuration
    beta_v = 24; nmin_v = 150;
    hwrite(adr(REG_CTRL, 0, int'(CR_BETA)), 32'(beta_v));
    hwrite(adr(REG_CTRL, 0, int'(CR_NMIN)), 32'(nmin_v));
    for (int l = 0; l < L; l++)
      for (int x = 0; x < 256; x++) begin
        lut[l][x] = int'($urandom % 257) - 1;
        hwrite(adr(REG_LUT, l, x), 32'(lut[l][x] & 511));
      end
    for (int g = 0; g < N; g++) begin
      shadow[g] = 1'($urandom);
      hwrite(adr(REG_STATE, 0, g), 32'(shadow[g]));
    end
    readback();
    // phase 1: exact per-update check
    program_tables(0);
    run(3);
    readback();
    // phase 2: cross-lane neighbours
    exact = 0;
    program_tables(1);
    beta_v = 40;
    hwrite(adr(REG_CTRL, 0, int'(CR_BETA)), 32'(beta_v));
    run(2);
    readback();
    // phase 3: beta = 0, single sweep, exact again with in-lane neighbours
    exact = 1;
    program_tables(0);
    beta_v = 0;
    hwrite(adr(REG_CTRL, 0, int'(CR_BETA)), 0);
    run(1);
    readback();
    n_beta0++;
    $display("mechanisms: clips=%0d rejects=%0d stalls=%0d cross_lane_reads=%0d multi_sweep_runs=%0d readbacks=%0d beta0_runs=%0d",
             n_clip, n_reject, n_stall, n_xlane, n_sweeps_multi, n_readback, n_beta0);
    check("mechanism: certification reject", n_reject > 0, 1);
    check("mechanism: wait for certified sample", n_stall > 0, 1);
    check("mechanism: cross-lane read", n_xlane > 0, 1);
    check("mechanism: multi-sweep run", n_sweeps_multi > 0, 1);
    check("mechanism: beta*I saturation", n_clip > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
