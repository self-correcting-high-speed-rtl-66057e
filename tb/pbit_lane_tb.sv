// Self-checking test of pbit_lane (8 local p-bits at base 8, 2 neighbour
// entries each, 32-entry state memory modelled here). Tables, states,
// beta and the sample stream are random. At every state write the
// expected new state is computed independently: I = h + sum w*m from the
// model memory, x = sat8((I*beta) >>> 4), c = table[x], m = (j <= c).
// Also checked: index order, the saturation flag, the done pulse after
// the programmed sweeps, and K_NBR+4 = 6 clocks per update when a
// certified sample is always available.
module pbit_lane_tb;
  import pbit_pkg::*;
  localparam int NL = 8, K = 2, IB = 5, BASE = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] sweeps;
  logic [7:0] beta;
  logic busy, done, flip, clip;
  logic [7:0] smp;
  logic smp_valid;
  logic [IB-1:0] st_raddr, st_waddr;
  logic st_rdata, st_we, st_wdata;
  logic prog_nbr_we, prog_h_we, prog_lut_we;
  logic [23:0] prog_addr;
  logic [31:0] prog_data;

  logic       mem [32];
  int         nbr_idx [NL*K];
  int         nbr_w   [NL*K];
  int         hb      [NL];
  int         lut     [256];
  int         p_exp, nflips, ndone, nclip_exp, nclip;
  int         last_flip_cyc, cyc;
  bit         timing_phase;

  pbit_lane #(.N_LOCAL(NL), .K_NBR(K), .IDX_BITS(IB), .LANE_BASE(BASE)) dut (.*);

  always #5 clk = ~clk;
  always_comb st_rdata = mem[st_raddr];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (st_we) mem[st_waddr] <= st_wdata;
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic prog(input logic [2:0] sel, input int addr, input int data);
    @(negedge clk);
    {prog_nbr_we, prog_h_we, prog_lut_we} = sel;
    prog_addr = 24'(addr);
    prog_data = 32'(data);
    @(negedge clk);
    {prog_nbr_we, prog_h_we, prog_lut_we} = 3'b000;
  endtask

  // reference model of one update, evaluated when the lane writes
  function automatic int expect_m(int p, int j);
    int acc, x, c;
    acc = hb[p];
    for (int k = 0; k < K; k++) acc += mem[nbr_idx[p*K+k]] ? nbr_w[p*K+k] : -nbr_w[p*K+k];
    x = (acc * int'(beta)) >>> 4;
    if (x > 127 || x < -128) nclip_exp++;
    if (x > 127) x = 127;
    if (x < -128) x = -128;
    c = lut[x & 255];
    return (j <= c) ? 1 : 0;
  endfunction

  task automatic run(int nsw, int valid_pct);
    sweeps = 32'(nsw);
    p_exp = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (1) begin
      smp       = 8'($urandom);
      smp_valid = ($urandom % 100) < valid_pct;
      #1;
      if (st_we) begin
        check("waddr", int'(st_waddr), BASE + p_exp);
        check("wdata", int'(st_wdata), expect_m(p_exp, int'(smp)));
        check("flip", int'(flip), 1);
        if (timing_phase && last_flip_cyc >= 0) check("cycles/update", cyc - last_flip_cyc, K + 4);
        last_flip_cyc = cyc;
        nflips++;
        p_exp = (p_exp + 1) % NL;
      end
      @(negedge clk);
      if (done) ndone++;
      if (clip) nclip++;
      if (!busy) break;
    end
  endtask

  initial begin
    cyc = 0; sweeps = 1; beta = 8'h10; smp = 0; smp_valid = 0;
    {prog_nbr_we, prog_h_we, prog_lut_we} = 3'b000; prog_addr = 0; prog_data = 0;
    nflips = 0; ndone = 0; nclip = 0; nclip_exp = 0; last_flip_cyc = -1; timing_phase = 0;
    for (int i = 0; i < 32; i++) mem[i] = 1'($urandom);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int a = 0; a < NL*K; a++) begin
      nbr_idx[a] = $urandom % 32;
      nbr_w[a]   = int'($urandom % 256) - 128;
      prog(3'b100, a, (nbr_idx[a] << 8) | (nbr_w[a] & 255));
    end
    for (int p = 0; p < NL; p++) begin
      hb[p] = int'($urandom % 256) - 128;
      prog(3'b010, p, hb[p] & 255);
    end
    for (int x = 0; x < 256; x++) begin
      lut[x] = int'($urandom % 257) - 1;
      prog(3'b001, x, lut[x] & 511);
    end
    // random sample availability, three sweeps, several temperatures
    for (int r = 0; r < 4; r++) begin
      beta = (r == 0) ? 8'h00 : 8'($urandom);
      run(3, 60);
      check("flips after 3 sweeps", nflips, 24 * (r + 1));
      check("done pulses", ndone, r + 1);
    end
    // always-valid samples: fixed update interval
    timing_phase = 1; last_flip_cyc = -1;
    beta = 8'h10;
    run(2, 100);
    check("clip pulses", nclip, nclip_exp);
    $display("flips=%0d clips=%0d", nflips, nclip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
