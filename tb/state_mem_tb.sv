// Self-checking test of state_mem with 16 entries and 2 lanes: random
// lane writes inside each lane's block, random host writes (some to the
// address a lane writes in the same clock, which the lane must win), and
// random lane and host reads, all against a model array.
module state_mem_tb;
  localparam int N = 16, L = 2, IB = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [IB-1:0] rd_addr [L];
  logic          rd_data [L];
  logic          wr_en   [L];
  logic [IB-1:0] wr_addr [L];
  logic          wr_data [L];
  logic host_we, host_re, host_wdata, host_rdata;
  logic [IB-1:0] host_addr;
  logic model [N];
  logic exp_hr;
  logic exp_hr_valid;

  state_mem #(.N_PBITS(N), .LANES(L), .IDX_BITS(IB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  initial begin
    host_we = 0; host_re = 0; host_addr = 0; host_wdata = 0;
    for (int l = 0; l < L; l++) begin wr_en[l] = 0; wr_addr[l] = 0; wr_data[l] = 0; rd_addr[l] = 0; end
    // initialise through the host port
    for (int a = 0; a < N; a++) begin
      @(negedge clk);
      host_we = 1; host_addr = IB'(a); host_wdata = 1'($urandom); model[a] = host_wdata;
    end
    @(negedge clk); host_we = 0;
    exp_hr_valid = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      // check the host read issued in the previous cycle
      if (exp_hr_valid) check("host_rdata", host_rdata, exp_hr);
      for (int l = 0; l < L; l++) begin
        rd_addr[l] = IB'($urandom % N);
        wr_en[l]   = 1'($urandom);
        wr_addr[l] = IB'(l * (N / L) + $urandom % (N / L));
        wr_data[l] = 1'($urandom);
      end
      host_we    = ($urandom % 3) == 0;
      host_re    = !host_we && ($urandom % 2);
      host_addr  = ($urandom % 2) ? wr_addr[$urandom % L] : IB'($urandom % N);
      host_wdata = 1'($urandom);
      #1;
      for (int l = 0; l < L; l++) check("rd_data", rd_data[l], model[rd_addr[l]]);
      exp_hr = model[host_addr];
      exp_hr_valid = host_re;
      // model update at the coming edge
      begin
        logic blocked;
        blocked = 0;
        for (int l = 0; l < L; l++) if (wr_en[l] && wr_addr[l] == host_addr) blocked = 1;
        if (host_we && !blocked) model[host_addr] = host_wdata;
        for (int l = 0; l < L; l++) if (wr_en[l]) model[wr_addr[l]] = wr_data[l];
      end
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
