// Self-checking test of sdi_certifier: a random stream of sample pairs
// with random valid, bound n_min changed part way; each output is
// compared with the input of the previous clock, and both counters with
// counts kept by the testbench. Also checks clear.
module sdi_certifier_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [7:0] diff_sample, cert_sample, n_min, out_sample;
  logic in_valid, out_valid;
  logic [31:0] accept_cnt, reject_cnt;
  int exp_acc = 0, exp_rej = 0;
  logic exp_valid;
  logic [7:0] exp_sample;

  sdi_certifier #(.ADC_BITS(8), .CNT_BITS(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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
    diff_sample = 0; cert_sample = 0; in_valid = 0; n_min = 8'd100;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      if (i == 2000) n_min = 8'd180;
      diff_sample = 8'($urandom);
      cert_sample = (i % 7 == 0) ? n_min : 8'($urandom);   // hit the boundary often
      in_valid    = ($urandom % 4) != 0;
      exp_valid   = in_valid && (cert_sample >= n_min);
      exp_sample  = diff_sample;
      if (in_valid && cert_sample >= n_min) exp_acc++;
      if (in_valid && cert_sample <  n_min) exp_rej++;
      @(posedge clk); #1;
      check("out_valid", out_valid, exp_valid);
      if (exp_valid) check("out_sample", out_sample, exp_sample);
      check("accept_cnt", accept_cnt, exp_acc);
      check("reject_cnt", reject_cnt, exp_rej);
    end
    in_valid = 0; clr = 1; @(posedge clk); #1 clr = 0;
    check("clr acc", accept_cnt, 0);
    check("clr rej", reject_cnt, 0);
    check("clr valid", out_valid, 0);
    $display("accepted=%0d rejected=%0d", exp_acc, exp_rej);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
