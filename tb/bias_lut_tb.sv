// Self-checking test of bias_lut: fills the 256-entry table with random
// thresholds through the write port, then reads every signed address in
// random order and checks the value one clock later against a copy kept
// by the testbench.
module bias_lut_tb;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [7:0] waddr;
  logic signed [8:0] wdata, thr;
  logic signed [7:0] bi;
  logic signed [8:0] model [256];

  bias_lut #(.ADC_BITS(8), .IN_BITS(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bi = 0; waddr = 0; wdata = 0;
    @(posedge clk);
    for (int a = 0; a < 256; a++) begin
      #1 we = 1; waddr = 8'(a); wdata = 9'($urandom_range(0, 256)) - 9'sd1;
      model[a] = wdata;
      @(posedge clk);
    end
    #1 we = 0;
    for (int i = 0; i < 1000; i++) begin
      bi = 8'($urandom);
      @(posedge clk); #1;
      checks++;
      if (thr !== model[8'(bi)]) begin
        failures++;
        if (failures < 10) $display("FAIL bi=%0d thr=%0d exp=%0d", bi, thr, model[8'(bi)]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
