// Self-checking test of pbit_threshold: every sample value against every
// threshold from -1 to 255 and two out-of-range values; the expected
// state is worked out with integer arithmetic (+1 when j <= c).
module pbit_threshold_tb;
  int checks = 0, failures = 0;
  logic [7:0]        sample;
  logic signed [8:0] thr;
  logic              m_pos;

  pbit_threshold #(.ADC_BITS(8)) dut (.sample, .thr, .m_pos);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = -2; c <= 256; c++) begin
      for (int j = 0; j < 256; j++) begin
        sample = 8'(j);
        thr    = 9'(c);
        #1;
        checks++;
        if (c <= 255 && m_pos !== (j <= c)) begin
          failures++;
          if (failures < 10) $display("FAIL j=%0d c=%0d m_pos=%0d", j, c, m_pos);
        end
      end
    end
    // c = 256 wraps to -256 in 9 bits: always -1
    sample = 8'd0; thr = -9'sd256; #1; checks++;
    if (m_pos !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
