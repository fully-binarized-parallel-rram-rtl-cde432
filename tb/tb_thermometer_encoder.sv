// tb_thermometer_encoder: exhaustive check of the 8-level thermometer code.
// For every byte value the expected code has floor(v/32) low bits set: that
// is how many of the thresholds 31, 63, ..., 255 the value strictly exceeds.
// The top threshold (255) is never exceeded by a byte, so bit 7 stays 0.
module tb_thermometer_encoder;
  int checks = 0, failures = 0;
  logic [7:0] feat;
  logic [7:0] code;

  thermometer_encoder dut (.feat, .code);

  initial begin
    for (int v = 0; v < 256; v++) begin
      int ones;
      logic [7:0] exp_code;
      feat = 8'(v);
      #1;
      ones = v / 32;  // thresholds 31+32i strictly below v; 255 is never exceeded
      exp_code = 8'((16'd1 << ones) - 1);
      checks++;
      if (code !== exp_code) begin
        failures++;
        $display("FAIL feat=%0d code=%b expected=%b", v, code, exp_code);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
