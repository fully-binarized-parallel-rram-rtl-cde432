// tb_sense_amp: drives nominal bit-line currents for every Hamming distance
// 0..4 of a 4-row column and expects V_out = 1800 mV * HD / 4 (0, 450, 900,
// 1350, 1800 mV), then random currents against the same straight line worked
// out in real arithmetic, including clamping below the all-match current and
// above the all-mismatch current.
module tb_sense_amp;
  int checks = 0, failures = 0;
  logic [31:0] i_bl_na [8];
  logic [10:0] vout_mv [8];

  sense_amp #(.N_ROWS(4), .N_COLS(8)) dut (.i_bl_na, .vout_mv);

  function automatic int expected_mv(input longint i);
    real v;
    v = 1800.0 * (real'(i) - 4000.0) / 20000.0;
    if (v < 0.0) v = 0.0;
    if (v > 1800.0) v = 1800.0;
    return int'($floor(v + 0.5));
  endfunction

  initial begin
    for (int c = 0; c < 8; c++) begin
      int hd;
      hd = c % 5;
      i_bl_na[c] = 32'(hd * 6000 + (4 - hd) * 1000);
    end
    #1;
    for (int c = 0; c < 8; c++) begin
      checks++;
      if (vout_mv[c] != 11'((c % 5) * 450)) begin
        failures++;
        $display("FAIL nominal col %0d HD=%0d vout=%0d", c, c % 5, vout_mv[c]);
      end
    end
    for (int t = 0; t < 200; t++) begin
      for (int c = 0; c < 8; c++) i_bl_na[c] = $urandom_range(30000, 0);
      #1;
      for (int c = 0; c < 8; c++) begin
        int e;
        e = expected_mv(longint'(i_bl_na[c]));
        checks++;
        // allow 1 mV for rounding differences
        if (int'(vout_mv[c]) > e + 1 || int'(vout_mv[c]) < e - 1) begin
          failures++;
          $display("FAIL i=%0d vout=%0d expected=%0d", i_bl_na[c], vout_mv[c], e);
        end
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
