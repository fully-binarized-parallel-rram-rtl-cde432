// tb_rram_xor_array: programs the 8x8 1T-1R array model as a 4x8 2T-2R array
// with random vectors using 50-cycle SET/RESET pulses on one device at a time
// ('-1' = top LRS / bottom HRS, '+1' = top HRS / bottom LRS), then applies all
// 16 queries as differential WL pairs and expects, on every column, the
// bit-line current HD*6000 + (4-HD)*1000 nA with HD counted in the testbench.
// Also checks: a pulse one cycle shorter than 1 us leaves the device as it
// was; no current flows outside search or on a deselected column.
module tb_rram_xor_array;
  import imss_pkg::*;
  int checks = 0, failures = 0;
  logic        clk = 0;
  array_op_e   op;
  logic [7:0]  wl;
  logic [7:0]  col_en;
  logic [31:0] i_bl_na [8];
  logic [3:0]  sd [8];

  rram_xor_array #(.N_ROWS(4), .N_COLS(8)) dut (.clk, .op, .wl, .col_en, .i_bl_na);

  always #10 clk = ~clk;

  task automatic pulse(input array_op_e p, input int row, input int col, input int len);
    @(negedge clk);
    op = p; wl = 8'(1 << row); col_en = 8'(1 << col);
    repeat (len) @(negedge clk);
    op = OP_IDLE; wl = '0; col_en = '0;
    @(negedge clk);
  endtask

  task automatic store(input int col, input logic [3:0] v);
    for (int i = 0; i < 4; i++) begin
      pulse(v[i] ? OP_RESET : OP_SET, 2 * i,     col, 50);
      pulse(v[i] ? OP_SET   : OP_RESET, 2 * i + 1, col, 50);
    end
  endtask

  task automatic search_check(input logic [3:0] q, input logic [7:0] sel);
    @(negedge clk);
    op = OP_SEARCH; col_en = sel;
    for (int i = 0; i < 4; i++) begin
      wl[2*i] = q[i]; wl[2*i+1] = ~q[i];
    end
    #1;
    for (int c = 0; c < 8; c++) begin
      int hd;
      int unsigned exp_i;
      hd = $countones(q ^ sd[c]);
      exp_i = sel[c] ? 32'(hd * 6000 + (4 - hd) * 1000) : 0;
      checks++;
      if (i_bl_na[c] != exp_i) begin
        failures++;
        $display("FAIL q=%b col=%0d sd=%b i=%0d expected=%0d", q, c, sd[c], i_bl_na[c], exp_i);
      end
    end
    @(negedge clk);
    op = OP_IDLE; wl = '0; col_en = '0;
  endtask

  initial begin
    op = OP_IDLE; wl = '0; col_en = '0;
    repeat (2) @(negedge clk);
    for (int c = 0; c < 8; c++) begin
      sd[c] = 4'($urandom);
      store(c, sd[c]);
    end
    for (int q = 0; q < 16; q++) search_check(4'(q), 8'hFF);
    search_check(4'h5, 8'b1011_0110);
    // no current when idle
    #1;
    checks++;
    if (i_bl_na[3] != 0) begin
      failures++;
      $display("FAIL current while idle");
    end
    // a 49-cycle pulse must not switch: try to flip bit 0 of column 0
    pulse(sd[0][0] ? OP_SET : OP_RESET, 0, 0, 49);
    pulse(sd[0][0] ? OP_RESET : OP_SET, 1, 0, 49);
    search_check(sd[0], 8'hFF);
    // the full 50-cycle pulses do switch
    sd[0][0] = ~sd[0][0];
    pulse(sd[0][0] ? OP_RESET : OP_SET, 0, 0, 50);
    pulse(sd[0][0] ? OP_SET : OP_RESET, 1, 0, 50);
    for (int q = 0; q < 16; q++) search_check(4'(q), 8'hFF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
