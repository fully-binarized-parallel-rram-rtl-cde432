// tb_imss_top: end-to-end test of the IMSS engine at its default size
// (4x8 2T-2R array, 1 us programming pulses at 50 MHz, K = 1, 16 classes).
//
// Columns 0..5 are programmed with random vectors and labels, column 6 with
// the thermometer code of a feature byte, column 7 is left empty. Column 2 is
// then programmed again with a new vector (devices switched both ways). Every
// 4-bit query is searched, raw and through the thermometer front end. For each
// search the expected result is worked out here: Hamming distance to every
// programmed column, nearest = smallest distance (lowest index on a tie),
// V_out = 1800 mV * HD / 4. Checked: found, index, V_out, label, the V_out of
// every programmed column, the search latency (2 clock edges from command to
// result) and the programming time (409 clock edges per column), and that the
// SET/RESET bias set points are the published voltages.
// Mechanisms counted, each must occur: SET pulses, RESET pulses, searches,
// exact matches (HD = 0), thermometer-coded commands, searches in which the
// empty column would have won had it not been skipped, and cycles in which a
// command waited on cmd_ready.
module tb_imss_top;
  import imss_pkg::*;
  int checks = 0, failures = 0;
  logic        clk = 0, rst_n = 0;
  logic        cmd_valid = 0, cmd_ready;
  cmd_e        cmd_op = CMD_PROGRAM;
  logic [2:0]  cmd_col = '0;
  logic        cmd_thermo = 0;
  logic [3:0]  cmd_data = '0;
  logic [7:0]  cmd_feat [1];
  logic [3:0]  cmd_label = '0;
  logic        res_valid, res_found;
  logic [2:0]  res_idx;
  logic [10:0] res_vout;
  logic [3:0]  res_label;
  array_op_e   arr_op;
  bias_t       arr_bias;
  logic [7:0]  arr_wl, arr_col_en;
  logic [10:0] vout_mv [8];

  imss_top dut (.*);

  always #10 clk = ~clk;   // 50 MHz

  // reference state
  logic [3:0] sd [8];
  logic [3:0] lab [8];
  logic [7:0] programmed = '0;

  // mechanism counters
  int n_set = 0, n_reset = 0, n_search = 0, n_exact = 0, n_thermo = 0,
      n_skip_empty = 0, n_wait = 0, n_overwrite = 0;
  int unsigned cycle = 0;
  array_op_e prev_op = OP_IDLE;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (arr_op == OP_SET && prev_op != OP_SET) begin
        n_set++;
        checks++;
        if (arr_bias != bias_t'({13'd1800, 13'd1400, 13'd0})) begin
          failures++; $display("FAIL SET bias");
        end
      end
      if (arr_op == OP_RESET && prev_op != OP_RESET) begin
        n_reset++;
        checks++;
        if (arr_bias != bias_t'({13'd4500, 13'd0, 13'd1200})) begin
          failures++; $display("FAIL RESET bias");
        end
      end
      if (cmd_valid && !cmd_ready) n_wait++;
      prev_op <= arr_op;
    end
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [3:0] thermo4(input logic [7:0] f);
    logic [3:0] r;
    for (int i = 0; i < 4; i++) r[i] = (int'(f) > 31 + 32 * i);
    return r;
  endfunction

  // drive a command; returns the cycle on whose edge it was taken
  task automatic send(input cmd_e o, input logic [2:0] c, input logic th,
                      input logic [3:0] d, input logic [7:0] f, input logic [3:0] l,
                      output int unsigned taken);
    @(negedge clk);
    cmd_valid = 1; cmd_op = o; cmd_col = c; cmd_thermo = th; cmd_data = d;
    cmd_feat[0] = f; cmd_label = l;
    while (!cmd_ready) @(negedge clk);
    taken = cycle + 1;  // number of the coming rising edge, which takes it
    @(negedge clk);
    cmd_valid = 0;
    if (th) n_thermo++;
  endtask

  task automatic program_col(input logic [2:0] c, input logic th, input logic [3:0] d,
                             input logic [7:0] f, input logic [3:0] l,
                             input logic wait_done = 1'b1);
    int unsigned t0;
    logic [3:0] v;
    v = th ? thermo4(f) : d;
    if (programmed[c]) n_overwrite++;
    send(CMD_PROGRAM, c, th, d, f, l, t0);
    if (wait_done) begin
      while (!cmd_ready) @(negedge clk);
      chk(cycle - t0 == 409, $sformatf("program time %0d edges, expected 409", cycle - t0));
    end
    sd[c] = v; lab[c] = l; programmed[c] = 1'b1;
  endtask

  task automatic search(input logic th, input logic [3:0] d, input logic [7:0] f);
    int unsigned t0;
    logic [3:0] q;
    int best, best_hd;
    q = th ? thermo4(f) : d;
    best = -1; best_hd = 99;
    for (int c = 0; c < 8; c++)
      if (programmed[c] && $countones(q ^ sd[c]) < best_hd) begin
        best = c; best_hd = $countones(q ^ sd[c]);
      end
    send(CMD_SEARCH, 3'd0, th, d, f, 4'd0, t0);
    while (!res_valid) @(negedge clk);
    n_search++;
    chk(cycle - t0 == 2, $sformatf("search latency %0d edges, expected 2", cycle - t0));
    chk(res_found == (best >= 0), "found");
    if (best >= 0) begin
      chk(int'(res_idx) == best, $sformatf("q=%b idx %0d expected %0d", q, res_idx, best));
      chk(int'(res_vout) == 450 * best_hd, $sformatf("q=%b vout %0d expected %0d", q, res_vout, 450 * best_hd));
      chk(res_label == lab[best], "label");
      if (best_hd == 0) n_exact++;
      if (!programmed[7] && best_hd > 0) n_skip_empty++;
    end
  endtask

  // V_out of every programmed column during the read pulse
  always @(posedge clk) if (rst_n && arr_op == OP_SEARCH) begin
    for (int c = 0; c < 8; c++) if (programmed[c]) begin
      checks++;
      if (int'(vout_mv[c]) != 450 * $countones(dut.qi ^ sd[c])) begin
        failures++;
        $display("FAIL column %0d vout %0d", c, vout_mv[c]);
      end
    end
  end

  initial begin
    cmd_feat[0] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    search(1'b0, 4'h3, 8'h00);                 // nothing programmed yet
    for (int c = 0; c < 6; c++) program_col(3'(c), 1'b0, 4'($urandom), 8'h00, 4'($urandom));
    program_col(3'd6, 1'b1, 4'h0, 8'd100, 4'd9); // thermometer code 0111
    // overwrite column 2; the next command is presented at once and must wait
    program_col(3'd2, 1'b0, ~sd[2], 8'h00, 4'd12, 1'b0);
    for (int q = 0; q < 16; q++) search(1'b0, 4'(q), 8'h00);
    for (int f = 0; f < 256; f += 17) search(1'b1, 4'h0, 8'(f));

    $display("mechanisms: set=%0d reset=%0d search=%0d exact=%0d thermo=%0d skip_empty=%0d wait=%0d overwrite=%0d",
             n_set, n_reset, n_search, n_exact, n_thermo, n_skip_empty, n_wait, n_overwrite);
    chk(n_set > 0, "SET pulses happened");
    chk(n_reset > 0, "RESET pulses happened");
    chk(n_search > 0, "searches happened");
    chk(n_exact > 0, "exact matches happened");
    chk(n_thermo > 0, "thermometer commands happened");
    chk(n_skip_empty > 0, "empty column skipped");
    chk(n_wait > 0, "command waited on ready");
    chk(n_overwrite > 0, "column reprogrammed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
