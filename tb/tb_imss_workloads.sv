// tb_imss_workloads: the engine at the sizes of the evaluated workloads.
//
// Part 1, pixel classification: 160-row columns (20 uint8 features, each as
// an 8-bit thermometer code), 32 columns, 16 classes and a top-3 vote. The
// data are synthetic: 16 random class prototypes of 20 features; stored
// vectors and queries are prototypes plus uniform noise of +-24. Stored and
// query vectors both go through the thermometer front end. Two engines run
// the same command stream: one with nominal device currents, whose nearest
// column, V_out (1800 mV * HD / 160, rounded) and voted label must equal a
// software Hamming-distance top-3 vote worked out here; and one with +-20 %
// device-to-device current spread, whose labels must agree with the software
// result for at least 90 % of the queries.
// Part 2, the 128-bit x 32-vector search used for energy comparison: random
// 128-bit vectors in 32 columns, random queries, nearest column and V_out
// checked against software.
// All pulses at their real length (1 us programming pulses at 50 MHz).
module tb_imss_workloads;
  import imss_pkg::*;
  localparam int NR = 160, NC = 32, NF = 20, NQ = 48;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------- part 1 ----------------
  logic          cmd_valid = 0, rdy0, rdy1;
  cmd_e          cmd_op = CMD_PROGRAM;
  logic [4:0]    cmd_col = '0;
  logic [NR-1:0] cmd_data = '0;
  logic [7:0]    cmd_feat [NF];
  logic [3:0]    cmd_label = '0;
  logic          val0, fnd0, val1, fnd1;
  logic [4:0]    idx0, idx1;
  logic [10:0]   vo0, vo1;
  logic [3:0]    lab0, lab1;

  imss_top #(.N_ROWS(NR), .N_COLS(NC), .K(3), .N_CLASSES(16), .VAR_PCT(0)) u_nom (
    .clk, .rst_n, .cmd_valid, .cmd_ready(rdy0), .cmd_op, .cmd_col, .cmd_thermo(1'b1),
    .cmd_data, .cmd_feat, .cmd_label, .res_valid(val0), .res_found(fnd0), .res_idx(idx0),
    .res_vout(vo0), .res_label(lab0), .arr_op(), .arr_bias(), .arr_wl(), .arr_col_en(), .vout_mv());
  imss_top #(.N_ROWS(NR), .N_COLS(NC), .K(3), .N_CLASSES(16), .VAR_PCT(20)) u_var (
    .clk, .rst_n, .cmd_valid, .cmd_ready(rdy1), .cmd_op, .cmd_col, .cmd_thermo(1'b1),
    .cmd_data, .cmd_feat, .cmd_label, .res_valid(val1), .res_found(fnd1), .res_idx(idx1),
    .res_vout(vo1), .res_label(lab1), .arr_op(), .arr_bias(), .arr_wl(), .arr_col_en(), .vout_mv());

  logic [7:0]    proto [16][NF];
  logic [NR-1:0] sd [NC];
  logic [3:0]    sd_lab [NC];

  function automatic logic [NR-1:0] encode(input logic [7:0] f [NF]);
    logic [NR-1:0] v;
    for (int j = 0; j < NF; j++)
      for (int i = 0; i < 8; i++) v[8*j+i] = (int'(f[j]) > 31 + 32 * i);
    return v;
  endfunction

  task automatic sample(input int cls);
    for (int j = 0; j < NF; j++) begin
      int x;
      x = int'(proto[cls][j]) + $urandom_range(48, 0) - 24;
      cmd_feat[j] = 8'((x < 0) ? 0 : (x > 255) ? 255 : x);
    end
  endtask

  task automatic send1(input cmd_e o);
    @(negedge clk);
    cmd_valid = 1; cmd_op = o;
    while (!(rdy0 && rdy1)) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // ---------------- part 2 ----------------
  logic        cv2 = 0, rdy2, val2, fnd2;
  cmd_e        op2 = CMD_PROGRAM;
  logic [4:0]  col2 = '0, idx2;
  logic [127:0] dat2 = '0;
  logic [7:0]  feat2 [16];
  logic [10:0] vo2;
  logic [3:0]  lab2;
  logic [127:0] sd2 [NC];

  imss_top #(.N_ROWS(128), .N_COLS(NC)) u_e128 (
    .clk, .rst_n, .cmd_valid(cv2), .cmd_ready(rdy2), .cmd_op(op2), .cmd_col(col2),
    .cmd_thermo(1'b0), .cmd_data(dat2), .cmd_feat(feat2), .cmd_label(4'd0),
    .res_valid(val2), .res_found(fnd2), .res_idx(idx2), .res_vout(vo2), .res_label(lab2),
    .arr_op(), .arr_bias(), .arr_wl(), .arr_col_en(), .vout_mv());

  task automatic send2(input cmd_e o);
    @(negedge clk);
    cv2 = 1; op2 = o;
    while (!rdy2) @(negedge clk);
    @(negedge clk);
    cv2 = 0;
  endtask

  initial begin
    int agree, correct;
    foreach (feat2[j]) feat2[j] = '0;
    foreach (cmd_feat[j]) cmd_feat[j] = '0;
    for (int c = 0; c < 16; c++)
      for (int j = 0; j < NF; j++) proto[c][j] = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- part 1: store two samples per class ----
    for (int c = 0; c < NC; c++) begin
      sample(c % 16);
      cmd_col = 5'(c);
      cmd_label = 4'(c % 16);
      sd[c] = encode(cmd_feat);
      sd_lab[c] = cmd_label;
      send1(CMD_PROGRAM);
    end
    agree = 0; correct = 0;
    for (int q = 0; q < NQ; q++) begin
      int cls, hd [NC], order [NC], votes [16], best, lab, mv;
      logic [NR-1:0] qv;
      cls = $urandom_range(15, 0);
      sample(cls);
      qv = encode(cmd_feat);
      for (int c = 0; c < NC; c++) begin
        hd[c] = $countones(qv ^ sd[c]);
        order[c] = c;
      end
      for (int i = 1; i < NC; i++)
        for (int j = i; j > 0 && hd[order[j]] < hd[order[j-1]]; j--) begin
          int t;
          t = order[j]; order[j] = order[j-1]; order[j-1] = t;
        end
      foreach (votes[l]) votes[l] = 0;
      best = 0; lab = 0;
      for (int i = 0; i < 3; i++) begin
        votes[sd_lab[order[i]]]++;
        if (votes[sd_lab[order[i]]] > best) begin
          best = votes[sd_lab[order[i]]];
          lab = sd_lab[order[i]];
        end
      end
      mv = (1800 * hd[order[0]] + NR / 2) / NR;
      send1(CMD_SEARCH);
      while (!val0) @(negedge clk);
      chk(fnd0 && int'(idx0) == order[0], $sformatf("q%0d nearest %0d expected %0d", q, idx0, order[0]));
      chk(int'(vo0) == mv, $sformatf("q%0d vout %0d expected %0d", q, vo0, mv));
      chk(int'(lab0) == lab, $sformatf("q%0d label %0d expected %0d", q, lab0, lab));
      chk(val1, "engine with device spread answers in the same cycle");
      if (int'(lab1) == lab) agree++;
      if (int'(lab0) == cls) correct++;
    end
    $display("classification: %0d of %0d queries labelled with their class; with +-20%% spread %0d of %0d agree with software",
             correct, NQ, agree, NQ);
    chk(agree * 10 >= NQ * 9, "device spread changes at most 10% of the labels");

    // ---- part 2: 128-bit x 32-vector search ----
    for (int c = 0; c < NC; c++) begin
      for (int w = 0; w < 4; w++) sd2[c][32*w +: 32] = $urandom;
      col2 = 5'(c);
      dat2 = sd2[c];
      send2(CMD_PROGRAM);
    end
    for (int q = 0; q < 16; q++) begin
      int best, bhd;
      logic [127:0] qv;
      for (int w = 0; w < 4; w++) qv[32*w +: 32] = $urandom;
      if (q % 4 == 0) qv = sd2[q];   // exact match now and then
      best = 0; bhd = 999;
      for (int c = 0; c < NC; c++)
        if ($countones(qv ^ sd2[c]) < bhd) begin
          best = c; bhd = $countones(qv ^ sd2[c]);
        end
      dat2 = qv;
      send2(CMD_SEARCH);
      while (!val2) @(negedge clk);
      chk(fnd2 && int'(idx2) == best, $sformatf("128x32 q%0d nearest %0d expected %0d", q, idx2, best));
      chk(int'(vo2) == (1800 * bhd + 64) / 128, $sformatf("128x32 q%0d vout %0d", q, vo2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
