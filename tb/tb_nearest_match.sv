// tb_nearest_match: random searches against two instances, K = 1 (nearest
// neighbour) and K = 3 (top-3 with majority vote). Before every search the
// block is reset and a random subset of the 8 columns gets random labels; the
// V_out values are drawn from the five levels of a 4-row column so that ties
// are common. The reference sorts the valid columns by (V_out, index), takes
// the first as the nearest and votes over the first K labels (a label wins
// only when its count passes the best so far). Result fields and the number
// of cycles from start to done (K, or valid columns + 1 when fewer) are checked.
module tb_nearest_match;
  int checks = 0, failures = 0;
  logic        clk = 0, rst_n = 0;
  logic        lbl_we = 0;
  logic [2:0]  lbl_col = '0;
  logic [3:0]  lbl_val = '0;
  logic        start = 0;
  logic [10:0] vout_mv [8];
  logic        busy1, done1, found1, busy3, done3, found3;
  logic [2:0]  idx1, idx3;
  logic [10:0] v1, v3;
  logic [3:0]  lab1, lab3;

  nearest_match #(.N_COLS(8), .K(1), .N_CLASSES(16)) dut1 (
    .clk, .rst_n, .lbl_we, .lbl_col, .lbl_val, .start, .vout_mv,
    .busy(busy1), .done(done1), .found(found1), .match_idx(idx1), .match_vout(v1), .match_label(lab1));
  nearest_match #(.N_COLS(8), .K(3), .N_CLASSES(16)) dut3 (
    .clk, .rst_n, .lbl_we, .lbl_col, .lbl_val, .start, .vout_mv,
    .busy(busy3), .done(done3), .found(found3), .match_idx(idx3), .match_vout(v3), .match_label(lab3));

  always #10 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // reference model
  task automatic reference(input logic [7:0] valid, input logic [3:0] labels [8], input int k,
                           output logic found, output int idx, output int lab, output int cycles);
    int order [8];
    int n, best;
    int votes [16];
    n = 0;
    for (int c = 0; c < 8; c++) if (valid[c]) begin order[n] = c; n++; end
    // insertion sort by (vout, index)
    for (int i = 1; i < n; i++)
      for (int j = i; j > 0 && vout_mv[order[j]] < vout_mv[order[j-1]]; j--) begin
        int t;
        t = order[j]; order[j] = order[j-1]; order[j-1] = t;
      end
    found = (n > 0);
    idx = (n > 0) ? order[0] : 0;
    foreach (votes[l]) votes[l] = 0;
    best = 0; lab = 0;
    for (int i = 0; i < k && i < n; i++) begin
      votes[labels[order[i]]]++;
      if (votes[labels[order[i]]] > best) begin
        best = votes[labels[order[i]]];
        lab = labels[order[i]];
      end
    end
    // done rises K clock edges after the edge that samples start (fewer valid
    // columns: one edge more than there are); sampled here on the falling edge
    // after that, hence the +1
    cycles = ((n < k) ? n + 1 : k) + 1;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      logic [7:0] valid;
      logic [3:0] labels [8];
      logic f1, f3;
      int i1, l1, c1, i3, l3, c3, n1, n3;
      rst_n = 0;
      @(negedge clk);
      rst_n = 1;
      valid = (t % 10 == 0) ? 8'h00 : 8'($urandom);
      for (int c = 0; c < 8; c++) begin
        labels[c] = 4'($urandom_range(3, 0));   // few classes so votes collide
        if (valid[c]) begin
          lbl_we = 1; lbl_col = 3'(c); lbl_val = labels[c];
          @(negedge clk);
        end
      end
      lbl_we = 0;
      for (int c = 0; c < 8; c++) vout_mv[c] = 11'(450 * $urandom_range(4, 0));
      reference(valid, labels, 1, f1, i1, l1, c1);
      reference(valid, labels, 3, f3, i3, l3, c3);
      start = 1;
      @(negedge clk);
      start = 0;
      // scramble the inputs: the block must use the values captured at start
      for (int c = 0; c < 8; c++) vout_mv[c] = 11'($urandom_range(1800, 0));
      n1 = 0; n3 = 0;
      for (int cyc = 1; cyc <= 10; cyc++) begin
        if (done1) begin
          n1 = cyc;
          chk(found1 == f1, $sformatf("K=1 found %0d exp %0d", found1, f1));
          if (f1) begin
            chk(int'(idx1) == i1, $sformatf("K=1 idx %0d exp %0d", idx1, i1));
            chk(int'(lab1) == l1, $sformatf("K=1 label %0d exp %0d", lab1, l1));
          end
        end
        if (done3) begin
          n3 = cyc;
          chk(found3 == f3, "K=3 found");
          if (f3) begin
            chk(int'(idx3) == i3, $sformatf("K=3 idx %0d exp %0d", idx3, i3));
            chk(int'(lab3) == l3, $sformatf("K=3 label %0d exp %0d (valid %b)", lab3, l3, valid));
          end
        end
        @(negedge clk);
      end
      chk(n1 == c1, $sformatf("K=1 latency %0d exp %0d", n1, c1));
      chk(n3 == c3, $sformatf("K=3 latency %0d exp %0d", n3, c3));
    end
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
