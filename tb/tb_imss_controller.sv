// tb_imss_controller: issues random program and search commands and records
// what the controller drives each clock. SET and RESET pulse lengths are
// overridden to 5 and 7 cycles so the two can be told apart. For a program
// command the testbench expects 8 pulses, device 0 to 7 of the addressed
// column, each SET or RESET as the differential encoding demands ('-1' = top
// LRS, '+1' = bottom LRS), each of the exact length and separated by idle
// cycles, then one label write. For a search it expects the query on the
// array for exactly one cycle (the 20 ns read pulse) together with nm_start,
// and no new command accepted until nm_done.
module tb_imss_controller;
  import imss_pkg::*;
  localparam int SETC = 5, RESETC = 7;
  int checks = 0, failures = 0;
  logic       clk = 0, rst_n = 0;
  logic       cmd_valid = 0, cmd_ready;
  cmd_e       cmd_op = CMD_PROGRAM;
  logic [2:0] cmd_col = '0;
  logic [3:0] cmd_data = '0;
  logic [3:0] cmd_label = '0;
  array_op_e  op;
  logic [2:0] row_addr, col_addr, lbl_col;
  logic [3:0] qi, lbl_val;
  logic       lbl_we, nm_start, nm_done = 0;

  imss_controller #(.N_ROWS(4), .N_COLS(8), .N_CLASSES(16),
                    .SET_CYCLES(SETC), .RESET_CYCLES(RESETC), .READ_CYCLES(1)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_col, .cmd_data, .cmd_label,
    .op, .row_addr, .col_addr, .qi, .lbl_we, .lbl_col, .lbl_val, .nm_start, .nm_done);

  always #10 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // one recorded cycle
  typedef struct packed {
    array_op_e  op;
    logic [2:0] row;
    logic [2:0] col;
    logic [3:0] qi;
    logic       lbl_we;
    logic       nm_start;
  } rec_t;
  rec_t trace [$];
  always @(posedge clk) if (rst_n) trace.push_back('{op, row_addr, col_addr, qi, lbl_we, nm_start});

  task automatic send(input cmd_e o, input logic [2:0] c, input logic [3:0] d, input logic [3:0] l);
    @(negedge clk);
    cmd_valid = 1; cmd_op = o; cmd_col = c; cmd_data = d; cmd_label = l;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      logic [2:0] c;
      logic [3:0] d, l;
      c = 3'($urandom); d = 4'($urandom); l = 4'($urandom);
      // ---- program ----
      trace.delete();
      send(CMD_PROGRAM, c, d, l);
      while (!cmd_ready) @(negedge clk);
      begin
        int p, i, n;
        n = trace.size();
        i = 0;
        // skip the cycle in which the command was taken
        while (i < n && trace[i].op == OP_IDLE) i++;
        for (p = 0; p < 8; p++) begin
          logic want_set;
          int len, exp_len;
          want_set = (p % 2 == 0) ? !d[p/2] : d[p/2];
          exp_len = want_set ? SETC : RESETC;
          len = 0;
          while (i < n && trace[i].op != OP_IDLE) begin
            chk(trace[i].op == (want_set ? OP_SET : OP_RESET) && int'(trace[i].row) == p
                && trace[i].col == c, $sformatf("pulse %0d op %s row %0d col %0d", p,
                trace[i].op.name(), trace[i].row, trace[i].col));
            len++; i++;
          end
          chk(len == exp_len, $sformatf("pulse %0d length %0d exp %0d", p, len, exp_len));
          chk(i < n && trace[i].op == OP_IDLE, "gap after pulse");
          while (i < n && trace[i].op == OP_IDLE && !trace[i].lbl_we && p < 7) i++;
        end
        // label write follows
        while (i < n && !trace[i].lbl_we) i++;
        chk(i < n, "label write seen");
      end
      // ---- search ----
      trace.delete();
      fork
        send(CMD_SEARCH, 3'd0, ~d, 4'd0);
        begin
          // answer nm_start after 3 cycles
          @(posedge nm_start);
          repeat (3) @(negedge clk);
          chk(!cmd_ready, "no command taken while the match is running");
          nm_done = 1;
          @(negedge clk);
          nm_done = 0;
        end
      join
      while (!cmd_ready) @(negedge clk);
      begin
        int ns, nst;
        ns = 0; nst = 0;
        foreach (trace[k]) begin
          if (trace[k].op == OP_SEARCH) begin
            ns++;
            chk(trace[k].qi == ~d, "query bits on the array");
            chk(trace[k].nm_start, "nm_start with the read pulse");
          end
          if (trace[k].nm_start) nst++;
        end
        chk(ns == 1, $sformatf("read pulse %0d cycles, expected 1", ns));
        chk(nst == 1, "one nm_start");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // label written with the command's column and label
  always @(posedge clk) if (rst_n && lbl_we) begin
    checks++;
    if (lbl_col != cmd_col || lbl_val != cmd_label) begin
      failures++;
      $display("FAIL label write col %0d val %0d", lbl_col, lbl_val);
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
