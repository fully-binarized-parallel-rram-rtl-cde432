// tb_col_select: for every operation and column address checks that search
// selects all 8 columns, SET/RESET exactly the addressed one and idle none.
module tb_col_select;
  import imss_pkg::*;
  int checks = 0, failures = 0;
  array_op_e  op;
  logic [2:0] col_addr;
  logic [7:0] col_en;

  col_select #(.N_COLS(8)) dut (.op, .col_addr, .col_en);

  task automatic expect_en(input logic [7:0] exp_en);
    #1;
    checks++;
    if (col_en !== exp_en) begin
      failures++;
      $display("FAIL op=%s col=%0d col_en=%b expected=%b", op.name(), col_addr, col_en, exp_en);
    end
  endtask

  initial begin
    for (int c = 0; c < 8; c++) begin
      col_addr = 3'(c);
      op = OP_SEARCH; expect_en(8'hFF);
      op = OP_SET;    expect_en(8'(1 << c));
      op = OP_RESET;  expect_en(8'(1 << c));
      op = OP_IDLE;   expect_en(8'h00);
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
