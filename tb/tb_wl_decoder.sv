// tb_wl_decoder: checks the word-line decoder for every operation, every
// 4-bit query and every row address. Expected values: in search mode row 2i
// must carry the query bit and row 2i+1 its complement (exactly one device of
// each pair on); in SET/RESET exactly the addressed row is on; idle is all off.
module tb_wl_decoder;
  import imss_pkg::*;
  int checks = 0, failures = 0;
  array_op_e  op;
  logic [3:0] qi;
  logic [2:0] row_addr;
  logic [7:0] wl;

  wl_decoder #(.N_ROWS(4)) dut (.op, .qi, .row_addr, .wl);

  task automatic expect_wl(input logic [7:0] exp_wl, input string what);
    #1;
    checks++;
    if (wl !== exp_wl) begin
      failures++;
      $display("FAIL %s op=%s qi=%b row=%0d wl=%b expected=%b", what, op.name(), qi, row_addr, wl, exp_wl);
    end
  endtask

  initial begin
    for (int q = 0; q < 16; q++)
      for (int r = 0; r < 8; r++) begin
        logic [7:0] diff;
        qi = 4'(q);
        row_addr = 3'(r);
        diff = '0;
        for (int i = 0; i < 4; i++) begin
          // '+1' -> [top,bottom] = [1,0]; '-1' -> [0,1]
          diff[2*i]   = (qi[i] == 1'b1);
          diff[2*i+1] = (qi[i] == 1'b0);
        end
        op = OP_SEARCH; expect_wl(diff, "search");
        op = OP_SET;    expect_wl(8'(1 << r), "set");
        op = OP_RESET;  expect_wl(8'(1 << r), "reset");
        op = OP_IDLE;   expect_wl(8'h00, "idle");
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
