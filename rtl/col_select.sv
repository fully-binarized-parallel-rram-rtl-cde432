// col_select: selects the bit-line / source-line pairs of the array.
// For SET and RESET only the addressed column is selected (one-hot), so one
// device is programmed at a time together with the row from wl_decoder. For a
// search every column is selected, which lets the query be compared with all
// stored vectors in parallel. Idle selects nothing.
// BL and SL of a column are switched together by one enable (this design's
// simplification). Purely combinational.
module col_select
  import imss_pkg::*;
#(
  parameter int unsigned N_COLS = 8,
  localparam int unsigned CA_W  = $clog2(N_COLS)
) (
  input  array_op_e         op,
  input  logic [CA_W-1:0]   col_addr,
  output logic [N_COLS-1:0] col_en
);

  always_comb begin
    col_en = '0;
    unique case (op)
      OP_SEARCH:        col_en = '1;
      OP_SET, OP_RESET: col_en[col_addr] = 1'b1;
      default:          col_en = '0;
    endcase
  end

endmodule
