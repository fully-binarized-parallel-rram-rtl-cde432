// wl_decoder: drives the 2*N_ROWS word lines of the 1T-1R array.
//
// XOR row i of the array is made of two consecutive 1T-1R rows in the same
// column: row 2i holds the top device and row 2i+1 the bottom device.
//   * Search: the query is applied in differential form on every pair,
//     '+1' (logic 1) -> [top,bottom] = [1,0], '-1' (logic 0) -> [0,1].
//     Exactly one device of every pair is selected.
//   * SET / RESET: only the single row given by row_addr is enabled.
//   * Idle: all word lines low.
// The differential mapping and row selection follow the published scheme;
// which element of the pair is the top device is this design's convention.
// The WL voltage levels themselves come from analog drivers outside this block.
//
// Purely combinational.
module wl_decoder
  import imss_pkg::*;
#(
  parameter int unsigned N_ROWS = 4,
  localparam int unsigned RA_W  = $clog2(2 * N_ROWS)
) (
  input  array_op_e           op,
  input  logic [N_ROWS-1:0]   qi,
  input  logic [RA_W-1:0]     row_addr,
  output logic [2*N_ROWS-1:0] wl
);

  always_comb begin
    wl = '0;
    unique case (op)
      OP_SEARCH: begin
        for (int unsigned i = 0; i < N_ROWS; i++) begin
          wl[2*i]   = qi[i];
          wl[2*i+1] = ~qi[i];
        end
      end
      OP_SET, OP_RESET: wl[row_addr] = 1'b1;
      default: wl = '0;
    endcase
  end

endmodule
