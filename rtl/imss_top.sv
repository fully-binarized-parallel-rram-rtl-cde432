// imss_top: in-memory similarity search (IMSS) engine built around an RRAM
// array of 2T-2R XOR bitcells.
//
// Each of the N_COLS columns stores one N_ROWS-bit binary vector as
// differential device pairs. A search drives the query on the word-line pairs
// of all columns at once; every mismatching bit selects a low-resistance
// device, so each column's bit-line current, and the sense-amplifier voltage
// made from it, grows with the Hamming distance between query and stored
// vector. The column with the lowest V_out is the nearest match.
//
// Data path:
//   cmd_data or thermometer(cmd_feat) -> imss_controller -> wl_decoder /
//   col_select -> rram_xor_array (model) -> sense_amp (model) -> nearest_match
//
// Interface:
//   * Commands over cmd_valid/cmd_ready: CMD_PROGRAM writes cmd_data (or the
//     thermometer code of the features when cmd_thermo is set) and cmd_label
//     into column cmd_col; CMD_SEARCH compares the same kind of vector with
//     every programmed column.
//   * res_valid is a one-cycle strobe per search with res_found, res_idx
//     (nearest column), res_vout (its V_out in mV) and res_label (label of
//     the nearest column, or the mode of the K nearest when K > 1).
//   * arr_op / arr_bias / arr_wl / arr_col_en are the controls of the analog
//     WL/SL/BL drivers (not modelled): the operation, the WL/SL/BL voltages
//     it calls for (SET 1.8/1.4/0 V, RESET 4.5/0/1.2 V, read 1.4/0.2/0 V),
//     and which lines are selected; vout_mv are the sense-amplifier
//     outputs of every column.
// Timing at 50 MHz: programming a column takes 2*N_ROWS*(pulse+1)+1 cycles
// (1 us pulses, 409 cycles for 4 rows); a search raises res_valid READ_CYCLES+K
// clock edges after the edge that takes the command (2 by default), and the
// next command can be taken on the edge after res_valid.
// The thermometer front end encodes ceil(N_ROWS/8) features and uses the
// first N_ROWS code bits; with the 4-row array only the four lowest levels of
// one feature fit, with N_ROWS = 160 a whole 20-feature pixel does.
module imss_top
  import imss_pkg::*;
#(
  parameter int unsigned N_ROWS       = 4,
  parameter int unsigned N_COLS       = 8,
  parameter int unsigned K            = 1,
  parameter int unsigned N_CLASSES    = 16,
  parameter int unsigned SET_CYCLES   = imss_pkg::SET_PULSE_CYCLES,
  parameter int unsigned RESET_CYCLES = imss_pkg::RESET_PULSE_CYCLES,
  parameter int unsigned READ_CYCLES  = imss_pkg::READ_PULSE_CYCLES,
  parameter int unsigned VAR_PCT      = 0,
  localparam int unsigned N_FEAT      = (N_ROWS + THERMO_LEVELS - 1) / THERMO_LEVELS,
  localparam int unsigned NDEV        = 2 * N_ROWS,
  localparam int unsigned CA_W        = $clog2(N_COLS),
  localparam int unsigned LW          = $clog2(N_CLASSES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_e              cmd_op,
  input  logic [CA_W-1:0]   cmd_col,
  input  logic              cmd_thermo,
  input  logic [N_ROWS-1:0] cmd_data,
  input  logic [7:0]        cmd_feat [N_FEAT],
  input  logic [LW-1:0]     cmd_label,
  output logic              res_valid,
  output logic              res_found,
  output logic [CA_W-1:0]   res_idx,
  output logic [VOUT_W-1:0] res_vout,
  output logic [LW-1:0]     res_label,
  output array_op_e         arr_op,
  output bias_t             arr_bias,
  output logic [NDEV-1:0]   arr_wl,
  output logic [N_COLS-1:0] arr_col_en,
  output logic [VOUT_W-1:0] vout_mv [N_COLS]
);

  // Thermometer front end.
  logic [N_FEAT*THERMO_LEVELS-1:0] thermo_bits;
  for (genvar f = 0; f < N_FEAT; f++) begin : g_thermo
    thermometer_encoder u_thermo (
      .feat (cmd_feat[f]),
      .code (thermo_bits[f*THERMO_LEVELS +: THERMO_LEVELS])
    );
  end
  wire [N_ROWS-1:0] vec = cmd_thermo ? thermo_bits[N_ROWS-1:0] : cmd_data;

  logic [$clog2(NDEV)-1:0] row_addr;
  logic [CA_W-1:0]         col_addr;
  logic [N_ROWS-1:0]       qi;
  logic                    lbl_we, nm_start;
  logic [CA_W-1:0]         lbl_col;
  logic [LW-1:0]           lbl_val;
  logic [31:0]             i_bl_na [N_COLS];

  imss_controller #(
    .N_ROWS(N_ROWS), .N_COLS(N_COLS), .N_CLASSES(N_CLASSES),
    .SET_CYCLES(SET_CYCLES), .RESET_CYCLES(RESET_CYCLES), .READ_CYCLES(READ_CYCLES)
  ) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_col, .cmd_data(vec), .cmd_label,
    .op(arr_op), .row_addr, .col_addr, .qi,
    .lbl_we, .lbl_col, .lbl_val, .nm_start, .nm_done(res_valid)
  );

  assign arr_bias = bias_of(arr_op);

  wl_decoder #(.N_ROWS(N_ROWS)) u_wl (
    .op(arr_op), .qi, .row_addr, .wl(arr_wl)
  );

  col_select #(.N_COLS(N_COLS)) u_col (
    .op(arr_op), .col_addr, .col_en(arr_col_en)
  );

  rram_xor_array #(
    .N_ROWS(N_ROWS), .N_COLS(N_COLS),
    .SET_MIN_CYCLES(SET_CYCLES), .RESET_MIN_CYCLES(RESET_CYCLES), .VAR_PCT(VAR_PCT)
  ) u_array (
    .clk, .op(arr_op), .wl(arr_wl), .col_en(arr_col_en), .i_bl_na
  );

  sense_amp #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_sa (
    .i_bl_na, .vout_mv
  );

  nearest_match #(.N_COLS(N_COLS), .K(K), .N_CLASSES(N_CLASSES)) u_nm (
    .clk, .rst_n,
    .lbl_we, .lbl_col, .lbl_val,
    .start(nm_start), .vout_mv,
    .busy(), .done(res_valid), .found(res_found),
    .match_idx(res_idx), .match_vout(res_vout), .match_label(res_label)
  );

endmodule
