// sense_amp: BEHAVIOURAL MODEL of the bank of N_COLS bit-line sense
// amplifiers (a two-stage analog amplifier per bit line in the real circuit).
//
// Each amplifier converts the summed bit-line current into V_out. Its gain is
// set from the column length so that a full match (all N_ROWS devices in
// HRS selected) gives about 0 V and a full mismatch (all LRS) about VDD:
//   V_out = VDD * (i_bl - N_ROWS*I_HRS) / (N_ROWS*(I_LRS - I_HRS)),
// clamped to [0, VDD]. With nominal device currents this is VDD*HD/N_ROWS,
// evenly spaced levels, lowest on the column nearest to the query.
// The straight-line transfer curve is this model's simplification of the
// amplifier's measured curve, and reporting V_out as an integer number of
// millivolts (so digital logic can compare columns) is this design's choice;
// the real output is an analog voltage. Combinational.
module sense_amp
  import imss_pkg::*;
#(
  parameter int unsigned N_ROWS   = 4,
  parameter int unsigned N_COLS   = 8,
  parameter int unsigned VDD_MV   = imss_pkg::VDD_SA_MV,
  parameter int unsigned I_LRS_NA = imss_pkg::LRS_CURRENT_NA,
  parameter int unsigned I_HRS_NA = imss_pkg::HRS_CURRENT_NA,
  parameter int unsigned VW       = imss_pkg::VOUT_W
) (
  input  logic [31:0]   i_bl_na [N_COLS],
  output logic [VW-1:0] vout_mv [N_COLS]
);

  localparam longint unsigned I_FLOOR = longint'(N_ROWS) * I_HRS_NA;
  localparam longint unsigned I_SPAN  = longint'(N_ROWS) * (longint'(I_LRS_NA) - longint'(I_HRS_NA));

  always_comb begin
    for (int c = 0; c < N_COLS; c++) begin
      longint unsigned i_in, v;
      i_in = 64'(i_bl_na[c]);
      if (i_in <= I_FLOOR) v = 0;
      else v = ((i_in - I_FLOOR) * VDD_MV + I_SPAN / 2) / I_SPAN;
      if (v > 64'(VDD_MV)) v = 64'(VDD_MV);
      vout_mv[c] = VW'(v);
    end
  end

endmodule
