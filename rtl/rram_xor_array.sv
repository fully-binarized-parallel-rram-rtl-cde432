// rram_xor_array: BEHAVIOURAL MODEL (not synthesizable as a real array) of a
// (2*N_ROWS) x N_COLS 1T-1R SiOx RRAM array operated as an N_ROWS x N_COLS
// array of 2T-2R XOR bitcells. The devices and access transistors are analog;
// this model reduces them to what the surrounding logic sees.
//
// Storage. Every device is either in LRS (low resistance) or HRS. A stored
// bit uses the two devices of an XOR row in one column:
//   '-1' (logic 0): top (row 2i) = LRS, bottom (row 2i+1) = HRS
//   '+1' (logic 1): top = HRS, bottom = LRS
// Power-up state of all devices is HRS (a choice of this model).
//
// Programming. op = OP_SET / OP_RESET with one WL and one column selected is a
// programming pulse. The selected device switches to LRS / HRS when the pulse
// ends, provided it lasted at least SET_MIN_CYCLES / RESET_MIN_CYCLES clocks
// (1 us at 50 MHz, the published pulse width). Shorter pulses leave the
// device unchanged. clk only times the pulses; a real array has no clock.
//
// Search. op = OP_SEARCH puts the read bias on every selected SL. On each
// column the devices whose WL is high each conduct their read current and the
// bit line sums them (Kirchhoff's current law): with the differential WL pair
// a matching bit selects the HRS device (small current) and a mismatching
// bit the LRS device (large current), so
//   i_bl = HD * I_LRS + (N_ROWS - HD) * I_HRS.
// The currents follow the measured means (mismatch >= 6 uA, match < 1 uA).
// With VAR_PCT > 0 every programmed device gets its own current, spread by
// up to +-VAR_PCT percent from an internal LFSR, to mimic device-to-device
// variability. i_bl_na is combinational in op, wl and col_en.
module rram_xor_array
  import imss_pkg::*;
#(
  parameter int unsigned N_ROWS           = 4,
  parameter int unsigned N_COLS           = 8,
  parameter int unsigned I_LRS_NA         = imss_pkg::LRS_CURRENT_NA,
  parameter int unsigned I_HRS_NA         = imss_pkg::HRS_CURRENT_NA,
  parameter int unsigned SET_MIN_CYCLES   = imss_pkg::SET_PULSE_CYCLES,
  parameter int unsigned RESET_MIN_CYCLES = imss_pkg::RESET_PULSE_CYCLES,
  parameter int unsigned VAR_PCT          = 0,
  localparam int unsigned NDEV            = 2 * N_ROWS
) (
  input  logic              clk,
  input  array_op_e         op,
  input  logic [NDEV-1:0]   wl,
  input  logic [N_COLS-1:0] col_en,
  output logic [31:0]       i_bl_na [N_COLS]
);

  logic [31:0] i_dev [NDEV][N_COLS];  // read current of the device, nA

  // Pulse tracking: the bias seen in the previous cycle and its duration.
  array_op_e         prev_op;
  logic [NDEV-1:0]   prev_wl;
  logic [N_COLS-1:0] prev_col;
  logic [31:0]       pulse_len;
  logic [31:0]       lfsr;

  function automatic logic [31:0] spread(input logic [31:0] nominal,
                                         input logic [31:0] rnd);
    int signed dev_pct;
    if (VAR_PCT == 0) return nominal;
    dev_pct = int'(rnd % (2 * VAR_PCT + 1)) - int'(VAR_PCT);
    return 32'(int'(nominal) + (int'(nominal) * dev_pct) / 100);
  endfunction

  initial begin
    for (int r = 0; r < NDEV; r++)
      for (int c = 0; c < N_COLS; c++) begin
        i_dev[r][c] = I_HRS_NA;
      end
    prev_op   = OP_IDLE;
    prev_wl   = '0;
    prev_col  = '0;
    pulse_len = '0;
    lfsr      = 32'h1ACE_B00C;
  end

  wire is_prog     = (op == OP_SET) || (op == OP_RESET);
  wire prev_prog   = (prev_op == OP_SET) || (prev_op == OP_RESET);
  wire same_pulse  = is_prog && (op == prev_op) && (wl == prev_wl) && (col_en == prev_col);
  wire long_enough = (prev_op == OP_SET) ? (pulse_len >= SET_MIN_CYCLES)
                                         : (pulse_len >= RESET_MIN_CYCLES);

  always @(posedge clk) begin
    lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
    if (same_pulse) begin
      pulse_len <= pulse_len + 1;
    end else begin
      // The previous pulse (if any) has ended: apply it to its devices.
      if (prev_prog && long_enough) begin
        for (int r = 0; r < NDEV; r++)
          for (int c = 0; c < N_COLS; c++)
            if (prev_wl[r] && prev_col[c]) begin
              i_dev[r][c] <= spread((prev_op == OP_SET) ? I_LRS_NA : I_HRS_NA,
                                    lfsr ^ 32'(r * 131 + c * 17));
            end
      end
      pulse_len <= is_prog ? 32'd1 : 32'd0;
    end
    prev_op  <= op;
    prev_wl  <= wl;
    prev_col <= col_en;
  end

  // Column-wise current summation in search mode.
  always_comb begin
    for (int c = 0; c < N_COLS; c++) begin
      i_bl_na[c] = '0;
      if (op == OP_SEARCH && col_en[c])
        for (int r = 0; r < NDEV; r++)
          if (wl[r]) i_bl_na[c] = i_bl_na[c] + i_dev[r][c];
    end
  end

endmodule
