// imss_pkg: types and constants shared by the in-memory similarity search
// (IMSS) engine. The engine stores binary vectors in an RRAM array as
// differential pairs (2T-2R XOR cells) and compares a binary query against
// every stored column at once; each column's bit-line current is a measure of
// its Hamming distance to the query.
//
// Bit convention used throughout: logic 1 stands for the bipolar value '+1',
// logic 0 for '-1'. The bias voltages and pulse widths below are the values
// reported for the SiOx RRAM devices; the op codes and command codes are this
// design's own encoding.
package imss_pkg;

  // Operation applied to the array. It selects the bias condition the analog
  // WL/SL/BL drivers put on the selected lines.
  typedef enum logic [1:0] {
    OP_IDLE   = 2'd0,  // all lines at rest
    OP_SET    = 2'd1,  // program one device to LRS
    OP_RESET  = 2'd2,  // program one device to HRS
    OP_SEARCH = 2'd3   // query on the WL pairs, read bias on every SL
  } array_op_e;

  // Commands accepted by the controller.
  typedef enum logic [0:0] {
    CMD_PROGRAM = 1'b0,  // store a vector (and its class label) in a column
    CMD_SEARCH  = 1'b1   // compare a query with all stored columns
  } cmd_e;

  // Clock of the peripheral logic: 50 MHz (20 ns period).
  localparam int unsigned CLK_MHZ = 50;

  // Bias conditions in millivolts (WL, SL, BL) for SET, RESET and READ.
  localparam int unsigned SET_VWL_MV   = 1800;
  localparam int unsigned SET_VSL_MV   = 1400;
  localparam int unsigned SET_VBL_MV   = 0;
  localparam int unsigned RESET_VWL_MV = 4500;
  localparam int unsigned RESET_VSL_MV = 0;
  localparam int unsigned RESET_VBL_MV = 1200;
  localparam int unsigned READ_VWL_MV  = 1400;
  localparam int unsigned READ_VSL_MV  = 200;
  localparam int unsigned READ_VBL_MV  = 0;

  // Bias set point the analog drivers apply for an operation.
  typedef struct packed {
    logic [12:0] vwl_mv;  // selected word line
    logic [12:0] vsl_mv;  // selected source line
    logic [12:0] vbl_mv;  // selected bit line
  } bias_t;

  function automatic bias_t bias_of(array_op_e op);
    unique case (op)
      OP_SET:    return '{13'(SET_VWL_MV),   13'(SET_VSL_MV),   13'(SET_VBL_MV)};
      OP_RESET:  return '{13'(RESET_VWL_MV), 13'(RESET_VSL_MV), 13'(RESET_VBL_MV)};
      OP_SEARCH: return '{13'(READ_VWL_MV),  13'(READ_VSL_MV),  13'(READ_VBL_MV)};
      default:   return '0;
    endcase
  endfunction

  // Pulse widths in clock cycles: 1 us SET and RESET, 20 ns search read.
  localparam int unsigned SET_PULSE_CYCLES   = 1 * CLK_MHZ;
  localparam int unsigned RESET_PULSE_CYCLES = 1 * CLK_MHZ;
  localparam int unsigned READ_PULSE_CYCLES  = 1;

  // Mean read current of one selected device at 0.2 V, in nA.
  localparam int unsigned LRS_CURRENT_NA = 6000;
  localparam int unsigned HRS_CURRENT_NA = 1000;

  // Supply of the sense amplifiers, mV; V_out is reported on VOUT_W bits.
  localparam int unsigned VDD_SA_MV = 1800;
  localparam int unsigned VOUT_W    = 11;

  // Thermometer code: LEVELS bits, bit i set when value > OFFSET + STEP*i.
  localparam int unsigned THERMO_LEVELS = 8;
  localparam int unsigned THERMO_STEP   = 32;
  localparam int unsigned THERMO_OFFSET = 31;

endpackage
