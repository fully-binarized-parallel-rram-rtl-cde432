// imss_controller: sequences the IMSS array for the two commands it accepts
// over a valid/ready handshake (a command is taken in a cycle where both
// cmd_valid and cmd_ready are high; cmd_ready is high only when idle).
//
// CMD_PROGRAM stores cmd_data in column cmd_col as differential pairs. For
// XOR row i the top device (1T-1R row 2i) and the bottom device (row 2i+1)
// are programmed one after the other, row 0 first:
//   bit = 0 ('-1'): top SET (LRS),   bottom RESET (HRS)
//   bit = 1 ('+1'): top RESET (HRS), bottom SET (LRS)
// Every SET pulse lasts SET_CYCLES and every RESET pulse RESET_CYCLES clocks
// (1 us each at 50 MHz), followed by one idle cycle, so a column takes
// 2*N_ROWS*(pulse+1) cycles. At the end the column's class label is written
// (lbl_we) and the column becomes valid for searches.
// CMD_SEARCH applies cmd_data as the query on all columns for READ_CYCLES
// clocks (one 20 ns read pulse); in its last cycle nm_start tells the match
// logic to capture the sense-amplifier outputs. The controller then waits for
// nm_done before it accepts the next command.
// The pulse widths and the storage encoding are the published ones; the
// handshake, the order of the pulses and the idle gap are this design's.
// Synchronous active-low reset.
module imss_controller
  import imss_pkg::*;
#(
  parameter int unsigned N_ROWS       = 4,
  parameter int unsigned N_COLS       = 8,
  parameter int unsigned N_CLASSES    = 16,
  parameter int unsigned SET_CYCLES   = imss_pkg::SET_PULSE_CYCLES,
  parameter int unsigned RESET_CYCLES = imss_pkg::RESET_PULSE_CYCLES,
  parameter int unsigned READ_CYCLES  = imss_pkg::READ_PULSE_CYCLES,
  localparam int unsigned NDEV        = 2 * N_ROWS,
  localparam int unsigned RA_W        = $clog2(NDEV),
  localparam int unsigned CA_W        = $clog2(N_COLS),
  localparam int unsigned LW          = $clog2(N_CLASSES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_e              cmd_op,
  input  logic [CA_W-1:0]   cmd_col,
  input  logic [N_ROWS-1:0] cmd_data,
  input  logic [LW-1:0]     cmd_label,
  // to the decoders / array drivers
  output array_op_e         op,
  output logic [RA_W-1:0]   row_addr,
  output logic [CA_W-1:0]   col_addr,
  output logic [N_ROWS-1:0] qi,
  // to the match logic
  output logic              lbl_we,
  output logic [CA_W-1:0]   lbl_col,
  output logic [LW-1:0]     lbl_val,
  output logic              nm_start,
  input  logic              nm_done
);

  typedef enum logic [2:0] {S_IDLE, S_PULSE, S_GAP, S_LABEL, S_SEARCH, S_WAIT} state_e;

  state_e            state;
  logic [CA_W-1:0]   col_q;
  logic [N_ROWS-1:0] data_q;
  logic [LW-1:0]     label_q;
  logic [RA_W-1:0]   dev;       // device (1T-1R row) being programmed
  logic [31:0]       cnt;       // cycles left in the current pulse

  // Target of device d: the top device (even d) is LRS for '-1', the bottom
  // device (odd d) is LRS for '+1'. Returns 1 when d needs a SET pulse.
  function automatic logic needs_set(input logic [N_ROWS-1:0] data, input int d);
    return (d % 2 == 0) ? !data[d / 2] : data[d / 2];
  endfunction

  wire dev_set = needs_set(data_q, int'(dev));

  assign cmd_ready = (state == S_IDLE);
  assign row_addr  = dev;
  assign col_addr  = col_q;
  assign qi        = data_q;
  assign lbl_col   = col_q;
  assign lbl_val   = label_q;
  assign lbl_we    = (state == S_LABEL);
  assign nm_start  = (state == S_SEARCH) && (cnt == 32'd1);

  always_comb begin
    unique case (state)
      S_PULSE:  op = dev_set ? OP_SET : OP_RESET;
      S_SEARCH: op = OP_SEARCH;
      default:  op = OP_IDLE;
    endcase
  end

  function automatic logic [31:0] pulse_len(input logic set);
    return set ? 32'(SET_CYCLES) : 32'(RESET_CYCLES);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      col_q   <= '0;
      data_q  <= '0;
      label_q <= '0;
      dev     <= '0;
      cnt     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          col_q   <= cmd_col;
          data_q  <= cmd_data;
          label_q <= cmd_label;
          dev     <= '0;
          if (cmd_op == CMD_PROGRAM) begin
            state <= S_PULSE;
            cnt   <= pulse_len(needs_set(cmd_data, 0));
          end else begin
            state <= S_SEARCH;
            cnt   <= 32'(READ_CYCLES);
          end
        end
        S_PULSE: begin
          cnt <= cnt - 1;
          if (cnt == 32'd1) state <= S_GAP;
        end
        S_GAP: begin
          if (32'(dev) == NDEV - 1) begin
            state <= S_LABEL;
          end else begin
            dev   <= dev + 1'b1;
            state <= S_PULSE;
            // next device: its own target decides the pulse length
            cnt   <= pulse_len(needs_set(data_q, int'(dev) + 1));
          end
        end
        S_LABEL:  state <= S_IDLE;
        S_SEARCH: begin
          cnt <= cnt - 1;
          if (cnt == 32'd1) state <= S_WAIT;
        end
        S_WAIT:   if (nm_done) state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // A programming pulse always addresses a device inside the array.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_PULSE) |-> (32'(dev) < NDEV));
  // A command is only taken while idle.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (cmd_valid && cmd_ready) |-> (state == S_IDLE));

endmodule
