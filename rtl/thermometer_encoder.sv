// thermometer_encoder: turns one unsigned 8-bit feature into a LEVELS-bit
// thermometer code. Bit i is set when the feature exceeds OFFSET + STEP*i, so
// with the defaults (8 levels, step 32, offset 31) the thresholds are
// 31, 63, ..., 255 and the number of set bits is the feature divided by 32.
// Every bit then has the same weight, which makes the Hamming distance
// between two codes the distance between the quantised features.
//
// Interface: feat in, code out; purely combinational, no clock.
// The thresholds are the published quantisation rule. Building it as a
// comparator bank in front of the array (rather than in software) is this
// design's choice.
module thermometer_encoder #(
  parameter int unsigned LEVELS = imss_pkg::THERMO_LEVELS,
  parameter int unsigned STEP   = imss_pkg::THERMO_STEP,
  parameter int unsigned OFFSET = imss_pkg::THERMO_OFFSET
) (
  input  logic [7:0]        feat,
  output logic [LEVELS-1:0] code
);

  always_comb begin
    for (int unsigned i = 0; i < LEVELS; i++) begin
      code[i] = (32'(feat) > (OFFSET + STEP * i));
    end
  end

endmodule
