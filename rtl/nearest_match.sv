// nearest_match: turns the sense-amplifier outputs of one search into a
// result. The column whose V_out is lowest holds the stored vector nearest
// (in Hamming distance) to the query.
//
// It keeps, per column, a class label and a valid bit (written when the
// column is programmed; columns never programmed are skipped, because their
// all-HRS devices would look like a perfect match). A search:
//   * start (one cycle): V_out of every column is captured.
//   * K pick cycles: each cycle takes the lowest-V_out column not yet picked
//     (ties go to the lower index) and adds one vote to its label. The first
//     pick is the nearest column. The vote winner (mode of the K labels) is
//     kept incrementally; on a tie the label that reached the count first wins.
//   * done is a one-cycle strobe K cycles after start, with match_idx,
//     match_vout (of the nearest column), match_label (voted label) and found
//     (at least one valid column). Fewer than K valid columns end it early.
// K = 1 is plain nearest-neighbour labelling; K > 1 is the top-k / mode vote.
// The arg-min / vote structure is this design's; only the function (lowest
// bit-line current = nearest match, label by top-k mode) is the published one.
// start is ignored while busy. Synchronous active-low reset.
module nearest_match #(
  parameter int unsigned N_COLS    = 8,
  parameter int unsigned K         = 1,
  parameter int unsigned N_CLASSES = 16,
  parameter int unsigned VW        = imss_pkg::VOUT_W,
  localparam int unsigned CA_W     = $clog2(N_COLS),
  localparam int unsigned LW       = $clog2(N_CLASSES),
  localparam int unsigned CW       = $clog2(K + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // label store
  input  logic            lbl_we,
  input  logic [CA_W-1:0] lbl_col,
  input  logic [LW-1:0]   lbl_val,
  // search
  input  logic            start,
  input  logic [VW-1:0]   vout_mv [N_COLS],
  output logic            busy,
  output logic            done,
  output logic            found,
  output logic [CA_W-1:0] match_idx,
  output logic [VW-1:0]   match_vout,
  output logic [LW-1:0]   match_label
);

  logic [LW-1:0]     labels [N_COLS];
  logic [N_COLS-1:0] valid;
  logic [VW-1:0]     v_q    [N_COLS];
  logic [N_COLS-1:0] picked;
  logic [CW-1:0]     votes  [N_CLASSES];
  logic [CW-1:0]     best_cnt;
  logic [CW-1:0]     round;

  // Arg-min over the columns still in the running.
  logic            cand_found;
  logic [CA_W-1:0] cand_idx;
  logic [VW-1:0]   cand_v;
  always_comb begin
    cand_found = 1'b0;
    cand_idx   = '0;
    cand_v     = '1;
    for (int c = 0; c < N_COLS; c++) begin
      if (valid[c] && !picked[c] && (!cand_found || v_q[c] < cand_v)) begin
        cand_found = 1'b1;
        cand_idx   = CA_W'(c);
        cand_v     = v_q[c];
      end
    end
  end

  wire [LW-1:0] cand_lbl  = labels[cand_idx];
  wire [CW-1:0] new_votes = votes[cand_lbl] + CW'(1);
  wire          last_pick = (round == CW'(K - 1)) || !cand_found;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid       <= '0;
      picked      <= '0;
      busy        <= 1'b0;
      done        <= 1'b0;
      found       <= 1'b0;
      match_idx   <= '0;
      match_vout  <= '0;
      match_label <= '0;
      best_cnt    <= '0;
      round       <= '0;
      for (int c = 0; c < N_COLS; c++) begin
        labels[c] <= '0;
        v_q[c]    <= '0;
      end
      for (int l = 0; l < N_CLASSES; l++) votes[l] <= '0;
    end else begin
      done <= 1'b0;
      if (lbl_we) begin
        labels[lbl_col] <= lbl_val;
        valid[lbl_col]  <= 1'b1;
      end
      if (!busy) begin
        if (start) begin
          for (int c = 0; c < N_COLS; c++) v_q[c] <= vout_mv[c];
          for (int l = 0; l < N_CLASSES; l++) votes[l] <= '0;
          picked   <= '0;
          best_cnt <= '0;
          round    <= '0;
          found    <= 1'b0;
          busy     <= 1'b1;
        end
      end else begin
        if (cand_found) begin
          picked[cand_idx] <= 1'b1;
          votes[cand_lbl]  <= new_votes;
          if (new_votes > best_cnt) begin
            best_cnt    <= new_votes;
            match_label <= cand_lbl;
          end
          if (round == '0) begin
            found      <= 1'b1;
            match_idx  <= cand_idx;
            match_vout <= cand_v;
          end
        end
        round <= round + CW'(1);
        if (last_pick) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
