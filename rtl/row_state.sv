// row_state: the row state and used distances register system.
//
// Holds the row under construction as natRuler (bit a set = mark a), its
// mirror revRuler (bit i set = mark largest-i), largestMark, the number of
// marks in the row (mark 0 included), and usedDistances, the distances used
// by all completed rows plus the current one.  All are (M+1)-bit words.
//
// Operations (one per clock, `op` from the control FSM; pipeline updates
// only arrive while the FSM holds):
//   ROW_CLEAR_ALL  used = {}, row = {0}
//   ROW_NEW        row = {0}, used kept (previous row was committed)
//   ROW_RESTORE    row and used from the backtracking snapshot, with the
//                  distances in `release_mask` removed from used
//   upd_valid      accepted insertion: row, largest, used from the pipeline,
//                  count + 1
// `row_full` is high when the row holds K+1 marks.  All outputs are
// registers; an operation shows on the outputs the clock after it is given.
// The paper names this block and its contents; the operation set is this
// design's reading of the search algorithm.
module row_state #(
  parameter int unsigned W  = dts_pkg::DEF_M + 1,
  parameter int unsigned K  = dts_pkg::DEF_K,
  parameter int unsigned MW = $clog2(W),
  parameter int unsigned CW = $clog2(K + 2)
) (
  input  logic              clk,
  input  logic              rst,
  input  dts_pkg::row_op_e  op,
  // accepted insertion from the pipeline
  input  logic              upd_valid,
  input  logic [W-1:0]      upd_nat,
  input  logic [W-1:0]      upd_rev,
  input  logic [MW-1:0]     upd_largest,
  input  logic [W-1:0]      upd_used,
  // snapshot from the backtracking registers
  input  logic [W-1:0]      snap_nat,
  input  logic [W-1:0]      snap_rev,
  input  logic [MW-1:0]     snap_largest,
  input  logic [W-1:0]      snap_used,
  input  logic [CW-1:0]     snap_count,
  input  logic [W-1:0]      release_mask,
  // state
  output logic [W-1:0]      nat,
  output logic [W-1:0]      rev,
  output logic [MW-1:0]     largest,
  output logic [W-1:0]      used,
  output logic [CW-1:0]     count,
  output logic              row_full
);
  always_ff @(posedge clk) begin
    if (rst || op == dts_pkg::ROW_CLEAR_ALL || op == dts_pkg::ROW_NEW) begin
      nat     <= W'(1);
      rev     <= W'(1);
      largest <= '0;
      count   <= CW'(1);
      if (rst || op == dts_pkg::ROW_CLEAR_ALL) used <= '0;
    end else if (op == dts_pkg::ROW_RESTORE) begin
      nat     <= snap_nat;
      rev     <= snap_rev;
      largest <= snap_largest;
      count   <= snap_count;
      used    <= snap_used & ~release_mask;
    end else if (upd_valid) begin
      nat     <= upd_nat;
      rev     <= upd_rev;
      largest <= upd_largest;
      used    <= upd_used;
      count   <= count + CW'(1);
    end
  end

  assign row_full = (count == CW'(K + 1));
endmodule
