// backtrack_regs: the backtracking register system.
//
// Two jobs when a row is stuck and the worker tries to replace a completed
// row by it:
//  * Snapshot.  On `save` it captures the whole row state (row, mirror,
//    largest mark, mark count, used distances) so that a failed trial can be
//    undone by loading it back into the row state registers.
//  * Distance extraction.  On `start` it takes a completed ruler R (an
//    (M+1)-bit mask read from the row RAM) and computes its distance set
//    D = OR over marks a of (R >> a), bit 0 cleared.  It does this serially
//    with one shift register S = R >> t: at each step, if S[0] is set
//    (mark t is in R), D |= S; then S >>= 1.  It stops when S is zero, so it
//    takes (largest mark + 1) clocks.  `busy` is high from the clock after
//    `start` until D is final; `dset` is then valid until the next `start`.
// Because rulers of a DTS share no distance, used & ~D removes exactly the
// stored row's distances.  The paper names this block and says extra
// record-keeping is needed to undo steps; snapshot-and-recompute is this
// design's way of doing it.
module backtrack_regs #(
  parameter int unsigned W  = dts_pkg::DEF_M + 1,
  parameter int unsigned K  = dts_pkg::DEF_K,
  parameter int unsigned MW = $clog2(W),
  parameter int unsigned CW = $clog2(K + 2)
) (
  input  logic          clk,
  input  logic          rst,
  // snapshot
  input  logic          save,
  input  logic [W-1:0]  in_nat,
  input  logic [W-1:0]  in_rev,
  input  logic [MW-1:0] in_largest,
  input  logic [W-1:0]  in_used,
  input  logic [CW-1:0] in_count,
  output logic [W-1:0]  snap_nat,
  output logic [W-1:0]  snap_rev,
  output logic [MW-1:0] snap_largest,
  output logic [W-1:0]  snap_used,
  output logic [CW-1:0] snap_count,
  // distance extraction
  input  logic          start,
  input  logic [W-1:0]  ruler,
  output logic          busy,
  output logic [W-1:0]  dset
);
  logic [W-1:0] s;

  always_ff @(posedge clk) begin
    if (save) begin
      snap_nat     <= in_nat;
      snap_rev     <= in_rev;
      snap_largest <= in_largest;
      snap_used    <= in_used;
      snap_count   <= in_count;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s    <= '0;
      dset <= '0;
    end else if (start) begin
      s    <= ruler;
      dset <= '0;
    end else if (s != '0) begin
      if (s[0]) dset <= (dset | s) & ~W'(1);
      s <= s >> 1;
    end
  end

  assign busy = (s != '0);
endmodule
