// worker_fsm: control finite-state machine of one DTS search worker.
//
// It runs the modified Koubi et al. hill-climbing search:
//   * Fill the current row with random marks.  Every candidate the insertion
//     pipeline evaluates is one attempt (iters2).  A full row (K+1 marks) is
//     written to the row RAM at the next free address.
//   * After THRESH2 attempts without completing the row, try each completed
//     row r = 0..rows-1 in turn: snapshot the stuck row, release r's
//     distances, and give the stuck row another THRESH2 attempts.  If it
//     completes, it overwrites row r in the RAM (r is discarded).  If no r
//     works, the snapshot is restored (the removal is undone).
//   * Each row completion or failed backtracking round ends one outer
//     iteration (iters1).  After THRESH1 outer iterations without a full
//     DTS, the partial DTS is abandoned and the worker starts over.
//   * With N rows in the RAM the worker stops in S_DONE and raises `done`.
// Outputs: row state operation, snapshot save, distance extraction start,
// RAM address/write enable, the pipeline `run` and `flush` signals and the
// mark distribution select (= number of marks already in the row minus 1,
// i.e. the position of the next mark).  `flush` is combinational: it is
// high whenever the FSM is not letting the pipeline run and on every
// accepted insertion (`change`), so no candidate evaluated against an older
// row state survives.  `run` depends only on registers.
// The paper gives the algorithm and this block's name and connections; the
// state encoding, the start-over after abandonment and the exact placement
// of the counter checks are this design's.
module worker_fsm #(
  parameter int unsigned N       = dts_pkg::DEF_N,
  parameter int unsigned K       = dts_pkg::DEF_K,
  parameter int unsigned THRESH1 = dts_pkg::DEF_THRESH1,
  parameter int unsigned THRESH2 = dts_pkg::DEF_THRESH2,
  parameter int unsigned AW      = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CW      = $clog2(K + 2),
  parameter int unsigned LW      = $clog2(K + 1)
) (
  input  logic                   clk,
  input  logic                   rst,
  // from the insertion pipeline and row state
  input  logic                   attempt,
  input  logic                   change,
  input  logic                   row_full,
  input  logic [CW-1:0]          count,
  input  logic                   extract_busy,
  // control
  output dts_pkg::row_op_e       row_op,
  output logic                   snap_save,
  output logic                   release_en,
  output logic                   extract_start,
  output logic                   ram_we,
  output logic [AW-1:0]          ram_waddr,
  output logic [AW-1:0]          ram_raddr,
  output logic                   run,
  output logic                   flush,
  output logic [LW-1:0]          dist_sel,
  output logic                   done,
  output dts_pkg::worker_state_e state
);
  import dts_pkg::*;

  localparam int unsigned I1W = $clog2(THRESH1 + 1);
  localparam int unsigned I2W = $clog2(THRESH2 + 1);

  logic [I1W-1:0] iters1;
  logic [I2W-1:0] iters2;
  logic [AW:0]    rows;     // completed rows in the RAM
  logic [AW-1:0]  r;        // row under trial removal
  logic           bt;       // current row is a replacement trial

  logic trying, limit;
  assign trying = (state == S_FILL) || (state == S_BT_TRY);
  assign limit  = (iters2 == I2W'(THRESH2));
  assign run    = trying && !limit && !row_full;
  assign flush  = !run || change;

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_INIT;
      iters1 <= '0;
      iters2 <= '0;
      rows   <= '0;
      r      <= '0;
      bt     <= 1'b0;
    end else begin
      if (run && attempt) iters2 <= iters2 + 1'b1;
      unique case (state)
        S_INIT: begin
          rows   <= '0;
          iters1 <= I1W'(1);
          iters2 <= '0;
          bt     <= 1'b0;
          state  <= S_FILL;
        end
        S_FILL, S_BT_TRY: begin
          if (row_full)  state <= S_COMMIT;
          else if (limit) begin
            if (state == S_FILL) state <= (rows == '0) ? S_NEXT : S_BT_SAVE;
            else if (32'(r) + 1 == 32'(rows)) state <= S_BT_UNDO;
            else begin
              r     <= r + 1'b1;
              state <= S_BT_READ;
            end
          end
        end
        S_COMMIT: begin
          if (!bt) rows <= rows + 1'b1;
          bt <= 1'b0;
          state <= (!bt && 32'(rows) + 1 == N) ? S_DONE : S_NEXT;
        end
        S_NEXT: begin
          iters2 <= '0;
          if (iters1 == I1W'(THRESH1)) state <= S_INIT;
          else begin
            iters1 <= iters1 + 1'b1;
            state  <= S_FILL;
          end
        end
        S_BT_SAVE: begin
          r     <= '0;
          bt    <= 1'b1;
          state <= S_BT_READ;
        end
        S_BT_READ:    state <= S_BT_LOAD;
        S_BT_LOAD:    state <= S_BT_EXTRACT;
        S_BT_EXTRACT: if (!extract_busy) state <= S_BT_RESTORE;
        S_BT_RESTORE: begin
          iters2 <= '0;
          state  <= S_BT_TRY;
        end
        S_BT_UNDO: begin
          bt    <= 1'b0;
          state <= S_NEXT;
        end
        S_DONE: ;
        default: state <= S_INIT;
      endcase
    end
  end

  always_comb begin
    row_op        = ROW_HOLD;
    snap_save     = 1'b0;
    extract_start = 1'b0;
    ram_we        = 1'b0;
    unique case (state)
      S_INIT:       row_op = ROW_CLEAR_ALL;
      S_COMMIT: begin
        ram_we = 1'b1;
        row_op = ROW_NEW;
      end
      S_BT_SAVE:    snap_save = 1'b1;
      S_BT_LOAD:    extract_start = 1'b1;
      S_BT_RESTORE, S_BT_UNDO: row_op = ROW_RESTORE;
      default: ;
    endcase
  end

  assign ram_waddr = bt ? r : rows[AW-1:0];
  assign ram_raddr = r;
  assign done      = (state == S_DONE);
  assign release_en = (state == S_BT_RESTORE);
  assign dist_sel  = (count > CW'(K)) ? LW'(K - 1) : LW'(count - 1'b1);

  // Acceptances only happen while the pipeline is allowed to run.
  a_change_run: assert property (@(posedge clk) disable iff (rst) change |-> run);
endmodule
