// dts_worker: one DTS search unit (worker).
//
// Block structure and connections:
//   mark_generator  --mark-->  insertion_pipeline  --new state-->  row_state
//   row_state  --state (feedback)-->  insertion_pipeline
//   row_state  --completed row-->  row_ram  --stored row-->  backtrack_regs
//   backtrack_regs  --snapshot / released distances-->  row_state
//   worker_fsm: distribution select to the generators, flush/run to the
//   pipeline, receives its change flag, and drives RAM address/write and
//   the row state / backtracking operations.
// The bold (M+1)-bit paths are the row, mirror and distance words.
//
// Once `done` is high the row RAM read port is handed to `rd_addr`, and
// `rd_data` returns ruler `rd_addr` one clock later (mark mask, bit a set =
// mark a).  While searching, `rd_data` shows whatever the FSM reads.
// The block structure follows the paper's worker diagram; see the blocks for
// which details are this design's.
module dts_worker #(
  parameter int unsigned N       = dts_pkg::DEF_N,
  parameter int unsigned K       = dts_pkg::DEF_K,
  parameter int unsigned M       = dts_pkg::DEF_M,
  parameter int unsigned THRESH1 = dts_pkg::DEF_THRESH1,
  parameter int unsigned THRESH2 = dts_pkg::DEF_THRESH2,
  parameter int unsigned UBITS   = dts_pkg::DEF_UBITS,
  parameter int unsigned WORKER  = 0,
  parameter int unsigned W       = M + 1,
  parameter int unsigned MW      = $clog2(M + 1),
  parameter int unsigned AW      = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned LW      = $clog2(K + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             cfg_we,
  input  logic [LW-1:0]    cfg_lane,
  input  logic [UBITS-1:0] cfg_addr,
  input  logic [MW-1:0]    cfg_data,
  input  logic             entropy_valid,
  input  logic             entropy,
  output logic             done,
  input  logic [AW-1:0]    rd_addr,
  output logic [W-1:0]     rd_data
);
  localparam int unsigned CW = $clog2(K + 2);

  // generator -> pipeline
  logic [MW-1:0] g_mark;
  logic          g_valid;
  logic [LW-1:0] dist_sel;
  // row state
  logic [W-1:0]  nat, rev, used;
  logic [MW-1:0] largest;
  logic [CW-1:0] count;
  logic          row_full;
  // pipeline results
  logic          attempt, change;
  logic [W-1:0]  nat_new, rev_new, used_new;
  logic [MW-1:0] largest_new;
  // backtracking
  logic [W-1:0]  snap_nat, snap_rev, snap_used, bt_dset;
  logic [MW-1:0] snap_largest;
  logic [CW-1:0] snap_count;
  logic          bt_busy;
  // control
  dts_pkg::row_op_e       row_op;
  dts_pkg::worker_state_e state;
  logic          snap_save, release_en, extract_start, ram_we, run, flush;
  logic [AW-1:0] ram_waddr, fsm_raddr;

  mark_generator #(.K(K), .MW(MW), .UBITS(UBITS), .WORKER(WORKER)) u_gen (
    .clk, .rst, .cfg_we, .cfg_lane, .cfg_addr, .cfg_data,
    .entropy_valid, .entropy, .dist_sel, .mark(g_mark), .mark_valid(g_valid)
  );

  insertion_pipeline #(.W(W), .MW(MW)) u_pipe (
    .clk, .rst, .flush, .run,
    .in_valid(g_valid), .in_mark(g_mark),
    .nat, .rev, .largest, .used,
    .attempt, .change, .nat_new, .rev_new, .largest_new, .used_new
  );

  row_state #(.W(W), .K(K), .MW(MW), .CW(CW)) u_row (
    .clk, .rst, .op(row_op),
    .upd_valid(change), .upd_nat(nat_new), .upd_rev(rev_new),
    .upd_largest(largest_new), .upd_used(used_new),
    .snap_nat, .snap_rev, .snap_largest, .snap_used, .snap_count,
    .release_mask(release_en ? bt_dset : '0),
    .nat, .rev, .largest, .used, .count, .row_full
  );

  backtrack_regs #(.W(W), .K(K), .MW(MW), .CW(CW)) u_bt (
    .clk, .rst, .save(snap_save),
    .in_nat(nat), .in_rev(rev), .in_largest(largest), .in_used(used), .in_count(count),
    .snap_nat, .snap_rev, .snap_largest, .snap_used, .snap_count,
    .start(extract_start), .ruler(rd_data), .busy(bt_busy), .dset(bt_dset)
  );

  row_ram #(.N(N), .W(W), .AW(AW)) u_ram (
    .clk, .we(ram_we), .waddr(ram_waddr), .wdata(nat),
    .raddr(done ? rd_addr : fsm_raddr), .rdata(rd_data)
  );

  worker_fsm #(.N(N), .K(K), .THRESH1(THRESH1), .THRESH2(THRESH2), .AW(AW), .CW(CW), .LW(LW)) u_fsm (
    .clk, .rst, .attempt, .change, .row_full, .count, .extract_busy(bt_busy),
    .row_op, .snap_save, .release_en, .extract_start, .ram_we, .ram_waddr,
    .ram_raddr(fsm_raddr), .run, .flush, .dist_sel, .done, .state
  );
endmodule
