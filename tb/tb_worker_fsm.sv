// tb_worker_fsm: scenario test of the worker control FSM (N = 3 rows,
// K = 2, THRESH1 = 6, THRESH2 = 4) with the datapath replaced by a few
// testbench registers: a row mark count that rises on `change` and
// returns to 1 on new-row / clear / restore, and an extraction that stays
// busy for a few clocks after `extract_start`.  It walks through:
// clearing, a failed row with no completed rows (next iteration), a row
// commit, a backtracking round where the stuck row replaces row 0, a round
// where every replacement fails and the snapshot is restored, abandonment
// after THRESH1 iterations, and finally N commits and `done`.  Outputs are
// checked at each step: RAM write address and enable, snapshot and
// extraction strobes, row operations, run/flush and the distribution
// select.
module tb_worker_fsm;
  import dts_pkg::*;
  localparam int unsigned N = 3, K = 2, T1 = 6, T2 = 4, AW = 2, CW = 2, LW = 2;
  logic clk = 0, rst = 1;
  logic attempt = 0, change = 0, row_full, extract_busy;
  logic [CW-1:0] count;
  row_op_e row_op;
  logic snap_save, release_en, extract_start, ram_we, run, flush, done;
  logic [AW-1:0] ram_waddr, ram_raddr;
  logic [LW-1:0] dist_sel;
  worker_state_e state;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  worker_fsm #(.N(N), .K(K), .THRESH1(T1), .THRESH2(T2)) dut (.*);

  // tiny datapath model
  int cnt_m = 1, busy_m = 0;
  assign count = CW'(cnt_m);
  assign row_full = (cnt_m == K + 1);
  assign extract_busy = busy_m != 0;
  always @(posedge clk) begin
    if (row_op == ROW_CLEAR_ALL || row_op == ROW_NEW) cnt_m <= 1;
    else if (row_op == ROW_RESTORE) cnt_m <= 2;      // the snapshot holds 2 marks
    else if (change) cnt_m <= cnt_m + 1;
    if (extract_start) busy_m <= 5;
    else if (busy_m != 0) busy_m <= busy_m - 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string s, input logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (state %s) at %0t", s, state.name(), $time); end
  endtask

  // one attempt, accepted or not
  task automatic try_mark(input logic ok);
    @(negedge clk);
    chk("run while filling", run);
    attempt = 1; change = ok;
    #1 chk("flush follows change", flush == ok);
    @(negedge clk);
    attempt = 0; change = 0;
  endtask

  task automatic wait_state(input worker_state_e s, input int maxc);
    int c = 0;
    while (state != s && c < maxc) begin @(negedge clk); c++; end
    chk($sformatf("reach %s", s.name()), state == s);
  endtask

  int saves, starts, restores_rel, restores_undo, writes, last_waddr;
  always @(posedge clk) begin
    if (snap_save) saves++;
    if (extract_start) starts++;
    if (row_op == ROW_RESTORE && release_en) restores_rel++;
    if (row_op == ROW_RESTORE && !release_en) restores_undo++;
    if (ram_we) begin writes++; last_waddr = int'(ram_waddr); end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    #1 chk("clear on init", row_op == ROW_CLEAR_ALL && !run && flush);
    wait_state(S_FILL, 3);
    chk("dist_sel of mark 1", dist_sel == 0);
    // 1) four failed attempts with no completed rows -> next iteration
    repeat (T2) try_mark(0);
    chk("stops at THRESH2", !run);
    wait_state(S_NEXT, 4); wait_state(S_FILL, 4);
    chk("no backtracking without rows", saves == 0);
    // 2) complete a row -> written at address 0
    try_mark(1);
    chk("dist_sel of mark 2", dist_sel == 1);
    try_mark(1);
    wait_state(S_NEXT, 4); wait_state(S_FILL, 4);
    chk("row 0 written", writes == 1 && last_waddr == 0);
    // 3) stuck row, backtracking succeeds by replacing row 0
    try_mark(1);
    repeat (T2 - 1) try_mark(0);
    wait_state(S_BT_READ, 4);
    chk("snapshot taken", saves == 1);
    chk("reads row 0", ram_raddr == 0);
    wait_state(S_BT_TRY, 20);
    chk("extraction started and restore released", starts == 1 && restores_rel == 1);
    try_mark(1);
    wait_state(S_NEXT, 4); wait_state(S_FILL, 4);
    chk("row 0 replaced", writes == 2 && last_waddr == 0);
    // 4) stuck again, replacement of the only row fails -> undo
    repeat (T2) try_mark(0);
    wait_state(S_BT_TRY, 20);
    repeat (T2) try_mark(0);
    wait_state(S_NEXT, 6); wait_state(S_FILL, 4);
    chk("undo restore", restores_undo == 1 && writes == 2);
    // 5) keep failing until abandonment clears everything
    begin
      int clears = 0;
      for (int i = 0; i < 400 && clears == 0; i++) begin
        if (run) try_mark(0);
        else @(negedge clk);
        if (row_op == ROW_CLEAR_ALL) clears++;
      end
      chk("abandoned after THRESH1", clears == 1);
    end
    wait_state(S_FILL, 4);
    // 6) three rows -> done
    for (int rrow = 0; rrow < int'(N); rrow++) begin
      try_mark(1); try_mark(1);
      @(negedge clk); @(negedge clk);
      chk($sformatf("row %0d written", rrow), last_waddr == rrow);
      if (rrow < int'(N) - 1) begin wait_state(S_NEXT, 4); wait_state(S_FILL, 4); end
    end
    wait_state(S_DONE, 4);
    chk("done", done && !run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
