// tb_dts_worker: runs one worker on a small search, a (3,3)-DTS of scope
// at most M = 20, with uniform quantile tables, until it reports done.
// Checks, all computed here from the RAM contents and the row registers:
//  * every cycle while filling, usedDistances equals the union of the
//    distance sets of the completed rows (minus the row under trial removal
//    while backtracking) and of the current row;
//  * the final RAM holds N rulers of K+1 marks, mark 0 included, all <= M,
//    whose differences are all distinct (a valid DTS);
//  * backtracking rounds, replacements and undos all happened.
module tb_dts_worker;
  import dts_pkg::*;
  localparam int unsigned N = 3, K = 3, M = 20, W = M + 1, MW = 5, AW = 2, LW = 2, UB = 8;
  logic clk = 0, rst = 1;
  logic cfg_we = 0;
  logic [LW-1:0] cfg_lane = '0;
  logic [UB-1:0] cfg_addr = '0;
  logic [MW-1:0] cfg_data = '0;
  logic done;
  logic [AW-1:0] rd_addr = '0;
  logic [W-1:0]  rd_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dts_worker #(.N(N), .K(K), .M(M), .THRESH1(40), .THRESH2(12), .UBITS(UB), .WORKER(5)) dut (
    .clk, .rst, .cfg_we, .cfg_lane, .cfg_addr, .cfg_data,
    .entropy_valid(1'b0), .entropy(1'b0), .done, .rd_addr, .rd_data);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] dists(input logic [W-1:0] r);
    logic [W-1:0] d = '0;
    for (int a = 0; a < int'(W); a++) for (int b = 0; b < a; b++) if (r[a] && r[b]) d[a - b] = 1'b1;
    return d;
  endfunction

  logic [W-1:0] ram_m [N];
  int rows_m = 0;
  int n_bt = 0, n_repl = 0, n_undo = 0, n_abandon = 0, n_commit = 0, n_inconsistent = 0, n_checked = 0;
  worker_state_e st_prev;

  always @(posedge clk) if (!rst) begin
    worker_state_e st;
    st = dut.u_fsm.state;
    if (dut.ram_we) ram_m[dut.ram_waddr] = dut.nat;
    if (st == S_BT_SAVE) n_bt++;
    if (st == S_COMMIT && dut.u_fsm.bt) n_repl++;
    if (st == S_COMMIT) n_commit++;
    if (st == S_BT_UNDO) n_undo++;
    if (st == S_INIT && st_prev != S_INIT) n_abandon++;
    st_prev = st;
  end

  // consistency of usedDistances
  always @(negedge clk) if (!rst) begin
    worker_state_e st;
    st = dut.u_fsm.state;
    if (st == S_FILL || st == S_BT_TRY) begin
      logic [W-1:0] u;
      u = dists(dut.nat);
      for (int r = 0; r < int'(dut.u_fsm.rows); r++)
        if (!(st == S_BT_TRY && r == int'(dut.u_fsm.r))) u |= dists(ram_m[r]);
      n_checked++;
      if (u != dut.used) begin
        n_inconsistent++;
        if (n_inconsistent < 5) $display("used mismatch at %0t state %s", $time, st.name());
      end
    end
  end

  initial begin
    // uniform tables on 1..M for every mark position
    for (int j = 0; j < int'(K); j++) for (int u = 0; u < 256; u++) begin
      @(negedge clk);
      cfg_we = 1; cfg_lane = LW'(j); cfg_addr = UB'(u); cfg_data = MW'(1 + (u * M) / 256);
    end
    @(negedge clk);
    cfg_we = 0;
    rst = 0;
    while (!done) @(negedge clk);
    $display("done at %0t: commits=%0d backtracks=%0d replacements=%0d undos=%0d abandons=%0d",
             $time, n_commit, n_bt, n_repl, n_undo, n_abandon);
    checks++;
    if (n_inconsistent != 0 || n_checked < 100) begin failures++; $display("FAIL used consistency %0d/%0d", n_inconsistent, n_checked); end
    // read out and check
    begin
      logic [W-1:0] rows [N];
      logic [W-1:0] all_d;
      int dup;
      all_d = '0; dup = 0;
      for (int r = 0; r < int'(N); r++) begin
        rd_addr = AW'(r);
        @(negedge clk);
        rows[r] = rd_data;
        checks++;
        if (!rows[r][0] || $countones(rows[r]) != int'(K) + 1) begin failures++; $display("FAIL ruler %0d: %b", r, rows[r]); end
        for (int a = 0; a < int'(W); a++) for (int b = 0; b < a; b++)
          if (rows[r][a] && rows[r][b]) begin
            if (all_d[a - b]) dup++;
            all_d[a - b] = 1'b1;
          end
        begin
          string s;
          s = "";
          for (int a = 0; a < int'(W); a++) if (rows[r][a]) s = {s, $sformatf(" %0d", a)};
          $display("ruler %0d:%s", r, s);
        end
      end
      checks++;
      if (dup != 0) begin failures++; $display("FAIL %0d repeated distances", dup); end
    end
    checks++;
    if (n_bt == 0 || n_repl == 0 || n_undo == 0) begin failures++; $display("FAIL backtracking not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
