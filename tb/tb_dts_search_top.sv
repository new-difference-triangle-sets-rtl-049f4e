// tb_dts_search_top: end-to-end run of the search engine at a reduced size:
// NUM_WORKERS = 4 workers searching for a (3,3)-DTS of scope at most 20,
// 4 clocks per serial bit.  The testbench loads uniform quantile tables
// through the configuration port, feeds occasional temperature samples,
// decodes the serial line, rebuilds the rulers from the bytes and checks
// that they form a valid DTS (N rulers, K+1 marks each, mark 0, all marks
// <= M, all differences distinct) and that they equal the winner's RAM.
// It also counts how often each mechanism of the design occurred in any
// worker and fails if one never did: pipeline flush on an accepted mark,
// rejected candidate, row commit, backtracking round, row replacement,
// undo of a removal, abandonment of a partial DTS, entropy injection, and
// the winner being the first worker done.
module tb_dts_search_top;
  import dts_pkg::*;
  localparam int unsigned N = 3, K = 3, M = 20, NWK = 4, CPB = 4;
  localparam int unsigned W = M + 1, MW = 5, LW = 2, UB = 8, NB = (W + 7) / 8;
  logic clk = 0, rst = 1;
  logic cfg_we = 0;
  logic [LW-1:0] cfg_lane = '0;
  logic [UB-1:0] cfg_addr = '0;
  logic [MW-1:0] cfg_data = '0;
  logic temp_valid = 0;
  logic [11:0] temp_data = '0;
  logic found, tx_finished, txd;
  logic [1:0] winner;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dts_search_top #(.N(N), .K(K), .M(M), .NUM_WORKERS(NWK), .THRESH1(40), .THRESH2(12),
                   .CLKS_PER_BIT(CPB)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters ----
  int n_flush [NWK], n_reject [NWK], n_commit [NWK], n_bt [NWK], n_repl [NWK], n_undo [NWK], n_abandon [NWK];
  int n_entropy = 0, first_done = -1, done_cycle = 0;
  for (genvar w = 0; w < NWK; w++) begin : g_cnt
    worker_state_e prev;
    initial begin
      n_flush[w] = 0; n_reject[w] = 0; n_commit[w] = 0; n_bt[w] = 0; n_repl[w] = 0; n_undo[w] = 0; n_abandon[w] = 0;
    end
    always @(posedge clk) if (!rst) begin
      worker_state_e st;
      st = dut.g_worker[w].u_worker.u_fsm.state;
      if (dut.g_worker[w].u_worker.change) n_flush[w]++;
      if (dut.g_worker[w].u_worker.attempt && !dut.g_worker[w].u_worker.change) n_reject[w]++;
      if (st == S_COMMIT) n_commit[w]++;
      if (st == S_COMMIT && dut.g_worker[w].u_worker.u_fsm.bt) n_repl[w]++;
      if (st == S_BT_SAVE) n_bt[w]++;
      if (st == S_BT_UNDO) n_undo[w]++;
      if (st == S_INIT && prev != S_INIT) n_abandon[w]++;
      if (st == S_DONE && first_done < 0) first_done = w;
      prev = st;
    end
  end
  always @(posedge clk) if (!rst && dut.ent_valid) n_entropy++;

  // ---- serial decoder ----
  byte unsigned rx [$];
  initial begin
    forever begin
      @(negedge clk);
      if (!rst && txd == 1'b0) begin
        logic [7:0] b;
        repeat (CPB / 2) @(negedge clk);
        if (txd == 1'b0) begin
          for (int i = 0; i < 8; i++) begin repeat (CPB) @(negedge clk); b[i] = txd; end
          repeat (CPB) @(negedge clk);
          checks++;
          if (txd != 1'b1) begin failures++; $display("FAIL stop bit"); end
          rx.push_back(b);
        end
      end
    end
  end

  function automatic int sum_of(input int a [NWK]);
    int s = 0;
    for (int i = 0; i < int'(NWK); i++) s += a[i];
    return s;
  endfunction

  function automatic logic [W-1:0] winner_row(input int r);
    case (winner)
      2'd0: return dut.g_worker[0].u_worker.u_ram.mem[r];
      2'd1: return dut.g_worker[1].u_worker.u_ram.mem[r];
      2'd2: return dut.g_worker[2].u_worker.u_ram.mem[r];
      default: return dut.g_worker[3].u_worker.u_ram.mem[r];
    endcase
  endfunction

  task automatic need(input string what, input int count);
    checks++;
    $display("  %-28s %0d", what, count);
    if (count == 0) begin failures++; $display("FAIL mechanism never occurred: %s", what); end
  endtask

  initial begin
    for (int j = 0; j < int'(K); j++) for (int u = 0; u < 256; u++) begin
      @(negedge clk);
      cfg_we = 1; cfg_lane = LW'(j); cfg_addr = UB'(u); cfg_data = MW'(1 + (u * M) / 256);
    end
    @(negedge clk);
    cfg_we = 0;
    rst = 0;
    fork
      forever begin
        repeat (50 + $urandom % 200) @(negedge clk);
        temp_valid = 1; temp_data = 12'($urandom);
        @(negedge clk);
        temp_valid = 0;
      end
    join_none
    while (!tx_finished) @(negedge clk);
    repeat (12 * CPB) @(negedge clk);
    $display("search finished at %0t, winner %0d", $time, winner);
    checks++;
    if (!found || int'(winner) != first_done) begin failures++; $display("FAIL winner %0d first done %0d", winner, first_done); end
    checks++;
    if (rx.size() != N * NB) begin failures++; $display("FAIL received %0d bytes", rx.size()); end
    else begin
      logic [W-1:0] rows [N];
      logic [W-1:0] all_d;
      int dup;
      all_d = '0; dup = 0;
      for (int r = 0; r < int'(N); r++) begin
        logic [NB*8-1:0] v;
        string s;
        for (int b = 0; b < int'(NB); b++) v[8*b +: 8] = rx[r*NB + b];
        rows[r] = W'(v);
        checks++;
        if (v >> W != 0 || !rows[r][0] || $countones(rows[r]) != int'(K) + 1) begin failures++; $display("FAIL ruler %0d", r); end
        checks++;
        if (rows[r] != winner_row(r)) begin failures++; $display("FAIL ruler %0d differs from RAM", r); end
        for (int a = 0; a < int'(W); a++) for (int b = 0; b < a; b++)
          if (rows[r][a] && rows[r][b]) begin
            if (all_d[a - b]) dup++;
            all_d[a - b] = 1'b1;
          end
        s = "";
        for (int a = 0; a < int'(W); a++) if (rows[r][a]) s = {s, $sformatf(" %0d", a)};
        $display("ruler %0d:%s", r, s);
      end
      checks++;
      if (dup != 0) begin failures++; $display("FAIL %0d repeated distances", dup); end
    end
    $display("mechanisms (all workers):");
    need("flush on accepted mark", sum_of(n_flush));
    need("rejected candidate", sum_of(n_reject));
    need("row commit", sum_of(n_commit));
    need("backtracking round", sum_of(n_bt));
    need("row replacement", sum_of(n_repl));
    need("undo of removal", sum_of(n_undo));
    need("abandoned partial DTS", sum_of(n_abandon));
    need("entropy injection", n_entropy);
    need("first finisher selected", found ? 1 : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
