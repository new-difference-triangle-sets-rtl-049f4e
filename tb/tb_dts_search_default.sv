// tb_dts_search_default: the search engine at its default size (48 workers,
// (14,4)-DTS of scope 140, 141-bit datapaths) for a bounded number of
// clocks.  A complete search at this size takes days of device time, so
// this test checks the work done on the way instead of the final result.
// The quantile tables are built from a known optimal (14,4)-DTS of scope
// 140: the table of mark position j holds column j of that set, entry u
// giving the mark of ruler (u mod 14).
// Every time any worker writes a ruler into its row RAM, the ruler must have
// K+1 marks including 0, all <= 140, and its distances must be distinct from
// each other and from those of the worker's other stored rulers (the row
// being replaced excluded).  At the end at least one worker must hold
// several rulers and backtracking must have happened.
module tb_dts_search_default;
  import dts_pkg::*;
  localparam int unsigned N = 14, K = 4, M = 140, W = M + 1, NW = 48;
  localparam int unsigned CYCLES = 1000000;
  logic clk = 0, rst = 1;
  logic cfg_we = 0;
  logic [2:0] cfg_lane = '0;
  logic [7:0] cfg_addr = '0, cfg_data = '0;
  logic temp_valid = 0;
  logic [11:0] temp_data = '0;
  logic found, tx_finished, txd;
  logic [5:0] winner;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dts_search_top dut (.*);

  initial begin
    repeat (CYCLES + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int known [N][K] = '{
    '{ 2,  80, 119, 140}, '{30,  53, 111, 139}, '{27,  61, 125, 137}, '{ 4,  46, 101, 136},
    '{20,  69,  95, 135}, '{ 8,  51,  87, 134}, '{31,  68, 116, 133}, '{24,  38, 120, 131},
    '{ 9,  63, 108, 130}, '{25,  41, 114, 129}, '{ 5,  57, 127, 128}, '{19,  32,  91, 124},
    '{18,  62, 112, 118}, '{29, 103, 106, 113}};

  function automatic logic [W-1:0] dists(input logic [W-1:0] r);
    logic [W-1:0] d = '0;
    for (int a = 0; a < int'(W); a++) if (r[a]) for (int b = 0; b < a; b++) if (r[b]) d[a - b] = 1'b1;
    return d;
  endfunction

  int commits = 0, bad_rows = 0, backtracks = 0, max_rows = 0;

  for (genvar w = 0; w < NW; w++) begin : g_chk
    logic [W-1:0] ram_m [N];
    always @(posedge clk) if (!rst) begin
      worker_state_e st;
      st = dut.g_worker[w].u_worker.u_fsm.state;
      if (st == S_BT_SAVE) backtracks++;
      if (dut.g_worker[w].u_worker.ram_we) begin
        logic [W-1:0] row, others, d;
        int rows, slot, dd, ok;
        row  = dut.g_worker[w].u_worker.nat;
        rows = int'(dut.g_worker[w].u_worker.u_fsm.rows);
        slot = int'(dut.g_worker[w].u_worker.ram_waddr);
        others = '0;
        for (int r = 0; r < rows; r++) if (r != slot) others |= dists(ram_m[r]);
        d = '0; dd = 0;
        for (int a = 0; a < int'(W); a++) if (row[a]) for (int b = 0; b < a; b++) if (row[b]) begin
          if (d[a - b]) dd++;
          d[a - b] = 1'b1;
        end
        ok = (row[0] && $countones(row) == int'(K) + 1 && dd == 0 && (d & others) == '0);
        commits++;
        if (!ok) bad_rows++;
        ram_m[slot] = row;
        if (slot + 1 > max_rows) max_rows = slot + 1;
      end
    end
  end

  initial begin
    for (int j = 0; j < int'(K); j++) for (int u = 0; u < 256; u++) begin
      @(negedge clk);
      cfg_we = 1; cfg_lane = 3'(j); cfg_addr = 8'(u); cfg_data = 8'(known[u % N][j]);
    end
    @(negedge clk);
    cfg_we = 0;
    rst = 0;
    repeat (CYCLES) @(negedge clk);
    $display("%0d clocks: %0d rulers stored, %0d backtracking rounds, most rulers in one worker %0d, found=%0d",
             CYCLES, commits, backtracks, max_rows, found);
    checks++;
    if (bad_rows != 0) begin failures++; $display("FAIL %0d invalid rulers stored", bad_rows); end
    checks++;
    if (commits < int'(NW) || max_rows < 6) begin failures++; $display("FAIL too little progress"); end
    checks++;
    if (backtracks == 0) begin failures++; $display("FAIL no backtracking"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
