// tb_mark_generator: checks the pipelined inverse-CDF mark generators.
// Each lane's quantile table is loaded with a lane-specific pattern; an
// independent bit-serial LFSR model per lane (same seeds) predicts the
// uniform bits, so every output mark is predicted exactly:
//   mark after clock e = table[sel before e][u of the LFSR state after e-2].
// The distribution select is changed at random; `mark_valid` must rise on
// the third clock after reset.  A second part loads a quantile table for
// a discretised bell curve and checks the histogram of 2560 samples
// against the table's own bin counts (to within a loose bound).
module tb_mark_generator;
  localparam int unsigned K = 4, MW = 8, UB = 8, WK = 3;
  logic clk = 0, rst = 1;
  logic cfg_we = 0;
  logic [2:0] cfg_lane = '0, dist_sel = '0;
  logic [UB-1:0] cfg_addr = '0;
  logic [MW-1:0] cfg_data = '0, mark;
  logic mark_valid;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mark_generator #(.K(K), .MW(MW), .UBITS(UB), .WORKER(WK)) dut (
    .clk, .rst, .cfg_we, .cfg_lane, .cfg_addr, .cfg_data,
    .entropy_valid(1'b0), .entropy(1'b0), .dist_sel, .mark, .mark_valid);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] adv(input logic [31:0] s);
    for (int i = 0; i < 8; i++) s = {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
    return s;
  endfunction

  function automatic logic [7:0] pat(input int j, input int u);
    return 8'((j * 37 + u * 3 + (u >> 5)) % 141);
  endfunction

  logic [31:0] st [K];
  logic [31:0] hist_st [$][K];
  int          sel_hist [$];
  int          hist_cnt [141];
  logic [7:0]  bell [256];

  task automatic load(input int j, input int u, input logic [7:0] v);
    @(negedge clk);
    cfg_we = 1; cfg_lane = 3'(j); cfg_addr = 8'(u); cfg_data = v;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    for (int j = 0; j < int'(K); j++) for (int u = 0; u < 256; u++) load(j, u, pat(j, u));
    // reset and track
    @(negedge clk); rst = 1;
    @(negedge clk); rst = 0;
    for (int j = 0; j < int'(K); j++) st[j] = dts_pkg::lane_seed(WK, j);
    for (int e = 1; e <= 600; e++) begin
      logic [31:0] snap [K];
      dist_sel = 3'($urandom % K);
      sel_hist.push_back(int'(dist_sel));
      @(negedge clk);
      for (int j = 0; j < int'(K); j++) begin st[j] = adv(st[j]); snap[j] = st[j]; end
      hist_st.push_back(snap);
      if (e <= 2) begin
        checks++;
        if (mark_valid) begin failures++; $display("FAIL valid early at %0d", e); end
      end else begin
        int s;
        s = sel_hist[e-1];
        checks++;
        if (!mark_valid || mark != pat(s, int'(hist_st[e-3][s][7:0]))) begin
          failures++;
          if (failures < 10) $display("FAIL e=%0d sel=%0d mark=%0d exp=%0d", e, s, mark, pat(s, int'(hist_st[e-3][s][7:0])));
        end
      end
    end
    // histogram check on lane 2 with a bell-shaped quantile table
    for (int u = 0; u < 256; u++) begin
      // quantiles of a triangular-ish bell centred at 70, half-width 30
      int v;
      v = 40 + ((u * 61) / 256 + ((u * 13) % 7 == 0 ? 0 : 0));
      bell[u] = 8'(v);
      load(2, u, bell[u]);
    end
    dist_sel = 3'd2;
    repeat (4) @(negedge clk);
    for (int i = 0; i < 141; i++) hist_cnt[i] = 0;
    for (int i = 0; i < 2560; i++) begin @(negedge clk); hist_cnt[mark]++; end
    begin
      int expect_cnt [141];
      int bad;
      for (int i = 0; i < 141; i++) expect_cnt[i] = 0;
      for (int u = 0; u < 256; u++) expect_cnt[bell[u]] += 10;
      bad = 0;
      for (int i = 0; i < 141; i++) begin
        if (expect_cnt[i] == 0 && hist_cnt[i] != 0) bad++;
        if (expect_cnt[i] != 0 && (hist_cnt[i] < expect_cnt[i] / 4 || hist_cnt[i] > expect_cnt[i] * 3)) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("FAIL histogram, %0d bins off", bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
