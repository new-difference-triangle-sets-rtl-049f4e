// tb_backtrack_regs: checks the snapshot registers and the serial distance
// extraction.  Random rulers (mark 0 plus up to 7 more marks below 141) are
// handed over; the expected distance set is formed here from all pairwise
// differences, and the extraction must finish in (largest mark + 1) clocks.
module tb_backtrack_regs;
  localparam int unsigned W = 141, K = 4, MW = 8, CW = 3;
  logic clk = 0, rst = 1;
  logic save = 0, start = 0, busy;
  logic [W-1:0] in_nat, in_rev, in_used, snap_nat, snap_rev, snap_used, ruler, dset;
  logic [MW-1:0] in_largest, snap_largest;
  logic [CW-1:0] in_count, snap_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  backtrack_regs #(.W(W), .K(K)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] w;
    for (int i = 0; i < int'(W); i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  task automatic chk(input string s, input logic c);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    @(negedge clk); rst = 0;
    for (int t = 0; t < 400; t++) begin
      logic [W-1:0] r, d, k_nat, k_rev, k_used;
      int top, cyc, nm, idx;
      logic [MW-1:0] k_l;
      logic [CW-1:0] k_c;
      // snapshot
      k_nat = rnd_word(); k_rev = rnd_word(); k_used = rnd_word(); k_l = MW'($urandom); k_c = CW'($urandom);
      in_nat = k_nat; in_rev = k_rev; in_used = k_used; in_largest = k_l; in_count = k_c;
      save = 1;
      @(negedge clk);
      save = 0;
      in_nat = rnd_word(); in_rev = rnd_word(); in_used = rnd_word();
      // ruler
      r = W'(1);
      nm = 1 + int'($urandom % 7);
      for (int i = 0; i < nm; i++) begin idx = int'($urandom % W); r[idx] = 1'b1; end
      top = 0;
      for (int a = 0; a < int'(W); a++) if (r[a]) top = a;
      d = '0;
      for (int a = 0; a < int'(W); a++) for (int b = 0; b < a; b++) if (r[a] && r[b]) d[a - b] = 1'b1;
      ruler = r; start = 1;
      @(negedge clk);
      start = 0; ruler = rnd_word();
      cyc = 0;
      while (busy && cyc < 400) begin @(negedge clk); cyc++; end
      if (cyc != top + 1 || dset != d) $display("top=%0d cyc=%0d r=%h d=%h dset=%h", top, cyc, r, d, dset);
      chk("extraction time", cyc == top + 1);
      chk("distance set", dset == d);
      chk("snapshot kept", snap_nat == k_nat && snap_rev == k_rev && snap_used == k_used
                            && snap_largest == k_l && snap_count == k_c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
