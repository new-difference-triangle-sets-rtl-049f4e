// tb_row_state: drives random sequences of row state operations and
// pipeline updates and compares every register with a model kept here:
// clear (used = {}, row = {0}), new row (used kept), restore from a
// snapshot minus a released set, and accepted updates (count + 1).
// Also checks `row_full` at K+1 marks.
module tb_row_state;
  localparam int unsigned W = 141, K = 4, MW = 8, CW = 3;
  logic clk = 0, rst = 1;
  dts_pkg::row_op_e op = dts_pkg::ROW_HOLD;
  logic upd_valid = 0;
  logic [W-1:0] upd_nat, upd_rev, upd_used, snap_nat, snap_rev, snap_used, release_mask;
  logic [MW-1:0] upd_largest, snap_largest, largest;
  logic [CW-1:0] snap_count, count;
  logic [W-1:0] nat, rev, used;
  logic row_full;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  row_state #(.W(W), .K(K)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] w;
    for (int i = 0; i < int'(W); i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  logic [W-1:0] m_nat, m_rev, m_used;
  int m_l, m_cnt;

  initial begin
    @(negedge clk); @(negedge clk);
    rst = 0;
    m_nat = 1; m_rev = 1; m_used = 0; m_l = 0; m_cnt = 1;
    for (int t = 0; t < 3000; t++) begin
      int r;
      r = $urandom % 10;
      upd_nat = rnd_word(); upd_rev = rnd_word(); upd_used = rnd_word(); upd_largest = MW'($urandom % W);
      snap_nat = rnd_word(); snap_rev = rnd_word(); snap_used = rnd_word(); snap_largest = MW'($urandom % W);
      snap_count = CW'(1 + $urandom % 5); release_mask = rnd_word();
      upd_valid = 0; op = dts_pkg::ROW_HOLD;
      case (r)
        0: op = dts_pkg::ROW_CLEAR_ALL;
        1: op = dts_pkg::ROW_NEW;
        2: op = dts_pkg::ROW_RESTORE;
        3, 4, 5, 6: upd_valid = (m_cnt < int'(K) + 1);
        default: ;
      endcase
      @(negedge clk);
      case (r)
        0: begin m_nat = 1; m_rev = 1; m_used = 0; m_l = 0; m_cnt = 1; end
        1: begin m_nat = 1; m_rev = 1; m_l = 0; m_cnt = 1; end
        2: begin m_nat = snap_nat; m_rev = snap_rev; m_l = int'(snap_largest); m_cnt = int'(snap_count);
                 m_used = snap_used & ~release_mask; end
        3, 4, 5, 6: if (upd_valid) begin m_nat = upd_nat; m_rev = upd_rev; m_l = int'(upd_largest);
                 m_used = upd_used; m_cnt++; end
        default: ;
      endcase
      checks++;
      if (nat != m_nat || rev != m_rev || used != m_used || int'(largest) != m_l || int'(count) != m_cnt
          || row_full != (m_cnt == int'(K) + 1)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d op=%0d", t, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
