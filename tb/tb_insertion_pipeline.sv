// tb_insertion_pipeline: self-checking test of the pipelined conditional
// mark insertion at its default width (M = 140, 141-bit words).
//
// The reference decides a candidate from the list of marks directly: it
// forms every |mark - a| for the marks a already in the row, and accepts
// when the mark is new, these distances are pairwise distinct and none is
// already used.  The new mirror word is rebuilt from the new row.  This is
// independent of the shift-based method under test.
// Phase 1 issues one candidate at a time and checks the result and the
// latency (MW + 2 clocks).  Phase 2 streams one candidate per clock with
// flush on every acceptance and checks every evaluated candidate against
// the state it saw, and that no candidate issued before an acceptance
// survives it.
module tb_insertion_pipeline;
  localparam int unsigned W   = 141;
  localparam int unsigned MW  = $clog2(W);
  localparam int unsigned LAT = MW + 2;

  logic clk = 0, rst = 1, flush = 0, run = 1, in_valid = 0;
  logic [MW-1:0] in_mark = '0;
  logic [W-1:0]  nat, rev, used;
  logic [MW-1:0] largest;
  logic attempt, change;
  logic [W-1:0]  nat_new, rev_new, used_new;
  logic [MW-1:0] largest_new;
  int checks = 0, failures = 0;

  insertion_pipeline #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: accept?, and the resulting words
  function automatic void ref_insert(input logic [W-1:0] n, input logic [W-1:0] u, input int m,
                                     output logic ok, output logic [W-1:0] n2, output logic [W-1:0] r2,
                                     output int l2, output logic [W-1:0] u2);
    logic [W-1:0] d;
    int dd;
    ok = !n[m];
    d  = '0;
    for (int a = 0; a < int'(W); a++) if (n[a]) begin
      dd = (m > a) ? m - a : a - m;
      if (dd == 0 || d[dd] || u[dd]) ok = 0;
      else d[dd] = 1'b1;
    end
    n2 = n | (W'(1) << m);
    l2 = 0;
    for (int a = 0; a < int'(W); a++) if (n2[a]) l2 = a;
    r2 = '0;
    for (int a = 0; a <= l2; a++) if (n2[a]) r2[l2 - a] = 1'b1;
    u2 = u | d;
  endfunction

  function automatic logic [W-1:0] mirror(input logic [W-1:0] n, input int l);
    logic [W-1:0] r = '0;
    for (int a = 0; a <= l; a++) if (n[a]) r[l - a] = 1'b1;
    return r;
  endfunction

  task automatic new_state();
    int l;
    nat  = W'(1);
    used = '0;
    // a few used distances from "earlier rows"
    for (int i = 0; i < 12; i++) begin int b; b = 1 + int'($urandom % (W - 1)); used[b] = 1'b1; end
    l = 0;
    largest = '0;
    rev = W'(1);
  endtask

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // the state the DUT sees is kept here, updated like the row state
  task automatic apply_update();
    nat = nat_new; rev = rev_new; largest = largest_new; used = used_new;
  endtask

  int marks_in_row;
  logic ok_ref;
  logic [W-1:0] n_ref, r_ref, u_ref;
  int l_ref, lat, m;
  int accepted_stream, stream_attempts, stream_issued;
  int hist_mark [$];
  logic hist_valid [$];

  initial begin
    new_state();
    repeat (3) @(posedge clk);
    rst = 0;
    // ---------------- phase 1: one at a time ----------------
    marks_in_row = 1;
    for (int t = 0; t < 600; t++) begin
      if (marks_in_row >= 6 || ($urandom % 40) == 0) begin new_state(); marks_in_row = 1; end
      m = (t % 5 == 0) ? int'(largest) + ($urandom % 3) : $urandom % W;   // near-largest cases too
      if (m >= int'(W)) m = W - 1;
      ref_insert(nat, used, m, ok_ref, n_ref, r_ref, l_ref, u_ref);
      @(negedge clk);
      in_valid = 1; in_mark = MW'(m);
      @(negedge clk);
      in_valid = 0;
      lat = 1;
      while (!attempt && lat < 40) begin @(negedge clk); lat++; end
      check("latency", lat == int'(LAT));
      check("decision", change == ok_ref);
      if (ok_ref && change) begin
        check("nat_new", nat_new == n_ref);
        check("rev_new", rev_new == r_ref);
        check("rev_new is mirror", rev_new == mirror(n_ref, l_ref));
        check("largest_new", int'(largest_new) == l_ref);
        check("used_new", used_new == u_ref);
        @(posedge clk);
        apply_update();
        marks_in_row++;
      end
    end
    // ---------------- phase 2: streaming with flush on change ----------------
    @(negedge clk);
    new_state();
    marks_in_row = 1;
    accepted_stream = 0; stream_attempts = 0; stream_issued = 0;
    for (int c = 0; c < 4000; c++) begin
      // present a candidate for this cycle (valid 7/8 of the time)
      in_valid = ($urandom % 8) != 0;
      in_mark  = MW'($urandom % W);
      hist_mark.push_back(int'(in_mark));
      hist_valid.push_back(in_valid);
      flush = change;
      #1;
      if (attempt) begin
        stream_attempts++;
        // the candidate evaluated now was presented LAT cycles ago
        check("stream attempt lines up with an issued candidate", hist_valid[hist_valid.size()-1-LAT] == 1'b1);
        ref_insert(nat, used, hist_mark[hist_mark.size()-1-LAT], ok_ref, n_ref, r_ref, l_ref, u_ref);
        check("stream decision", change == ok_ref);
        if (change) begin
          check("stream nat", nat_new == n_ref);
          check("stream used", used_new == u_ref);
          check("stream rev", rev_new == r_ref);
        end
      end
      flush = change;
      @(posedge clk);
      if (change) begin
        apply_update();
        accepted_stream++;
        marks_in_row++;
        // every candidate in flight is void now
        for (int i = 0; i < hist_valid.size(); i++) hist_valid[i] = 1'b0;
      end
      @(negedge clk);
      if (marks_in_row >= 7) begin
        // start a new row: the FSM would flush; emulate with one flush cycle
        flush = 1; in_valid = 0;
        new_state(); marks_in_row = 1;
        hist_mark.push_back(0); hist_valid.push_back(0);
        @(posedge clk); @(negedge clk);
        for (int i = 0; i < hist_valid.size(); i++) hist_valid[i] = 1'b0;
        flush = 0;
      end
      if (hist_mark.size() > 64) begin void'(hist_mark.pop_front()); void'(hist_valid.pop_front()); end
    end
    check("stream saw acceptances", accepted_stream > 20);
    check("stream saw rejections", stream_attempts > accepted_stream + 100);
    $display("phase2: attempts=%0d accepted=%0d", stream_attempts, accepted_stream);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
