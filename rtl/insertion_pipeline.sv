// insertion_pipeline: pipelined fast conditional mark insertion.
//
// For a candidate `mark` and the current row state (natRuler, revRuler =
// mirror image of the row about its largest mark, largestMark,
// usedDistances), the new mark is accepted when it creates no distance that
// is already used and no distance twice:
//   mark >  largest: left = rev << (mark-largest), right = 0
//   mark <= largest: left = rev >> (largest-mark), right = nat >> mark
//   reject if (left & right) != 0 or (used & (left|right)) != 0
// On acceptance the new state is nat|1<<mark, rev = left|1 (new largest) or
// rev|1<<(largest-mark), used|(left|right), largest = max(largest, mark).
//
// Structure: stage 0 registers the candidate, the shift amounts and the
// state words; the two variable shifts run through barrel shifters with one
// register per level (MW levels, shift by 2^i at level i); a reduction stage
// registers the AND/OR words and per-32-bit-chunk OR flags; the decision
// (OR of the chunk flags and the new state) is combinational on that
// register.  LATENCY = MW + 2 clocks from `in_valid` to `attempt`.
//
// Feedback: the state is read live at stage 0 and at the reduction stage.
// Every candidate in flight was issued against the same state, because the
// state only changes on an acceptance (`change`) or by the FSM, and both
// come with `flush`, which empties every stage on the same clock edge.
// `run` (from the FSM's registered state) gates acceptance so that a
// candidate reaching the end while the FSM reshapes the row is dropped.
// `attempt` marks each candidate evaluated while running; `change` is the
// feedback change flag.  The paper gives the algorithm, the pipelined
// logarithmic shifters and the flush-on-change rule; the stage boundaries
// and the chunked reduction are this design's.
module insertion_pipeline #(
  parameter int unsigned W  = dts_pkg::DEF_M + 1,   // M+1
  parameter int unsigned MW = $clog2(W)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          flush,
  input  logic          run,
  // candidate from the mark generators
  input  logic          in_valid,
  input  logic [MW-1:0] in_mark,
  // live row state
  input  logic [W-1:0]  nat,
  input  logic [W-1:0]  rev,
  input  logic [MW-1:0] largest,
  input  logic [W-1:0]  used,
  // decision
  output logic          attempt,
  output logic          change,
  output logic [W-1:0]  nat_new,
  output logic [W-1:0]  rev_new,
  output logic [MW-1:0] largest_new,
  output logic [W-1:0]  used_new
);
  localparam int unsigned NCH = (W + 31) / 32;
  localparam int unsigned WP  = NCH * 32;

  // shifter stages 0..MW
  logic          sv   [MW+1];
  logic [MW-1:0] smark[MW+1];
  logic          sgt  [MW+1];
  logic [MW-1:0] samt [MW+1];   // |mark - largest|
  logic [MW-1:0] sramt[MW+1];   // remaining right shift of nat (mark)
  logic [W-1:0]  sl   [MW+1];
  logic [W-1:0]  sr   [MW+1];

  always_ff @(posedge clk) begin
    logic gt;
    gt = in_mark > largest;
    sv[0]    <= in_valid && !flush && !rst;
    smark[0] <= in_mark;
    sgt[0]   <= gt;
    samt[0]  <= gt ? in_mark - largest : largest - in_mark;
    sramt[0] <= in_mark;
    sl[0]    <= rev;
    sr[0]    <= gt ? '0 : nat;
  end

  for (genvar i = 0; i < MW; i++) begin : g_lvl
    always_ff @(posedge clk) begin
      sv[i+1]    <= sv[i] && !flush && !rst;
      smark[i+1] <= smark[i];
      sgt[i+1]   <= sgt[i];
      samt[i+1]  <= samt[i];
      sramt[i+1] <= sramt[i];
      if (samt[i][i]) sl[i+1] <= sgt[i] ? (sl[i] << (2**i)) : (sl[i] >> (2**i));
      else            sl[i+1] <= sl[i];
      sr[i+1] <= sramt[i][i] ? (sr[i] >> (2**i)) : sr[i];
    end
  end

  // reduction stage
  logic          rv;
  logic [MW-1:0] rmark, ramt;
  logic          rgt;
  logic [W-1:0]  rleft, rdist;
  logic [NCH-1:0] rflag;

  always_ff @(posedge clk) begin
    logic [W-1:0]  bad_w;
    logic [WP-1:0] bad;
    bad_w  = (sl[MW] & sr[MW]) | (used & (sl[MW] | sr[MW]));
    bad    = WP'(bad_w);
    rv    <= sv[MW] && !flush && !rst;
    rmark <= smark[MW];
    ramt  <= samt[MW];
    rgt   <= sgt[MW];
    rleft <= sl[MW];
    rdist <= sl[MW] | sr[MW];
    for (int unsigned c = 0; c < NCH; c++) rflag[c] <= |bad[c*32 +: 32];
  end

  // decision
  always_comb begin
    attempt     = rv && run;
    change      = attempt && (rflag == '0);
    nat_new     = nat | (W'(1) << rmark);
    rev_new     = rgt ? (rleft | W'(1)) : (rev | (W'(1) << ramt));
    largest_new = rgt ? rmark : largest;
    used_new    = used | rdist;
  end
endmodule
