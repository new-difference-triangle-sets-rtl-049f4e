// lfsr: maximum-length Fibonacci linear-feedback shift register that advances
// STEPS positions per clock, so the low STEPS bits of `state` are STEPS fresh
// pseudorandom bits every cycle.
//
// Each step shifts left and inserts the XOR of the tap bits (taps from
// dts_pkg::lfsr_taps).  When `entropy_valid` is high the bit `entropy` is
// XORed into the feedback of the first step of that cycle; this is how
// sensor data (die temperature) makes the sequence non-deterministic.  An
// injection can in principle steer the register to all zeros, the one state
// an XOR LFSR never leaves, so a zero next state is replaced by 1.
//
// Interface: synchronous active-high `rst` loads SEED (must be nonzero).
// Timing: `rnd` is a register output; one new word per clock.
// The paper specifies maximum-length LFSRs with entropy XORed into their
// feedback; width, taps, step count and the zero guard are this design's.
module lfsr #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned STEPS = 8,
  parameter logic [WIDTH-1:0] SEED = WIDTH'(1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             entropy_valid,
  input  logic             entropy,
  output logic [STEPS-1:0] rnd,
  output logic [WIDTH-1:0] state
);
  localparam logic [WIDTH-1:0] TAPS = WIDTH'(dts_pkg::lfsr_taps(WIDTH));

  initial begin
    assert (TAPS != '0) else $error("lfsr: no tap table for WIDTH=%0d", WIDTH);
    assert (STEPS <= WIDTH) else $error("lfsr: STEPS must not exceed WIDTH");
  end

  logic [WIDTH-1:0] nxt;

  always_comb begin
    logic fb;
    nxt = state;
    for (int unsigned s = 0; s < STEPS; s++) begin
      fb = ^(nxt & TAPS);
      if (s == 0) fb = fb ^ (entropy_valid & entropy);
      nxt = {nxt[WIDTH-2:0], fb};
    end
    if (nxt == '0) nxt = WIDTH'(1);
  end

  always_ff @(posedge clk) begin
    if (rst) state <= SEED;
    else     state <= nxt;
  end

  assign rnd = state[STEPS-1:0];
endmodule
