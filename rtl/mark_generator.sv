// mark_generator: the pipelined random mark generators of one worker.
//
// There is one generator lane per mark position j = 1..K of a ruler.  Lane
// j-1 draws UBITS uniform bits per clock from its own LFSR and bins them into
// a mark through a quantile table: table[u] is the smallest mark whose
// cumulative probability exceeds (u+0.5)/2^UBITS.  This is the inverse-CDF
// method applied to the rounded Gaussian N(mu_j, sigma_j^2) fitted offline;
// the table contents are computed offline and written through the cfg_*
// port.  `dist_sel` (from the control FSM) chooses which lane feeds the
// insertion pipeline.
//
// Pipeline: LFSR register -> table read register -> lane select register,
// so a change of `dist_sel` shows at `mark` after one clock, and a table
// entry read from LFSR state S appears two clocks after S is in the LFSR.
// `mark_valid` rises three clocks after reset and stays high.
//
// From the paper: per-mark non-uniform distributions, inverse-CDF binning of
// LFSR bits at low precision, entropy XORed into the LFSR feedback, and a
// strictly feed-forward, pipelined generator.  Table format, UBITS and the
// register placement are this design's choice.
module mark_generator #(
  parameter int unsigned K      = dts_pkg::DEF_K,
  parameter int unsigned MW     = 8,                  // mark width, $clog2(M+1)
  parameter int unsigned UBITS  = dts_pkg::DEF_UBITS,
  parameter int unsigned WORKER = 0                   // selects the LFSR seeds
) (
  input  logic                        clk,
  input  logic                        rst,
  // quantile table write port (shared by all workers)
  input  logic                        cfg_we,
  input  logic [$clog2(K+1)-1:0]      cfg_lane,
  input  logic [UBITS-1:0]            cfg_addr,
  input  logic [MW-1:0]               cfg_data,
  // entropy injection
  input  logic                        entropy_valid,
  input  logic                        entropy,
  // distribution select: mark position j-1
  input  logic [$clog2(K+1)-1:0]      dist_sel,
  output logic [MW-1:0]               mark,
  output logic                        mark_valid
);
  logic [MW-1:0] lane_q [K];
  logic [2:0]    vpipe;
  localparam int unsigned SELW = (K > 1) ? $clog2(K) : 1;
  logic [SELW-1:0] sel;
  assign sel = SELW'(dist_sel);   // the FSM keeps dist_sel below K

  for (genvar j = 0; j < K; j++) begin : g_lane
    logic [UBITS-1:0] u;
    logic [MW-1:0]    tbl [2**UBITS];

    lfsr #(.WIDTH(32), .STEPS(UBITS), .SEED(dts_pkg::lane_seed(WORKER, j))) u_lfsr (
      .clk, .rst, .entropy_valid, .entropy, .rnd(u), .state()
    );

    always_ff @(posedge clk) begin
      if (cfg_we && cfg_lane == ($clog2(K+1))'(j)) tbl[cfg_addr] <= cfg_data;
      lane_q[j] <= tbl[u];
    end
  end

  always_ff @(posedge clk) begin
    mark <= lane_q[sel];
    if (rst) vpipe <= '0;
    else     vpipe <= {vpipe[1:0], 1'b1};
  end

  assign mark_valid = vpipe[2];
endmodule
