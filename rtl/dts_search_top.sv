// dts_search_top: a device-level DTS search engine.
//
// NUM_WORKERS independent workers (dts_worker) search in parallel for the
// same (N,K)-DTS of scope M.  Each worker's generator lanes start from
// different LFSR seeds, and all of them receive the same entropy bit, the
// XOR of the bits of each die-temperature sample, so two devices built from
// the same design still diverge.  The quantile tables of the mark
// distributions are written once after reset through the cfg_* port, which
// is broadcast to all workers.  The first worker to complete N rulers wins
// (result_select); its rulers are sent over the serial line (serial_tx),
// each as ceil((M+1)/8) bytes, least significant first, ruler 0 first.
// Afterwards the device has nothing more to do; the parameters are fixed at
// build time, as a new search needs a new build.
//
// Ports: active-high synchronous `rst`; `temp_valid`/`temp_data` come from
// the device's temperature sensor (not part of this RTL); `found`, `winner`,
// `tx_finished` report progress; `txd` is the serial output.
// Defaults are the (14,4)-DTS of scope 140 searched with 48 workers; the
// sensor word width, serial format and the thresholds are this design's.
module dts_search_top #(
  parameter int unsigned N            = dts_pkg::DEF_N,
  parameter int unsigned K            = dts_pkg::DEF_K,
  parameter int unsigned M            = dts_pkg::DEF_M,
  parameter int unsigned NUM_WORKERS  = dts_pkg::DEF_WORKERS,
  parameter int unsigned THRESH1      = dts_pkg::DEF_THRESH1,
  parameter int unsigned THRESH2      = dts_pkg::DEF_THRESH2,
  parameter int unsigned UBITS        = dts_pkg::DEF_UBITS,
  parameter int unsigned TEMP_W       = 12,
  parameter int unsigned CLKS_PER_BIT = 2604,
  parameter int unsigned MW           = $clog2(M + 1),
  parameter int unsigned LW           = $clog2(K + 1),
  parameter int unsigned IW           = (NUM_WORKERS > 1) ? $clog2(NUM_WORKERS) : 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              cfg_we,
  input  logic [LW-1:0]     cfg_lane,
  input  logic [UBITS-1:0]  cfg_addr,
  input  logic [MW-1:0]     cfg_data,
  input  logic              temp_valid,
  input  logic [TEMP_W-1:0] temp_data,
  output logic              found,
  output logic [IW-1:0]     winner,
  output logic              tx_finished,
  output logic              txd
);
  localparam int unsigned W  = M + 1;
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1;

  logic [NUM_WORKERS-1:0] done;
  logic [W-1:0]           rd_data [NUM_WORKERS];
  logic [AW-1:0]          rd_addr;
  logic                   tx_valid, tx_ready;
  logic [7:0]             tx_data;
  logic                   ent_valid, ent_bit;

  // one register stage for the broadcast entropy bit
  always_ff @(posedge clk) begin
    ent_valid <= temp_valid && !rst;
    ent_bit   <= ^temp_data;
  end

  for (genvar w = 0; w < NUM_WORKERS; w++) begin : g_worker
    dts_worker #(
      .N(N), .K(K), .M(M), .THRESH1(THRESH1), .THRESH2(THRESH2),
      .UBITS(UBITS), .WORKER(w)
    ) u_worker (
      .clk, .rst, .cfg_we, .cfg_lane, .cfg_addr, .cfg_data,
      .entropy_valid(ent_valid), .entropy(ent_bit),
      .done(done[w]), .rd_addr, .rd_data(rd_data[w])
    );
  end

  result_select #(.NW(NUM_WORKERS), .N(N), .W(W), .AW(AW), .IW(IW)) u_sel (
    .clk, .rst, .done, .rd_addr, .rd_data, .found, .winner,
    .tx_valid, .tx_data, .tx_ready, .finished(tx_finished)
  );

  serial_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst, .valid(tx_valid), .data(tx_data), .ready(tx_ready), .txd
  );
endmodule
