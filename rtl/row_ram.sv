// row_ram: the n x (M+1) RAM holding the completed rulers of one worker.
//
// Word r is ruler r as a mark mask (bit a set = mark a).  One write port and
// one read port; the read is registered (data appears the clock after the
// address), so the array maps onto an FPGA's embedded block or distributed
// RAM.  No reset: the control FSM only reads words it has written.
// The paper gives the size (n words of M+1 bits); what a word holds and the
// port timing are this design's choice.
module row_ram #(
  parameter int unsigned N  = dts_pkg::DEF_N,
  parameter int unsigned W  = dts_pkg::DEF_M + 1,
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
