// serial_tx: low-speed serial transmitter for the found DTS.
//
// Standard asynchronous 8N1 framing: idle high, one start bit (0), eight data
// bits LSB first, one stop bit (1); each bit lasts CLKS_PER_BIT clocks.
// Handshake: a byte is taken when `valid && ready`; `ready` is high only in
// the idle state, so a frame is 10*CLKS_PER_BIT clocks from acceptance to the
// next `ready`.  The paper only says the result leaves over a low-speed
// serial link; the framing and rate are this design's choice (default
// 115200 baud at 300 MHz).
module serial_tx #(
  parameter int unsigned CLKS_PER_BIT = 2604
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       txd
);
  localparam int unsigned CTW = $clog2(CLKS_PER_BIT + 1);

  logic [8:0]     shreg;     // stop, data[7:0] (start bit is driven directly)
  logic [3:0]     bits_left;
  logic [CTW-1:0] ctr;

  assign ready = (bits_left == 0);

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg     <= '1;
      bits_left <= '0;
      ctr       <= '0;
      txd       <= 1'b1;
    end else if (bits_left == 0) begin
      txd <= 1'b1;
      if (valid) begin
        shreg     <= {1'b1, data};
        bits_left <= 4'd10;
        ctr       <= '0;
        txd       <= 1'b0;
      end
    end else if (ctr == CTW'(CLKS_PER_BIT - 1)) begin
      ctr       <= '0;
      bits_left <= bits_left - 1'b1;
      shreg     <= {1'b1, shreg[8:1]};
      txd       <= (bits_left == 1) ? 1'b1 : shreg[0];
    end else begin
      ctr <= ctr + 1'b1;
    end
  end
endmodule
