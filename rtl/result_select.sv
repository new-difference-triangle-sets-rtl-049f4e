// result_select: picks the first worker that finds a DTS and streams its
// rulers out as bytes.
//
// While no winner is latched, the lowest-numbered worker whose `done` is
// high becomes the winner (a tie on the same clock goes to the lowest
// index).  The winner is never replaced.  The unit then reads rows
// 0..N-1 from the workers' row RAM read ports (the address is broadcast to
// all workers; the winner's data is selected) and sends each ruler as
// NB = ceil((M+1)/8) bytes, least significant byte first, through a
// valid/ready byte port; `finished` rises after the last byte is taken.
// Timing: a row read takes two clocks (address, registered RAM data) before
// its first byte is offered.
// The paper only says that the first successful worker's result is selected
// and output; the priority rule and the byte format are this design's.
module result_select #(
  parameter int unsigned NW = dts_pkg::DEF_WORKERS,
  parameter int unsigned N  = dts_pkg::DEF_N,
  parameter int unsigned W  = dts_pkg::DEF_M + 1,
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned IW = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [NW-1:0] done,
  output logic [AW-1:0] rd_addr,
  input  logic [W-1:0]  rd_data [NW],
  output logic          found,
  output logic [IW-1:0] winner,
  output logic          tx_valid,
  output logic [7:0]    tx_data,
  input  logic          tx_ready,
  output logic          finished
);
  localparam int unsigned NB  = (W + 7) / 8;
  localparam int unsigned BW  = (NB > 1) ? $clog2(NB) : 1;

  typedef enum logic [2:0] {R_WAIT, R_ADDR, R_DATA, R_SEND, R_END} rd_state_e;
  rd_state_e         rs;
  logic [NB*8-1:0]   word;
  logic [BW-1:0]     byte_i;

  logic          any_done;
  logic [IW-1:0] first;
  always_comb begin
    any_done = |done;
    first    = '0;
    for (int i = NW - 1; i >= 0; i--) if (done[i]) first = IW'(i);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rs       <= R_WAIT;
      found    <= 1'b0;
      winner   <= '0;
      rd_addr  <= '0;
      byte_i   <= '0;
      finished <= 1'b0;
    end else begin
      unique case (rs)
        R_WAIT: if (any_done) begin
          found   <= 1'b1;
          winner  <= first;
          rd_addr <= '0;
          rs      <= R_ADDR;
        end
        R_ADDR: rs <= R_DATA;   // RAM registers the address this clock
        R_DATA: begin
          word   <= (NB*8)'(rd_data[winner]);
          byte_i <= '0;
          rs     <= R_SEND;
        end
        R_SEND: if (tx_ready) begin
          word <= word >> 8;
          if (32'(byte_i) + 1 == NB) begin
            if (32'(rd_addr) + 1 == N) rs <= R_END;
            else begin
              rd_addr <= rd_addr + 1'b1;
              rs      <= R_ADDR;
            end
          end else byte_i <= byte_i + 1'b1;
        end
        R_END: finished <= 1'b1;
        default: rs <= R_WAIT;
      endcase
    end
  end

  assign tx_valid = (rs == R_SEND);
  assign tx_data  = word[7:0];
endmodule
