// tb_result_select: four workers with model RAMs (registered read) of
// three 20-bit rulers each.  Workers 2 and 3 finish on the same clock, then
// worker 0 later: worker 2 must win and stay the winner.  The byte stream
// (3 bytes per ruler, least significant first, ruler 0 first) is collected
// under a random `tx_ready` and compared with worker 2's words; `finished`
// must follow the last byte.  A second run checks a single early finisher.
module tb_result_select;
  localparam int unsigned NW = 4, N = 3, W = 20, AW = 2, IW = 2;
  logic clk = 0, rst = 1;
  logic [NW-1:0] done = '0;
  logic [AW-1:0] rd_addr;
  logic [W-1:0]  rd_data [NW];
  logic found, tx_valid, tx_ready = 0, finished;
  logic [IW-1:0] winner;
  logic [7:0] tx_data;
  int checks = 0, failures = 0;
  logic [W-1:0] mem [NW][N];
  always #5 clk = ~clk;

  result_select #(.NW(NW), .N(N), .W(W)) dut (.*);

  always_ff @(posedge clk) for (int w = 0; w < int'(NW); w++) rd_data[w] <= mem[w][rd_addr];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string s, input logic c);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  task automatic run_case(input logic [NW-1:0] first_done, input int exp_w);
    byte unsigned got [$];
    for (int w = 0; w < int'(NW); w++) for (int r = 0; r < int'(N); r++) mem[w][r] = W'($urandom);
    rst = 1; done = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    chk("nothing found yet", !found && !tx_valid);
    done = first_done;
    @(negedge clk);
    done = 4'b1111;     // everyone else finishes afterwards
    while (!finished) begin
      tx_ready = ($urandom % 3) == 0;
      #1;
      if (tx_valid && tx_ready) got.push_back(tx_data);
      @(negedge clk);
      if (got.size() > 100) break;
    end
    tx_ready = 0;
    chk("winner", found && int'(winner) == exp_w);
    chk("byte count", got.size() == N * 3);
    for (int r = 0; r < int'(N); r++) begin
      logic [23:0] v;
      v = {got[3*r+2], got[3*r+1], got[3*r]};
      chk($sformatf("ruler %0d", r), v == 24'(mem[exp_w][r]));
    end
  endtask

  initial begin
    run_case(4'b1100, 2);
    run_case(4'b0010, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
