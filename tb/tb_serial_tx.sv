// tb_serial_tx: sends random bytes through the 8N1 transmitter (8 clocks
// per bit) and decodes the line here by sampling the middle of each bit.
// Checks the data, the start and stop bits, the idle level, and that the
// frame takes exactly 10 bit times from acceptance until `ready` again.
module tb_serial_tx;
  localparam int unsigned CPB = 8;
  logic clk = 0, rst = 1, valid = 0, ready, txd;
  logic [7:0] data = '0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  serial_tx #(.CLKS_PER_BIT(CPB)) dut (.*);

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

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    chk("idle high", txd == 1'b1 && ready);
    for (int t = 0; t < 200; t++) begin
      logic [7:0] b, got;
      int frame;
      b = 8'($urandom);
      while (!ready) @(negedge clk);
      valid = 1; data = b;
      @(negedge clk);
      valid = 0; data = 8'($urandom);
      // now at the start of the start bit (txd changed on the accepting edge)
      repeat (CPB / 2 - 1) @(negedge clk);
      chk("start bit", txd == 1'b0);
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(negedge clk);
        got[i] = txd;
      end
      repeat (CPB) @(negedge clk);
      chk("stop bit", txd == 1'b1);
      chk("data", got == b);
      frame = CPB / 2 - 1 + 9 * CPB;
      while (!ready) begin @(negedge clk); frame++; end
      chk("frame length", frame == 10 * CPB);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
