// tb_row_ram: writes random words to random addresses of the 14 x 141 RAM
// while reading random addresses, and compares each read (one clock after
// its address) with a model array.  A write and a read of the same address
// on one clock return the old word.
module tb_row_ram;
  localparam int unsigned N = 14, W = 141, AW = 4;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [N];
  always #5 clk = ~clk;

  row_ram #(.N(N), .W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_q;
    for (int a = 0; a < int'(N); a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a);
      for (int i = 0; i < int'(W); i += 32) wdata[i +: 32] = $urandom;
      model[a] = wdata;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = ($urandom % 2) == 1;
      waddr = AW'($urandom % N);
      raddr = AW'($urandom % N);
      for (int i = 0; i < int'(W); i += 32) wdata[i +: 32] = $urandom;
      expect_q = model[raddr];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata != expect_q) begin failures++; if (failures < 10) $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
