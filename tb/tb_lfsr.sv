// tb_lfsr: checks the multi-step LFSR.
//  * Period: for widths 4..8 stepping one position per clock, the state
//    returns to the seed after exactly 2^w - 1 clocks and never earlier
//    (maximum length).
//  * Sequence: the 32-bit, 8-steps-per-clock instance used by the mark
//    generators is compared with a bit-serial reference model written here
//    from the tap polynomial x^32+x^22+x^2+x+1, including cycles with an
//    injected entropy bit.
module tb_lfsr;
  logic clk = 0, rst = 1;
  logic ev = 0, eb = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [3:0] s4; logic [4:0] s5; logic [5:0] s6; logic [6:0] s7; logic [7:0] s8;
  logic [31:0] s32;
  logic [7:0]  r32;
  lfsr #(.WIDTH(4), .STEPS(1), .SEED(4'h1))  u4 (.clk, .rst, .entropy_valid(1'b0), .entropy(1'b0), .rnd(), .state(s4));
  lfsr #(.WIDTH(5), .STEPS(1), .SEED(5'h1))  u5 (.clk, .rst, .entropy_valid(1'b0), .entropy(1'b0), .rnd(), .state(s5));
  lfsr #(.WIDTH(6), .STEPS(1), .SEED(6'h1))  u6 (.clk, .rst, .entropy_valid(1'b0), .entropy(1'b0), .rnd(), .state(s6));
  lfsr #(.WIDTH(7), .STEPS(1), .SEED(7'h1))  u7 (.clk, .rst, .entropy_valid(1'b0), .entropy(1'b0), .rnd(), .state(s7));
  lfsr #(.WIDTH(8), .STEPS(1), .SEED(8'h1))  u8 (.clk, .rst, .entropy_valid(1'b0), .entropy(1'b0), .rnd(), .state(s8));
  lfsr #(.WIDTH(32), .STEPS(8), .SEED(32'h1234_5678)) u32 (.clk, .rst, .entropy_valid(ev), .entropy(eb), .rnd(r32), .state(s32));

  int first4 = -1, first5 = -1, first6 = -1, first7 = -1, first8 = -1;
  logic [31:0] model;

  function automatic logic [31:0] step32(input logic [31:0] s, input logic inj);
    logic fb;
    fb = s[31] ^ s[21] ^ s[1] ^ s[0] ^ inj;
    return {s[30:0], fb};
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    model = 32'h1234_5678;
    for (int t = 1; t <= 300; t++) begin
      @(negedge clk);
      if (first4 < 0 && s4 == 4'h1) first4 = t;
      if (first5 < 0 && s5 == 5'h1) first5 = t;
      if (first6 < 0 && s6 == 6'h1) first6 = t;
      if (first7 < 0 && s7 == 7'h1) first7 = t;
      if (first8 < 0 && s8 == 8'h1) first8 = t;
    end
    checks += 5;
    if (first4 != 15)  begin failures++; $display("FAIL period4 %0d", first4); end
    if (first5 != 31)  begin failures++; $display("FAIL period5 %0d", first5); end
    if (first6 != 63)  begin failures++; $display("FAIL period6 %0d", first6); end
    if (first7 != 127) begin failures++; $display("FAIL period7 %0d", first7); end
    if (first8 != 255) begin failures++; $display("FAIL period8 %0d", first8); end
    // sequence of the 32-bit instance against the bit-serial model
    rst = 1;
    @(posedge clk);
    @(negedge clk);
    rst = 0;
    model = 32'h1234_5678;
    checks++;
    if (s32 != model) begin failures++; $display("FAIL seed"); end
    for (int t = 0; t < 500; t++) begin
      ev = (t % 37) == 5;
      eb = ev && (t % 3 != 0);
      @(negedge clk);
      for (int s = 0; s < 8; s++) model = step32(model, (s == 0) ? (ev & eb) : 1'b0);
      checks++;
      if (s32 != model || r32 != model[7:0]) begin
        failures++;
        $display("FAIL seq t=%0d dut=%h model=%h", t, s32, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
