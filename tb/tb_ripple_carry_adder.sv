// tb_ripple_carry_adder: checks the W-bit ripple-carry adder against the
// simulator's own addition, {cout, sum} == a + b + cin, for corner cases
// (all zeros, all ones, a carry rippling through every stage) and random
// operands, at the multiplier's width (15) and at 4 bits exhaustively.
module tb_ripple_carry_adder;
  localparam int unsigned W = 15;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  logic [W-1:0] a, b, sum;
  logic         cin, cout;
  ripple_carry_adder #(.W(W)) dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  logic [3:0] a4, b4, s4;
  logic       c4i, c4o;
  ripple_carry_adder #(.W(4)) dut4 (.a(a4), .b(b4), .cin(c4i), .sum(s4), .cout(c4o));

  task automatic check15(input logic [W-1:0] x, input logic [W-1:0] y, input logic c);
    logic [W:0] expv;
    a = x; b = y; cin = c;
    #1;
    expv = {1'b0, x} + {1'b0, y} + (W+1)'(c);
    checks++;
    if ({cout, sum} !== expv) begin
      failures++;
      $display("FAIL W=%0d %h + %h + %b: got %h expected %h", W, x, y, c, {cout, sum}, expv);
    end
  endtask

  initial begin
    check15('0, '0, 1'b0);
    check15('1, '1, 1'b1);
    check15('1, W'(1), 1'b0);     // carry ripples through all stages
    check15('1, '0, 1'b1);
    for (int i = 0; i < 5000; i++)
      check15(W'($urandom), W'($urandom), 1'($urandom));
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++)
        for (int c = 0; c < 2; c++) begin
          a4 = 4'(x); b4 = 4'(y); c4i = 1'(c);
          #1;
          checks++;
          if ({c4o, s4} !== 5'(x + y + c)) begin
            failures++;
            $display("FAIL W=4 %0d + %0d + %0d: got %0d", x, y, c, {c4o, s4});
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
