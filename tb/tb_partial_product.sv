// tb_partial_product: checks pp == (b_bit ? a : 0) for every 8-bit a and
// both values of the selected multiplier bit.
module tb_partial_product;
  localparam int unsigned N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  logic [N-1:0] a, pp;
  logic         bb;
  partial_product #(.N(N)) dut (.a(a), .b_bit(bb), .pp(pp));

  initial begin
    for (int v = 0; v < 256; v++)
      for (int s = 0; s < 2; s++) begin
        a = N'(v); bb = 1'(s);
        #1;
        checks++;
        if (pp !== (s ? N'(v) : N'(0))) begin
          failures++;
          $display("FAIL a=%b b_bit=%b got %b", a, bb, pp);
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
