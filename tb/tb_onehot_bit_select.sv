// tb_onehot_bit_select: checks that the one-hot selector returns b[j] when
// sel has only bit j set, for every 8-bit multiplier value and every
// position, and reproduces the 3-bit table of counter outputs
// (001 -> B(0), 010 -> B(1), 100 -> B(2)).
module tb_onehot_bit_select;
  localparam int unsigned N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  logic [N-1:0] b, sel;
  logic         y;
  onehot_bit_select #(.N(N)) dut (.b(b), .sel(sel), .bit_out(y));

  logic [2:0] b3, sel3;
  logic       y3;
  onehot_bit_select #(.N(3)) dut3 (.b(b3), .sel(sel3), .bit_out(y3));

  initial begin
    for (int v = 0; v < 256; v++)
      for (int j = 0; j < N; j++) begin
        b = N'(v); sel = N'(1) << j;
        #1;
        checks++;
        if (y !== b[j]) begin
          failures++;
          $display("FAIL b=%b sel=%b got %b", b, sel, y);
        end
      end
    // counter output 001/010/100 selects B(0)/B(1)/B(2)
    for (int v = 0; v < 8; v++)
      for (int j = 0; j < 3; j++) begin
        b3 = 3'(v); sel3 = 3'(1 << j);
        #1;
        checks++;
        if (y3 !== b3[j]) begin
          failures++;
          $display("FAIL 3-bit b=%b sel=%b got %b", b3, sel3, y3);
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
