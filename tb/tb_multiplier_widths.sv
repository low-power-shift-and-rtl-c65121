// tb_multiplier_widths: runs the multiplier at other operand widths.
//  - 3 bits: the pencil-and-paper example 011 x 010 = 00110, then every
//    3-bit operand pair (a single ring-counter block);
//  - 4 bits: every 4-bit operand pair (one block of 4);
//  - 16 bits: 2000 random operand pairs plus all-ones (four blocks).
// Each product is compared with a * b and its latency with N clock edges.
module tb_multiplier_widths;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  logic rst_n;

  logic        s3, bz3, d3;  logic [2:0]  a3, b3;  logic [5:0]  p3;
  logic        s4, bz4, d4;  logic [3:0]  a4, b4;  logic [7:0]  p4;
  logic        s16, bz16, d16; logic [15:0] a16, b16; logic [31:0] p16;

  lp_shift_add_multiplier #(.N(3))  u3  (.clk(clk), .rst_n(rst_n), .start(s3),  .a(a3),  .b(b3),  .busy(bz3),  .done(d3),  .product(p3));
  lp_shift_add_multiplier #(.N(4))  u4  (.clk(clk), .rst_n(rst_n), .start(s4),  .a(a4),  .b(b4),  .busy(bz4),  .done(d4),  .product(p4));
  lp_shift_add_multiplier #(.N(16)) u16 (.clk(clk), .rst_n(rst_n), .start(s16), .a(a16), .b(b16), .busy(bz16), .done(d16), .product(p16));

  task automatic cmp(string what, longint unsigned got, longint unsigned expv);
    checks++;
    if (got != expv) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, expv);
    end
  endtask

  // start all three with the given operands (truncated to each width),
  // then wait for each done and check
  task automatic run(input longint unsigned x, input longint unsigned y);
    int e3, e4, e16;
    @(negedge clk);
    a3 = 3'(x); b3 = 3'(y); a4 = 4'(x); b4 = 4'(y); a16 = 16'(x); b16 = 16'(y);
    s3 = 1'b1; s4 = 1'b1; s16 = 1'b1;
    @(posedge clk);
    #1 s3 = 1'b0; s4 = 1'b0; s16 = 1'b0;
    e3 = -1; e4 = -1; e16 = -1;
    for (int e = 1; e <= 40 && (e3 < 0 || e4 < 0 || e16 < 0); e++) begin
      @(posedge clk);
      #1;
      if (d3  && e3  < 0) e3  = e;
      if (d4  && e4  < 0) e4  = e;
      if (d16 && e16 < 0) e16 = e;
    end
    cmp("3-bit product",  64'(p3),  64'(3'(x))  * 64'(3'(y)));
    cmp("4-bit product",  64'(p4),  64'(4'(x))  * 64'(4'(y)));
    cmp("16-bit product", 64'(p16), 64'(16'(x)) * 64'(16'(y)));
    cmp("3-bit latency",  64'(e3),  64'd3);
    cmp("4-bit latency",  64'(e4),  64'd4);
    cmp("16-bit latency", 64'(e16), 64'd16);
  endtask

  initial begin
    rst_n = 1'b0; s3 = 0; s4 = 0; s16 = 0;
    a3 = '0; b3 = '0; a4 = '0; b4 = '0; a16 = '0; b16 = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run(64'b011, 64'b010);
    cmp("pencil-and-paper example", 64'(p3), 64'b00110);
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++)
        run(64'(x), 64'(y));
    run(64'hFFFF, 64'hFFFF);
    for (int i = 0; i < 2000; i++)
      run(64'($urandom), 64'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
