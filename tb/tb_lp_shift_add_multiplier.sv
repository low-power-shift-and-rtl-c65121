// tb_lp_shift_add_multiplier: end-to-end test of the 8 x 8 multiplier at
// its default parameters.
//  - the worked example 11001100 x 10101010 = 1000011101111000;
//  - every pair of 8-bit operands (65536 products), against a * b;
//  - latency: done and the product must appear exactly N = 8 clock edges
//    after the edge that takes start, and busy must be high for N cycles;
//  - a start pulse while busy must be ignored (operands and timing of the
//    running product unchanged);
//  - back-to-back operation, with the next start given in the done cycle.
// It counts how often each mechanism of the design occurred: steps that
// took the adder's result, steps that went around the adder through the
// bypass register, feeder loads, bypass loads, ring-counter advances with
// one block's clock held off, ring wrap-arounds and ignored starts; a
// mechanism that never occurred counts as a failure.
module tb_lp_shift_add_multiplier;
  localparam int unsigned N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned n_add = 0, n_bypass_step = 0, n_feed_ld = 0, n_byp_ld = 0;
  int unsigned n_blk_gated = 0, n_wrap = 0, n_ignored = 0;

  logic           rst_n, start;
  logic [N-1:0]   a, b;
  logic           busy, done;
  logic [2*N-1:0] product;

  lp_shift_add_multiplier dut (
    .clk(clk), .rst_n(rst_n), .start(start), .a(a), .b(b),
    .busy(busy), .done(done), .product(product));

  // mechanism counters, sampled on every rising edge
  always @(posedge clk) begin
    if (rst_n && dut.busy_q) begin
      if (dut.b_now_q) n_add++; else n_bypass_step++;
    end
    if (rst_n && dut.u_fb.feeder_en) n_feed_ld++;
    if (rst_n && dut.u_fb.bypass_en) n_byp_ld++;
    if (rst_n && dut.advance && !(&dut.ring_blk_en)) n_blk_gated++;
    if (rst_n && dut.advance && dut.ring[N-1]) n_wrap++;
  end

  task automatic cmp(string what, longint unsigned got, longint unsigned expv);
    checks++;
    if (got != expv) begin
      failures++;
      $display("FAIL %s: got %0d (%b) expected %0d", what, got, got, expv);
    end
  endtask

  // one multiplication: start at the negedge, taken at the next posedge;
  // waits for done, checks result and latency
  task automatic multiply(input logic [N-1:0] x, input logic [N-1:0] y,
                          input bit poke_while_busy);
    int edges, busy_cycles;
    @(negedge clk);
    a = x; b = y; start = 1'b1;
    @(posedge clk);          // start taken here
    #1 start = 1'b0;
    edges = 0; busy_cycles = 0;
    while (!done && edges < 4 * N) begin
      if (busy) busy_cycles++;
      if (poke_while_busy && edges == 2) begin
        a = ~x; b = ~y; start = 1'b1;
      end else if (poke_while_busy && edges == 3) begin
        start = 1'b0; n_ignored++;
      end
      @(posedge clk);
      #1;
      edges++;
    end
    cmp($sformatf("%0d * %0d", x, y), 64'(product), 64'(x) * 64'(y));
    cmp("latency (edges after start to done)", 64'(edges), 64'(N));
    cmp("busy cycles", 64'(busy_cycles), 64'(N));
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; a = '0; b = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    cmp("idle after reset", 64'(busy), 64'd0);

    // worked example of the published waveform
    multiply(8'b11001100, 8'b10101010, 1'b0);
    cmp("worked example bits", 64'(product), 64'b1000011101111000);

    // start while busy is ignored
    multiply(8'd201, 8'd77, 1'b1);
    multiply(8'd255, 8'd255, 1'b1);

    // every operand pair
    for (int x = 0; x < 256; x++)
      for (int y = 0; y < 256; y++)
        multiply(N'(x), N'(y), 1'b0);

    // reset in the middle of a multiplication returns to idle
    @(negedge clk);
    a = 8'd99; b = 8'd99; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    cmp("idle after reset in operation", 64'(busy), 64'd0);
    cmp("ring back at bit 0", 64'(dut.ring), 64'd1);
    multiply(8'd99, 8'd99, 1'b0);

    $display("steps using adder=%0d steps bypassing adder=%0d feeder loads=%0d bypass loads=%0d",
             n_add, n_bypass_step, n_feed_ld, n_byp_ld);
    $display("ring advances with a block gated off=%0d ring wraps=%0d ignored starts=%0d",
             n_blk_gated, n_wrap, n_ignored);
    checks++;
    if (n_add == 0 || n_bypass_step == 0 || n_feed_ld == 0 || n_byp_ld == 0 ||
        n_blk_gated == 0 || n_wrap == 0 || n_ignored == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
