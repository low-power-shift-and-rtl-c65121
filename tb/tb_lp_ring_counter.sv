// tb_lp_ring_counter: checks the block-gated ring counter at 8 bits in
// blocks of 4 (the multiplier's configuration), at 13 bits (a short last
// block) and at 3 bits (one block, no gating). Against a model token
// position it checks the one-hot state after every cycle (0..001 ->
// 0..010 -> ... -> 10..0 -> 0..001, holding when advance = 0) and every
// block enable: on only while the token is in the block or at its
// entrance. It also counts the advances on which the 8-bit counter clocks
// only one of its two blocks (4 of 8 flip-flops) and fails if there are none.
module tb_lp_ring_counter;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0, n_gated = 0, n_wrap = 0;

  logic        rst_n, advance;
  logic [7:0]  r8;
  logic [1:0]  e8;
  logic [12:0] r13;
  logic [3:0]  e13;
  logic [2:0]  r3;
  logic [0:0]  e3;

  lp_ring_counter #(.N(8),  .BLOCK(4)) u8  (.clk(clk), .rst_n(rst_n), .advance(advance), .ring(r8),  .blk_clk_en(e8));
  lp_ring_counter #(.N(13), .BLOCK(4)) u13 (.clk(clk), .rst_n(rst_n), .advance(advance), .ring(r13), .blk_clk_en(e13));
  lp_ring_counter #(.N(3),  .BLOCK(4)) u3  (.clk(clk), .rst_n(rst_n), .advance(advance), .ring(r3),  .blk_clk_en(e3));

  int p8, p13, p3;

  // expected enable of block m (bits lo..hi) of an n-bit counter, token at p
  function automatic logic exp_en(int n, int blk, int m, int p, logic adv);
    int lo, hi, prev;
    lo = m * blk;
    hi = ((m + 1) * blk > n) ? n - 1 : (m + 1) * blk - 1;
    prev = (lo == 0) ? n - 1 : lo - 1;
    if ((n + blk - 1) / blk == 1) return adv;
    return adv && ((p >= lo && p <= hi) || p == prev);
  endfunction

  task automatic cmp(string what, longint unsigned got, longint unsigned expv);
    checks++;
    if (got != expv) begin
      failures++;
      $display("FAIL %s at %0t: got %h expected %h", what, $time, got, expv);
    end
  endtask

  initial begin
    int clocked;
    rst_n = 1'b0; advance = 1'b0;
    p8 = 0; p13 = 0; p3 = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    cmp("reset 8", 64'(r8), 64'd1);
    cmp("reset 13", 64'(r13), 64'd1);
    cmp("reset 3", 64'(r3), 64'd1);
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      advance = ($urandom_range(0, 4) != 0);
      #1;
      clocked = 0;
      for (int m = 0; m < 2; m++) begin
        cmp("enable 8", 64'(e8[m]), 64'(exp_en(8, 4, m, p8, advance)));
        if (e8[m]) clocked += 4;
      end
      for (int m = 0; m < 4; m++)
        cmp("enable 13", 64'(e13[m]), 64'(exp_en(13, 4, m, p13, advance)));
      cmp("enable 3", 64'(e3[0]), 64'(advance));
      checks++;
      if (clocked > 8) begin
        failures++;
        $display("FAIL %0d flip-flops clocked", clocked);
      end
      if (advance && clocked == 4) n_gated++;
      @(posedge clk);
      if (advance) begin
        if (p8 == 7) n_wrap++;
        p8 = (p8 + 1) % 8; p13 = (p13 + 1) % 13; p3 = (p3 + 1) % 3;
      end
      #1;
      cmp("state 8", 64'(r8), 64'd1 << p8);
      cmp("state 13", 64'(r13), 64'd1 << p13);
      cmp("state 3", 64'(r3), 64'd1 << p3);
    end
    checks++;
    if (n_gated == 0 || n_wrap == 0) begin
      failures++;
      $display("FAIL block gating (%0d) or wrap-around (%0d) never happened", n_gated, n_wrap);
    end
    $display("advances clocking only one block of the 8-bit counter=%0d, wraps=%0d", n_gated, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
