// tb_ring_clock_gate: moves a one-hot token around a model 8-bit ring and
// drives two clock gates with it, one for bits 4..7 (entrance = bit 3,
// exit = bit 7, token outside after reset) and one for bits 0..3
// (entrance = bit 7, exit = bit 3, token inside after reset). With random
// advance it checks that each gate's state equals "token in my block" and
// that its enable is advance AND (token in block OR token at entrance),
// and counts cycles on which a gate held its block's clock off.
module tb_ring_clock_gate;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0, n_gated = 0, n_enter = 0;

  logic       rst_n, advance;
  logic [7:0] ring;
  int         p;
  logic       in_hi, en_hi, in_lo, en_lo;

  ring_clock_gate #(.INIT_INSIDE(1'b0)) u_hi (
    .clk(clk), .rst_n(rst_n), .advance(advance),
    .entrance(ring[3]), .exit_bit(ring[7]), .inside_q(in_hi), .clk_en(en_hi));
  ring_clock_gate #(.INIT_INSIDE(1'b1)) u_lo (
    .clk(clk), .rst_n(rst_n), .advance(advance),
    .entrance(ring[7]), .exit_bit(ring[3]), .inside_q(in_lo), .clk_en(en_lo));

  task automatic cmp(string what, logic got, logic expv);
    checks++;
    if (got !== expv) begin
      failures++;
      $display("FAIL %s token=%0d advance=%b: got %b expected %b", what, p, advance, got, expv);
    end
  endtask

  initial begin
    rst_n = 1'b0; advance = 1'b0; p = 0; ring = 8'b1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      advance = ($urandom_range(0, 3) != 0);
      ring = 8'(1) << p;
      #1;
      cmp("hi state", in_hi, (p >= 4));
      cmp("lo state", in_lo, (p < 4));
      cmp("hi enable", en_hi, advance && (p >= 4 || p == 3));
      cmp("lo enable", en_lo, advance && (p < 4 || p == 7));
      if (advance && (!en_hi || !en_lo)) n_gated++;
      if (advance && (p == 3 || p == 7)) n_enter++;
      @(posedge clk);
      if (advance) p = (p + 1) % 8;
    end
    checks++;
    if (n_gated == 0 || n_enter == 0) begin
      failures++;
      $display("FAIL gating (%0d) or token entry (%0d) never happened", n_gated, n_enter);
    end
    $display("advances with one block gated off=%0d, token entries=%0d", n_gated, n_enter);
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
