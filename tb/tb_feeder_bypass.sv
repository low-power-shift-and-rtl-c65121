// tb_feeder_bypass: runs the feeder/bypass registers through random
// sequences of steps and compares them with a cycle-by-cycle reference:
// cur must be the sum when b_now = 1 and the bypass register otherwise;
// on a store the masked bits of cur go to the feeder when b_next = 1 and to
// the bypass register when b_next = 0, the other register keeping its
// value; clear zeroes both; nothing changes without store. It also counts
// that both kinds of store and both sources of cur occurred.
module tb_feeder_bypass;
  localparam int unsigned W = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned n_feed = 0, n_byp = 0, n_add = 0, n_skip = 0;

  logic         rst_n, clear, store, b_now, b_next;
  logic [W-1:0] sum, load_mask, feeder_q, bypass_q, cur;
  logic         feeder_en, bypass_en;
  logic [W-1:0] m_feed, m_byp, exp_cur;

  feeder_bypass #(.W(W)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .store(store),
    .b_now(b_now), .b_next(b_next), .sum(sum), .load_mask(load_mask),
    .feeder_q(feeder_q), .bypass_q(bypass_q), .cur(cur),
    .feeder_en(feeder_en), .bypass_en(bypass_en));

  task automatic cmp(string what, logic [W-1:0] got, logic [W-1:0] expv);
    checks++;
    if (got !== expv) begin
      failures++;
      $display("FAIL %s at %0t: got %h expected %h", what, $time, got, expv);
    end
  endtask

  initial begin
    rst_n = 1'b0; clear = 1'b0; store = 1'b0; b_now = 1'b0; b_next = 1'b0;
    sum = '0; load_mask = '0;
    m_feed = '0; m_byp = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      // drive at mid-cycle
      @(negedge clk);
      clear     = ($urandom_range(0, 15) == 0);
      store     = !clear && ($urandom_range(0, 7) != 0);
      b_now     = 1'($urandom);
      b_next    = 1'($urandom);
      sum       = W'($urandom);
      load_mask = (W'(1) << $urandom_range(9, W)) - W'(1);
      if ($urandom_range(0, 3) == 0) load_mask = '1;
      #1;
      exp_cur = b_now ? sum : m_byp;
      cmp("cur", cur, exp_cur);
      cmp("feeder_en", W'(feeder_en), W'(store & b_next));
      cmp("bypass_en", W'(bypass_en), W'(store & ~b_next));
      if (b_now) n_add++; else n_skip++;
      @(posedge clk);
      if (clear) begin
        m_feed = '0; m_byp = '0;
      end else if (store) begin
        if (b_next) begin m_feed = (m_feed & ~load_mask) | (exp_cur & load_mask); n_feed++; end
        else        begin m_byp  = (m_byp  & ~load_mask) | (exp_cur & load_mask); n_byp++;  end
      end
      #1;
      cmp("feeder_q", feeder_q, m_feed);
      cmp("bypass_q", bypass_q, m_byp);
    end
    checks++;
    if (n_feed == 0 || n_byp == 0 || n_add == 0 || n_skip == 0) begin
      failures++;
      $display("FAIL a mechanism never happened: feed=%0d byp=%0d add=%0d skip=%0d",
               n_feed, n_byp, n_add, n_skip);
    end
    $display("feeder loads=%0d bypass loads=%0d cur from adder=%0d cur from bypass=%0d",
             n_feed, n_byp, n_add, n_skip);
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
