// tb_bit_width_control: checks the three bit-width controls of the 8-bit
// multiplier against a reference worked out with 64-bit arithmetic:
//   aligner : out = (pp << k) & (2^(8+k) - 1),   15 bits
//   feeder  : out = in & (2^(8+k) - 1),          15 bits
//   adder   : out = in & (2^(9+k) - 1),          16 bits
// and the masks they produce, for every step k and random data. It also
// checks the aligned words of the worked example A = 11001100 for the
// steps whose multiplier bit is 1 in B = 10101010, e.g. k = 1 gives
// 110011000 and k = 7 gives 110011000000000.
module tb_bit_width_control;
  localparam int unsigned N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  logic [N-1:0]   pos;
  logic [N-1:0]   pp;
  logic [2*N-1:0] wide;
  logic [2*N-2:0] al_out, al_mask, fd_out, fd_mask;
  logic [2*N-1:0] sm_out, sm_mask;

  bit_width_control #(.N(N), .IN_W(N), .OUT_W(2*N-1), .SHIFT(1'b1), .KEEP_BASE(N)) u_al (
    .data_in(pp), .pos(pos), .data_out(al_out), .mask(al_mask));
  bit_width_control #(.N(N), .IN_W(2*N), .OUT_W(2*N-1), .SHIFT(1'b0), .KEEP_BASE(N)) u_fd (
    .data_in(wide), .pos(pos), .data_out(fd_out), .mask(fd_mask));
  bit_width_control #(.N(N), .IN_W(2*N), .OUT_W(2*N), .SHIFT(1'b0), .KEEP_BASE(N+1)) u_sm (
    .data_in(wide), .pos(pos), .data_out(sm_out), .mask(sm_mask));

  function automatic longint unsigned lowmask(int unsigned bits);
    return (64'd1 << bits) - 64'd1;
  endfunction

  task automatic cmp(string what, longint unsigned got, longint unsigned expv);
    checks++;
    if (got != expv) begin
      failures++;
      $display("FAIL %s pos=%b: got %h expected %h", what, pos, got, expv);
    end
  endtask

  initial begin
    for (int k = 0; k < N; k++) begin
      for (int i = 0; i < 300; i++) begin
        pos  = N'(1) << k;
        pp   = N'($urandom);
        wide = (2*N)'($urandom);
        #1;
        cmp("align", 64'(al_out), (64'(pp) << k) & lowmask(N + k) & lowmask(2*N-1));
        cmp("align mask", 64'(al_mask), lowmask(N + k) & lowmask(2*N-1));
        cmp("feed", 64'(fd_out), 64'(wide) & lowmask(N + k) & lowmask(2*N-1));
        cmp("feed mask", 64'(fd_mask), lowmask(N + k) & lowmask(2*N-1));
        cmp("sum", 64'(sm_out), 64'(wide) & lowmask(N + k + 1) & lowmask(2*N));
        cmp("sum mask", 64'(sm_mask), lowmask(N + k + 1) & lowmask(2*N));
      end
    end
    // worked example: a = 11001100, aligned copies for k = 1, 3, 5, 7
    pp = 8'b11001100;
    pos = 8'b0000_0010; #1; cmp("example k=1", 64'(al_out), 64'b110011000);
    pos = 8'b0000_1000; #1; cmp("example k=3", 64'(al_out), 64'b11001100000);
    pos = 8'b0010_0000; #1; cmp("example k=5", 64'(al_out), 64'b1100110000000);
    pos = 8'b1000_0000; #1; cmp("example k=7", 64'(al_out), 64'b110011000000000);
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
