// feeder_bypass: the adder's two result registers and the selector that
// decides where the current running product comes from.
//
// Step k of a multiplication works on multiplier bit B(k) (`b_now`):
//   cur = b_now ? sum : bypass_q
// i.e. the adder's result when A has to be added, or the bypass register
// when the step would only add zero. At the end of the step `cur` is stored
// in exactly one register, chosen by the next multiplier bit B(k+1)
// (`b_next`): the feeder when the next step adds (the feeder drives the
// adder input), the bypass register when it does not. The adder's inputs
// therefore change only before steps that really add, and only one of the
// two registers is clocked per step.
//
// Both registers load only the bits set in `load_mask` (the N+k+1 bits the
// bit-width control allows in step k); `clear` loads zero into both at the
// start of a multiplication and `store` = 0 (last step, idle) clocks
// neither. The two clock gates of the published circuit are written here
// as the clock enables `feeder_en` / `bypass_en`, which a synthesis flow
// maps onto gated clocks; both registers sample on the rising edge.
// Selection by B(k) and storing by B(k+1) follow the published circuit;
// the per-bit load mask, `clear` and `store` are this design's choices.
module feeder_bypass
  import lpmul_pkg::*;
#(
  parameter int unsigned W = 2 * DEFAULT_WIDTH
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         store,
  input  logic         b_now,
  input  logic         b_next,
  input  logic [W-1:0] sum,
  input  logic [W-1:0] load_mask,
  output logic [W-1:0] feeder_q,
  output logic [W-1:0] bypass_q,
  output logic [W-1:0] cur,
  output logic         feeder_en,
  output logic         bypass_en
);
  always_comb begin
    cur       = b_now ? sum : bypass_q;
    feeder_en = store & b_next;
    bypass_en = store & ~b_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      feeder_q <= '0;
      bypass_q <= '0;
    end else if (clear) begin
      feeder_q <= '0;
      bypass_q <= '0;
    end else begin
      if (feeder_en) feeder_q <= (feeder_q & ~load_mask) | (cur & load_mask);
      if (bypass_en) bypass_q <= (bypass_q & ~load_mask) | (cur & load_mask);
    end
  end

  a_clear_store: assert property (@(posedge clk) disable iff (!rst_n) !(clear && store))
    else $error("feeder_bypass: clear and store in the same cycle");
endmodule
