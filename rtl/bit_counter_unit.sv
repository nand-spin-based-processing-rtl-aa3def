// bit_counter_unit: one column's bit-counter, W flip-flops in a ripple
// chain as drawn in the paper's bit-counter unit: each stage has an XOR
// ("=1") and an AND ("&") forming a half adder and a multiplexer in front
// of its flip-flop.  The multiplexer picks the half-adder sum (count) or
// the next stage's bit (right shift, used to pass the carry part of a
// count on to the next bit position).  `clr` has priority over both.
// The stored value is `value`; its LSB is what the subarray writes back or
// sends out bit by bit.  The count wraps modulo 2^W.
module bit_counter_unit #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,    // synchronous reset to zero
  input  logic         inc,    // add one (SA output = 1 while counting)
  input  logic         shift,  // value >> 1
  output logic [W-1:0] value
);

  logic [W:0]   carry;
  logic [W-1:0] sum, nxt;

  assign carry[0] = inc;
  for (genvar i = 0; i < W; i++) begin : g_stage
    assign sum[i]     = value[i] ^ carry[i];
    assign carry[i+1] = value[i] & carry[i];
    if (i == W - 1) begin : g_top
      assign nxt[i] = shift ? 1'b0 : sum[i];
    end else begin : g_mid
      assign nxt[i] = shift ? value[i+1] : sum[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   value <= '0;
    else if (clr) value <= '0;
    else          value <= nxt;
  end

endmodule
