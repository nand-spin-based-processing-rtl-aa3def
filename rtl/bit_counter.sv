// bit_counter: the bit-counter of a subarray, one bit_counter_unit per
// column.  Every unit counts the non-zero outputs of its column's SA over
// successive read/AND operations (`count` with the SA vector), is cleared
// (`clr`) or right-shifted (`shift`) together with the others, and shows
// its LSB on `lsb`.  Count and shift are not meant to coincide; if they do,
// the shift wins and the SA vector is ignored.  One operation per cycle;
// results are visible the cycle after.
module bit_counter
  import pim_pkg::*;
#(
  parameter int unsigned N_COLS = COLS,
  parameter int unsigned W      = CNT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              count,
  input  logic [N_COLS-1:0] sa,
  input  logic              shift,
  output logic [N_COLS-1:0] lsb,
  output logic [W-1:0]      value [N_COLS]
);

  for (genvar j = 0; j < N_COLS; j++) begin : g_unit
    bit_counter_unit #(.W(W)) u_unit (
      .clk, .rst_n, .clr,
      .inc   (count && sa[j] && !shift),
      .shift (shift),
      .value (value[j])
    );
    assign lsb[j] = value[j][0];
  end

endmodule
