// nand_spin_array: the convolution memory (CM) of one subarray, a
// ROWS x COLS array of MTJs grouped into NAND-SPIN devices of MTJ_PER_DEV
// MTJs stacked along each column on one heavy-metal strip.
//
// The array is driven by the row/column signals of the paper's circuit
// table: WE, ER, the row word line R_y and the column decoder vector C.
// Data is stored complementarily, as in the paper: an MTJ in the AP (high
// resistance) state holds 0, in the P state holds 1.
//   * Erase   (WE=1, ER=1, no R_y): every MTJ of device row `dev` in all
//     columns goes to AP, i.e. 8 rows become 0.  SOT write.
//   * Program (WE=1, ER=0, R_y=1): in row `row`, every column with C=1 is
//     switched AP->P (becomes 1); columns with C=0 keep their state.  A
//     program can therefore only set bits, so a row is written by an erase
//     of its device followed by programs, or programmed into a row that is
//     still erased.
//   * Read path (WE=0, ER=1, R_y=1): `p_state` shows, per column, whether
//     the selected MTJ is in the low-resistance P state.  The SPCSA that
//     turns this into a logic value is a separate block.
// The erase and program state changes happen at the rising clock edge that
// ends the operation; the subarray holds the signals for the operation's
// full latency.  p_state is combinational.  The memory is non-volatile and
// has no reset; its contents are undefined until erased.
module nand_spin_array
  import pim_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS,
  parameter int unsigned N_MTJ  = MTJ_PER_DEV
) (
  input  logic                          clk,
  input  logic                          apply,  // last cycle of the operation
  input  logic                          we,
  input  logic                          er,
  input  logic [$clog2(N_ROWS/N_MTJ)-1:0] dev,  // device row whose WE/ER strip is driven
  input  logic                          r_en,   // one word line R_y active
  input  logic [$clog2(N_ROWS)-1:0]     row,    // which R_y
  input  logic [N_COLS-1:0]             c,      // column decoder outputs C_1..C_m
  output logic [N_COLS-1:0]             p_state // selected MTJ is in P (stores 1)
);

  logic [N_COLS-1:0] mem [N_ROWS];

  always_ff @(posedge clk) begin
    if (apply && we && er && !r_en) begin
      for (int unsigned k = 0; k < N_MTJ; k++)
        mem[dev * N_MTJ + k] <= '0;             // SOT erase: P -> AP
    end else if (apply && we && !er && r_en) begin
      mem[row] <= mem[row] | c;                 // STT program: AP -> P where C = 1
    end
  end

  // Read / AND current path exists only with WE=0, ER=1 and one R_y on.
  assign p_state = (!we && er && r_en) ? mem[row] : '0;

  // Table 1: an erase selects no word line; a program uses WE without ER.
  a_erase_no_row: assert property (@(posedge clk) (apply && we && er) |-> !r_en);
  a_prog_row:     assert property (@(posedge clk) (apply && we && !er) |-> r_en);

endmodule
