// spcsa_array: behavioural model of the separated pre-charge sense
// amplifiers (SPCSA), one per column.  The real part is an analog latch;
// this model reproduces its decision, not its voltages.
//
// Each SA compares the resistance of its read path with a reference
// R_ref = (R_H + R_L)/2.  The path conducts only when the FU transistor is
// on, so the path resistance is R_L (MTJ in P, stores 1) or R_H (AP, stores
// 0) with FU=1, and open with FU=0.  The SA outputs 1 when R_path < R_ref.
// With FU=1 this is a read; with FU = weight bit W it is W AND D (the
// paper's truth table of the SA).  REF must be on for a decision; with REF
// off the reference branch is open and the model outputs 0.
// R_H/R_L use the paper's TMR of 120 % (R_H = 2.2 R_L); the absolute values
// are arbitrary units.
// Timing: RE low pre-charges, RE high discharges and latches.  The model
// latches at the clock edge of a cycle with `re` high and holds `out`
// otherwise; reset clears the latches.
module spcsa_array
  import pim_pkg::*;
#(
  parameter int unsigned N_COLS = COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              re,       // discharge / evaluate phase
  input  logic              ref_on,   // REF transistor
  input  logic [N_COLS-1:0] fu,       // FU transistors (1 = read, W = AND)
  input  logic [N_COLS-1:0] p_state,  // selected MTJ in P state
  output logic [N_COLS-1:0] out
);

  localparam int unsigned R_L    = 1000;
  localparam int unsigned R_H    = 2200;            // TMR 120 %
  localparam int unsigned R_REF  = (R_H + R_L) / 2;
  localparam int unsigned R_OPEN = 32'hFFFF_FFFF;  // FU off: path open

  function automatic logic decide(input logic f, input logic p, input logic r);
    int unsigned r_path, r_ref;
    r_path = 0; r_ref = 0;
    if (!r) return 1'b0;                // no reference branch: no decision
    r_path = !f ? R_OPEN : (p ? R_L : R_H);
    r_ref  = R_REF;
    // The branch with the higher resistance discharges last; OUT is the
    // path-side latch, high when the path is the faster one.
    return (r_path < r_ref);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else if (re) begin
      for (int unsigned j = 0; j < N_COLS; j++)
        out[j] <= decide(fu[j], p_state[j], ref_on);
    end
  end

endmodule
