// local_data_buffer: the mat's local data buffer, a small register file of
// 128-bit rows that holds data sent out of one subarray until it is written
// into another (in-mat data movement), so that the source can go on with
// its next operation.  One write port and one read port sharing an address
// (the controller writes an entry, then reads it back for several program
// operations); the write takes effect at the clock edge, the read is
// combinational.  The paper gives the buffer's purpose only; its depth and
// ports are this design's choice.  Reset clears all entries.
module local_data_buffer
  import pim_pkg::*;
#(
  parameter int unsigned N_ROWS = LDB_ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(N_ROWS)-1:0] addr,
  input  logic [N_COLS-1:0]         wdata,
  output logic [N_COLS-1:0]         rdata
);

  logic [N_COLS-1:0] mem [N_ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int unsigned r = 0; r < N_ROWS; r++) mem[r] <= '0;
    else if (we) mem[addr] <= wdata;
  end

  assign rdata = mem[addr];

endmodule
