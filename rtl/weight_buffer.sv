// weight_buffer: the subarray's buffer of 1-bit weight rows.  Each row has
// one bit per column and drives the FU transistors of all SAs at once, so a
// row read from it is the second operand of a column-parallel AND.
// Rows are written from the buffer's private data port (weights from the
// data bus, without using the subarray's own bandwidth) or, chosen by the
// subarray, from SA results and bit-counter LSBs (Tag rows of comparison).
// `slide` moves the contents of every row one column towards the higher
// column index and fills column 0 with 0.  This realises the paper's
// "slide the weight matrix to the next position" between convolution
// periods without reloading the buffer; the move-by-shift is this design's
// choice, the paper does not say how the slide is wired.
// Write and slide take effect at the clock edge; the read is combinational.
// Row count is not given in the paper (BUF_ROWS assumed).
module weight_buffer
  import pim_pkg::*;
#(
  parameter int unsigned N_COLS = COLS,
  parameter int unsigned N_ROWS = BUF_ROWS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(N_ROWS)-1:0] wrow,
  input  logic [N_COLS-1:0]         wdata,
  input  logic                      slide,
  input  logic [$clog2(N_ROWS)-1:0] rrow,
  output logic [N_COLS-1:0]         rdata
);

  logic [N_COLS-1:0] mem [N_ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < N_ROWS; r++) mem[r] <= '0;
    end else if (slide) begin
      for (int unsigned r = 0; r < N_ROWS; r++) mem[r] <= {mem[r][N_COLS-2:0], 1'b0};
    end else if (we) begin
      mem[wrow] <= wdata;
    end
  end

  assign rdata = mem[rrow];

endmodule
