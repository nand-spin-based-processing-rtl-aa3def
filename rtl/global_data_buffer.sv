// global_data_buffer: the bank's global data buffer, a register file of
// 128-bit rows between the 128-bit data bus and the mats.  Port A belongs
// to the data bus (host write and read); port B serves the mats (row read
// for command data, write of result rows).  When both ports write in the
// same cycle port A wins and `b_wack` stays low, so the mat side must hold
// its write and retry.  Writes take effect at the clock edge; reads are
// combinational.  Depth and port structure are this design's choice; the
// paper only names the buffer and its role against data congestion.
module global_data_buffer
  import pim_pkg::*;
#(
  parameter int unsigned N_ROWS = GDB_ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      a_we,
  input  logic [$clog2(N_ROWS)-1:0] a_addr,
  input  logic [N_COLS-1:0]         a_wdata,
  output logic [N_COLS-1:0]         a_rdata,
  input  logic                      b_we,
  input  logic [$clog2(N_ROWS)-1:0] b_waddr,
  input  logic [N_COLS-1:0]         b_wdata,
  output logic                      b_wack,
  input  logic [$clog2(N_ROWS)-1:0] b_raddr,
  output logic [N_COLS-1:0]         b_rdata
);

  logic [N_COLS-1:0] mem [N_ROWS];

  assign b_wack = b_we && !a_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int unsigned r = 0; r < N_ROWS; r++) mem[r] <= '0;
    else if (a_we) mem[a_addr] <= a_wdata;
    else if (b_we) mem[b_waddr] <= b_wdata;
  end

  assign a_rdata = mem[a_addr];
  assign b_rdata = mem[b_raddr];

endmodule
