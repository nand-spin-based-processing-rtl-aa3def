// pim_bank: the top of this design, one group of N_MATS mats (4x4 in the
// paper's main configuration, 16 x 16 subarrays of 256x128 bits = 1 MiB)
// with the bank controller/decoder and the global data buffer on a 128-bit
// data bus.  The paper's 64 MB chip is 64 such groups sharing the chip I/O,
// which is outside this module.
//
// Host side: the data bus writes and reads rows of the global buffer
// (gdb_we/gdb_addr/gdb_wdata/gdb_rdata).  Commands (bank_cmd_t) name a mat
// and a global-buffer row; with from_gdb the command's data row is taken
// from that buffer row at dispatch.  The decoder forwards a command to its
// mat when the mat is idle, so mats work in parallel; a command for a busy
// mat stalls the command port (cmd_ready low).  A result row of READ or
// BC_READ is written back into the buffer row given with its command; if
// several mats have results, the lowest-numbered wins, and a host write in
// the same cycle makes it wait.  result_count counts results written.
module pim_bank
  import pim_pkg::*;
#(
  parameter int unsigned N_MATS = MATS,
  parameter int unsigned N_SUBS = SUBS,
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  bank_cmd_t         cmd,
  input  logic              gdb_we,
  input  logic [GDB_W-1:0]  gdb_addr,
  input  logic [N_COLS-1:0] gdb_wdata,
  output logic [N_COLS-1:0] gdb_rdata,
  output logic [N_MATS-1:0] mat_busy,
  output logic [15:0]       result_count
);

  localparam int unsigned MW = (N_MATS > 1) ? $clog2(N_MATS) : 1;

  logic [N_MATS-1:0] m_valid, m_ready, r_valid, r_ready;
  logic [N_COLS-1:0] r_data [N_MATS];
  logic [GDB_W-1:0]  r_row  [N_MATS];
  mat_cmd_t          mc;
  logic [N_COLS-1:0] b_rdata;
  logic              b_we, b_wack;
  logic [GDB_W-1:0]  b_waddr;
  logic [N_COLS-1:0] b_wdata;
  logic [MW-1:0]     tgt, win;

  assign tgt = MW'(cmd.mat);

  // ------------------------------------------------------ decoder / dispatch
  always_comb begin
    mc = cmd.mc;
    if (cmd.from_gdb) mc.data = b_rdata;
  end

  assign cmd_ready = m_ready[tgt];
  always_comb begin
    m_valid = '0;
    m_valid[tgt] = cmd_valid;
  end

  for (genvar i = 0; i < N_MATS; i++) begin : g_mat
    pim_mat #(.N_SUBS(N_SUBS), .N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_mat (
      .clk, .rst_n,
      .cmd_valid (m_valid[i]), .cmd_ready (m_ready[i]), .cmd (mc),
      .res_valid (r_valid[i]), .res_ready (r_ready[i]), .res_data (r_data[i])
    );
    // buffer row that receives this mat's next result
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) r_row[i] <= '0;
      else if (m_valid[i] && m_ready[i]) r_row[i] <= cmd.gdb_row;
    end
  end

  assign mat_busy = ~m_ready;

  // ------------------------------------------------ result write-back arbiter
  always_comb begin
    win = '0;
    for (int i = N_MATS - 1; i >= 0; i--) if (r_valid[i]) win = MW'(i);
  end
  assign b_we    = |r_valid;
  assign b_waddr = r_row[win];
  assign b_wdata = r_data[win];
  always_comb begin
    r_ready = '0;
    r_ready[win] = b_wack;
  end

  global_data_buffer #(.N_ROWS(GDB_ROWS), .N_COLS(N_COLS)) u_gdb (
    .clk, .rst_n,
    .a_we (gdb_we), .a_addr (gdb_addr), .a_wdata (gdb_wdata), .a_rdata (gdb_rdata),
    .b_we, .b_waddr, .b_wdata, .b_wack,
    .b_raddr (cmd.gdb_row), .b_rdata
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) result_count <= '0;
    else if (b_wack) result_count <= result_count + 16'd1;
  end

endmodule
