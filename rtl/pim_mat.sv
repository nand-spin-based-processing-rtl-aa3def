// pim_mat: one mat, N_SUBS subarrays (4x4 in the paper) with the mat
// controller, the local data buffer and the in-mat data path.
// A mat command (see mat_controller) runs on the subarrays chosen by its
// mask in lockstep, so an operation on 16 subarrays costs the same time as
// on one.  The in-mat data path carries the MUX output of one source
// subarray (SA outputs or bit-counter LSBs) to the local data buffer and
// to the result port; from the buffer a row, rearranged for cross-writing
// by the controller, is programmed into a destination subarray.
// Handshakes: cmd_valid/cmd_ready, res_valid/res_ready (result rows of
// READ and BC_READ).
module pim_mat
  import pim_pkg::*;
#(
  parameter int unsigned N_SUBS = SUBS,
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  mat_cmd_t          cmd,
  output logic              res_valid,
  input  logic              res_ready,
  output logic [N_COLS-1:0] res_data
);

  logic [N_SUBS-1:0] sub_valid, sub_ready, sub_done;
  sub_cmd_t          sub_cmd;
  logic              out_sel;
  logic [SUB_W-1:0]  out_src;
  logic [N_COLS-1:0] mux_out [N_SUBS];
  logic [N_COLS-1:0] src_out;
  logic              ldb_we;
  logic [$clog2(LDB_ROWS)-1:0] ldb_addr;
  logic [N_COLS-1:0] ldb_wdata, ldb_rdata;

  mat_controller #(.N_SUBS(N_SUBS), .N_COLS(N_COLS)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .res_valid, .res_ready, .res_data,
    .sub_valid, .sub_cmd, .sub_done, .out_sel, .out_src, .src_out,
    .ldb_we, .ldb_addr, .ldb_wdata, .ldb_rdata
  );

  for (genvar i = 0; i < N_SUBS; i++) begin : g_sub
    logic [N_COLS-1:0] sa_unused, bc_unused;
    subarray #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_sub (
      .clk, .rst_n,
      .cmd_valid (sub_valid[i]), .cmd_ready (sub_ready[i]), .cmd (sub_cmd),
      .done (sub_done[i]), .out_sel, .mux_out (mux_out[i]),
      .sa_out (sa_unused), .bc_lsb (bc_unused)
    );
  end

  assign src_out = mux_out[out_src];

  local_data_buffer #(.N_ROWS(LDB_ROWS), .N_COLS(N_COLS)) u_ldb (
    .clk, .rst_n, .we (ldb_we), .addr (ldb_addr), .wdata (ldb_wdata), .rdata (ldb_rdata)
  );

  // The controller only issues to idle subarrays.
  a_issue_idle: assert property (@(posedge clk) disable iff (!rst_n)
    ((sub_valid & ~sub_ready) == '0));

endmodule
