// mat_controller: the controller of a mat.  It takes one mat command at a
// time and expands it into the sequence of subarray micro-operations that
// the paper's computing primitives are made of, issues each one to the
// selected subarrays at once (they run in lockstep) and waits for their
// `done` before the next.
//
// Sequences (rows are vertical bit positions, LSB at the lowest row):
//   CONV   reset counters; for r < wa: AND row_a+r with buffer row
//          buf_row+r and count.  One convolution period of the paper's
//          bitwise convolution; the kernel rows are summed in the counters.
//   MOVE   for bit b < CNT_W (LSB first): capture the LSBs of subarray
//          src's counters in the local data buffer; for slot t < n program
//          row row_c + t*wa + b (wa = 0 means CNT_W) of subarray dst with the captured bits
//          of the columns of slot t moved onto the first column of their
//          window (cross-writing); shift src's counters.  After CNT_W bits
//          the counters are zero, i.e. reset for the next period.
//   ADD    reset; for sum bit b < wb: read bit b of each of the n operands
//          (operand k bit b at row row_a + k*wa + b) and count, program the
//          counter LSB into row_c+b, shift the counters (carry kept).
//   MUL    reset; for product bit b < wa+wb: for every i+j=b AND bit i of A
//          (row row_a+i) with bit j of the scale factor (buffer row
//          buf_row+j) and count; program LSB into row_c+b; shift.
//   CMP    MSB first with the Tag (row_t) and Result (row_c) rows, in 13
//          micro-operations per bit exactly as the paper's comparison
//          steps; Result ends 1 where A < B, 0 where A >= B.
//   RELU   read the MSB row, buffer its inverse, then for each bit AND the
//          bit with it and program the LSB into row_c+b.
//   ERASE, PROGRAM, READ, BUF_LOAD, SLIDE, BC_RESET, BC_READ: one
//   micro-operation each (READ and BC_READ also return a result row).
// Destination rows (sum, product, Tag, Result) must be erased beforehand:
// write-back uses program operations only.
// Handshakes: cmd_valid/cmd_ready; res_valid/res_ready for result rows.
// Every micro-operation costs one issue cycle, its subarray latency and
// one cycle for `done`; captures and skipped (i,j) pairs cost one cycle.
module mat_controller
  import pim_pkg::*;
#(
  parameter int unsigned N_SUBS = SUBS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  mat_cmd_t           cmd,
  output logic               res_valid,
  input  logic               res_ready,
  output logic [N_COLS-1:0]  res_data,
  // subarrays
  output logic [N_SUBS-1:0]  sub_valid,
  output sub_cmd_t           sub_cmd,
  input  logic [N_SUBS-1:0]  sub_done,
  output logic               out_sel,
  output logic [SUB_W-1:0]   out_src,
  input  logic [N_COLS-1:0]  src_out,   // mux_out of subarray out_src
  // local data buffer
  output logic               ldb_we,
  output logic [$clog2(LDB_ROWS)-1:0] ldb_addr,
  output logic [N_COLS-1:0]  ldb_wdata,
  input  logic [N_COLS-1:0]  ldb_rdata
);

  typedef enum logic [1:0] { S_IDLE, S_ISSUE, S_WAIT } state_e;
  typedef enum logic [1:0] { K_SUB, K_CAP, K_RES, K_SKIP } kind_e;

  state_e            state;
  mat_cmd_t          cur;
  logic [3:0]        ph;
  logic [4:0]        b, k;
  logic [N_SUBS-1:0] wait_mask, done_seen;

  // -------------------------------------------------- one step of a sequence
  kind_e             kind;
  logic [N_SUBS-1:0] tgt;
  sub_cmd_t          u;
  logic [3:0]        nph;
  logic [4:0]        nb, nk;
  logic              fin;

  function automatic logic [ROW_W-1:0] radd(input logic [ROW_W-1:0] base, input int unsigned off);
    return base + ROW_W'(off);
  endfunction

  // Cross-writing: dest column j (a window start, j >= s, (j-s) mod K == 0)
  // takes source column j+t, the t-th column of its window.
  function automatic logic [N_COLS-1:0] xwrite(input logic [N_COLS-1:0] v,
      input logic [3:0] kk, input logic [3:0] s, input logic [4:0] t);
    logic [N_COLS-1:0] o;
    int unsigned r, kw;
    kw = (kk == 0) ? 1 : int'(kk);
    r  = 0;
    o  = '0;
    for (int unsigned j = 0; j < N_COLS; j++) begin
      if (j >= int'(s)) begin
        if (r == 0 && j + int'(t) < N_COLS) o[j] = v[j + int'(t)];
        r = (r == kw - 1) ? 0 : r + 1;
      end
    end
    return o;
  endfunction

  function automatic sub_cmd_t mk(input sub_op_e op, input logic [ROW_W-1:0] row);
    sub_cmd_t c;
    c = '{op: op, row: row, psrc: PSRC_DATA, bsrc: BSRC_DATA, default: '0};
    return c;
  endfunction

  logic [4:0] wa5, wb5, n5, stride;
  assign wa5 = {1'b0, cur.wa};
  assign wb5 = {1'b0, cur.wb};
  assign n5  = (cur.n == 0) ? 5'd1 : {1'b0, cur.n};
  assign stride = (cur.wa == 0) ? 5'(CNT_W) : wa5;   // MOVE: rows between slots

  always_comb begin
    kind = K_SUB; tgt = cur.mask[N_SUBS-1:0]; u = mk(SOP_NOP, '0);
    nph = ph; nb = b; nk = k; fin = 1'b0;
    out_sel = 1'b0;
    unique case (cur.op)
      MOP_ERASE:    begin u = mk(SOP_ERASE, cur.row_a); fin = 1'b1; end
      MOP_PROGRAM:  begin u = mk(SOP_PROGRAM, cur.row_a); u.data = cur.data; fin = 1'b1; end
      MOP_BUF_LOAD: begin u = mk(SOP_BUF_WRITE, '0); u.buf_row = cur.buf_row;
                          u.data = cur.data; fin = 1'b1; end
      MOP_SLIDE:    begin u = mk(SOP_BUF_SLIDE, '0); fin = 1'b1; end
      MOP_BC_RESET: begin u = mk(SOP_BC_RESET, '0); fin = 1'b1; end
      MOP_READ: begin
        tgt = N_SUBS'(1) << cur.src;
        if (ph == 0) begin u = mk(SOP_SENSE, cur.row_a); nph = 1; end
        else begin kind = K_RES; fin = 1'b1; end
      end
      MOP_BC_READ: begin
        tgt = N_SUBS'(1) << cur.src; out_sel = 1'b1;
        if (ph == 0) begin kind = K_RES; nph = 1; end
        else begin u = mk(SOP_BC_SHIFT, '0); fin = 1'b1; end
      end
      MOP_CONV: begin
        if (ph == 0) begin u = mk(SOP_BC_RESET, '0); nph = 1; nk = 0; end
        else begin
          u = mk(SOP_SENSE, radd(cur.row_a, int'(k))); u.fu_buf = 1'b1; u.count = 1'b1;
          u.buf_row = cur.buf_row + BUF_W'(k);
          nk = k + 1; fin = (k + 1 >= wa5);
        end
      end
      MOP_MOVE: begin
        out_sel = 1'b1;
        unique case (ph)
          4'd0: begin kind = K_CAP; nph = 1; nk = 0; end
          4'd1: begin
            tgt = N_SUBS'(1) << cur.dst;
            u = mk(SOP_PROGRAM, radd(cur.row_c, int'(k) * int'(stride) + int'(b)));
            u.data = xwrite(ldb_rdata, cur.n, cur.s, k);
            nk = k + 1; if (k + 1 >= n5) nph = 2;
          end
          default: begin
            tgt = N_SUBS'(1) << cur.src;
            u = mk(SOP_BC_SHIFT, '0);
            nph = 0; nb = b + 1; fin = (b + 1 >= 5'(CNT_W));
          end
        endcase
      end
      MOP_ADD: begin
        unique case (ph)
          4'd0: begin u = mk(SOP_BC_RESET, '0); nph = 1; nb = 0; nk = 0; end
          4'd1: begin
            if (b >= wa5) begin kind = K_SKIP; nph = 2; end
            else begin
              u = mk(SOP_SENSE, radd(cur.row_a, int'(k) * int'(cur.wa) + int'(b)));
              u.count = 1'b1;
              nk = k + 1; if (k + 1 >= n5) begin nph = 2; nk = 0; end
            end
          end
          4'd2: begin u = mk(SOP_PROGRAM, radd(cur.row_c, int'(b))); u.psrc = PSRC_BC; nph = 3; end
          default: begin
            u = mk(SOP_BC_SHIFT, '0); nph = 1; nk = 0; nb = b + 1;
            fin = (b + 1 >= wb5);
          end
        endcase
      end
      MOP_MUL: begin
        unique case (ph)
          4'd0: begin u = mk(SOP_BC_RESET, '0); nph = 1; nb = 0; nk = 0; end
          4'd1: begin
            // k is i; j = b - i
            if (k > b || (b - k) >= wb5 || k >= wa5) kind = K_SKIP;
            else begin
              u = mk(SOP_SENSE, radd(cur.row_a, int'(k))); u.fu_buf = 1'b1; u.count = 1'b1;
              u.buf_row = cur.buf_row + BUF_W'(b - k);
            end
            nk = k + 1; if (k + 1 >= wa5) begin nph = 2; nk = 0; end
          end
          4'd2: begin u = mk(SOP_PROGRAM, radd(cur.row_c, int'(b))); u.psrc = PSRC_BC; nph = 3; end
          default: begin
            u = mk(SOP_BC_SHIFT, '0); nph = 1; nk = 0; nb = b + 1;
            fin = (b + 1 >= wa5 + wb5);
          end
        endcase
      end
      MOP_CMP: begin
        // b counts down from wa-1 (set at accept)
        nph = ph + 1;
        unique case (ph)
          4'd0:  u = mk(SOP_SENSE, cur.row_t);
          4'd1:  begin u = mk(SOP_BUF_WRITE, '0); u.buf_row = cur.buf_row; u.bsrc = BSRC_SA; end
          4'd2:  begin u = mk(SOP_BUF_WRITE, '0); u.buf_row = cur.buf_row + 1'b1; u.bsrc = BSRC_SA_N; end
          4'd3:  u = mk(SOP_BC_RESET, '0);
          4'd4:  begin u = mk(SOP_SENSE, radd(cur.row_a, int'(b))); u.fu_buf = 1'b1; u.count = 1'b1;
                       u.buf_row = cur.buf_row + 1'b1; end
          4'd5:  begin u = mk(SOP_SENSE, radd(cur.row_b, int'(b))); u.fu_buf = 1'b1; u.count = 1'b1;
                       u.buf_row = cur.buf_row + 1'b1; end
          4'd6:  begin u = mk(SOP_BUF_WRITE, '0); u.buf_row = cur.buf_row + 1'b1; u.bsrc = BSRC_BC; end
          4'd7:  begin u = mk(SOP_SENSE, cur.row_t); u.fu_buf = 1'b1; u.count = 1'b1;
                       u.buf_row = cur.buf_row; end
          4'd8:  begin u = mk(SOP_PROGRAM, cur.row_t); u.psrc = PSRC_BC; end
          4'd9:  u = mk(SOP_BC_RESET, '0);
          4'd10: begin u = mk(SOP_SENSE, radd(cur.row_b, int'(b))); u.fu_buf = 1'b1; u.count = 1'b1;
                       u.buf_row = cur.buf_row + 1'b1; end
          4'd11: begin u = mk(SOP_SENSE, cur.row_c); u.fu_buf = 1'b1; u.count = 1'b1;
                       u.buf_row = cur.buf_row; end
          default: begin
            u = mk(SOP_PROGRAM, cur.row_c); u.psrc = PSRC_BC;
            nph = 0; nb = b - 1; fin = (b == 0);
          end
        endcase
      end
      MOP_RELU: begin
        unique case (ph)
          4'd0: begin u = mk(SOP_SENSE, radd(cur.row_a, int'(cur.wa) - 1)); nph = 1; end
          4'd1: begin u = mk(SOP_BUF_WRITE, '0); u.buf_row = cur.buf_row; u.bsrc = BSRC_SA_N;
                      nph = 2; nb = 0; end
          4'd2: begin u = mk(SOP_BC_RESET, '0); nph = 3; end
          4'd3: begin u = mk(SOP_SENSE, radd(cur.row_a, int'(b))); u.fu_buf = 1'b1; u.count = 1'b1;
                      u.buf_row = cur.buf_row; nph = 4; end
          default: begin u = mk(SOP_PROGRAM, radd(cur.row_c, int'(b))); u.psrc = PSRC_BC;
                      nph = 2; nb = b + 1; fin = (b + 1 >= wa5); end
        endcase
      end
      default: begin kind = K_SKIP; fin = 1'b1; end
    endcase
  end

  // --------------------------------------------------------------- sequencer
  logic advance;
  assign cmd_ready = (state == S_IDLE);
  assign sub_cmd   = u;
  assign sub_valid = (state == S_ISSUE && kind == K_SUB) ? tgt : '0;
  assign out_src   = cur.src;
  assign res_valid = (state == S_ISSUE && kind == K_RES);
  assign res_data  = src_out;
  assign ldb_we    = (state == S_ISSUE && kind == K_CAP);
  assign ldb_addr  = b[$clog2(LDB_ROWS)-1:0];
  assign ldb_wdata = src_out;

  always_comb begin
    advance = 1'b0;
    if (state == S_ISSUE)
      advance = (kind == K_CAP) || (kind == K_SKIP) || (kind == K_RES && res_ready);
    else if (state == S_WAIT)
      advance = (((done_seen | sub_done) & wait_mask) == wait_mask);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ph <= '0; b <= '0; k <= '0;
      wait_mask <= '0; done_seen <= '0;
      cur <= '{op: MOP_BC_RESET, default: '0};
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          cur <= cmd; ph <= '0; k <= '0;
          b   <= (cmd.op == MOP_CMP) ? 5'(cmd.wa) - 5'd1 : 5'd0;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          if (kind == K_SUB) begin
            wait_mask <= tgt; done_seen <= '0; state <= S_WAIT;
          end
        end
        S_WAIT: done_seen <= done_seen | sub_done;
        default: state <= S_IDLE;
      endcase
      if (advance) begin
        ph <= nph; b <= nb; k <= nk;
        state <= fin ? S_IDLE : S_ISSUE;
      end
    end
  end

  // Subarrays are idle whenever the controller issues (it waits for done).
  a_no_empty_issue: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_ISSUE && kind == K_SUB) |-> (tgt != '0));

endmodule
