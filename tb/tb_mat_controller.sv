// tb_mat_controller: checks the micro-operation sequences the controller
// issues for CMP, MUL, ADD, CONV, MOVE and READ against sequences written
// out here from the paper's step-by-step descriptions (Figs. 8-11).  The
// subarrays are replaced by a responder that answers every micro-op with
// `done` after a random delay; the local data buffer by an array.
module tb_mat_controller;
  import pim_pkg::*;
  localparam int unsigned NS = SUBS, NC = COLS;

  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, res_valid, res_ready = 0;
  mat_cmd_t cmd;
  logic [NC-1:0] res_data, src_out, ldb_wdata, ldb_rdata;
  logic [NS-1:0] sub_valid, sub_done = '0;
  sub_cmd_t sub_cmd;
  logic out_sel, ldb_we;
  logic [SUB_W-1:0] out_src;
  logic [$clog2(LDB_ROWS)-1:0] ldb_addr;
  logic [NC-1:0] ldb [LDB_ROWS];
  int checks = 0, failures = 0;

  mat_controller dut (.*);
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct {
    sub_op_e op; int row; int buf_row; bit fu_buf; bit count; prog_src_e psrc;
    buf_src_e bsrc; int tgt; logic [NC-1:0] data; bit chk_data;
  } uop_t;
  uop_t exp_q [$];
  uop_t got_q [$];

  // responder
  always @(posedge clk) begin
    if (ldb_we) ldb[ldb_addr] <= ldb_wdata;
  end
  assign ldb_rdata = ldb[ldb_addr];
  initial begin
    forever begin
      @(negedge clk);
      if (sub_valid != '0) begin
        uop_t u;
        logic [NS-1:0] m;
        m = sub_valid;
        u = '{op: sub_cmd.op, row: int'(sub_cmd.row), buf_row: int'(sub_cmd.buf_row),
              fu_buf: sub_cmd.fu_buf, count: sub_cmd.count, psrc: sub_cmd.psrc,
              bsrc: sub_cmd.bsrc, tgt: int'(m), data: sub_cmd.data, chk_data: 0};
        got_q.push_back(u);
        @(posedge clk);
        repeat ($urandom_range(0, 3)) @(posedge clk);
        #1 sub_done = m;
        @(posedge clk); #1 sub_done = '0;
      end
    end
  end

  function automatic uop_t e(input sub_op_e op, input int row = 0, input int br = 0,
      input bit fb = 0, input bit cn = 0, input prog_src_e ps = PSRC_DATA,
      input buf_src_e bs = BSRC_DATA, input int tgt = 1);
    uop_t u;
    u = '{op: op, row: row, buf_row: br, fu_buf: fb, count: cn, psrc: ps, bsrc: bs,
          tgt: tgt, data: '0, chk_data: 0};
    return u;
  endfunction

  task automatic run(input mat_cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) begin
      if (res_valid) res_ready = 1;
      @(negedge clk); res_ready = 0;
    end
    repeat (2) @(negedge clk);
    checks++;
    if (got_q.size() != exp_q.size()) begin
      failures++; $display("%s: %0d micro-ops, expected %0d", c.op.name(), got_q.size(), exp_q.size());
    end
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++) begin
      uop_t g, x; g = got_q[i]; x = exp_q[i];
      checks++;
      if (g.op != x.op || g.tgt != x.tgt ||
          ((x.op inside {SOP_PROGRAM, SOP_SENSE, SOP_ERASE}) && g.row != x.row) ||
          (x.op == SOP_SENSE && (g.fu_buf != x.fu_buf || g.count != x.count ||
                                 (x.fu_buf && g.buf_row != x.buf_row))) ||
          (x.op == SOP_PROGRAM && g.psrc != x.psrc) ||
          (x.op == SOP_BUF_WRITE && (g.bsrc != x.bsrc || g.buf_row != x.buf_row)) ||
          (x.chk_data && g.data != x.data)) begin
        failures++;
        $display("%s step %0d: got %s row %0d buf %0d tgt %h, expected %s row %0d buf %0d tgt %h",
                 c.op.name(), i, g.op.name(), g.row, g.buf_row, g.tgt, x.op.name(), x.row, x.buf_row, x.tgt);
      end
    end
    exp_q.delete(); got_q.delete();
  endtask

  function automatic mat_cmd_t mc(input mat_op_e op);
    mat_cmd_t c;
    c = '{op: op, default: '0};
    c.mask = 16'h0001;
    return c;
  endfunction

  initial begin
    mat_cmd_t c;
    logic [NC-1:0] pat [CNT_W];
    cmd = mc(MOP_BC_RESET);
    src_out = '0;
    repeat (2) @(negedge clk); rst_n = 1;

    // CMP, 2-bit vectors, as the paper's Fig. 11 (A rows 0,1; B rows 2,3; Tag 5; Result 4)
    c = mc(MOP_CMP); c.mask = 16'h0005; c.row_a = 0; c.row_b = 2; c.wa = 2; c.row_t = 5; c.row_c = 4; c.buf_row = 2;
    for (int i = 1; i >= 0; i--) begin
      exp_q.push_back(e(SOP_SENSE, 5, .tgt(5)));                          // read Tag
      exp_q.push_back(e(SOP_BUF_WRITE, .br(2), .bs(BSRC_SA), .tgt(5)));   // buffer row 1 = Tag
      exp_q.push_back(e(SOP_BUF_WRITE, .br(3), .bs(BSRC_SA_N), .tgt(5))); // buffer row 2 = ~Tag
      exp_q.push_back(e(SOP_BC_RESET, .tgt(5)));
      exp_q.push_back(e(SOP_SENSE, 0 + i, 3, 1, 1, .tgt(5)));             // A bit AND ~Tag
      exp_q.push_back(e(SOP_SENSE, 2 + i, 3, 1, 1, .tgt(5)));             // B bit AND ~Tag
      exp_q.push_back(e(SOP_BUF_WRITE, .br(3), .bs(BSRC_BC), .tgt(5)));   // difference
      exp_q.push_back(e(SOP_SENSE, 5, 2, 1, 1, .tgt(5)));                 // Tag AND Tag
      exp_q.push_back(e(SOP_PROGRAM, 5, .ps(PSRC_BC), .tgt(5)));          // new Tag
      exp_q.push_back(e(SOP_BC_RESET, .tgt(5)));
      exp_q.push_back(e(SOP_SENSE, 2 + i, 3, 1, 1, .tgt(5)));             // B AND difference
      exp_q.push_back(e(SOP_SENSE, 4, 2, 1, 1, .tgt(5)));                 // Result AND old Tag
      exp_q.push_back(e(SOP_PROGRAM, 4, .ps(PSRC_BC), .tgt(5)));          // new Result
    end
    run(c);

    // MUL 2-bit x 2-bit (Fig. 10): product bit k sums A_i AND B_j, i+j=k
    c = mc(MOP_MUL); c.row_a = 10; c.wa = 2; c.wb = 2; c.buf_row = 0; c.row_c = 20;
    exp_q.push_back(e(SOP_BC_RESET));
    for (int k = 0; k < 4; k++) begin
      for (int i = 0; i < 2; i++)
        if (k - i >= 0 && k - i < 2) exp_q.push_back(e(SOP_SENSE, 10 + i, k - i, 1, 1));
      exp_q.push_back(e(SOP_PROGRAM, 20 + k, .ps(PSRC_BC)));
      exp_q.push_back(e(SOP_BC_SHIFT));
    end
    run(c);

    // ADD of three 3-bit operands into a 5-bit sum (Fig. 9 extended)
    c = mc(MOP_ADD); c.row_a = 30; c.wa = 3; c.n = 3; c.wb = 5; c.row_c = 40;
    exp_q.push_back(e(SOP_BC_RESET));
    for (int b = 0; b < 5; b++) begin
      if (b < 3) for (int k = 0; k < 3; k++) exp_q.push_back(e(SOP_SENSE, 30 + 3 * k + b, 0, 0, 1));
      exp_q.push_back(e(SOP_PROGRAM, 40 + b, .ps(PSRC_BC)));
      exp_q.push_back(e(SOP_BC_SHIFT));
    end
    run(c);

    // CONV period with a 3-row kernel
    c = mc(MOP_CONV); c.mask = 16'h00F0; c.row_a = 50; c.wa = 3; c.buf_row = 4;
    exp_q.push_back(e(SOP_BC_RESET, .tgt(16'h00F0)));
    for (int r = 0; r < 3; r++) exp_q.push_back(e(SOP_SENSE, 50 + r, 4 + r, 1, 1, .tgt(16'h00F0)));
    run(c);

    // MOVE with K=3, slide offset 1, from subarray 2 to 7: cross-writing data
    c = mc(MOP_MOVE); c.src = 2; c.dst = 7; c.row_c = 100; c.n = 3; c.s = 1;
    for (int b = 0; b < CNT_W; b++) pat[b] = {$urandom, $urandom, $urandom, $urandom};
    fork
      begin
        for (int b = 0; b < CNT_W; b++) begin
          src_out = pat[b];
          while (!(ldb_we)) @(negedge clk);
          @(negedge clk);
        end
      end
    join_none
    for (int b = 0; b < CNT_W; b++) begin
      for (int t = 0; t < 3; t++) begin
        uop_t u;
        u = e(SOP_PROGRAM, 100 + t * CNT_W + b, .tgt(1 << 7));
        u.chk_data = 1; u.data = '0;
        for (int j = 1; j + t < NC; j += 3) u.data[j] = pat[b][j + t];
        exp_q.push_back(u);
      end
      exp_q.push_back(e(SOP_BC_SHIFT, .tgt(1 << 2)));
    end
    checks++; if (out_sel !== 1'b0 && out_sel !== 1'b1) failures++;
    run(c);

    // READ returns the source's mux output
    c = mc(MOP_READ); c.src = 3; c.row_a = 77;
    exp_q.push_back(e(SOP_SENSE, 77, .tgt(1 << 3)));
    src_out = {4{32'hCAFE_F00D}};
    fork
      begin
        while (!res_valid) @(negedge clk);
        checks++;
        if (res_data !== src_out || out_src !== 4'd3 || out_sel !== 1'b0) failures++;
      end
    join_none
    run(c);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
