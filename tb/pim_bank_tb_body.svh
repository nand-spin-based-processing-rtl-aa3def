// pim_bank_tb_body.svh: body shared by tb_pim_bank (default sizes) and
// tb_pim_bank_small (4 mats of 4 subarrays).  The including module defines
// TB_MATS and instantiates the bank as `dut`.
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, gdb_we = 0;
  bank_cmd_t cmd;
  logic [GDB_W-1:0] gdb_addr = '0;
  logic [NC-1:0] gdb_wdata = '0, gdb_rdata;
  logic [TB_MATS-1:0] mat_busy;
  logic [15:0] result_count;
  int checks = 0, failures = 0;
  int n_stall = 0, n_parallel = 0, n_arb = 0, n_collide = 0;
  int n_op [16];

  always #5 clk = ~clk;
  initial begin
    #400000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && !cmd_ready) n_stall++;
    if ($countones(mat_busy) >= 2) n_parallel++;
    if ($countones(dut.r_valid) >= 2) n_arb++;
    if (gdb_we && dut.b_we) n_collide++;
    if (cmd_valid && cmd_ready) n_op[int'(cmd.mc.op)]++;
  end

  task automatic host_write(input int row, input logic [NC-1:0] d);
    @(negedge clk); gdb_we = 1; gdb_addr = GDB_W'(row); gdb_wdata = d;
    @(negedge clk); gdb_we = 0;
  endtask

  task automatic send(input int mat, input mat_cmd_t mc, input bit from_gdb = 0, input int row = 0);
    @(negedge clk);
    cmd = '{mat: MAT_W'(mat), from_gdb: from_gdb, gdb_row: GDB_W'(row), mc: mc};
    cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  function automatic mat_cmd_t mc(input mat_op_e op, input int mask = 1);
    mat_cmd_t c; c = '{op: op, default: '0}; c.mask = 16'(mask); return c;
  endfunction

  task automatic wait_idle(input int mat);
    @(negedge clk); while (mat_busy[mat]) @(negedge clk);
  endtask

  task automatic erase(input int mat, input int mask, input int dev);
    mat_cmd_t c; c = mc(MOP_ERASE, mask); c.row_a = ROW_W'(dev * MTJ_PER_DEV); send(mat, c);
  endtask

  // program one row from global buffer row 0
  task automatic put_row(input int mat, input int mask, input int row, input logic [NC-1:0] d);
    mat_cmd_t c;
    wait_idle(mat);
    host_write(0, d);
    c = mc(MOP_PROGRAM, mask); c.row_a = ROW_W'(row); send(mat, c, 1, 0);
  endtask

  task automatic put_vec(input int mat, input int mask, input int base, input int w, input int unsigned v [NC]);
    logic [NC-1:0] d;
    for (int b = 0; b < w; b++) begin
      for (int j = 0; j < NC; j++) d[j] = v[j][b];
      put_row(mat, mask, base + b, d);
    end
  endtask

  // read rows of two mats at once into buffer rows 1.., 8..
  task automatic get_vec2(input int m0, input int m1, input int sub, input int base, input int w,
                          output int unsigned v0 [NC], output int unsigned v1 [NC]);
    mat_cmd_t c;
    for (int j = 0; j < NC; j++) begin v0[j] = 0; v1[j] = 0; end
    for (int b = 0; b < w; b++) begin
      wait_idle(m0); wait_idle(m1);
      c = mc(MOP_READ); c.src = SUB_W'(sub); c.row_a = ROW_W'(base + b);
      send(m0, c, 0, 1);
      send(m1, c, 0, 2);
      // the data bus keeps writing for a few cycles: results must wait
      @(negedge clk); gdb_we = 1; gdb_addr = 4'd15; gdb_wdata = '1;
      repeat (3) @(negedge clk);
      gdb_we = 0;
      wait_idle(m0); wait_idle(m1);
      repeat (2) @(negedge clk);
      gdb_addr = 4'd1; #1; for (int j = 0; j < NC; j++) v0[j] |= int'(gdb_rdata[j]) << b;
      gdb_addr = 4'd2; #1; for (int j = 0; j < NC; j++) v1[j] |= int'(gdb_rdata[j]) << b;
    end
  endtask

  task automatic expect_vec(input string what, input int unsigned got [NC], input int unsigned exp [NC]);
    int bad = 0;
    for (int j = 0; j < NC; j++) begin
      checks++;
      if (got[j] != exp[j]) begin
        failures++; bad++;
        if (bad < 5) $display("%s col %0d got %0d exp %0d", what, j, got[j], exp[j]);
      end
    end
  endtask

  int unsigned in [2][2][NC];   // [mat][input row][column], 2-bit values
  int unsigned wt [2][2][2];    // [mat][kernel row][kernel col], 2-bit values
  int unsigned ref_sum [2][NC], got0 [NC], got1 [NC], tmp [NC], thr [2][NC], sv [2][NC];
  int mats [2] = '{0, 3};

  task automatic layer(input int mi);
    int mat; mat_cmd_t c; logic [NC-1:0] d;
    int unsigned v [NC];
    mat = mats[mi];
    // input bit planes: plane n in subarray n, input rows at CM rows 0,1
    erase(mat, 16'h0003, 0);
    for (int n = 0; n < 2; n++)
      for (int r = 0; r < 2; r++) begin
        for (int j = 0; j < NC; j++) d[j] = in[mi][r][j][n];
        put_row(mat, 1 << n, r, d);
      end
    // partial-sum and sum rows of subarray 2: erase rows 16..111
    for (int dv = PS / MTJ_PER_DEV; dv < (SUM + 16) / MTJ_PER_DEV; dv++) erase(mat, 16'h0004, dv);
    for (int m = 0; m < 2; m++) begin
      for (int r = 0; r < 2; r++) begin
        for (int j = 0; j < NC; j++) d[j] = wt[mi][r][j % K][m];
        wait_idle(mat); host_write(0, d);
        c = mc(MOP_BUF_LOAD, 16'h0003); c.buf_row = BUF_W'(r); send(mat, c, 1, 0);
      end
      for (int s = 0; s < 2; s++) begin
        if (s > 0) send(mat, mc(MOP_SLIDE, 16'h0003));
        c = mc(MOP_CONV, 16'h0003); c.row_a = 0; c.wa = 4'(K); c.buf_row = 0; send(mat, c);
        for (int n = 0; n < 2; n++) begin
          c = mc(MOP_MOVE); c.src = SUB_W'(n); c.dst = 4'd2; c.n = 4'(K); c.s = 4'(s);
          c.wa = 4'(WA);
          c.row_c = ROW_W'(PS + ((n * 2 + m) * K) * WA + n + m);
          send(mat, c);
        end
      end
    end
    c = mc(MOP_ADD, 16'h0004); c.row_a = ROW_W'(PS); c.wa = 4'(WA); c.n = 4'(4 * K);
    c.row_c = ROW_W'(SUM); c.wb = 4'(SW); send(mat, c);
  endtask

  initial begin
    mat_cmd_t c;
    for (int i = 0; i < 16; i++) n_op[i] = 0;
    cmd = '{mat: '0, from_gdb: 0, gdb_row: '0, mc: '{op: MOP_BC_RESET, default: '0}};
    // data: the paper's example in mat 0 columns 0..4, random elsewhere
    for (int mi = 0; mi < 2; mi++)
      for (int r = 0; r < 2; r++) begin
        for (int j = 0; j < NC; j++) in[mi][r][j] = $urandom_range(0, 3);
        for (int q = 0; q < 2; q++) wt[mi][r][q] = $urandom_range(0, 3);
      end
    in[0][0][0] = 2; in[0][0][1] = 1; in[0][0][2] = 2; in[0][0][3] = 0; in[0][0][4] = 1;
    in[0][1][0] = 3; in[0][1][1] = 0; in[0][1][2] = 1; in[0][1][3] = 3; in[0][1][4] = 2;
    wt[0][0][0] = 2; wt[0][0][1] = 1; wt[0][1][0] = 0; wt[0][1][1] = 3;
    for (int mi = 0; mi < 2; mi++)
      for (int p = 0; p < NC; p++) begin
        ref_sum[mi][p] = 0;
        // the last column holds a window cut at the array edge
        for (int r = 0; r < 2; r++)
          for (int q = 0; q < 2; q++)
            if (p + q < NC) ref_sum[mi][p] += in[mi][r][p+q] * wt[mi][r][q];
      end
    repeat (3) @(negedge clk); rst_n = 1;

    // both mats: load, then run; their work overlaps
    // mat 3's sequence starts while mat 0 is still adding
    layer(0);
    layer(1);
    wait_idle(0); wait_idle(3);
    // a command to a busy mat stalls the port
    c = mc(MOP_ADD, 16'h0004); c.row_a = ROW_W'(PS); c.wa = 4'(WA); c.n = 4'(4 * K);
    c.row_c = 8'd120; c.wb = 4'(SW);
    erase(0, 16'h0004, 15); erase(0, 16'h0004, 16);
    send(0, c);
    send(0, mc(MOP_BC_RESET, 16'h0004));   // waits for the ADD
    wait_idle(0);

    get_vec2(0, 3, 2, SUM, SW, got0, got1);
    expect_vec("sum mat0", got0, ref_sum[0]);
    expect_vec("sum mat3", got1, ref_sum[1]);
    checks++;
    if (got0[0] != 5 || got0[1] != 7 || got0[2] != 13 || got0[3] != 7) begin
      failures++; $display("paper example: %0d %0d %0d %0d", got0[0], got0[1], got0[2], got0[3]);
    end
    get_vec2(0, 3, 2, 120, SW, got0, got1);
    expect_vec("sum again", got0, ref_sum[0]);

    // scale the sums by 3 (MUL, scale factor in the buffer)
    for (int mi = 0; mi < 2; mi++) begin
      erase(mats[mi], 16'h0004, 16); erase(mats[mi], 16'h0004, 17);
      for (int b = 0; b < 2; b++) begin
        wait_idle(mats[mi]); host_write(0, '1);
        c = mc(MOP_BUF_LOAD, 16'h0004); c.buf_row = BUF_W'(b); send(mats[mi], c, 1, 0);
      end
      c = mc(MOP_MUL, 16'h0004); c.row_a = ROW_W'(SUM); c.wa = 4'(SW); c.wb = 4'd2;
      c.buf_row = 0; c.row_c = 8'd128; send(mats[mi], c);
    end
    get_vec2(0, 3, 2, 128, 15, got0, got1);
    for (int j = 0; j < NC; j++) tmp[j] = ref_sum[0][j] * 3;
    expect_vec("mul mat0", got0, tmp);
    for (int j = 0; j < NC; j++) tmp[j] = ref_sum[1][j] * 3;
    expect_vec("mul mat3", got1, tmp);

    // compare the sums with a threshold vector (max pooling step)
    for (int mi = 0; mi < 2; mi++) begin
      erase(mats[mi], 16'h0004, 18); erase(mats[mi], 16'h0004, 19);
      for (int j = 0; j < NC; j++) thr[mi][j] = (j % 7 == 0) ? ref_sum[mi][j] : $urandom_range(0, 30);
      put_vec(mats[mi], 16'h0004, 144, SW, thr[mi]);
      c = mc(MOP_CMP, 16'h0004); c.row_a = ROW_W'(SUM); c.row_b = 8'd144; c.wa = 4'(SW);
      c.row_t = 8'd158; c.row_c = 8'd159; c.buf_row = 3'd4; send(mats[mi], c);
    end
    get_vec2(0, 3, 2, 159, 1, got0, got1);
    for (int j = 0; j < NC; j++) tmp[j] = (ref_sum[0][j] < thr[0][j]) ? 1 : 0;
    expect_vec("cmp mat0", got0, tmp);
    for (int j = 0; j < NC; j++) tmp[j] = (ref_sum[1][j] < thr[1][j]) ? 1 : 0;
    expect_vec("cmp mat3", got1, tmp);

    // ReLU of a 6-bit signed vector
    for (int mi = 0; mi < 2; mi++) begin
      erase(mats[mi], 16'h0008, 0);
      for (int j = 0; j < NC; j++) sv[mi][j] = $urandom_range(0, 63);
      put_vec(mats[mi], 16'h0008, 0, 6, sv[mi]);
      c = mc(MOP_RELU, 16'h0008); c.row_a = 0; c.wa = 4'd6; c.row_c = 8'd8; c.buf_row = 0;
      erase(mats[mi], 16'h0008, 1);
      send(mats[mi], c);
    end
    get_vec2(0, 3, 3, 8, 6, got0, got1);
    for (int j = 0; j < NC; j++) tmp[j] = sv[0][j][5] ? 0 : sv[0][j];
    expect_vec("relu mat0", got0, tmp);
    for (int j = 0; j < NC; j++) tmp[j] = sv[1][j][5] ? 0 : sv[1][j];
    expect_vec("relu mat3", got1, tmp);

    // bit-counter readout: count the 6 rows of the signed vector, read LSB first
    for (int mi = 0; mi < 2; mi++) begin
      c = mc(MOP_CONV, 16'h0008); c.row_a = 0; c.wa = 4'd6; c.buf_row = 0;
      for (int b = 0; b < 6; b++) begin
        wait_idle(mats[mi]); host_write(0, '1);
        c.op = MOP_BUF_LOAD; c.buf_row = BUF_W'(b); send(mats[mi], c, 1, 0);
      end
      c = mc(MOP_CONV, 16'h0008); c.row_a = 0; c.wa = 4'd6; c.buf_row = 0; send(mats[mi], c);
    end
    for (int j = 0; j < NC; j++) begin got0[j] = 0; got1[j] = 0; end
    for (int b = 0; b < 3; b++) begin
      c = mc(MOP_BC_READ); c.src = 4'd3;
      wait_idle(0); wait_idle(3);
      send(0, c, 0, 3); send(3, c, 0, 4);
      wait_idle(0); wait_idle(3); repeat (2) @(negedge clk);
      gdb_addr = 4'd3; #1; for (int j = 0; j < NC; j++) got0[j] |= int'(gdb_rdata[j]) << b;
      gdb_addr = 4'd4; #1; for (int j = 0; j < NC; j++) got1[j] |= int'(gdb_rdata[j]) << b;
    end
    for (int j = 0; j < NC; j++) tmp[j] = $countones(6'(sv[0][j]));
    expect_vec("bc mat0", got0, tmp);
    for (int j = 0; j < NC; j++) tmp[j] = $countones(6'(sv[1][j]));
    expect_vec("bc mat3", got1, tmp);

    // mechanisms
    $display("stalls=%0d parallel=%0d arbitration=%0d bus-collisions=%0d results=%0d",
             n_stall, n_parallel, n_arb, n_collide, result_count);
    checks++; if (n_stall == 0)    begin failures++; $display("no stall"); end
    checks++; if (n_parallel == 0) begin failures++; $display("mats never parallel"); end
    checks++; if (n_arb == 0)      begin failures++; $display("no result arbitration"); end
    checks++; if (n_collide == 0)  begin failures++; $display("no bus collision"); end
    for (int i = 0; i <= int'(MOP_RELU); i++) begin
      checks++;
      if (n_op[i] == 0) begin failures++; $display("mat op %s never ran", mat_op_e'(i)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
