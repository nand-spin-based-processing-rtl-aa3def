// tb_pim_mat: runs the paper's computing primitives on one mat and checks
// every column against integer arithmetic done in the testbench:
//   ADD of two 4-bit vectors in two subarrays in parallel, MUL by a 3-bit
//   scale factor, CMP (Result = A < B), RELU of 4-bit signed values, and
//   the bitwise convolution flow: the paper's 2x5 (*) 2x2 example
//   (expected 1 0 2 1) followed by a random 2x128 (*) 2x2 one, each with two
//   CONV periods, cross-writing MOVEs into a second subarray and an ADD.
module tb_pim_mat;
  import pim_pkg::*;
  localparam int unsigned NC = COLS;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, res_valid, res_ready = 0;
  mat_cmd_t cmd;
  logic [NC-1:0] res_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  pim_mat dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #50000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic mat_cmd_t mc(input mat_op_e op);
    mat_cmd_t c;
    c = '{op: op, default: '0};
    c.mask = 16'h0001;
    return c;
  endfunction

  task automatic send(input mat_cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
  endtask

  task automatic read_row(input int sub, input int row, output logic [NC-1:0] v);
    mat_cmd_t c;
    c = mc(MOP_READ); c.src = SUB_W'(sub); c.row_a = ROW_W'(row);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!res_valid) @(negedge clk);
    v = res_data; res_ready = 1;
    @(negedge clk); res_ready = 0;
  endtask

  task automatic erase(input int mask, input int dev);
    mat_cmd_t c; c = mc(MOP_ERASE); c.mask = 16'(mask); c.row_a = ROW_W'(dev * MTJ_PER_DEV); send(c);
  endtask

  // vertical layout: bit b of every column's value at row base+b
  task automatic write_vec(input int mask, input int base, input int w, input int unsigned v [NC]);
    mat_cmd_t c;
    for (int b = 0; b < w; b++) begin
      c = mc(MOP_PROGRAM); c.mask = 16'(mask); c.row_a = ROW_W'(base + b);
      for (int j = 0; j < NC; j++) c.data[j] = v[j][b];
      send(c);
    end
  endtask

  task automatic read_vec(input int sub, input int base, input int w, output int unsigned v [NC]);
    logic [NC-1:0] r;
    for (int j = 0; j < NC; j++) v[j] = 0;
    for (int b = 0; b < w; b++) begin
      read_row(sub, base + b, r);
      for (int j = 0; j < NC; j++) v[j] |= int'(r[j]) << b;
    end
  endtask

  task automatic expect_vec(input string what, input int unsigned got [NC], input int unsigned exp [NC], input int n);
    int bad = 0;
    for (int j = 0; j < n; j++) begin
      checks++;
      if (got[j] != exp[j]) begin
        failures++; bad++;
        if (bad < 5) $display("%s col %0d got %0d exp %0d", what, j, got[j], exp[j]);
      end
    end
  endtask

  int unsigned a [NC], bv [NC], a2 [NC], b2 [NC], got [NC], exp_v [NC];
  logic [NC-1:0] in0, in1;
  logic [1:0] w0, w1;

  task automatic conv_flow(input int n_cols);
    mat_cmd_t c;
    erase(16'h0001, 8);                      // input rows 64,65
    erase(16'h0002, 16); erase(16'h0002, 17); // cross-written partial sums 128..143
    erase(16'h0002, 18); erase(16'h0002, 19); // sums 144..152
    for (int j = 0; j < NC; j++) begin a[j] = in0[j]; bv[j] = in1[j]; end
    write_vec(16'h0001, 64, 1, a);
    write_vec(16'h0001, 65, 1, bv);
    c = mc(MOP_BUF_LOAD); c.buf_row = 3'd6;
    for (int j = 0; j < NC; j++) c.data[j] = w0[j % 2];
    send(c);
    c = mc(MOP_BUF_LOAD); c.buf_row = 3'd7;
    for (int j = 0; j < NC; j++) c.data[j] = w1[j % 2];
    send(c);
    for (int s = 0; s < 2; s++) begin
      if (s > 0) send(mc(MOP_SLIDE));
      c = mc(MOP_CONV); c.row_a = 8'd64; c.wa = 4'd2; c.buf_row = 3'd6; send(c);
      c = mc(MOP_MOVE); c.src = 0; c.dst = 1; c.row_c = 8'd128; c.n = 4'd2; c.s = 4'(s); send(c);
    end
    c = mc(MOP_ADD); c.mask = 16'h0002; c.row_a = 8'd128; c.wa = 4'd8; c.n = 4'd2;
    c.row_c = 8'd144; c.wb = 4'd9; send(c);
    read_vec(1, 144, 9, got);
    for (int p = 0; p < NC; p++) begin
      exp_v[p] = 0;
      if (p + 1 < n_cols)
        exp_v[p] = (in0[p] & w0[0]) + (in0[p+1] & w0[1]) + (in1[p] & w1[0]) + (in1[p+1] & w1[1]);
    end
    expect_vec("conv", got, exp_v, n_cols - 1);
  endtask

  initial begin
    mat_cmd_t c;
    longint t0;
    cmd = '{op: MOP_BC_RESET, default: '0};
    repeat (2) @(negedge clk); rst_n = 1;

    // ------------------------------------------------------------- ADD
    erase(16'h0003, 0); erase(16'h0003, 1);
    for (int j = 0; j < NC; j++) begin
      a[j] = $urandom_range(0, 15); bv[j] = $urandom_range(0, 15);
      a2[j] = $urandom_range(0, 15); b2[j] = $urandom_range(0, 15);
    end
    write_vec(16'h0001, 0, 4, a);  write_vec(16'h0001, 4, 4, bv);
    write_vec(16'h0002, 0, 4, a2); write_vec(16'h0002, 4, 4, b2);
    c = mc(MOP_ADD); c.mask = 16'h0003; c.row_a = 8'd0; c.wa = 4'd4; c.n = 4'd2;
    c.row_c = 8'd8; c.wb = 4'd5;
    t0 = cyc; send(c);
    // 1 reset + 4 bits x (2 senses + program + shift) + 1 bit x (program + shift)
    // each op: issue + latency + done; plus one skip cycle for the top bit
    checks++;
    if (cyc - t0 != 1 + 3 + 4 * (2 * 4 + 7 + 3) + (1 + 7 + 3) + 1)
      begin failures++; $display("ADD took %0d cycles", cyc - t0); end
    read_vec(0, 8, 5, got);
    for (int j = 0; j < NC; j++) exp_v[j] = a[j] + bv[j];
    expect_vec("add0", got, exp_v, NC);
    read_vec(1, 8, 5, got);
    for (int j = 0; j < NC; j++) exp_v[j] = a2[j] + b2[j];
    expect_vec("add1", got, exp_v, NC);

    // ------------------------------------------------------------- MUL
    begin
      int unsigned f;
      f = $urandom_range(1, 7);
      erase(16'h0001, 2); erase(16'h0001, 3);
      for (int j = 0; j < NC; j++) a[j] = $urandom_range(0, 15);
      write_vec(16'h0001, 16, 4, a);
      for (int jb = 0; jb < 3; jb++) begin
        c = mc(MOP_BUF_LOAD); c.buf_row = 3'(jb); c.data = f[jb] ? '1 : '0; send(c);
      end
      c = mc(MOP_MUL); c.row_a = 8'd16; c.wa = 4'd4; c.wb = 4'd3; c.buf_row = 3'd0; c.row_c = 8'd24;
      send(c);
      read_vec(0, 24, 7, got);
      for (int j = 0; j < NC; j++) exp_v[j] = a[j] * f;
      expect_vec("mul", got, exp_v, NC);
    end

    // ------------------------------------------------------------- CMP
    erase(16'h0001, 4); erase(16'h0001, 5);
    for (int j = 0; j < NC; j++) begin
      a[j] = $urandom_range(0, 15); bv[j] = (j % 5 == 0) ? a[j] : $urandom_range(0, 15);
    end
    write_vec(16'h0001, 32, 4, a); write_vec(16'h0001, 36, 4, bv);
    c = mc(MOP_CMP); c.row_a = 8'd32; c.row_b = 8'd36; c.wa = 4'd4; c.row_t = 8'd40;
    c.row_c = 8'd41; c.buf_row = 3'd4; send(c);
    read_vec(0, 41, 1, got);
    for (int j = 0; j < NC; j++) exp_v[j] = (a[j] < bv[j]) ? 1 : 0;
    expect_vec("cmp", got, exp_v, NC);

    // ------------------------------------------------------------ RELU
    erase(16'h0001, 6); erase(16'h0001, 7);
    for (int j = 0; j < NC; j++) a[j] = $urandom_range(0, 15);
    write_vec(16'h0001, 48, 4, a);
    c = mc(MOP_RELU); c.row_a = 8'd48; c.wa = 4'd4; c.row_c = 8'd56; c.buf_row = 3'd3; send(c);
    read_vec(0, 56, 4, got);
    for (int j = 0; j < NC; j++) exp_v[j] = a[j][3] ? 0 : a[j];
    expect_vec("relu", got, exp_v, NC);

    // ---------------------------------------------- bitwise convolution
    in0 = '0; in1 = '0;
    in0[4:0] = 5'b00101;   // row 1 of the paper's example: 1 0 1 0 0
    in1[4:0] = 5'b11001;   // row 2: 1 0 0 1 1
    w0 = 2'b01;            // weight row 1: 1 0
    w1 = 2'b10;            // weight row 2: 0 1
    conv_flow(5);
    checks++;
    if (got[0] != 1 || got[1] != 0 || got[2] != 2 || got[3] != 1) begin
      failures++; $display("paper example gives %0d %0d %0d %0d", got[0], got[1], got[2], got[3]);
    end
    in0 = {$urandom, $urandom, $urandom, $urandom};
    in1 = {$urandom, $urandom, $urandom, $urandom};
    w0 = 2'($urandom); w1 = 2'($urandom);
    // the input rows are erased again inside conv_flow
    send(mc(MOP_BC_RESET));
    c = mc(MOP_BUF_LOAD); c.buf_row = 3'd6; send(c);
    conv_flow(NC);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
