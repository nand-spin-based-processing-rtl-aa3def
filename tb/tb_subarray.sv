// tb_subarray: random micro-operation traffic on one subarray against a
// reference model written from the paper's rules (erase clears a device
// row, program sets bits, read returns the row, AND returns weight AND
// row, the bit-counter counts SA ones, write-back and buffer sources).
// Every operation's latency (command accepted -> done) is checked against
// T_ERASE / T_PROGRAM / T_SENSE (+1 when counting) / 1.
module tb_subarray;
  import pim_pkg::*;
  localparam int unsigned NR = ROWS, NC = COLS;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done, out_sel = 0;
  sub_cmd_t cmd;
  logic [NC-1:0] mux_out, sa_out, bc_lsb;
  logic [NC-1:0] m_mem [NR];
  logic [NC-1:0] m_buf [BUF_ROWS];
  logic [NC-1:0] m_sa;
  int unsigned   m_bc [NC];
  int checks = 0, failures = 0;

  subarray dut (.*);
  always #5 clk = ~clk;
  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [NC-1:0] m_lsb();
    logic [NC-1:0] v;
    for (int j = 0; j < NC; j++) v[j] = m_bc[j][0];
    return v;
  endfunction

  task automatic issue(input sub_cmd_t c);
    int lat, exp_lat;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk); #1 cmd_valid = 0;
    lat = 0;
    while (!done) begin @(posedge clk); #1 lat++; end
    case (c.op)
      SOP_ERASE:   exp_lat = T_ERASE;
      SOP_PROGRAM: exp_lat = T_PROGRAM;
      SOP_SENSE:   exp_lat = T_SENSE + (c.count ? 1 : 0);
      default:     exp_lat = 1;
    endcase
    checks++;
    if (lat != exp_lat) begin failures++; $display("op %s latency %0d exp %0d", c.op.name(), lat, exp_lat); end
    // reference model
    case (c.op)
      SOP_ERASE: for (int k = 0; k < MTJ_PER_DEV; k++) m_mem[(c.row / MTJ_PER_DEV) * MTJ_PER_DEV + k] = '0;
      SOP_PROGRAM: m_mem[c.row] |= (c.psrc == PSRC_BC) ? m_lsb() : c.data;
      SOP_SENSE: begin
        m_sa = m_mem[c.row] & (c.fu_buf ? m_buf[c.buf_row] : '1);
        if (c.count) for (int j = 0; j < NC; j++) m_bc[j] = (m_bc[j] + m_sa[j]) % (1 << CNT_W);
      end
      SOP_BC_RESET: for (int j = 0; j < NC; j++) m_bc[j] = 0;
      SOP_BC_SHIFT: for (int j = 0; j < NC; j++) m_bc[j] = m_bc[j] >> 1;
      SOP_BUF_WRITE: case (c.bsrc)
        BSRC_DATA: m_buf[c.buf_row] = c.data;
        BSRC_SA:   m_buf[c.buf_row] = m_sa;
        BSRC_SA_N: m_buf[c.buf_row] = ~m_sa;
        default:   m_buf[c.buf_row] = m_lsb();
      endcase
      SOP_BUF_SLIDE: for (int r = 0; r < BUF_ROWS; r++) m_buf[r] = {m_buf[r][NC-2:0], 1'b0};
      default: ;
    endcase
    @(negedge clk);
    checks++;
    if (sa_out !== m_sa) begin failures++; $display("sa after %s", c.op.name()); end
    checks++;
    if (bc_lsb !== m_lsb()) begin failures++; $display("bc after %s", c.op.name()); end
    out_sel = $urandom_range(0, 1); #1;
    checks++;
    if (mux_out !== (out_sel ? m_lsb() : m_sa)) begin failures++; $display("mux"); end
  endtask

  function automatic sub_cmd_t rnd_cmd(input int op);
    sub_cmd_t c;
    c = '{op: sub_op_e'(op), psrc: prog_src_e'($urandom_range(0, 1)),
          bsrc: buf_src_e'($urandom_range(0, 3)), default: '0};
    c.row = ROW_W'($urandom_range(0, 31));       // keep traffic on a few devices
    c.fu_buf = $urandom_range(0, 1);
    c.count = $urandom_range(0, 1);
    c.buf_row = BUF_W'($urandom_range(0, BUF_ROWS-1));
    c.data = {$urandom, $urandom, $urandom, $urandom};
    return c;
  endfunction

  initial begin
    sub_cmd_t c;
    for (int j = 0; j < NC; j++) m_bc[j] = 0;
    for (int r = 0; r < BUF_ROWS; r++) m_buf[r] = '0;
    m_sa = '0;
    cmd = '{op: SOP_NOP, psrc: PSRC_DATA, bsrc: BSRC_DATA, default: '0};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int d = 0; d < 4; d++) begin
      c = rnd_cmd(SOP_ERASE); c.row = ROW_W'(d * MTJ_PER_DEV); issue(c);
    end
    // directed: write a row, read it, AND it with a weight row
    c = rnd_cmd(SOP_PROGRAM); c.row = 8'd3; c.psrc = PSRC_DATA; issue(c);
    c = rnd_cmd(SOP_SENSE);   c.row = 8'd3; c.fu_buf = 0; c.count = 0; issue(c);
    c = rnd_cmd(SOP_BUF_WRITE); c.bsrc = BSRC_DATA; c.buf_row = 3'd2; issue(c);
    c = rnd_cmd(SOP_SENSE);   c.row = 8'd3; c.fu_buf = 1; c.buf_row = 3'd2; c.count = 1; issue(c);
    for (int n = 0; n < 600; n++) begin
      int op;
      op = $urandom_range(0, 9);
      if (op > 6) op = SOP_SENSE;
      issue(rnd_cmd(op));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
