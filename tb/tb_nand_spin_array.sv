// tb_nand_spin_array: random erase / program / read traffic on the
// convolution memory against a shadow model of the NAND-SPIN write rules
// (erase clears the 8 rows of a device, program only sets bits, the read
// path shows a row only with WE=0, ER=1 and a word line on).
module tb_nand_spin_array;
  import pim_pkg::*;
  localparam int unsigned NR = ROWS, NC = COLS, ND = ROWS / MTJ_PER_DEV;

  logic clk = 0, apply, we, er, r_en;
  logic [$clog2(ND)-1:0] dev;
  logic [$clog2(NR)-1:0] row;
  logic [NC-1:0] c, p_state;
  logic [NC-1:0] shadow [NR];
  int checks = 0, failures = 0;

  nand_spin_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic idle(); apply = 0; we = 0; er = 0; r_en = 0; c = '0; endtask
  task automatic erase(input int d);
    @(negedge clk); idle(); apply = 1; we = 1; er = 1; dev = d[$clog2(ND)-1:0];
    @(negedge clk); idle();
    for (int k = 0; k < MTJ_PER_DEV; k++) shadow[d*MTJ_PER_DEV+k] = '0;
  endtask
  task automatic prog_row(input int r, input logic [NC-1:0] v);
    @(negedge clk); idle(); apply = 1; we = 1; r_en = 1; row = r[$clog2(NR)-1:0]; c = v;
    @(negedge clk); idle();
    shadow[r] = shadow[r] | v;
  endtask
  task automatic check_read(input int r);
    @(negedge clk); idle(); er = 1; r_en = 1; row = r[$clog2(NR)-1:0]; #1;
    checks++;
    if (p_state !== shadow[r]) begin failures++; $display("row %0d mismatch", r); end
    we = 1; #1; checks++;                       // WE=1 opens no read path
    if (p_state !== '0) begin failures++; $display("read with WE"); end
    idle();
  endtask

  initial begin
    idle(); dev = '0; row = '0;
    for (int d = 0; d < ND; d++) erase(d);
    for (int r = 0; r < NR; r += 37) check_read(r);   // erased = all 0
    for (int n = 0; n < 300; n++) begin
      int op, r; logic [NC-1:0] v;
      op = $urandom_range(0, 3); r = $urandom_range(0, NR-1);
      v = {$urandom, $urandom, $urandom, $urandom};
      case (op)
        0: erase(r / MTJ_PER_DEV);
        1, 2: prog_row(r, v);
        default: check_read(r);
      endcase
    end
    for (int r = 0; r < NR; r++) check_read(r);
    // apply low: nothing changes
    @(negedge clk); idle(); we = 1; er = 1; dev = 0; @(negedge clk); idle();
    check_read(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
