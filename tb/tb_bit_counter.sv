// tb_bit_counter: random count / shift / clear sequences against an
// integer model of each column's counter (mod 2^W), and the LSB outputs.
module tb_bit_counter;
  import pim_pkg::*;
  localparam int unsigned NC = COLS, W = CNT_W;
  logic clk = 0, rst_n = 0, clr = 0, count = 0, shift = 0;
  logic [NC-1:0] sa = '0, lsb;
  logic [W-1:0] value [NC];
  int unsigned model [NC];
  int checks = 0, failures = 0;

  bit_counter dut (.*);
  always #5 clk = ~clk;
  initial begin
    #500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic compare();
    for (int j = 0; j < NC; j++) begin
      checks++;
      if (value[j] !== W'(model[j]) || lsb[j] !== model[j][0]) begin
        failures++;
        if (failures < 10) $display("col %0d value %0d exp %0d", j, value[j], model[j]);
      end
    end
  endtask

  initial begin
    for (int j = 0; j < NC; j++) model[j] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    compare();
    for (int n = 0; n < 600; n++) begin
      int op;
      @(negedge clk);
      op = $urandom_range(0, 19);
      clr = (op == 0); shift = (op >= 1 && op <= 3); count = (op >= 4);
      sa = {$urandom, $urandom, $urandom, $urandom};
      for (int j = 0; j < NC; j++) begin
        if (clr) model[j] = 0;
        else if (shift) model[j] = model[j] >> 1;
        else if (sa[j]) model[j] = (model[j] + 1) % (1 << W);
      end
      @(negedge clk); clr = 0; shift = 0; count = 0;
      compare();
    end
    // count to the maximum then wrap
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int n = 0; n < (1 << W); n++) begin
      @(negedge clk); count = 1; sa = '1;
    end
    @(negedge clk); count = 0;
    for (int j = 0; j < NC; j++) model[j] = 0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
