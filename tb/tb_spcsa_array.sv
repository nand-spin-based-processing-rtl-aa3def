// tb_spcsa_array: the SA truth table (OUT = 1 only for a stored 1 with
// FU = 1), REF off, latching only while RE is high, and reset.
module tb_spcsa_array;
  import pim_pkg::*;
  localparam int unsigned NC = 16;
  logic clk = 0, rst_n = 0, re = 0, ref_on = 0;
  logic [NC-1:0] fu = '0, p_state = '0, out, exp_out;
  int checks = 0, failures = 0;

  spcsa_array #(.N_COLS(NC)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++; if (out !== '0) failures++;
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      fu = NC'($urandom); p_state = NC'($urandom);
      ref_on = ($urandom_range(0, 7) != 0); re = ($urandom_range(0, 3) != 0);
      exp_out = re ? (ref_on ? (fu & p_state) : '0) : out;
      @(negedge clk);
      re = 0;
      checks++;
      if (out !== exp_out) begin
        failures++; $display("fu=%h p=%h ref=%b out=%h exp=%h", fu, p_state, ref_on, out, exp_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
