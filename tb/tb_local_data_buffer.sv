// tb_local_data_buffer: random writes and read-backs of the local data
// buffer against a shadow copy, and reset to zero.
module tb_local_data_buffer;
  import pim_pkg::*;
  localparam int unsigned NR = LDB_ROWS, NC = COLS;
  logic clk = 0, rst_n = 0, we = 0;
  logic [$clog2(NR)-1:0] addr = '0;
  logic [NC-1:0] wdata = '0, rdata;
  logic [NC-1:0] shadow [NR];
  int checks = 0, failures = 0;

  local_data_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < NR; r++) shadow[r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      addr = $urandom_range(0, NR-1);
      we = $urandom_range(0, 1);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      if (!we) begin #1; checks++; if (rdata !== shadow[addr]) failures++; end
      else shadow[addr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < NR; r++) begin
      addr = r[$clog2(NR)-1:0]; #1; checks++; if (rdata !== shadow[r]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
