// tb_global_data_buffer: both ports against a shadow copy, including the
// rule that a data-bus write wins over a mat write in the same cycle (the
// mat write is not acknowledged and does not happen).
module tb_global_data_buffer;
  import pim_pkg::*;
  localparam int unsigned NR = GDB_ROWS, NC = COLS;
  logic clk = 0, rst_n = 0, a_we = 0, b_we = 0, b_wack;
  logic [$clog2(NR)-1:0] a_addr = '0, b_waddr = '0, b_raddr = '0;
  logic [NC-1:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  logic [NC-1:0] shadow [NR];
  int checks = 0, failures = 0, collisions = 0;

  global_data_buffer dut (.*);
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
      a_we = $urandom_range(0, 1); b_we = $urandom_range(0, 1);
      a_addr = $urandom_range(0, NR-1); b_waddr = $urandom_range(0, NR-1);
      b_raddr = $urandom_range(0, NR-1);
      a_wdata = {$urandom, $urandom, $urandom, $urandom};
      b_wdata = {$urandom, $urandom, $urandom, $urandom};
      #1;
      checks++; if (b_rdata !== shadow[b_raddr]) failures++;
      if (!a_we) begin checks++; if (a_rdata !== shadow[a_addr]) failures++; end
      checks++; if (b_wack !== (b_we && !a_we)) failures++;
      if (a_we && b_we) collisions++;
      if (a_we) shadow[a_addr] = a_wdata;
      else if (b_we) shadow[b_waddr] = b_wdata;
    end
    @(negedge clk); a_we = 0; b_we = 0;
    for (int r = 0; r < NR; r++) begin
      a_addr = r[$clog2(NR)-1:0]; #1; checks++; if (a_rdata !== shadow[r]) failures++;
    end
    checks++; if (collisions == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
