// tb_weight_buffer: row writes, row reads, the one-column slide of all
// rows (zero fill of column 0), and reset, against a shadow copy.
module tb_weight_buffer;
  import pim_pkg::*;
  localparam int unsigned NC = COLS, NR = BUF_ROWS;
  logic clk = 0, rst_n = 0, we = 0, slide = 0;
  logic [$clog2(NR)-1:0] wrow = '0, rrow = '0;
  logic [NC-1:0] wdata = '0, rdata;
  logic [NC-1:0] shadow [NR];
  int checks = 0, failures = 0;

  weight_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_all();
    for (int r = 0; r < NR; r++) begin
      rrow = r[$clog2(NR)-1:0]; #1; checks++;
      if (rdata !== shadow[r]) begin failures++; $display("row %0d %h exp %h", r, rdata, shadow[r]); end
    end
  endtask

  initial begin
    for (int r = 0; r < NR; r++) shadow[r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    check_all();
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        slide = 1;
        for (int r = 0; r < NR; r++) shadow[r] = {shadow[r][NC-2:0], 1'b0};
      end else begin
        we = 1; wrow = $urandom_range(0, NR-1); wdata = {$urandom, $urandom, $urandom, $urandom};
        shadow[wrow] = wdata;
      end
      @(negedge clk); we = 0; slide = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
