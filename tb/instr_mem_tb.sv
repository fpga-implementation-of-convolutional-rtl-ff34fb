// instr_mem_tb: loads random words through the program port and reads all
// of them back through the fetch port.
module instr_mem_tb;
  logic clk = 0, we;
  logic [9:0] a, pa;
  logic [31:0] i, pd;
  logic [31:0] img [1024];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  instr_mem dut (.clk(clk), .addr(a), .instr(i), .prog_we(we), .prog_addr(pa), .prog_data(pd));
  initial begin
    we = 0; a = 0;
    for (int k = 0; k < 1024; k++) begin
      @(negedge clk); we = 1; pa = 10'(k); pd = $urandom; img[k] = pd;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 1024; k++) begin
      a = 10'(1023 - k); #1; checks++;
      if (i !== img[1023 - k]) begin failures++; $display("FAIL %0d", 1023 - k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
