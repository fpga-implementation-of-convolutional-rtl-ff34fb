// data_mem_tb: writes random words over all 8K addresses and reads them
// back; then random mixed traffic against a reference array.
module data_mem_tb;
  logic clk = 0, we;
  logic [12:0] a;
  logic [31:0] wd, rd;
  logic [31:0] img [8192];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  data_mem dut (.clk(clk), .we(we), .addr(a), .wdata(wd), .rdata(rd));
  initial begin
    for (int k = 0; k < 8192; k++) begin
      @(negedge clk); we = 1; a = 13'(k); wd = $urandom; img[k] = wd;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      a = 13'($urandom); we = ($urandom % 2) == 1; wd = $urandom;
      #1; checks++;
      if (rd !== img[a]) begin failures++; $display("FAIL %0d", a); end
      if (we) img[a] = wd;
    end
    we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
