// weight_rom_tb: loads every one of the 63,654 words with a value computed
// from its index, then reads a random sample and the last word back, and
// checks that an index past the end reads 0.
module weight_rom_tb;
  logic clk = 0, we;
  logic [15:0] a, la;
  logic [31:0] rd, ld;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  weight_rom dut (.clk(clk), .addr(a), .rdata(rd), .load_we(we), .load_addr(la), .load_data(ld));
  function automatic logic [31:0] f(input int k);
    return 32'(k) * 32'h9E37_79B1 ^ 32'h1234_5678;
  endfunction
  initial begin
    we = 0; a = 0;
    for (int k = 0; k < 63654; k++) begin
      @(negedge clk); we = 1; la = 16'(k); ld = f(k);
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 3000; k++) begin
      a = (k == 0) ? 16'd63653 : 16'($urandom % 63654); #1; checks++;
      if (rd !== f(int'(a))) begin failures++; $display("FAIL %0d", a); end
    end
    a = 16'd63654; #1; checks++;
    if (rd !== 0) begin failures++; $display("FAIL past end"); end
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
