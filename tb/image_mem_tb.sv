// image_mem_tb: checks the clear on reset, writes through the compressor
// port and reads through both the processor and the VGA ports.
module image_mem_tb;
  logic clk = 0, rst_n = 0, we;
  logic [9:0] wa, ca, va;
  logic [7:0] wd, cd, vd;
  logic [7:0] img [1024];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  image_mem dut (.clk(clk), .rst_n(rst_n), .we(we), .waddr(wa), .wdata(wd),
                 .cpu_raddr(ca), .cpu_rdata(cd), .vga_raddr(va), .vga_rdata(vd));
  initial begin
    we = 0; wa = 0; wd = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 1024; k += 7) begin
      ca = 10'(k); #1; checks++;
      if (cd !== 0) begin failures++; $display("FAIL not cleared %0d", k); end
    end
    foreach (img[k]) img[k] = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk); we = ($urandom % 2) == 1; wa = 10'($urandom); wd = 8'($urandom);
      ca = 10'($urandom); va = wa;
      #1; checks++;
      if (cd !== img[ca] || vd !== img[va]) begin failures++; $display("FAIL rd %0d", ca); end
      if (we) img[wa] = wd;
    end
    we = 0;
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
