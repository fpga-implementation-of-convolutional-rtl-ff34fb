// reg_file_tb: random writes and reads against a reference array; checks
// R0 stays zero and the same-cycle write-to-read bypass on both ports.
module reg_file_tb;
  logic clk = 0, we;
  logic [4:0] wa, r1, r2;
  logic [31:0] wd, d1, d2;
  logic [31:0] ref_r [32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  reg_file dut (.clk(clk), .we(we), .waddr(wa), .wdata(wd), .raddr1(r1),
                .raddr2(r2), .rdata1(d1), .rdata2(d2));
  function automatic logic [31:0] expv(input logic [4:0] r);
    if (r == 0) return 0;
    if (we && wa == r) return wd;
    return ref_r[r];
  endfunction
  initial begin
    foreach (ref_r[i]) ref_r[i] = 0;
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      we = ($urandom % 3) != 0; wa = 5'($urandom); wd = $urandom;
      r1 = 5'($urandom); r2 = (k % 4 == 0) ? wa : 5'($urandom);
      if (k % 9 == 0) wa = 0;
      #1;
      checks++;
      if (d1 !== expv(r1) || d2 !== expv(r2)) begin
        failures++; $display("FAIL r%0d=%h r%0d=%h", r1, d1, r2, d2);
      end
      @(posedge clk);
      if (we && wa != 0) ref_r[wa] = wd;
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
