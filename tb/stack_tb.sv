// stack_tb: random push/pop sequences against a reference queue used as a
// LIFO; checks the popped value one clock after pop and the stack pointer.
module stack_tb;
  logic clk = 0, rst_n = 0, push, pop;
  logic [31:0] pd, qd;
  logic [9:0] sp;
  logic [31:0] model [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  stack dut (.clk(clk), .rst_n(rst_n), .push(push), .pop(pop), .push_data(pd),
             .pop_data(qd), .sp(sp));
  initial begin
    logic [31:0] exp;
    logic        did_pop;
    push = 0; pop = 0; pd = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 6000; k++) begin
      @(negedge clk);
      did_pop = 0;
      push = 0; pop = 0;
      if (($urandom % 2 == 0 || model.size() == 0) && model.size() < 1000) begin
        push = 1; pd = $urandom; model.push_back(pd);
      end else begin
        pop = 1; exp = model.pop_back(); did_pop = 1;
      end
      @(posedge clk); #1;
      if (did_pop) begin
        checks++;
        if (qd !== exp) begin failures++; $display("FAIL pop %h exp %h", qd, exp); end
      end
      checks++;
      if (sp !== 10'(1023 - model.size())) begin failures++; $display("FAIL sp %0d", sp); end
    end
    push = 0; pop = 0;
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
