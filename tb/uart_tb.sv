// uart_tb: writes a burst of bytes into the transmit FIFO, decodes the tx
// line independently (bit period CLKS clocks, sampled mid-bit) and checks
// the bytes, their order and the frame length; loops tx back into rx and
// checks the bytes read back from the receive side and the status bits.
module uart_tb;
  localparam int CLKS = 16;
  logic clk = 0, rst_n = 0, wr, rd, tx;
  logic [31:0] wd, rdat;
  byte  sent [$];
  int checks = 0, failures = 0, got = 0;
  always #5 clk = ~clk;
  uart #(.CLKS_PER_BIT(CLKS), .FIFO_DEPTH(16)) dut (.clk(clk), .rst_n(rst_n),
    .wr(wr), .wdata(wd), .rd(rd), .rdata(rdat), .tx(tx), .rx(tx));

  // independent line decoder
  initial begin
    logic [7:0] b;
    int t0;
    wait (rst_n);
    forever begin
      @(negedge tx);
      t0 = $time;
      repeat (CLKS / 2) @(posedge clk);
      checks++; if (tx !== 0) begin failures++; $display("FAIL start bit"); end
      for (int i = 0; i < 8; i++) begin repeat (CLKS) @(posedge clk); b[i] = tx; end
      repeat (CLKS) @(posedge clk);
      checks++; if (tx !== 1) begin failures++; $display("FAIL stop bit"); end
      checks++;
      if (sent.size() == 0 || b !== sent[0]) begin failures++; $display("FAIL byte %h", b); end
      else void'(sent.pop_front());
      got++;
    end
  end

  initial begin
    logic [7:0] bytes [5] = '{8'h41, 8'h30, 8'h5A, 8'h00, 8'hFF};
    wr = 0; rd = 0; wd = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    foreach (bytes[i]) begin
      @(negedge clk); wr = 1; wd = {24'hABCDEF, bytes[i]}; sent.push_back(bytes[i]);
    end
    @(negedge clk); wr = 0;
    checks++; if (rdat[9] !== 0) begin failures++; $display("FAIL full"); end
    repeat (5 * 10 * CLKS + 50) @(negedge clk);
    checks++; if (got != 5) begin failures++; $display("FAIL got %0d", got); end
    foreach (bytes[i]) begin
      checks++;
      if (rdat[8] !== 1 || rdat[7:0] !== bytes[i]) begin failures++; $display("FAIL rx %h", rdat); end
      rd = 1; @(negedge clk); rd = 0;
    end
    checks++; if (rdat[8] !== 0) begin failures++; $display("FAIL rx not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
