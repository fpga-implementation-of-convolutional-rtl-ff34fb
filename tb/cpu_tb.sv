// cpu_tb: runs a self-checking program on the processor.
//
// The program is assembled here with the encoders of fp_tb_pkg and loaded
// through the instruction-memory port. It exercises every instruction
// class, saturation and the overflow branch, forwarding from both pipeline
// registers, a load-use stall, ADDZ taken and not taken, JAL/JR with the JR
// stall, PUSH/POP, the floating-point and multiply instructions, a counted
// loop, external-bus reads and writes, and a sweep of all eight branch
// conditions over five flag states (zero, positive, negative, positive and
// negative overflow). Results are stored to data
// memory and compared with values worked out by hand; the testbench also
// checks that each hazard mechanism occurred.
module cpu_tb;
  import cpu_pkg::*;
  import fp_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic prog_we; logic [9:0] prog_addr; logic [31:0] prog_data;
  logic [31:0] ext_addr, ext_wdata, ext_rdata, pc;
  logic ext_we, ext_re, halted, s_lu, s_jr, br;
  int checks = 0, failures = 0, n = 0;
  int n_lu = 0, n_jr = 0, n_br = 0, n_ext_w = 0, cycles = 0;
  logic [31:0] prog [1024];
  logic [31:0] ext_last_w;

  always #5 clk = ~clk;

  cpu dut (.clk(clk), .rst_n(rst_n), .prog_we(prog_we), .prog_addr(prog_addr),
           .prog_data(prog_data), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
           .ext_we(ext_we), .ext_re(ext_re), .ext_rdata(ext_rdata), .pc(pc),
           .halted(halted), .stall_load_use(s_lu), .stall_jr(s_jr), .branch_taken(br));

  assign ext_rdata = (ext_addr == 32'h0000_C001) ? 32'h155 : 32'hBAD;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (s_lu) n_lu++;
    if (s_jr) n_jr++;
    if (br) n_br++;
    if (ext_we) begin n_ext_w++; ext_last_w <= ext_wdata;
      checks++;
      if (ext_addr !== 32'h0000_C004 || ext_wdata !== 32'd14) begin
        failures++; $display("FAIL ext write %h <= %h", ext_addr, ext_wdata);
      end
    end
  end

  function automatic void e(input logic [31:0] i);
    prog[n] = i; n++;
  endfunction

  task automatic chk(input int addr, input logic [31:0] exp);
    checks++;
    if (dut.u_dmem.mem[addr] !== exp) begin
      failures++;
      $display("FAIL DM[%0d] = %h exp %h", addr, dut.u_dmem.mem[addr], exp);
    end
  endtask

  initial begin
    foreach (prog[i]) prog[i] = 32'd0;
    e(enc_i16(OP_LLB, 1, 5));
    e(enc_i16(OP_LLB, 2, -3));
    e(enc_r(OP_ADD, 3, 1, 2));          // 2
    e(enc_i8(OP_SW, 3, 0, 0));
    e(enc_r(OP_SUB, 4, 2, 1));          // -8
    e(enc_i8(OP_SW, 4, 0, 1));
    e(enc_i16(OP_LHB, 1, 16'h7FFF));    // R1 = 7FFF0005
    e(enc_r(OP_ADD, 5, 1, 1));          // saturates, V=1
    e(enc_b(BR_OVFL, 1));               // skip next
    e(enc_i16(OP_LLB, 6, 99));
    e(enc_i8(OP_SW, 5, 0, 2));
    e(enc_i8(OP_SW, 6, 0, 3));
    e(enc_r(OP_AND, 7, 1, 2));
    e(enc_r(OP_NOR, 8, 1, 2));
    e(enc_i8(OP_SLL, 9, 2, 4));
    e(enc_i8(OP_SRL, 10, 2, 28));
    e(enc_i8(OP_SRA, 11, 2, 1));
    e(enc_i8(OP_SW, 7, 0, 4));
    e(enc_i8(OP_SW, 8, 0, 5));
    e(enc_i8(OP_SW, 9, 0, 6));
    e(enc_i8(OP_SW, 10, 0, 7));
    e(enc_i8(OP_SW, 11, 0, 8));
    e(enc_i8(OP_LW, 12, 0, 0));         // 2
    e(enc_i8(OP_ADDI, 13, 12, 10));     // load-use: 12
    e(enc_i8(OP_SW, 13, 0, 9));
    e(enc_i8(OP_SUBI, 14, 13, 12));     // 0, Z=1
    e(enc_r(OP_ADDZ, 15, 13, 13));      // executes: 24, Z=0
    e(enc_r(OP_ADDZ, 16, 13, 13));      // skipped
    e(enc_i8(OP_SW, 15, 0, 10));
    e(enc_i8(OP_SW, 16, 0, 11));
    e(enc_jal(400 - (n + 1)));          // call function at 400
    e(enc_i8(OP_SW, 20, 0, 12));
    e(enc_jal(410 - (n + 1)));          // call an empty function: JR stalls
    e(enc_push(13));
    e(enc_push(3));
    e(enc_pop(21));                     // 2
    e(enc_pop(22));                     // 12
    e(enc_r(OP_ADD, 23, 21, 22));       // 14
    e(enc_i8(OP_SW, 23, 0, 13));
    e(enc_r(OP_ITF, 24, 13, 0));        // 12.0
    e(enc_r(OP_ITF, 25, 3, 0));         // 2.0
    e(enc_r(OP_ADDF, 26, 24, 25));      // 14.0
    e(enc_r(OP_SUBF, 27, 25, 24));      // -10.0
    e(enc_r(OP_MULF, 28, 26, 27));      // -140.0, N=1
    e(enc_b(BR_LT, 1));
    e(enc_i16(OP_LLB, 29, 77));
    e(enc_r(OP_FTI, 29, 28, 0));        // -140
    e(enc_i8(OP_SW, 26, 0, 14));
    e(enc_i8(OP_SW, 27, 0, 15));
    e(enc_i8(OP_SW, 28, 0, 16));
    e(enc_i8(OP_SW, 29, 0, 17));
    e(enc_r(OP_MUL, 30, 2, 1));         // -3 * 5
    e(enc_r(OP_UMUL, 19, 2, 1));        // FFFD * 5
    e(enc_i8(OP_SW, 30, 0, 18));
    e(enc_i8(OP_SW, 19, 0, 19));
    e(enc_i16(OP_LLB, 18, 3));
    e(enc_i8(OP_ADDI, 17, 17, 2));      // loop body
    e(enc_i8(OP_SUBI, 18, 18, 1));
    e(enc_b(BR_NEQ, -3));
    e(enc_i8(OP_SW, 17, 0, 20));        // 6
    e(enc_i16(OP_LLB, 1, 16'hC000));
    e(enc_i16(OP_LHB, 1, 16'h0000));    // 0000C000
    e(enc_i8(OP_SW, 23, 1, 4));         // ext write 0xC004 <= 14
    e(enc_i8(OP_LW, 2, 1, 1));          // ext read 0xC001
    e(enc_r(OP_ADD, 3, 2, 0));
    e(enc_i8(OP_SW, 3, 0, 21));         // 0x155
    e(enc_r(OP_SUB, 4, 0, 3));          // -0x155
    e(enc_b(BR_GTE, 2));                // not taken (N=1)
    e(enc_b(BR_LTE, 1));                // taken
    e(enc_i16(OP_LLB, 4, 1));           // skipped
    e(enc_i8(OP_SW, 4, 0, 22));         // -0x155
    // branch sweep: five flag states, each followed by all eight
    // conditions; DM[100 + 8*state + cond] = 1 if the branch was taken
    e(enc_i16(OP_LLB, 24, 5));
    e(enc_i16(OP_LLB, 25, 3));
    e(enc_i16(OP_LLB, 27, -1));
    e(enc_i16(OP_LHB, 27, 16'h7FFF));   // 7FFFFFFF
    e(enc_i16(OP_LLB, 28, 0));
    e(enc_i16(OP_LHB, 28, 16'h8000));   // 80000000
    e(enc_i16(OP_LLB, 30, 100));        // base address
    for (int st = 0; st < 5; st++) begin
      case (st)
        0: e(enc_r(OP_SUB, 26, 24, 24)); // Z
        1: e(enc_r(OP_SUB, 26, 24, 25)); // positive
        2: e(enc_r(OP_SUB, 26, 25, 24)); // N
        3: e(enc_r(OP_ADD, 26, 27, 27)); // V, saturated positive
        default: e(enc_r(OP_ADD, 26, 28, 28)); // V and N
      endcase
      for (int c = 0; c < 8; c++) begin
        e(enc_i16(OP_LLB, 29, 1));
        e(enc_b(c, 1));
        e(enc_i16(OP_LLB, 29, 0));
        e(enc_i8(OP_SW, 29, 30, 8 * st + c));
      end
    end
    e(enc_hlt());
    n = 400;
    e(enc_i16(OP_LLB, 20, 16'h1234));
    e(enc_jr(31));
    n = 410;
    e(enc_jr(31));

    prog_we = 0; prog_addr = 0; prog_data = 0;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      prog_we = 1; prog_addr = 10'(i); prog_data = prog[i];
    end
    @(negedge clk); prog_we = 0;
    rst_n = 1;
    wait (halted);
    repeat (2) @(posedge clk);
    chk(0, 2); chk(1, -32'sd8); chk(2, 32'h7FFF_FFFF); chk(3, 0);
    chk(4, 32'h7FFF_0005); chk(5, 32'h2); chk(6, 32'hFFFF_FFD0);
    chk(7, 32'hF); chk(8, 32'hFFFF_FFFE); chk(9, 12); chk(10, 24); chk(11, 0);
    chk(12, 32'h1234); chk(13, 14);
    chk(14, 32'h4160_0000); chk(15, 32'hC120_0000); chk(16, 32'hC30C_0000);
    chk(17, -32'sd140); chk(18, -32'sd15); chk(19, 32'h0004_FFF1); chk(20, 6);
    chk(21, 32'h155); chk(22, -32'sh155);
    // expected outcomes per flag state {z, n, v}
    for (int st = 0; st < 5; st++) begin
      bit z, nf, v, t;
      z  = st == 0;
      nf = st == 2 || st == 4;
      v  = st >= 3;
      for (int c = 0; c < 8; c++) begin
        case (c)
          0: t = !z;
          1: t = z;
          2: t = !z && !nf;
          3: t = nf;
          4: t = !nf;
          5: t = nf || z;
          6: t = v;
          default: t = 1'b1;
        endcase
        chk(100 + 8 * st + c, 32'(t));
      end
    end
    checks++; if (n_lu < 2) begin failures++; $display("FAIL no load-use stall"); end
    checks++; if (n_jr < 1) begin failures++; $display("FAIL no JR stall"); end
    checks++; if (n_br < 7) begin failures++; $display("FAIL only %0d taken branches", n_br); end
    checks++; if (n_ext_w != 1) begin failures++; $display("FAIL ext writes %0d", n_ext_w); end
    checks++; if (dut.sp !== 10'd1023) begin failures++; $display("FAIL sp %0d", dut.sp); end
    $display("cycles=%0d load_use=%0d jr=%0d taken=%0d", cycles, n_lu, n_jr, n_br);
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
