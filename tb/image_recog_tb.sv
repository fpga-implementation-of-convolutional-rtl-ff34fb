// image_recog_tb: end-to-end run of the whole system at its default sizes.
//
// The testbench plays the parts outside the design: it loads a firmware
// program (assembled here) and all 63,654 weight words, models the frame
// buffer as a fixed test picture served in raster order, holds the pause
// button over the first frame, streams a few lines of Bayer data into the
// camera port, and decodes the UART line.
// The firmware requests a snapshot, polls the request register, converts
// the 32 x 32 image to floating point (PRE), computes 36 class scores as
// 1024-element dot products with the weights (MATMUL, which saves
// registers on the stack), picks the largest score (first one on a tie),
// sends its character ('0'-'9', 'A'-'Z') over the UART and shows the index
// on LEDR. Weights are small integers, so every floating-point sum is exact
// and the scores are checked bit for bit against integer arithmetic.
// Also checked: the image memory against the 8 x 8 block averages of the
// picture window, the converted image in data memory, and that each
// mechanism happened (pause hold, one compression start, 784 image
// writes, load-use and JR stalls, taken branches, stack use, UART byte,
// camera pixels reaching the frame-buffer port).
module image_recog_tb;
  import cpu_pkg::*;
  import fp_tb_pkg::*;
  localparam int NW = 63654, NCLS = 36, CPB = 434;
  logic clk = 0, rst_n = 0;
  logic prog_we = 0, wload_we = 0;
  logic [9:0] prog_addr = 0; logic [31:0] prog_data = 0;
  logic [15:0] wload_addr = 0; logic [31:0] wload_data = 0;
  logic [9:0] SW = 10'h2A5, LEDR;
  logic KEY2_n = 0, txd, rxd = 1;
  logic [11:0] d5m_d = 0; logic d5m_fval = 0, d5m_lval = 0, cap_start = 0, cap_end = 0;
  logic fb_wr_en, fb_rd_req, hs, vs, bn, halted;
  logic [11:0] fb_wr_data; logic [15:0] fb_wr_x, fb_wr_y;
  logic [7:0] fb_rd_gray, r, g, b;
  int checks = 0, failures = 0, n = 0;
  logic [31:0] prog [1024];
  int fb_k = 0;
  int n_start = 0, n_imgwr = 0, n_lu = 0, n_jr = 0, n_br = 0, n_push = 0, n_pop = 0;
  int n_fbw = 0, n_paused_frames = 0, cycles = 0;
  byte uart_bytes [$];

  always #5 clk = ~clk;

  image_recog dut (.clk(clk), .rst_n(rst_n), .prog_we(prog_we), .prog_addr(prog_addr),
    .prog_data(prog_data), .wload_we(wload_we), .wload_addr(wload_addr), .wload_data(wload_data),
    .SW(SW), .LEDR(LEDR), .KEY2_n(KEY2_n), .uart_txd(txd), .uart_rxd(rxd),
    .d5m_d(d5m_d), .d5m_fval(d5m_fval), .d5m_lval(d5m_lval), .cap_start(cap_start), .cap_end(cap_end),
    .fb_wr_en(fb_wr_en), .fb_wr_data(fb_wr_data), .fb_wr_x(fb_wr_x), .fb_wr_y(fb_wr_y),
    .fb_rd_req(fb_rd_req), .fb_rd_gray(fb_rd_gray),
    .vga_hs(hs), .vga_vs(vs), .vga_blank_n(bn), .vga_r(r), .vga_g(g), .vga_b(b), .halted(halted));

  // ---- test picture (frame buffer model), position from the request count
  function automatic logic [7:0] pic(input int x, input int y);
    int dx, dy;
    dx = x - 320; dy = y - 240;
    if (dx * dx + dy * dy < 80 * 80 && dx * dx + dy * dy > 55 * 55) return 8'd240;  // a ring ("O")
    if (dx > 20 && dx < 40 && dy > -90 && dy < 90) return 8'd200;                   // a bar
    return 8'((x * 3 + y * 5) % 23);
  endfunction
  assign fb_rd_gray = pic(fb_k % 640, (fb_k / 640) % 480);
  always @(posedge clk) if (fb_rd_req) fb_k <= fb_k + 1;

  function automatic logic [31:0] weight(input int i);
    logic [31:0] h;
    h = 32'(i) * 32'h9E37_79B1;
    if (i < NCLS * 1024) return r2f_trunc(real'(int'(h[20:16] % 5) - 2));
    return r2f_trunc(real'(i % 100) / 8.0);
  endfunction

  // ---- mechanism counters
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.c_start) n_start++;
    if (dut.c_wr) n_imgwr++;
    if (dut.s_lu) n_lu++;
    if (dut.s_jr) n_jr++;
    if (dut.br) n_br++;
    if (dut.u_cpu.u_stack.push) n_push++;
    if (dut.u_cpu.u_stack.pop) n_pop++;
    if (fb_wr_en) n_fbw++;
    if (!KEY2_n && dut.compress_req && dut.win_valid && dut.win_x == 0 && dut.win_y == 0)
      n_paused_frames++;
  end

  // ---- UART line decoder
  initial begin
    logic [7:0] bt;
    forever begin
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); bt[i] = txd; end
      repeat (CPB) @(posedge clk);
      uart_bytes.push_back(bt);
    end
  end

  // ---- camera: a few Bayer lines through the capture path
  initial begin
    wait (rst_n);
    repeat (5) @(posedge clk);
    cap_start <= 1; @(posedge clk); cap_start <= 0;
    repeat (5) @(posedge clk);
    d5m_fval <= 1; repeat (4) @(posedge clk);
    for (int y = 0; y < 4; y++) begin
      for (int x = 0; x < 1280; x++) begin d5m_lval <= 1; d5m_d <= 12'(x * 3 + y); @(posedge clk); end
      d5m_lval <= 0; repeat (10) @(posedge clk);
    end
    d5m_fval <= 0;
  end

  function automatic void e(input logic [31:0] i); prog[n] = i; n++; endfunction

  task automatic c(input string what, input bit ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int loop, skip, dig, send, pre_at, mm_at;
    int img [1024];
    longint score [NCLS];
    int best;
    pre_at = 300; mm_at = 400;
    foreach (prog[i]) prog[i] = 0;
    // ---------------- MAIN
    e(enc_i16(OP_LLB, 30, 16'hC000)); e(enc_i16(OP_LHB, 30, 0));  // R30 = 0xC000
    e(enc_i16(OP_LLB, 1, 1));
    e(enc_i8(OP_SW, 1, 30, 8));                                     // request snapshot
    loop = n;                                                       // SNAPSHOT_WAIT
    e(enc_i8(OP_LW, 27, 30, 8));
    e(enc_r(OP_ADD, 27, 27, 0));
    e(enc_b(BR_NEQ, loop - (n + 1)));
    e(enc_i16(OP_LLB, 3, 0)); e(enc_i16(OP_LHB, 3, 1));             // R3 = 0x10000
    e(enc_i16(OP_LLB, 4, 1024));
    e(enc_jal(pre_at - (n + 1)));                                   // PRE_PROCESS
    e(enc_i16(OP_LLB, 29, 8000));
    e(enc_i16(OP_LLB, 2, 0)); e(enc_i16(OP_LHB, 2, 2));             // R2 = 0x20000
    e(enc_i16(OP_LLB, 20, NCLS));
    loop = n;                                                       // class loop
    e(enc_push(2));
    e(enc_i16(OP_LLB, 3, 0));
    e(enc_i16(OP_LLB, 4, 1024));
    e(enc_jal(mm_at - (n + 1)));                                    // MATRIX_MUL
    e(enc_pop(2));
    e(enc_i8(OP_SW, 28, 29, 0));
    e(enc_i8(OP_ADDI, 29, 29, 1));
    e(enc_i16(OP_LLB, 21, 1024));
    e(enc_r(OP_ADD, 2, 2, 21));
    e(enc_i8(OP_SUBI, 20, 20, 1));
    e(enc_b(BR_NEQ, loop - (n + 1)));
    // ---------------- OUTPUT_LAYER
    e(enc_i16(OP_LLB, 29, 8000));
    e(enc_i8(OP_LW, 7, 29, 0));                                     // current max
    e(enc_i16(OP_LLB, 8, 0));                                       // max index
    e(enc_i16(OP_LLB, 2, 1));                                       // i
    loop = n;
    e(enc_r(OP_ADD, 11, 29, 2));
    e(enc_i8(OP_LW, 4, 11, 0));
    e(enc_r(OP_SUBF, 5, 4, 7));
    skip = n; e(32'd0);                                             // B LTE skip (patched)
    e(enc_r(OP_ADD, 7, 4, 0));
    e(enc_r(OP_ADD, 8, 2, 0));
    prog[skip] = enc_b(BR_LTE, n - (skip + 1));
    e(enc_i8(OP_ADDI, 2, 2, 1));
    e(enc_i8(OP_SUBI, 6, 2, NCLS));
    e(enc_b(BR_NEQ, loop - (n + 1)));
    e(enc_i8(OP_SUBI, 10, 8, 10));
    dig = n; e(32'd0);                                              // B LT digit
    e(enc_i8(OP_ADDI, 9, 8, 55));                                   // 'A' - 10
    send = n; e(32'd0);                                             // B UNCOND send
    prog[dig] = enc_b(BR_LT, n - (dig + 1));
    e(enc_i8(OP_ADDI, 9, 8, 48));                                   // '0'
    prog[send] = enc_b(BR_UNCOND, n - (send + 1));
    e(enc_i8(OP_SW, 9, 30, 4));                                     // UART
    e(enc_i8(OP_SW, 8, 30, 0));                                     // LEDR
    e(enc_hlt());
    // ---------------- PRE_PROCESS(R3 image, R4 size) -> DM[0..]
    n = pre_at;
    e(enc_i16(OP_LLB, 5, 0));
    loop = n;
    e(enc_i8(OP_LW, 6, 3, 0));
    e(enc_r(OP_ITF, 6, 6, 0));
    e(enc_i8(OP_SW, 6, 5, 0));
    e(enc_i8(OP_ADDI, 3, 3, 1));
    e(enc_i8(OP_ADDI, 5, 5, 1));
    e(enc_i8(OP_SUBI, 4, 4, 1));
    e(enc_b(BR_NEQ, loop - (n + 1)));
    e(enc_jr(31));
    // ---------------- MATRIX_MUL(R2 weights, R3 data, R4 size) -> R28
    n = mm_at;
    e(enc_push(31)); e(enc_push(5)); e(enc_push(6)); e(enc_push(7)); e(enc_push(8));
    e(enc_i16(OP_LLB, 28, 0));
    loop = n;
    e(enc_i8(OP_LW, 6, 3, 0));
    e(enc_i8(OP_LW, 7, 2, 0));
    e(enc_r(OP_MULF, 8, 6, 7));
    e(enc_r(OP_ADDF, 28, 28, 8));
    e(enc_i8(OP_ADDI, 3, 3, 1));
    e(enc_i8(OP_ADDI, 2, 2, 1));
    e(enc_i8(OP_SUBI, 4, 4, 1));
    e(enc_b(BR_NEQ, loop - (n + 1)));
    e(enc_pop(8)); e(enc_pop(7)); e(enc_pop(6)); e(enc_pop(5)); e(enc_pop(31));
    e(enc_jr(31));

    // ---------------- load program and weights
    repeat (2) @(negedge clk);
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); prog_we = 1; prog_addr = 10'(i); prog_data = prog[i];
    end
    for (int i = 0; i < NW; i++) begin
      @(negedge clk); prog_we = 0; wload_we = 1; wload_addr = 16'(i); wload_data = weight(i);
    end
    @(negedge clk); wload_we = 0;
    rst_n = 1;

    // pause held over the first frame
    repeat (900000) @(posedge clk);
    KEY2_n = 1;
    wait (halted);
    repeat (12 * CPB) @(posedge clk);

    // ---------------- expected values
    foreach (img[i]) img[i] = 0;
    for (int by = 0; by < 28; by++)
      for (int bx = 0; bx < 28; bx++) begin
        int s;
        s = 0;
        for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++)
          s += pic(208 + bx * 8 + x, 128 + by * 8 + y);
        img[(by + 2) * 32 + bx + 2] = s / 64;
      end
    begin
      int bad;
      bad = 0;
      for (int i = 0; i < 1024; i++) if (dut.u_imem.mem[i] !== 8'(img[i])) bad++;
      c($sformatf("image memory (%0d wrong)", bad), bad == 0);
      bad = 0;
      for (int i = 0; i < 1024; i++) if (dut.u_cpu.u_dmem.mem[i] !== r2f_trunc(real'(img[i]))) bad++;
      c($sformatf("converted image in DM (%0d wrong)", bad), bad == 0);
    end
    best = 0;
    for (int k = 0; k < NCLS; k++) begin
      score[k] = 0;
      for (int i = 0; i < 1024; i++) score[k] += longint'(img[i]) * longint'($rtoi(f2r(weight(k * 1024 + i))));
      c($sformatf("score %0d = %h exp %0d", k, dut.u_cpu.u_dmem.mem[8000 + k], score[k]),
        dut.u_cpu.u_dmem.mem[8000 + k] === r2f_trunc(real'(score[k])));
      if (score[k] > score[best]) best = k;
    end
    c("one UART byte", uart_bytes.size() == 1);
    if (uart_bytes.size() > 0)
      c($sformatf("predicted char %c exp %c", uart_bytes[0], (best < 10) ? 8'(48 + best) : 8'(55 + best)),
        uart_bytes[0] == ((best < 10) ? 8'(48 + best) : 8'(55 + best)));
    c("LEDR shows class", LEDR == 10'(best));
    // mechanisms
    c($sformatf("pause held over %0d frame starts", n_paused_frames), n_paused_frames >= 1);
    c("one compression start", n_start == 1);
    c("784 image writes", n_imgwr == 784);
    c("load-use stalls", n_lu > 0);
    c("JR stalls", n_jr > 0);
    c("taken branches", n_br > 0);
    c("stack push/pop balanced", n_push > 0 && n_push == n_pop);
    c($sformatf("camera gray pixels %0d", n_fbw), n_fbw == 2 * 640);
    $display("cycles=%0d class=%0d paused_frames=%0d starts=%0d imgwr=%0d lu=%0d jr=%0d br=%0d push=%0d fbw=%0d",
             cycles, best, n_paused_frames, n_start, n_imgwr, n_lu, n_jr, n_br, n_push, n_fbw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
