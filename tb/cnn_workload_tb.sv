// cnn_workload_tb: the complete 36-class convolutional network run as
// firmware on the processor, on the whole system at its default sizes.
//
// The network: a zero-padded 32 x 32 input image; conv 6 x 1 x 5 x 5 with
// ReLU (28 x 28 x 6); 2 x 2 average pooling (14 x 14 x 6); conv
// 16 x 6 x 5 x 5 with ReLU (10 x 10 x 16); 2 x 2 average pooling (400);
// fully connected 400-120 and 120-84 with ReLU; 84-36 class scores;
// argmax. There are no biases. The weights are 63,654 words in this order
// in the weight memory: conv1, conv2, fc1, fc2, fc3, each in
// [out][in][row][col] order. Weight i is (k - 4) / 16, where k =
// ((i * 0x9E3779B1) >> 16) mod 9. These values are exact in binary, so
// only the summations round.
//
// The firmware follows the data-memory plan of the network firmware:
//   0-1023 image, 1024-5727 conv1, 5728-6903 pool1,
//   then, reusing the space, 0-1599 conv2, 1600-1999 pool2,
//   2000-2119 fc1, 2120-2203 fc2, 8000-8035 scores.
// It has a main program and five routines. The main program requests a
// snapshot, polls until it is done and calls the routines below. It then
// loops over the outputs of each fully connected layer with MATRIX_MUL,
// finds the largest score, sends its character over the UART and shows
// the index on LEDR.
//   PRE_PROCESS  converts the image integers to floating point (ITF).
//   CONV         is a 5 x 5 convolution over all input channels; each
//                kernel row is five loads, five loads, five MULF and five
//                ADDF. It ends with ReLU.
//   AVG_POOL     averages 2 x 2 blocks, multiplying the sum by 0.25.
//   MATRIX_MUL   returns a dot product in R28.
//
// Checking: each layer's output in data memory is compared with a
// reference computed in `real` from that layer's input. The input is the
// hardware's own previous layer where it is still in memory, otherwise
// the reference. Because the processor truncates instead of rounding,
// each value may differ from the exact sum by a small fraction of the sum
// of the absolute values of its terms (1e-4 of it here). The image memory
// is checked exactly. The predicted class must be the largest hardware
// score. Its reference score must be within tolerance of the largest
// reference score. The character and LEDR must match the class. The
// cycle count of one classification is checked to be within a factor of
// two of the roughly 3.7 million cycles the original firmware needed.
module cnn_workload_tb;
  import cpu_pkg::*;
  import fp_tb_pkg::*;
  localparam int NW = 63654, CPB = 434;
  localparam int W_C1 = 0, W_C2 = 150, W_F1 = 2550, W_F2 = 50550, W_F3 = 60630;
  logic clk = 0, rst_n = 0;
  logic prog_we = 0, wload_we = 0;
  logic [9:0] prog_addr = 0; logic [31:0] prog_data = 0;
  logic [15:0] wload_addr = 0; logic [31:0] wload_data = 0;
  logic [9:0] SW = 10'h0, LEDR;
  logic KEY2_n = 1, txd, rxd = 1;
  logic fb_wr_en, fb_rd_req, hs, vs, bn, halted;
  logic [11:0] fb_wr_data; logic [15:0] fb_wr_x, fb_wr_y;
  logic [7:0] fb_rd_gray, r, g, b;
  int checks = 0, failures = 0, n = 0;
  logic [31:0] prog [1024];
  int fb_k = 0;
  int n_lu = 0, n_jr = 0, n_br = 0, cycles = 0, t_snap = 0;
  byte uart_bytes [$];

  always #5 clk = ~clk;

  image_recog dut (.clk(clk), .rst_n(rst_n), .prog_we(prog_we), .prog_addr(prog_addr),
    .prog_data(prog_data), .wload_we(wload_we), .wload_addr(wload_addr), .wload_data(wload_data),
    .SW(SW), .LEDR(LEDR), .KEY2_n(KEY2_n), .uart_txd(txd), .uart_rxd(rxd),
    .d5m_d(12'd0), .d5m_fval(1'b0), .d5m_lval(1'b0), .cap_start(1'b0), .cap_end(1'b0),
    .fb_wr_en(fb_wr_en), .fb_wr_data(fb_wr_data), .fb_wr_x(fb_wr_x), .fb_wr_y(fb_wr_y),
    .fb_rd_req(fb_rd_req), .fb_rd_gray(fb_rd_gray),
    .vga_hs(hs), .vga_vs(vs), .vga_blank_n(bn), .vga_r(r), .vga_g(g), .vga_b(b), .halted(halted));

  // ---- frame buffer model: a handwritten-looking "7" on a textured field
  function automatic logic [7:0] pic(input int x, input int y);
    int dx, dy;
    dx = x - 320; dy = y - 240;
    if (dy > -80 && dy < -60 && dx > -70 && dx < 70) return 8'd250;             // top stroke
    if (dx + dy / 2 > 20 && dx + dy / 2 < 42 && dy >= -60 && dy < 90) return 8'd230; // diagonal
    return 8'((x * 7 + y * 3) % 29);
  endfunction
  assign fb_rd_gray = pic(fb_k % 640, (fb_k / 640) % 480);
  always @(posedge clk) if (fb_rd_req) fb_k <= fb_k + 1;

  function automatic real wv(input int i);
    logic [31:0] h;
    h = 32'(i) * 32'h9E37_79B1;
    return real'(int'(h[31:16] % 9) - 4) / 16.0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.s_lu) n_lu++;
    if (dut.s_jr) n_jr++;
    if (dut.br) n_br++;
    if (t_snap == 0 && dut.c_start) t_snap = cycles;
  end

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

  function automatic void e(input logic [31:0] i); prog[n] = i; n++; endfunction
  // load a 32-bit constant
  function automatic void li(input int d, input int v);
    e(enc_i16(OP_LLB, d, v & 16'hFFFF)); e(enc_i16(OP_LHB, d, (v >> 16) & 16'hFFFF));
  endfunction
  task automatic c(input string what, input bit ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- reference data
  real img [1024];
  real c1 [6*28*28], p1 [6*14*14], c2 [16*100], p2 [400], f3 [36];
  real c1_s [6*28*28];

  function automatic real hw(input int a); return f2r(dut.u_cpu.u_dmem.mem[a]); endfunction
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction

  task automatic chk(input string what, input int addr, input real ref_v, input real s_abs,
                     input real slack, inout int bad);
    real got, tol;
    got = hw(addr);
    tol = 1.0e-4 * s_abs + slack;
    if (fabs(got - ref_v) > tol) begin
      if (bad < 5) $display("FAIL %s @%0d got %g exp %g tol %g", what, addr, got, ref_v, tol);
      bad++;
    end
  endtask

  initial begin
    int lp, lp2, lp3, lp4, skip, dig, send;
    int PRE, CONV, POOL, MM;
    int j_pre, j_c1, j_p1, j_c2, j_p2, j_mm [3];
    int bad;
    PRE = 200; CONV = 230; POOL = 330; MM = 380;
    foreach (prog[i]) prog[i] = 0;
    // ================= MAIN
    li(30, 32'h0000_C000);
    e(enc_i16(OP_LLB, 1, 1));
    e(enc_i8(OP_SW, 1, 30, 8));                       // snapshot request
    lp = n;
    e(enc_i8(OP_LW, 27, 30, 8));
    e(enc_r(OP_ADD, 27, 27, 0));
    e(enc_b(BR_NEQ, lp - (n + 1)));
    li(3, 32'h0001_0000); e(enc_i16(OP_LLB, 4, 1024));
    j_pre = n; e(0);
    // conv1: kernels at W_C1, image DM 0, side 32, 1 -> 6 channels, out 1024
    li(2, 32'h0002_0000 + W_C1); e(enc_i16(OP_LLB, 3, 0)); e(enc_i16(OP_LLB, 4, 32));
    e(enc_i16(OP_LLB, 6, 1)); e(enc_i16(OP_LLB, 7, 6)); e(enc_i16(OP_LLB, 29, 1024));
    j_c1 = n; e(0);
    // pool1: 1024, side 28, 6 channels -> 5728
    e(enc_i16(OP_LLB, 3, 1024)); e(enc_i16(OP_LLB, 4, 28)); e(enc_i16(OP_LLB, 6, 6));
    e(enc_i16(OP_LLB, 29, 5728));
    j_p1 = n; e(0);
    // conv2: kernels at W_C2, image 5728, side 14, 6 -> 16 channels, out 0
    li(2, 32'h0002_0000 + W_C2); e(enc_i16(OP_LLB, 3, 5728)); e(enc_i16(OP_LLB, 4, 14));
    e(enc_i16(OP_LLB, 6, 6)); e(enc_i16(OP_LLB, 7, 16)); e(enc_i16(OP_LLB, 29, 0));
    j_c2 = n; e(0);
    // pool2: 0, side 10, 16 channels -> 1600
    e(enc_i16(OP_LLB, 3, 0)); e(enc_i16(OP_LLB, 4, 10)); e(enc_i16(OP_LLB, 6, 16));
    e(enc_i16(OP_LLB, 29, 1600));
    j_p2 = n; e(0);
    // three fully connected layers: R2 weights, R18 input, R17 inputs, R20 outputs, R29 out
    for (int l = 0; l < 3; l++) begin
      int wb, ib, ni, no, ob;
      wb = (l == 0) ? W_F1 : (l == 1) ? W_F2 : W_F3;
      ib = (l == 0) ? 1600 : (l == 1) ? 2000 : 2120;
      ni = (l == 0) ? 400  : (l == 1) ? 120  : 84;
      no = (l == 0) ? 120  : (l == 1) ? 84   : 36;
      ob = (l == 0) ? 2000 : (l == 1) ? 2120 : 8000;
      li(2, 32'h0002_0000 + wb);
      e(enc_i16(OP_LLB, 20, no)); e(enc_i16(OP_LLB, 29, ob));
      lp = n;
      e(enc_i16(OP_LLB, 3, ib)); e(enc_i16(OP_LLB, 4, ni));
      j_mm[l] = n; e(0);                              // R2 advances to the next row
      if (l < 2) begin                                // ReLU
        e(enc_r(OP_ADDF, 28, 28, 0));
        e(enc_b(BR_GTE, 1));
        e(enc_i16(OP_LLB, 28, 0));
      end
      e(enc_i8(OP_SW, 28, 29, 0));
      e(enc_i8(OP_ADDI, 29, 29, 1));
      e(enc_i8(OP_SUBI, 20, 20, 1));
      e(enc_b(BR_NEQ, lp - (n + 1)));
    end
    // OUTPUT_LAYER: argmax of 36 scores at 8000 (first on a tie)
    e(enc_i16(OP_LLB, 29, 8000));
    e(enc_i8(OP_LW, 7, 29, 0));
    e(enc_i16(OP_LLB, 8, 0));
    e(enc_i16(OP_LLB, 2, 1));
    lp = n;
    e(enc_r(OP_ADD, 11, 29, 2));
    e(enc_i8(OP_LW, 4, 11, 0));
    e(enc_r(OP_SUBF, 5, 4, 7));
    skip = n; e(0);
    e(enc_r(OP_ADD, 7, 4, 0));
    e(enc_r(OP_ADD, 8, 2, 0));
    prog[skip] = enc_b(BR_LTE, n - (skip + 1));
    e(enc_i8(OP_ADDI, 2, 2, 1));
    e(enc_i8(OP_SUBI, 6, 2, 36));
    e(enc_b(BR_NEQ, lp - (n + 1)));
    e(enc_i8(OP_SUBI, 10, 8, 10));
    dig = n; e(0);
    e(enc_i8(OP_ADDI, 9, 8, 55));
    send = n; e(0);
    prog[dig] = enc_b(BR_LT, n - (dig + 1));
    e(enc_i8(OP_ADDI, 9, 8, 48));
    prog[send] = enc_b(BR_UNCOND, n - (send + 1));
    e(enc_i8(OP_SW, 9, 30, 4));
    e(enc_i8(OP_SW, 8, 30, 0));
    e(enc_hlt());
    if (n > PRE) $fatal(1, "main too long");
    prog[j_pre]   = enc_jal(PRE - (j_pre + 1));
    prog[j_c1]    = enc_jal(CONV - (j_c1 + 1));
    prog[j_c2]    = enc_jal(CONV - (j_c2 + 1));
    prog[j_p1]    = enc_jal(POOL - (j_p1 + 1));
    prog[j_p2]    = enc_jal(POOL - (j_p2 + 1));
    foreach (j_mm[l]) prog[j_mm[l]] = enc_jal(MM - (j_mm[l] + 1));

    // ================= PRE_PROCESS(R3 image pointer, R4 size) -> DM 0..
    n = PRE;
    e(enc_i16(OP_LLB, 5, 0));
    lp = n;
    e(enc_i8(OP_LW, 6, 3, 0));
    e(enc_r(OP_ITF, 6, 6, 0));
    e(enc_i8(OP_SW, 6, 5, 0));
    e(enc_i8(OP_ADDI, 3, 3, 1));
    e(enc_i8(OP_ADDI, 5, 5, 1));
    e(enc_i8(OP_SUBI, 4, 4, 1));
    e(enc_b(BR_NEQ, lp - (n + 1)));
    e(enc_jr(31));
    if (n > CONV) $fatal(1, "pre too long");

    // ================= CONV(R2 kernels, R3 image, R4 side in, R6 ch in, R7 ch out, R29 out)
    // R5 side out, R8 x, R9 y, R10 sum, R11 kernel pointer, R12 pixel pointer,
    // R13 channel base, R14 channel counter, R15 channel size, R16-R20 pixels,
    // R21-R25 weights, R26 kernel-row counter, R23/R27 temporaries.
    n = CONV;
    e(enc_i8(OP_SUBI, 5, 4, 4));
    e(enc_r(OP_MUL, 15, 4, 4));
    lp = n;                                           // output channel
    e(enc_i16(OP_LLB, 9, 0));
    lp2 = n;                                          // y
    e(enc_i16(OP_LLB, 8, 0));
    lp3 = n;                                          // x
    e(enc_i16(OP_LLB, 10, 0));
    e(enc_r(OP_MUL, 27, 9, 4));
    e(enc_r(OP_ADD, 13, 3, 27));
    e(enc_r(OP_ADD, 13, 13, 8));
    e(enc_r(OP_ADD, 11, 2, 0));
    e(enc_r(OP_ADD, 14, 6, 0));
    lp4 = n;                                          // input channel
    e(enc_r(OP_ADD, 12, 13, 0));
    e(enc_i16(OP_LLB, 26, 5));
    begin
      int ky;
      ky = n;                                         // kernel row
      for (int k = 0; k < 5; k++) e(enc_i8(OP_LW, 16 + k, 12, k));
      for (int k = 0; k < 5; k++) e(enc_i8(OP_LW, 21 + k, 11, k));
      for (int k = 0; k < 5; k++) e(enc_r(OP_MULF, 16 + k, 16 + k, 21 + k));
      for (int k = 0; k < 5; k++) e(enc_r(OP_ADDF, 10, 10, 16 + k));
      e(enc_r(OP_ADD, 12, 12, 4));
      e(enc_i8(OP_ADDI, 11, 11, 5));
      e(enc_i8(OP_SUBI, 26, 26, 1));
      e(enc_b(BR_NEQ, ky - (n + 1)));
    end
    e(enc_r(OP_ADD, 13, 13, 15));
    e(enc_i8(OP_SUBI, 14, 14, 1));
    e(enc_b(BR_NEQ, lp4 - (n + 1)));
    e(enc_r(OP_ADDF, 10, 10, 0));                     // ReLU
    e(enc_b(BR_GTE, 1));
    e(enc_i16(OP_LLB, 10, 0));
    e(enc_i8(OP_SW, 10, 29, 0));
    e(enc_i8(OP_ADDI, 29, 29, 1));
    e(enc_i8(OP_ADDI, 8, 8, 1));
    e(enc_r(OP_SUB, 23, 8, 5));
    e(enc_b(BR_NEQ, lp3 - (n + 1)));
    e(enc_i8(OP_ADDI, 9, 9, 1));
    e(enc_r(OP_SUB, 23, 9, 5));
    e(enc_b(BR_NEQ, lp2 - (n + 1)));
    e(enc_r(OP_ADD, 2, 11, 0));                       // next output channel's kernels
    e(enc_i8(OP_SUBI, 7, 7, 1));
    e(enc_b(BR_NEQ, lp - (n + 1)));
    e(enc_jr(31));
    if (n > POOL) $fatal(1, "conv too long");

    // ================= AVG_POOL(R3 input, R4 side, R6 channels, R29 out)
    // R2 0.25, R5 side out, R8 x, R9 y, R12 row pointer, R13/R14 block rows,
    // R7 R10 R11 R15 pixels.
    n = POOL;
    li(2, 32'h3E80_0000);
    e(enc_r(OP_SRL, 5, 4, 1));
    e(enc_r(OP_ADD, 12, 3, 0));
    lp = n;                                           // channel
    e(enc_i16(OP_LLB, 9, 0));
    lp2 = n;                                          // y
    e(enc_i16(OP_LLB, 8, 0));
    lp3 = n;                                          // x
    e(enc_r(OP_ADD, 13, 12, 8));
    e(enc_r(OP_ADD, 13, 13, 8));
    e(enc_r(OP_ADD, 14, 13, 4));
    e(enc_i8(OP_LW, 7, 13, 0));
    e(enc_i8(OP_LW, 10, 13, 1));
    e(enc_i8(OP_LW, 11, 14, 0));
    e(enc_i8(OP_LW, 15, 14, 1));
    e(enc_r(OP_ADDF, 7, 7, 10));
    e(enc_r(OP_ADDF, 11, 11, 15));
    e(enc_r(OP_ADDF, 7, 7, 11));
    e(enc_r(OP_MULF, 7, 7, 2));
    e(enc_i8(OP_SW, 7, 29, 0));
    e(enc_i8(OP_ADDI, 29, 29, 1));
    e(enc_i8(OP_ADDI, 8, 8, 1));
    e(enc_r(OP_SUB, 23, 8, 5));
    e(enc_b(BR_NEQ, lp3 - (n + 1)));
    e(enc_r(OP_ADD, 12, 12, 4));
    e(enc_r(OP_ADD, 12, 12, 4));
    e(enc_i8(OP_ADDI, 9, 9, 1));
    e(enc_r(OP_SUB, 23, 9, 5));
    e(enc_b(BR_NEQ, lp2 - (n + 1)));
    e(enc_i8(OP_SUBI, 6, 6, 1));
    e(enc_b(BR_NEQ, lp - (n + 1)));
    e(enc_jr(31));
    if (n > MM) $fatal(1, "pool too long");

    // ================= MATRIX_MUL(R2 weights, R3 data, R4 length) -> R28
    n = MM;
    e(enc_i16(OP_LLB, 28, 0));
    lp = n;
    e(enc_i8(OP_LW, 7, 2, 0));
    e(enc_i8(OP_LW, 6, 3, 0));
    e(enc_i8(OP_ADDI, 3, 3, 1));
    e(enc_i8(OP_ADDI, 2, 2, 1));
    e(enc_r(OP_MULF, 8, 6, 7));
    e(enc_r(OP_ADDF, 28, 28, 8));
    e(enc_i8(OP_SUBI, 4, 4, 1));
    e(enc_b(BR_NEQ, lp - (n + 1)));
    e(enc_jr(31));

    // ---------------- load program and weights, run
    repeat (2) @(negedge clk);
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); prog_we = 1; prog_addr = 10'(i); prog_data = prog[i];
    end
    for (int i = 0; i < NW; i++) begin
      @(negedge clk); prog_we = 0; wload_we = 1; wload_addr = 16'(i); wload_data = r2f_trunc(wv(i));
    end
    @(negedge clk); wload_we = 0;
    rst_n = 1;
    wait (halted);
    repeat (12 * CPB) @(posedge clk);

    // ---------------- reference network
    for (int by = 0; by < 32; by++)
      for (int bx = 0; bx < 32; bx++) begin
        int s;
        s = 0;
        if (by >= 2 && by < 30 && bx >= 2 && bx < 30)
          for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++)
            s += pic(208 + (bx - 2) * 8 + x, 128 + (by - 2) * 8 + y);
        img[by * 32 + bx] = real'(s / 64);
      end
    bad = 0;
    for (int i = 0; i < 1024; i++) if (real'(dut.u_imem.mem[i]) != img[i]) bad++;
    c($sformatf("image memory (%0d wrong)", bad), bad == 0);

    // conv1 from the image; DM 2204..5727 still hold it
    bad = 0;
    for (int o = 0; o < 6; o++) for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) begin
      real s, sa, t;
      int idx;
      s = 0.0; sa = 0.0;
      for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++) begin
        t = img[(y + ky) * 32 + x + kx] * wv(W_C1 + o * 25 + ky * 5 + kx);
        s += t; sa += fabs(t);
      end
      idx = o * 784 + y * 28 + x;
      c1[idx] = (s > 0.0) ? s : 0.0; c1_s[idx] = sa;
      if (1024 + idx >= 2204) chk("conv1", 1024 + idx, c1[idx], sa, 1.0e-30, bad);
    end
    c($sformatf("conv1, %0d values (%0d wrong)", 5728 - 2204, bad), bad == 0);

    // pool1 from conv1 (hardware values where still present)
    bad = 0;
    for (int ch = 0; ch < 6; ch++) for (int y = 0; y < 14; y++) for (int x = 0; x < 14; x++) begin
      real s, sa, v, slack;
      int a;
      s = 0.0; sa = 0.0; slack = 0.0;
      for (int k = 0; k < 4; k++) begin
        a = ch * 784 + (2 * y + k / 2) * 28 + 2 * x + k % 2;
        if (1024 + a >= 2204) v = hw(1024 + a);
        else begin v = c1[a]; slack += 0.25 * 1.0e-4 * c1_s[a]; end
        s += v; sa += fabs(v);
      end
      p1[ch * 196 + y * 14 + x] = 0.25 * s;
      chk("pool1", 5728 + ch * 196 + y * 14 + x, 0.25 * s, 0.25 * sa, slack + 1.0e-30, bad);
    end
    c($sformatf("pool1, 1176 values (%0d wrong)", bad), bad == 0);

    // conv2 from the hardware pool1
    bad = 0;
    for (int o = 0; o < 16; o++) for (int y = 0; y < 10; y++) for (int x = 0; x < 10; x++) begin
      real s, sa, t;
      s = 0.0; sa = 0.0;
      for (int ic = 0; ic < 6; ic++)
        for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++) begin
          t = hw(5728 + ic * 196 + (y + ky) * 14 + x + kx) *
              wv(W_C2 + o * 150 + ic * 25 + ky * 5 + kx);
          s += t; sa += fabs(t);
        end
      c2[o * 100 + y * 10 + x] = (s > 0.0) ? s : 0.0;
      chk("conv2", o * 100 + y * 10 + x, c2[o * 100 + y * 10 + x], sa, 1.0e-30, bad);
    end
    c($sformatf("conv2, 1600 values (%0d wrong)", bad), bad == 0);

    // pool2 from the hardware conv2
    bad = 0;
    for (int ch = 0; ch < 16; ch++) for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++) begin
      real s, sa, v;
      s = 0.0; sa = 0.0;
      for (int k = 0; k < 4; k++) begin
        v = hw(ch * 100 + (2 * y + k / 2) * 10 + 2 * x + k % 2);
        s += v; sa += fabs(v);
      end
      p2[ch * 25 + y * 5 + x] = 0.25 * s;
      chk("pool2", 1600 + ch * 25 + y * 5 + x, 0.25 * s, 0.25 * sa, 1.0e-30, bad);
    end
    c($sformatf("pool2, 400 values (%0d wrong)", bad), bad == 0);

    // fully connected layers, each from the hardware's previous layer
    for (int l = 0; l < 3; l++) begin
      int wb, ib, ni, no, ob;
      wb = (l == 0) ? W_F1 : (l == 1) ? W_F2 : W_F3;
      ib = (l == 0) ? 1600 : (l == 1) ? 2000 : 2120;
      ni = (l == 0) ? 400  : (l == 1) ? 120  : 84;
      no = (l == 0) ? 120  : (l == 1) ? 84   : 36;
      ob = (l == 0) ? 2000 : (l == 1) ? 2120 : 8000;
      bad = 0;
      for (int o = 0; o < no; o++) begin
        real s, sa, t;
        s = 0.0; sa = 0.0;
        for (int i = 0; i < ni; i++) begin
          t = hw(ib + i) * wv(wb + o * ni + i);
          s += t; sa += fabs(t);
        end
        if (l < 2 && s < 0.0) s = 0.0;
        if (l == 2) f3[o] = s;
        chk($sformatf("fc%0d", l + 1), ob + o, s, sa, 1.0e-30, bad);
      end
      c($sformatf("fc%0d, %0d values (%0d wrong)", l + 1, no, bad), bad == 0);
    end

    // prediction
    begin
      int hb, rb, nz;
      real tol;
      hb = 0; rb = 0; nz = 0;
      for (int k = 0; k < 36; k++) begin
        if (hw(8000 + k) > hw(8000 + hb)) hb = k;
        if (f3[k] > f3[rb]) rb = k;
        if (f3[k] != 0.0) nz++;
      end
      tol = 1.0e-3 * fabs(f3[rb]);
      c($sformatf("class %0d (reference best %0d, scores %g vs %g)", hb, rb, f3[hb], f3[rb]),
        f3[hb] >= f3[rb] - tol);
      c("scores not trivially zero", nz > 30);
      c("one UART byte", uart_bytes.size() == 1);
      if (uart_bytes.size() > 0)
        c($sformatf("character %c", uart_bytes[0]),
          uart_bytes[0] == ((hb < 10) ? 8'(48 + hb) : 8'(55 + hb)));
      c("LEDR shows class", LEDR == 10'(hb));
      $display("predicted class %0d, character %c", hb, (hb < 10) ? 8'(48 + hb) : 8'(55 + hb));
    end
    begin
      int t_cls;
      t_cls = cycles - t_snap;
      c($sformatf("snapshot + classification %0d cycles, within 2x of 3.7M", t_cls),
        t_cls > 1850000 && t_cls < 7400000);
      c("load-use stalls and taken branches seen", n_lu > 0 && n_br > 0);
      $display("cycles=%0d from-snapshot=%0d load-use=%0d jr=%0d branches=%0d", cycles, t_cls, n_lu, n_jr, n_br);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #150ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
