// fc_workload_tb: the two fully connected classifiers that preceded the
// convolutional network, run as firmware on the whole system at its
// default sizes: a linear classifier (784 x 36 weights) and a two-layer
// network (784-64 with ReLU, then 64-36). Both have 36 classes and no
// biases. Their weights (28,224 and 52,480 words) fit the weight memory.
// They are run one after the other. For each run the testbench resets the
// system, loads that classifier's firmware and weights, and lets it take
// its own snapshot.
//
// Weight i of a run is (k - 4) / 16, where k =
// ((i * 0x9E3779B1 + run) >> 16) mod 9. The weights are stored row by row:
// [output][input].
//
// Firmware:
//   MAIN         requests a snapshot and polls until it is done. It calls
//                PRE_28, then loops over the outputs of each layer with
//                MATRIX_MUL. It finds the largest score, sends its
//                character over the UART and shows the index on LEDR.
//   PRE_28       converts the 28 x 28 interior of the zero-padded image
//                memory to floats at data memory 0-783. The compressor
//                writes the padded 32 x 32 image of the network, so this
//                routine skips the border.
//   MATRIX_MUL   is the dot-product routine of the network firmware.
// The two-layer network keeps its hidden layer at 1000-1063. Both
// classifiers write their scores to 8000-8035.
//
// Checks: the converted image exactly; every score, and every hidden
// value, against a `real` reference computed from the layer's input,
// within 1e-4 of the sum of absolute values of the terms; the predicted
// class; the UART character; LEDR.
module fc_workload_tb;
  import cpu_pkg::*;
  import fp_tb_pkg::*;
  localparam int CPB = 434;
  logic clk = 0, rst_n = 0;
  logic prog_we = 0, wload_we = 0;
  logic [9:0] prog_addr = 0; logic [31:0] prog_data = 0;
  logic [15:0] wload_addr = 0; logic [31:0] wload_data = 0;
  logic [9:0] SW = 10'h0, LEDR;
  logic KEY2_n = 1, txd, rxd = 1;
  logic fb_wr_en, fb_rd_req, hs, vs, bn, halted;
  logic [11:0] fb_wr_data; logic [15:0] fb_wr_x, fb_wr_y;
  logic [7:0] fb_rd_gray, r, g, b;
  int checks = 0, failures = 0, n = 0, run = 0;
  logic [31:0] prog [1024];
  int fb_k = 0;
  int cycles = 0;
  byte uart_bytes [$];

  always #5 clk = ~clk;

  image_recog dut (.clk(clk), .rst_n(rst_n), .prog_we(prog_we), .prog_addr(prog_addr),
    .prog_data(prog_data), .wload_we(wload_we), .wload_addr(wload_addr), .wload_data(wload_data),
    .SW(SW), .LEDR(LEDR), .KEY2_n(KEY2_n), .uart_txd(txd), .uart_rxd(rxd),
    .d5m_d(12'd0), .d5m_fval(1'b0), .d5m_lval(1'b0), .cap_start(1'b0), .cap_end(1'b0),
    .fb_wr_en(fb_wr_en), .fb_wr_data(fb_wr_data), .fb_wr_x(fb_wr_x), .fb_wr_y(fb_wr_y),
    .fb_rd_req(fb_rd_req), .fb_rd_gray(fb_rd_gray),
    .vga_hs(hs), .vga_vs(vs), .vga_blank_n(bn), .vga_r(r), .vga_g(g), .vga_b(b), .halted(halted));

  // ---- frame buffer model: a "4" on a textured field
  function automatic logic [7:0] pic(input int x, input int y);
    int dx, dy;
    dx = x - 320; dy = y - 240;
    if (dx > 10 && dx < 30 && dy > -90 && dy < 90) return 8'd240;                // stem
    if (dy > 10 && dy < 28 && dx > -60 && dx < 50) return 8'd220;                 // bar
    if (dx + dy / 2 > -45 && dx + dy / 2 < -25 && dy > -90 && dy <= 10) return 8'd200; // slant
    return 8'((x * 5 + y * 11) % 31);
  endfunction
  always_comb fb_rd_gray = pic(fb_k % 640, (fb_k / 640) % 480);
  always @(posedge clk) if (!rst_n) fb_k <= 0; else if (fb_rd_req) fb_k <= fb_k + 1;
  always @(posedge clk) if (rst_n) cycles++;

  function automatic real wv(input int i);
    logic [31:0] h;
    h = 32'(i) * 32'h9E37_79B1 + 32'(run);
    return real'(int'(h[31:16] % 9) - 4) / 16.0;
  endfunction

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
  function automatic void li(input int d, input int v);
    e(enc_i16(OP_LLB, d, v & 16'hFFFF)); e(enc_i16(OP_LHB, d, (v >> 16) & 16'hFFFF));
  endfunction
  task automatic c(input string what, input bit ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic real hw(input int a); return f2r(dut.u_cpu.u_dmem.mem[a]); endfunction
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction

  // firmware for one run: a list of fully connected layers
  //   layer l: weights at wb[l], input at ib[l], ni[l] inputs, no[l] outputs,
  //   output at ob[l], ReLU if l is not the last
  task automatic build(input int nl, input int wb [2], input int ib [2], input int ni [2],
                       input int no [2], input int ob [2]);
    int lp, skip, dig, send, j_pre, PRE, MM;
    int j_mm [2];
    PRE = 200; MM = 240;
    n = 0;
    foreach (prog[i]) prog[i] = 0;
    li(30, 32'h0000_C000);
    e(enc_i16(OP_LLB, 1, 1));
    e(enc_i8(OP_SW, 1, 30, 8));
    lp = n;
    e(enc_i8(OP_LW, 27, 30, 8));
    e(enc_r(OP_ADD, 27, 27, 0));
    e(enc_b(BR_NEQ, lp - (n + 1)));
    j_pre = n; e(0);
    for (int l = 0; l < nl; l++) begin
      li(2, 32'h0002_0000 + wb[l]);
      e(enc_i16(OP_LLB, 20, no[l])); e(enc_i16(OP_LLB, 29, ob[l]));
      lp = n;
      e(enc_i16(OP_LLB, 3, ib[l])); e(enc_i16(OP_LLB, 4, ni[l]));
      j_mm[l] = n; e(0);
      if (l < nl - 1) begin
        e(enc_r(OP_ADDF, 28, 28, 0));
        e(enc_b(BR_GTE, 1));
        e(enc_i16(OP_LLB, 28, 0));
      end
      e(enc_i8(OP_SW, 28, 29, 0));
      e(enc_i8(OP_ADDI, 29, 29, 1));
      e(enc_i8(OP_SUBI, 20, 20, 1));
      e(enc_b(BR_NEQ, lp - (n + 1)));
    end
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
    prog[j_pre] = enc_jal(PRE - (j_pre + 1));
    for (int l = 0; l < nl; l++) prog[j_mm[l]] = enc_jal(MM - (j_mm[l] + 1));
    // PRE_28: R3 walks the image memory from row 2, column 2; R5 the output;
    // R9 rows left, R8 columns left
    n = PRE;
    li(3, 32'h0001_0000 + 2 * 32 + 2);
    e(enc_i16(OP_LLB, 5, 0));
    e(enc_i16(OP_LLB, 9, 28));
    lp = n;
    e(enc_i16(OP_LLB, 8, 28));
    begin
      int lc;
      lc = n;
      e(enc_i8(OP_LW, 6, 3, 0));
      e(enc_i8(OP_ADDI, 3, 3, 1));
      e(enc_r(OP_ITF, 6, 6, 0));
      e(enc_i8(OP_SW, 6, 5, 0));
      e(enc_i8(OP_ADDI, 5, 5, 1));
      e(enc_i8(OP_SUBI, 8, 8, 1));
      e(enc_b(BR_NEQ, lc - (n + 1)));
    end
    e(enc_i8(OP_ADDI, 3, 3, 4));                      // skip the border
    e(enc_i8(OP_SUBI, 9, 9, 1));
    e(enc_b(BR_NEQ, lp - (n + 1)));
    e(enc_jr(31));
    if (n > MM) $fatal(1, "pre too long");
    // MATRIX_MUL(R2 weights, R3 data, R4 length) -> R28
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
  endtask

  task automatic go(input string name, input int nl, input int nw, input int wb [2], input int ib [2],
                    input int ni [2], input int no [2], input int ob [2]);
    real img [784];
    real sc [36];
    int bad, t0, hb, rb;
    build(nl, wb, ib, ni, no, ob);
    rst_n = 0;
    uart_bytes.delete();
    repeat (2) @(negedge clk);
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); prog_we = 1; prog_addr = 10'(i); prog_data = prog[i];
    end
    for (int i = 0; i < nw; i++) begin
      @(negedge clk); prog_we = 0; wload_we = 1; wload_addr = 16'(i); wload_data = r2f_trunc(wv(i));
    end
    @(negedge clk); prog_we = 0; wload_we = 0;
    rst_n = 1;
    t0 = cycles;
    wait (halted);
    repeat (12 * CPB) @(posedge clk);
    $display("%s: %0d cycles", name, cycles - t0);

    for (int by = 0; by < 28; by++)
      for (int bx = 0; bx < 28; bx++) begin
        int s;
        s = 0;
        for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++)
          s += pic(208 + bx * 8 + x, 128 + by * 8 + y);
        img[by * 28 + bx] = real'(s / 64);
      end
    bad = 0;
    for (int i = 0; i < 784; i++) if (hw(i) != img[i]) bad++;
    c($sformatf("%s: converted image (%0d wrong)", name, bad), bad == 0);
    for (int l = 0; l < nl; l++) begin
      bad = 0;
      for (int o = 0; o < no[l]; o++) begin
        real s, sa, t, got;
        s = 0.0; sa = 0.0;
        for (int i = 0; i < ni[l]; i++) begin
          t = ((l == 0) ? img[i] : hw(ib[l] + i)) * wv(wb[l] + o * ni[l] + i);
          s += t; sa += fabs(t);
        end
        if (l < nl - 1 && s < 0.0) s = 0.0;
        if (l == nl - 1) sc[o] = s;
        got = hw(ob[l] + o);
        if (fabs(got - s) > 1.0e-4 * sa + 1.0e-30) begin
          if (bad < 5) $display("FAIL %s layer %0d output %0d got %g exp %g", name, l, o, got, s);
          bad++;
        end
      end
      c($sformatf("%s: layer %0d, %0d values (%0d wrong)", name, l + 1, no[l], bad), bad == 0);
    end
    hb = 0; rb = 0;
    for (int k = 0; k < 36; k++) begin
      if (hw(8000 + k) > hw(8000 + hb)) hb = k;
      if (sc[k] > sc[rb]) rb = k;
    end
    c($sformatf("%s: class %0d (reference best %0d)", name, hb, rb), sc[hb] >= sc[rb] - 1.0e-3 * fabs(sc[rb]));
    c($sformatf("%s: one UART byte", name), uart_bytes.size() == 1);
    if (uart_bytes.size() > 0)
      c($sformatf("%s: character %c", name, uart_bytes[0]),
        uart_bytes[0] == ((hb < 10) ? 8'(48 + hb) : 8'(55 + hb)));
    c($sformatf("%s: LEDR", name), LEDR == 10'(hb));
  endtask

  initial begin
    int wb [2], ib [2], ni [2], no [2], ob [2];
    // linear classifier: 784 x 36
    run = 0;
    wb = '{0, 0}; ib = '{0, 0}; ni = '{784, 0}; no = '{36, 0}; ob = '{8000, 0};
    go("linear 784x36", 1, 784 * 36, wb, ib, ni, no, ob);
    // two-layer network: 784-64 (ReLU), 64-36
    run = 1;
    wb = '{0, 784 * 64}; ib = '{0, 1000}; ni = '{784, 64}; no = '{64, 36}; ob = '{1000, 8000};
    go("network 784-64-36", 2, 784 * 64 + 64 * 36, wb, ib, ni, no, ob);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
