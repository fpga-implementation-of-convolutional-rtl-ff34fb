// image_recog: top level of the handwriting-recognition system.
//
// A camera pixel stream is captured (ccd_capture), turned to grayscale
// (raw2gray) and handed to an external frame buffer (SDRAM controller and
// SDRAM, outside this design, reached through the fb_* ports). The VGA
// controller reads the frame buffer back in raster order for the monitor
// and passes the 224 x 224 capture window to the image compressor, which
// averages it to 28 x 28 and writes it, zero-padded to 32 x 32, into the
// image memory. The 32-bit floating-point processor runs the classifier
// firmware: it requests a snapshot, converts the image to floating point,
// runs the network with weights from the weight memory and sends the
// predicted character over the UART.
//
// Processor address map (word addresses), decoded here:
//   0x00000000-0x00001FFF  data memory (inside the processor)
//   0x0000C000  LEDR[9:0] (write; reads back)      0x0000C001  SW[9:0] (read)
//   0x0000C004  UART: write sends a byte; read returns
//               {22'b0, tx_full, rx_valid, rx_byte} and pops the byte
//   0x0000C008  snapshot: write 1 to request; reads 1 until the compressed
//               image is in the image memory
//   0x00010000-0x000103FF  image memory, 8-bit pixels zero-extended
//   0x00020000-0x0002F8A5  weight memory (63,654 words)
// Other addresses read 0 and ignore writes.
//
// Clocking: one clock (50 MHz) for everything; the 25 MHz VGA pixel rate is
// a clock enable toggling every other cycle, and the camera pixel clock is
// assumed to be this clock. The design used separate 50 MHz, 25 MHz and
// camera clocks from a PLL; merging them into one clock domain with an
// enable is this design's choice, as are the load ports for the
// instruction and weight memories (the design loaded both from hex files
// at configuration) and the frame-buffer port handshake.
module image_recog
  import cpu_pkg::*;
#(
  parameter int IM_DEPTH     = 1024,
  parameter int DM_DEPTH     = 8192,
  parameter int STACK_DEPTH  = 1024,
  parameter int N_WEIGHTS    = 63654,
  parameter int CLKS_PER_BIT = 434,
  parameter int SENSOR_WIDTH = 1280
) (
  input  logic        clk,
  input  logic        rst_n,
  // program and weight loading
  input  logic        prog_we,
  input  logic [$clog2(IM_DEPTH)-1:0] prog_addr,
  input  logic [31:0] prog_data,
  input  logic        wload_we,
  input  logic [$clog2(N_WEIGHTS)-1:0] wload_addr,
  input  logic [31:0] wload_data,
  // board I/O
  input  logic [9:0]  SW,
  output logic [9:0]  LEDR,
  input  logic        KEY2_n,          // pause (freeze) button, active low
  output logic        uart_txd,
  input  logic        uart_rxd,
  // camera
  input  logic [11:0] d5m_d,
  input  logic        d5m_fval,
  input  logic        d5m_lval,
  input  logic        cap_start,
  input  logic        cap_end,
  // frame buffer (SDRAM controller) write side: gray pixels
  output logic        fb_wr_en,
  output logic [11:0] fb_wr_data,
  output logic [15:0] fb_wr_x,
  output logic [15:0] fb_wr_y,
  // frame buffer read side: raster-order pixel stream
  output logic        fb_rd_req,
  input  logic [7:0]  fb_rd_gray,
  // VGA
  output logic        vga_hs,
  output logic        vga_vs,
  output logic        vga_blank_n,
  output logic [7:0]  vga_r,
  output logic [7:0]  vga_g,
  output logic [7:0]  vga_b,
  // status
  output logic        halted
);
  localparam int WAW = $clog2(N_WEIGHTS);

  // ------------------------------------------------------------ processor
  logic [31:0] ext_addr, ext_wdata, ext_rdata, pc;
  logic        ext_we, ext_re;
  logic        s_lu, s_jr, br;

  cpu #(.IM_DEPTH(IM_DEPTH), .DM_DEPTH(DM_DEPTH), .STACK_DEPTH(STACK_DEPTH)) u_cpu (
    .clk(clk), .rst_n(rst_n),
    .prog_we(prog_we), .prog_addr(prog_addr), .prog_data(prog_data),
    .ext_addr(ext_addr), .ext_wdata(ext_wdata), .ext_we(ext_we), .ext_re(ext_re),
    .ext_rdata(ext_rdata), .pc(pc), .halted(halted),
    .stall_load_use(s_lu), .stall_jr(s_jr), .branch_taken(br));

  // ------------------------------------------------------------ decode
  logic sel_led, sel_sw, sel_uart, sel_cmp, sel_img, sel_w;
  logic [31:0] uart_rdata, w_rdata, w_off;
  logic [7:0]  img_cpu;
  logic        compress_req;

  always_comb begin
    sel_led  = ext_addr == ADDR_LEDR;
    sel_sw   = ext_addr == ADDR_SW;
    sel_uart = ext_addr == ADDR_UART;
    sel_cmp  = ext_addr == ADDR_COMPRESS;
    sel_img  = ext_addr[31:10] == IMAGE_MEM_BASE[31:10];
    w_off    = ext_addr - WEIGHT_ROM_BASE;
    sel_w    = ext_addr >= WEIGHT_ROM_BASE && w_off < 32'(N_WEIGHTS);
    unique0 case (1'b1)
      sel_led:  ext_rdata = {22'd0, LEDR};
      sel_sw:   ext_rdata = {22'd0, SW};
      sel_uart: ext_rdata = uart_rdata;
      sel_cmp:  ext_rdata = {31'd0, compress_req};
      sel_img:  ext_rdata = {24'd0, img_cpu};
      sel_w:    ext_rdata = w_rdata;
      default:  ext_rdata = 32'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 LEDR <= '0;
    else if (ext_we && sel_led) LEDR <= ext_wdata[9:0];
  end

  // ------------------------------------------------------------ peripherals
  uart #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk(clk), .rst_n(rst_n), .wr(ext_we && sel_uart), .wdata(ext_wdata),
    .rd(ext_re && sel_uart), .rdata(uart_rdata), .tx(uart_txd), .rx(uart_rxd));

  weight_rom #(.DEPTH(N_WEIGHTS)) u_wrom (
    .clk(clk), .addr(WAW'(w_off)), .rdata(w_rdata),
    .load_we(wload_we), .load_addr(wload_addr), .load_data(wload_data));

  // ------------------------------------------------------------ image path
  logic        pix_en;
  logic        win_valid;
  logic [7:0]  win_x, win_y, win_gray;
  logic [9:0]  echo_addr, caddr, caddrx;
  logic [7:0]  echo_gray, cpix;
  logic        c_wr, c_done, c_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pix_en <= 1'b0;
    else        pix_en <= ~pix_en;
  end

  vga_controller u_vga (
    .clk(clk), .rst_n(rst_n), .pix_en(pix_en),
    .pix_req(fb_rd_req), .iGray(fb_rd_gray),
    .echo_addr(echo_addr), .echo_gray(echo_gray),
    .win_valid(win_valid), .win_x(win_x), .win_y(win_y), .win_gray(win_gray),
    .vga_hs(vga_hs), .vga_vs(vga_vs), .vga_blank_n(vga_blank_n),
    .vga_r(vga_r), .vga_g(vga_g), .vga_b(vga_b));

  compress_control u_cctl (
    .clk(clk), .rst_n(rst_n), .we(ext_we && sel_cmp), .compress_wdata(ext_wdata[0]),
    .pause(!KEY2_n), .pix_valid(win_valid),
    .uncompress_addr_x(win_x), .uncompress_addr_y(win_y),
    .done(c_done), .compress_req(compress_req), .compress_start(c_start));

  image_compressor_x u_comp (
    .clk(clk), .rst_n(rst_n), .start(c_start), .pix_valid(win_valid),
    .pix_color_in(win_gray), .pix_haddr(win_x), .pix_vaddr(win_y),
    .sram_wr(c_wr), .pix_color_out(cpix), .compress_addr(caddr),
    .compress_addrx(caddrx), .done(c_done));

  image_mem u_imem (
    .clk(clk), .rst_n(rst_n), .we(c_wr), .waddr(caddrx), .wdata(cpix),
    .cpu_raddr(ext_addr[9:0]), .cpu_rdata(img_cpu),
    .vga_raddr(echo_addr), .vga_rdata(echo_gray));

  // ------------------------------------------------------------ camera
  logic [11:0] cap_d;
  logic        cap_v;
  logic [15:0] cap_x, cap_y;
  logic [31:0] frame_cnt;

  ccd_capture u_ccd (
    .clk(clk), .rst_n(rst_n), .iDATA(d5m_d), .iFVAL(d5m_fval), .iLVAL(d5m_lval),
    .iSTART(cap_start), .iEND(cap_end), .oDATA(cap_d), .oDVAL(cap_v),
    .oX_Cont(cap_x), .oY_Cont(cap_y), .oFrame_Cont(frame_cnt));

  raw2gray #(.WIDTH(SENSOR_WIDTH)) u_gray (
    .clk(clk), .rst_n(rst_n), .iDATA(cap_d), .iDVAL(cap_v),
    .iX_Cont(cap_x), .iY_Cont(cap_y), .oGray(fb_wr_data), .oDVAL(fb_wr_en),
    .oX(fb_wr_x), .oY(fb_wr_y));
endmodule
