// ccd_capture: receives the pixel stream of the D5M camera sensor and
// tracks where each pixel belongs.
//
// The sensor's data, FVAL (frame valid) and LVAL (line valid) inputs are
// registered once. A pixel is valid (oDVAL) when both FVAL and LVAL are
// high and capture is enabled. oX_Cont counts the valid pixels of a line
// and returns to 0 when LVAL falls; oY_Cont counts lines and returns to 0
// at the start of a frame (rising FVAL); oFrame_Cont counts frames.
// iSTART enables capture and iEND stops it, both taking effect at the next
// frame start so that only whole frames are passed on.
//
// From the design: capture of the pixel data and clock and the frame, x
// and y counters. This design's choices: counter widths, the exact reset
// points of the counters, and the whole-frame start/stop.
module ccd_capture (
  input  logic        clk,          // D5M_PIXCLK domain
  input  logic        rst_n,
  input  logic [11:0] iDATA,
  input  logic        iFVAL,
  input  logic        iLVAL,
  input  logic        iSTART,
  input  logic        iEND,
  output logic [11:0] oDATA,
  output logic        oDVAL,
  output logic [15:0] oX_Cont,
  output logic [15:0] oY_Cont,
  output logic [31:0] oFrame_Cont
);
  logic [11:0] d_q;
  logic        fval_q, lval_q, fval_qq, lval_qq;
  logic        run, run_req;
  logic [15:0] x, y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q <= '0; fval_q <= 1'b0; lval_q <= 1'b0; fval_qq <= 1'b0; lval_qq <= 1'b0;
      run <= 1'b0; run_req <= 1'b0; x <= '0; y <= '0; oFrame_Cont <= '0;
    end else begin
      d_q <= iDATA; fval_q <= iFVAL; lval_q <= iLVAL;
      fval_qq <= fval_q; lval_qq <= lval_q;
      if (iSTART) run_req <= 1'b1;
      if (iEND)   run_req <= 1'b0;
      if (fval_q && !fval_qq) begin           // frame start
        run <= run_req;
        y   <= '0;
        x   <= '0;
        if (run_req) oFrame_Cont <= oFrame_Cont + 1'b1;
      end else if (fval_q) begin
        if (fval_q && lval_q) x <= x + 1'b1;
        if (!lval_q && lval_qq) begin          // line end
          x <= '0;
          y <= y + 1'b1;
        end
      end
    end
  end

  assign oDATA   = d_q;
  assign oDVAL   = run && fval_q && lval_q;
  assign oX_Cont = x;
  assign oY_Cont = y;
endmodule
