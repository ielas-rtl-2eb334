// sobel_filter: descriptor extractor (3x3 horizontal and vertical Sobel filter).
//
// Pixels of one W x H image arrive in raster order, one per accepted cycle.
// Two line buffers of W pixels (LB2 fed by the input, LB1 fed by LB2) and a
// 3x3 register bank form the window win11..win33; the newest pixel enters
// win33, the two older rows come out of LB2 (row 2) and LB1 (row 1). This
// structure and the kernel
//     du = win11 - win13 + 2*win21 - 2*win23 + win31 - win33
//     dv = its transpose (win11 + 2*win12 + win13 - win31 - 2*win32 - win33)
// follow the paper. When input pixel n has been taken, the window is centred on
// pixel n-(W+1), so the first result appears after W+1 pixels; once the last
// pixel of the frame is in, the filter runs W+1 flush cycles on its own
// (in_ready low) so that every one of the W*H pixels gets a result. A frame of
// W*H pixels streamed without gaps therefore takes W*H+W+1 cycles.
//
// Own choices: results are scaled to 8 bits as clamp(sum/4 + 128, 0, 255)
// (the paper only says the stored results are 8-bit); pixels on the image
// border have no full window and get the flat value 128 in both outputs.
//
// Interface: in_valid/in_ready handshake for pixels; out_valid qualifies
// out_x/out_y/out_du/out_dv for one cycle; frame_done pulses with the last
// result of a frame.
module sobel_filter #(
  parameter int W = 640,
  parameter int H = 480
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [7:0]  in_pix,
  output logic        out_valid,
  output logic [$clog2(W)-1:0] out_x,
  output logic [$clog2(H)-1:0] out_y,
  output logic [7:0]  out_du,
  output logic [7:0]  out_dv,
  output logic        frame_done
);
  localparam int XW = $clog2(W);
  localparam int YW = $clog2(H);
  localparam int NPIX = W * H;
  localparam int NW = $clog2(NPIX + W + 2);

  logic [7:0] lb1 [W];
  logic [7:0] lb2 [W];
  logic [7:0] win [1:3][1:3];

  logic [XW-1:0] wx;          // column of the incoming pixel (line buffer pointer)
  logic [NW-1:0] n_in;        // pixels (and flush dummies) taken this frame
  logic          flushing;
  logic          step;
  logic [7:0]    pix;
  logic          win_ok;      // window holds a centre to emit
  logic [XW-1:0] cx;
  logic [YW-1:0] cy;

  assign in_ready = !flushing;
  assign step     = flushing || in_valid;
  assign pix      = flushing ? 8'd0 : in_pix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wx       <= '0;
      n_in     <= '0;
      flushing <= 1'b0;
      win_ok   <= 1'b0;
    end else begin
      win_ok <= 1'b0;
      if (step) begin
        wx   <= (wx == XW'(W - 1)) ? '0 : wx + 1'b1;
        n_in <= n_in + 1'b1;
        if (n_in >= NW'(W + 1)) win_ok <= 1'b1;   // centre index n_in-(W+1) >= 0
        if (!flushing && n_in == NW'(NPIX - 1)) flushing <= 1'b1;
        if (flushing && n_in == NW'(NPIX + W)) begin  // last flush step
          flushing <= 1'b0;
          n_in     <= '0;
          wx       <= '0;
        end
      end
    end
  end

  // Line buffers and register bank (Fig. 7 structure).
  always_ff @(posedge clk) begin
    if (step) begin
      lb2[wx] <= pix;
      lb1[wx] <= lb2[wx];
      for (int r = 1; r <= 3; r++) begin
        win[r][1] <= win[r][2];
        win[r][2] <= win[r][3];
      end
      win[3][3] <= pix;
      win[2][3] <= lb2[wx];
      win[1][3] <= lb1[wx];
    end
  end

  // Coordinates of the window centre, advanced once per emitted result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cx <= '0;
      cy <= '0;
    end else if (win_ok) begin
      if (cx == XW'(W - 1)) begin
        cx <= '0;
        cy <= (cy == YW'(H - 1)) ? '0 : cy + 1'b1;
      end else begin
        cx <= cx + 1'b1;
      end
    end
  end

  logic signed [11:0] gu, gv;
  logic               border;
  always_comb begin
    gu = 12'(signed'({4'd0, win[1][1]})) - 12'(signed'({4'd0, win[1][3]}))
       + 12'(signed'({3'd0, win[2][1], 1'b0})) - 12'(signed'({3'd0, win[2][3], 1'b0}))
       + 12'(signed'({4'd0, win[3][1]})) - 12'(signed'({4'd0, win[3][3]}));
    gv = 12'(signed'({4'd0, win[1][1]})) + 12'(signed'({3'd0, win[1][2], 1'b0})) + 12'(signed'({4'd0, win[1][3]}))
       - 12'(signed'({4'd0, win[3][1]})) - 12'(signed'({3'd0, win[3][2], 1'b0})) - 12'(signed'({4'd0, win[3][3]}));
    border = (cx == '0) || (cx == XW'(W - 1)) || (cy == '0) || (cy == YW'(H - 1));
  end

  function automatic logic [7:0] scale8(input logic signed [11:0] g);
    logic signed [11:0] t;
    t = (g >>> 2) + 12'sd128;
    if (t < 0)         return 8'd0;
    else if (t > 255)  return 8'd255;
    else               return t[7:0];
  endfunction

  assign out_valid  = win_ok;
  assign out_x      = cx;
  assign out_y      = cy;
  assign out_du     = border ? 8'd128 : scale8(gu);
  assign out_dv     = border ? 8'd128 : scale8(gv);
  assign frame_done = win_ok && (cx == XW'(W - 1)) && (cy == YW'(H - 1));

endmodule
