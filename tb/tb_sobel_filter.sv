// tb_sobel_filter: self-checking test of the Sobel descriptor extractor.
// Streams two random 12 x 8 frames without gaps and compares every result
// with a direct evaluation of the 3x3 kernels (border pixels: 128), checks the
// raster order of the results, the latency (first result once W+2 pixels are
// in, i.e. W+1 pixels after the first) and the frame time of W*H+W+1 cycles.
module tb_sobel_filter;
  localparam int W = 12, H = 8, NF = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, frame_done;
  logic [7:0] in_pix, out_du, out_dv;
  logic [$clog2(W)-1:0] out_x;
  logic [$clog2(H)-1:0] out_y;

  sobel_filter #(.W(W), .H(H)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] img [NF][H][W];

  function automatic logic [7:0] ref_val(int f, int x, int y, bit vert);
    int g, t;
    if (x == 0 || y == 0 || x == W - 1 || y == H - 1) return 8'd128;
    if (!vert) g = img[f][y-1][x-1] - img[f][y-1][x+1] + 2 * img[f][y][x-1] - 2 * img[f][y][x+1]
                 + img[f][y+1][x-1] - img[f][y+1][x+1];
    else       g = img[f][y-1][x-1] + 2 * img[f][y-1][x] + img[f][y-1][x+1]
                 - img[f][y+1][x-1] - 2 * img[f][y+1][x] - img[f][y+1][x+1];
    t = (g >>> 2) + 128;
    if (t < 0) t = 0;
    if (t > 255) t = 255;
    return 8'(t);
  endfunction

  int n_acc = 0, n_out = 0, cyc = 0, first_acc_cyc = -1, first_out_acc = -1, fd_cyc [NF], nfd = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      int f, x, y;
      if (first_out_acc < 0) first_out_acc = n_acc;
      f = n_out / (W * H); x = n_out % W; y = (n_out / W) % H;
      checks++;
      if (int'(out_x) != x || int'(out_y) != y || out_du != ref_val(f, x, y, 0) || out_dv != ref_val(f, x, y, 1)) begin
        failures++;
        if (failures < 10) $display("mismatch at (%0d,%0d) f%0d: got %0d/%0d @(%0d,%0d) exp %0d/%0d", x, y, f,
          out_du, out_dv, out_x, out_y, ref_val(f, x, y, 0), ref_val(f, x, y, 1));
      end
      n_out++;
    end
    if (in_valid && in_ready) begin
      if (first_acc_cyc < 0) first_acc_cyc = cyc;
      n_acc++;
    end
    if (frame_done && nfd < NF) begin fd_cyc[nfd] = cyc; nfd++; end
  end

  initial begin
    for (int f = 0; f < NF; f++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[f][y][x] = 8'($urandom);
    img[0][3][4] = 255; img[0][3][6] = 0; img[0][2][5] = 255; img[0][4][5] = 0;   // saturating edges
    in_valid = 0; in_pix = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < W * H; i++) begin
        in_valid <= 1; in_pix <= img[f][i / W][i % W];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
    repeat (W + 10) @(posedge clk);
    checks++;
    if (n_out != NF * W * H) begin failures++; $display("%0d results, expected %0d", n_out, NF * W * H); end
    checks++;
    // the (W+2)-th accepted pixel completes the window of pixel (0,0)
    if (first_out_acc != W + 2) begin failures++; $display("first result after %0d pixels", first_out_acc); end
    checks++;
    if (nfd != NF || fd_cyc[0] - first_acc_cyc != W * H + W + 1) begin
      failures++; $display("frame time %0d cycles, expected %0d", fd_cyc[0] - first_acc_cyc, W * H + W + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
