// tb_ielas_kitti: one complete frame through the accelerator built for the
// KITTI image size (1242 x 375 pixels, disparities 0..255; only W and H are
// changed from the defaults). Same scene and checks as the default-size
// frame test, with the object scaled to the image.
//
// The left image is random texture; the right image is built from it with a
// background at disparity 20 and a rectangular object at disparity 44. The
// test checks that every pixel is output exactly once, that frame_done
// pulses, and that at least 85% of the interior pixels with known ground
// truth (columns where the whole disparity range lies inside the image, away
// from the object's edges) come out within +-1 of the truth.
module tb_ielas_kitti;
  import ielas_pkg::*;

  localparam int W = 1242, H = 375, D_NUM = 256;
  // object rectangle in the right image (disparity 44)
  localparam int OX0 = 600, OX1 = 900, OY0 = 100, OY1 = 280;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready;
  logic [7:0] in_left, in_right;
  logic out_valid [2];
  logic [$clog2(W)-1:0] out_u [2];
  logic [$clog2(H)-1:0] out_v [2];
  logic [7:0] out_d [2];
  logic out_ok [2];
  logic frame_done;
  ev_t  events;

  ielas_top #(.W(W), .H(H)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_left, .in_right,
    .out_valid, .out_u, .out_v, .out_d, .out_ok, .frame_done, .events);

  int checks = 0, failures = 0;

  function automatic logic [7:0] tex(int x, int y);
    int unsigned h;
    h = x * 32'd2654435761 ^ y * 32'd40503 ^ 32'h5bd1e995;
    h = h ^ (h >> 13); h = h * 32'd1274126177; h = h ^ (h >> 16);
    return h[7:0];
  endfunction
  function automatic int rdisp(int x, int y);
    if (x >= OX0 && x < OX1 && y >= OY0 && y < OY1) return 44;
    return 20;
  endfunction

  initial begin
    in_valid = 0; in_left = 0; in_right = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        in_valid <= 1;
        in_left  <= tex(x, y);
        in_right <= (x + rdisp(x, y) < W) ? tex(x + rdisp(x, y), y) : tex(x, y + 1000);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
  end

  bit seen [H][W];
  int good = 0, total = 0, nout = 0, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int k = 0; k < 2; k++) if (out_valid[k]) begin
      int u, v, g;
      u = int'(out_u[k]); v = int'(out_v[k]);
      if (seen[v][u]) failures++;
      seen[v][u] = 1;
      nout++;
      // ground truth of the left pixel: object pixels land at x+44, background at x+20
      g = (u >= OX0 + 44 && u < OX1 + 44 && v >= OY0 && v < OY1) ? 44 : 20;
      if (u >= D_NUM + 2 && u < W - 3 && v >= 2 && v < H - 3
          && !(u >= OX0 + 20 && u < OX1 + 70 && v >= OY0 - 10 && v < OY1 + 10
               && !(u >= OX0 + 54 && u < OX1 + 34 && v >= OY0 + 10 && v < OY1 - 10))) begin
        total++;
        if (out_ok[k] && (int'(out_d[k]) - g) <= 1 && (g - int'(out_d[k])) <= 1) good++;
      end
    end
  end

  task automatic finish();
    checks++;
    if (nout != W * H) begin failures++; $display("%0d pixels out, expected %0d", nout, W * H); end
    checks++;
    if (total == 0 || good * 100 < total * 85) failures++;
    $display("%0d/%0d interior pixels within +-1, %0d cycles", good, total, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    @(posedge frame_done);
    checks++;
    repeat (5) @(posedge clk);
    finish();
  end

  initial begin : watchdog
    repeat (40000000) @(posedge clk);
    $display("watchdog: frame not finished");
    failures++;
    finish();
  end
endmodule
