// tb_support_point_extractor: self-checking test of the disparity search engine.
// Two engines (DIR = 0 and DIR = 1) read from behavioural descriptor memories
// in the testbench (random 128-bit descriptors, 1-cycle read latency, border
// rule as in the real memory). For random reference pixels the result is
// compared with a brute-force minimum-SAD search written here, and the time
// from start to done must be N+2 cycles for N candidates.
module tb_support_point_extractor;
  import ielas_pkg::*;
  localparam int W = 40, H = 8, D_NUM = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  desc_t img [2][H][W];            // [0] left, [1] right
  int checks = 0, failures = 0;

  logic start [2], busy [2], done [2], found [2], ref_ok [2], tgt_ok [2];
  logic signed [15:0] u [2], v [2], ref_u [2], ref_v [2], tgt_u [2], tgt_v [2];
  disp_t d_best [2];
  cost_t cost_best [2];
  desc_t ref_desc [2], tgt_desc [2];

  support_point_extractor #(.W(W), .D_NUM(D_NUM), .DIR(1'b0)) dut0 (
    .clk, .rst_n, .start(start[0]), .u(u[0]), .v(v[0]), .busy(busy[0]), .done(done[0]),
    .d_best(d_best[0]), .cost_best(cost_best[0]), .found(found[0]),
    .ref_u(ref_u[0]), .ref_v(ref_v[0]), .ref_desc(ref_desc[0]), .ref_ok(ref_ok[0]),
    .tgt_u(tgt_u[0]), .tgt_v(tgt_v[0]), .tgt_desc(tgt_desc[0]), .tgt_ok(tgt_ok[0]));
  support_point_extractor #(.W(W), .D_NUM(D_NUM), .DIR(1'b1)) dut1 (
    .clk, .rst_n, .start(start[1]), .u(u[1]), .v(v[1]), .busy(busy[1]), .done(done[1]),
    .d_best(d_best[1]), .cost_best(cost_best[1]), .found(found[1]),
    .ref_u(ref_u[1]), .ref_v(ref_v[1]), .ref_desc(ref_desc[1]), .ref_ok(ref_ok[1]),
    .tgt_u(tgt_u[1]), .tgt_v(tgt_v[1]), .tgt_desc(tgt_desc[1]), .tgt_ok(tgt_ok[1]));

  function automatic bit inimg(int x, int y);
    return x >= 2 && x <= W - 3 && y >= 2 && y <= H - 3;
  endfunction
  // behavioural memories: engine k reads its reference image k and target image 1-k
  for (genvar k = 0; k < 2; k++) begin : g_mem
    always_ff @(posedge clk) begin
      ref_ok[k]   <= inimg(ref_u[k], ref_v[k]);
      ref_desc[k] <= inimg(ref_u[k], ref_v[k]) ? img[k][ref_v[k]][ref_u[k]] : '0;
      tgt_ok[k]   <= inimg(tgt_u[k], tgt_v[k]);
      tgt_desc[k] <= inimg(tgt_u[k], tgt_v[k]) ? img[1-k][tgt_v[k]][tgt_u[k]] : '0;
    end
  end

  function automatic int sad(desc_t a, desc_t b);
    int s; s = 0;
    for (int i = 0; i < 16; i++) s += (a[8*i +: 8] > b[8*i +: 8]) ? a[8*i +: 8] - b[8*i +: 8] : b[8*i +: 8] - a[8*i +: 8];
    return s;
  endfunction

  task automatic run(int k, int uu, int vv);
    int best, bd, n, t, c, x;
    bit f;
    best = 0; bd = 0; f = 0; n = 0;
    for (int d = 0; d < D_NUM; d++) begin
      x = (k == 0) ? uu - d : uu + d;
      if (x >= 2 && x <= W - 3) begin
        n = d + 1;
        if (inimg(uu, vv)) begin
          c = sad(img[k][vv][uu], img[1-k][vv][x]);
          if (!f || c < best) begin f = 1; best = c; bd = d; end
        end
      end
    end
    start[k] = 1; u[k] = 16'(uu); v[k] = 16'(vv);
    @(posedge clk); #1 start[k] = 0;
    t = 1;
    while (!done[k]) begin @(posedge clk); #1; t++; end
    checks++;
    if (found[k] != f || (f && (int'(d_best[k]) != bd || int'(cost_best[k]) != best))) begin
      failures++;
      $display("DIR%0d (%0d,%0d): got %0d d=%0d c=%0d, expected %0d d=%0d c=%0d", k, uu, vv, found[k], d_best[k], cost_best[k], f, bd, best);
    end
    checks++;
    // t counts the edges from the start edge up to the one after done rose
    if (t - 1 != ((n == 0) ? 1 : n + 2)) begin failures++; $display("DIR%0d (%0d,%0d): %0d cycles for %0d candidates", k, uu, vv, t, n); end
  endtask

  initial begin
    for (int k = 0; k < 2; k++) begin start[k] = 0; u[k] = 0; v[k] = 0; end
    // left image random; right image = left shifted by 5 plus noise in half of the bytes
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      for (int i = 0; i < 4; i++) img[0][y][x][32*i +: 32] = $urandom;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      img[1][y][x] = (x + 5 < W) ? img[0][y][x + 5] : '0;
      if (x % 3 == 0) img[1][y][x][7:0] = img[1][y][x][7:0] ^ 8'h11;
      if (x % 4 == 0) for (int i = 0; i < 4; i++) img[1][y][x][32*i +: 32] = $urandom;  // unrelated
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      run(t % 2, $urandom_range(W + 1) - 1, $urandom_range(H - 1));
    end
    run(0, 2, 3);     // a single candidate
    run(0, 1, 3);     // border: nothing found
    run(1, W - 3, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
