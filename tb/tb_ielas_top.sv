// tb_ielas_top: end-to-end test of the stereo accelerator at reduced size.
//
// Streams three synthetic stereo frames back to back. The left image is random
// texture; the right image is built from it with a known disparity field: a
// background at disparity BASE+f (f = frame number), bands at disparity 0
// along the top and bottom rows, a rectangular object at disparity BASE+f+6
// reaching the right border, a small object at BASE+f+12 and a textureless
// patch. The ground truth of every left pixel that is visible in the right
// image is known.
// Checks: every frame produces each of the W*H pixels exactly once; at least
// 85% of the interior ground-truth pixels get a disparity within +-1 of the
// truth (per frame, so frames mixed up in the ping-pong memory would fail);
// frame_done pulses once per frame. Each monitored mechanism (input stall,
// bank swap, left/right rejection, both filter removals, grid overflow, the
// three interpolation kinds, plane-prior choice) must occur at least once.
module tb_ielas_top;
  import ielas_pkg::*;

  localparam int W = 80, H = 40, D_NUM = 24, DEPTH = 4, S_DELTA = 5, EPS = 3, C = 0;
  localparam int NFR = 3, BASE = 3;

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

  ielas_top #(.W(W), .H(H), .D_NUM(D_NUM), .DEPTH(DEPTH), .S_DELTA(S_DELTA), .EPS(EPS), .C(C)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_left, .in_right,
    .out_valid, .out_u, .out_v, .out_d, .out_ok, .frame_done, .events);

  int checks = 0, failures = 0;

  function automatic logic [7:0] tex(int x, int y, int f);
    int unsigned h;
    h = x * 32'd2654435761 ^ (y + 1000 * f) * 32'd40503 ^ 32'h5bd1e995;
    h = h ^ (h >> 13); h = h * 32'd1274126177; h = h ^ (h >> 16);
    return h[7:0];
  endfunction
  // disparity of right-image pixel (x, y) in frame f
  function automatic int rdisp(int x, int y, int f);
    if (y < 10 || y >= 35) return 0;                                  // far bands
    if (x >= 40 && y >= 14 && y < 26) return BASE + f + 6;            // large object
    if (x >= 10 && x < 23 && y >= 19 && y < 30) return BASE + f + 12; // small object
    return BASE + f;
  endfunction
  function automatic logic [7:0] lpix(int x, int y, int f);
    if (x >= 20 && x < 28 && y >= 5 && y < 13) return 8'd90;   // textureless patch
    return tex(x, y, f);
  endfunction

  int gt [NFR][H][W];
  initial begin
    for (int f = 0; f < NFR; f++)
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++) gt[f][y][x] = -1;
        for (int x = 0; x < W; x++)
          if (x + rdisp(x, y, f) < W) begin
            int xl; xl = x + rdisp(x, y, f);
            if (gt[f][y][xl] < rdisp(x, y, f)) gt[f][y][xl] = rdisp(x, y, f);
          end
      end
  end

  // stimulus: frames back to back
  initial begin
    in_valid = 0; in_left = 0; in_right = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFR; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          in_valid <= 1;
          in_left  <= lpix(x, y, f);
          in_right <= (x + rdisp(x, y, f) < W) ? lpix(x + rdisp(x, y, f), y, f) : tex(x, y + 77, f);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    in_valid <= 0;
  end

  // output checking
  int frame_out = 0, frames_done = 0;
  bit seen [H][W];
  int good, total;
  int ev_cnt [10];
  initial for (int k = 0; k < 10; k++) ev_cnt[k] = 0;

  task automatic close_frame();
    int miss;
    miss = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) if (!seen[y][x]) miss++;
    checks++;
    if (miss != 0) begin failures++; $display("frame %0d: %0d pixels missing", frame_out, miss); end
    checks++;
    if (total == 0 || good * 100 < total * 85) begin
      failures++;
      $display("frame %0d: accuracy %0d/%0d too low", frame_out, good, total);
    end else $display("frame %0d: %0d/%0d interior pixels within +-1", frame_out, good, total);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) seen[y][x] = 0;
    good = 0; total = 0;
    frame_out++;
  endtask

  initial begin
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) seen[y][x] = 0;
    good = 0; total = 0;
  end

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 2; k++) if (out_valid[k]) begin
      int u, v, g;
      u = int'(out_u[k]); v = int'(out_v[k]);
      if (seen[v][u]) begin failures++; $display("pixel (%0d,%0d) twice", u, v); end
      seen[v][u] = 1;
      g = gt[frame_out < NFR ? frame_out : 0][v][u];
      // interior: full descriptor window and the whole disparity range inside the image
      if (g >= 0 && u >= D_NUM + 2 && u < W - 3 && v >= 2 && v < H - 3 && !(u >= 36 && v >= 11 && v < 29) && !(u >= 8 && u < 46 && v >= 16 && v < 33)
          && !(v >= 7 && v < 13) && !(v >= 32 && v < 38)) begin
        total++;
        if (out_ok[k] && (int'(out_d[k]) - g) <= 1 && (g - int'(out_d[k])) <= 1) good++;
      end
    end
    if (frame_done) begin
      frames_done++;
      close_frame();
    end
    if (events.in_stall)    ev_cnt[0]++;
    if (events.bank_swap)   ev_cnt[1]++;
    if (events.lr_reject)   ev_cnt[2]++;
    if (events.rm_incon)    ev_cnt[3]++;
    if (events.rm_redun)    ev_cnt[4]++;
    if (events.gv_overflow) ev_cnt[5]++;
    if (events.ip_horiz)    ev_cnt[6]++;
    if (events.ip_vert)     ev_cnt[7]++;
    if (events.ip_const)    ev_cnt[8]++;
    if (events.dm_plane)    ev_cnt[9]++;
  end

  string ev_name [10] = '{"in_stall", "bank_swap", "lr_reject", "rm_incon", "rm_redun",
                          "gv_overflow", "ip_horiz", "ip_vert", "ip_const", "dm_plane"};
  task automatic finish();
    for (int k = 0; k < 10; k++) begin
      checks++;
      $display("mechanism %-12s : %0d", ev_name[k], ev_cnt[k]);
      if (ev_cnt[k] == 0) begin failures++; $display("mechanism %s never happened", ev_name[k]); end
    end
    checks++;
    if (frames_done != NFR) begin failures++; $display("%0d frames done, expected %0d", frames_done, NFR); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    wait (frames_done == NFR);
    repeat (20) @(posedge clk);
    finish();
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    $display("watchdog: timeout after %0d frames", frames_done);
    failures++;
    finish();
  end
endmodule
