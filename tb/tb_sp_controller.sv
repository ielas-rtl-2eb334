// tb_sp_controller: self-checking test of the support-point stage.
// Behavioural descriptor memories (two read ports per image, 1-cycle
// latency) hold random left descriptors and right descriptors built with a
// known disparity field plus an unrelated patch. For every candidate of the
// 8 x 4 support grid the expected support point is worked out here by brute
// force: left search d1, right search d2 from (u-d1), accept if |d1-d2| <= 2.
// The written RAM words, their addresses and the lr_reject pulses are checked.
module tb_sp_controller;
  import ielas_pkg::*;
  localparam int W = 40, H = 20, S = 5, D_NUM = 12, LR = 2;
  localparam int GW = W / S, GH = H / S, NC = GW * GH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  desc_t img [2][H][W];
  int checks = 0, failures = 0;

  logic start, done, sp_we, lr_reject;
  logic signed [15:0] l_u [2], l_v [2], r_u [2], r_v [2];
  desc_t l_desc [2], r_desc [2];
  logic l_ok [2], r_ok [2];
  logic [$clog2(NC)-1:0] sp_waddr;
  sp_t sp_wdata;

  sp_controller #(.W(W), .H(H), .S(S), .D_NUM(D_NUM), .LR_THR(LR)) dut (.*);

  function automatic bit inimg(int x, int y);
    return x >= 2 && x <= W - 3 && y >= 2 && y <= H - 3;
  endfunction
  for (genvar p = 0; p < 2; p++) begin : g_mem
    always_ff @(posedge clk) begin
      l_ok[p]   <= inimg(l_u[p], l_v[p]);
      l_desc[p] <= inimg(l_u[p], l_v[p]) ? img[0][l_v[p]][l_u[p]] : '0;
      r_ok[p]   <= inimg(r_u[p], r_v[p]);
      r_desc[p] <= inimg(r_u[p], r_v[p]) ? img[1][r_v[p]][r_u[p]] : '0;
    end
  end

  function automatic int sad(desc_t a, desc_t b);
    int s; s = 0;
    for (int i = 0; i < 16; i++) s += (a[8*i +: 8] > b[8*i +: 8]) ? a[8*i +: 8] - b[8*i +: 8] : b[8*i +: 8] - a[8*i +: 8];
    return s;
  endfunction
  // brute-force search; k = 0: reference left, target right at u-d
  function automatic int search(int k, int uu, int vv);
    int best, bd, c, x;
    bd = -1; best = 0;
    if (!inimg(uu, vv)) return -1;
    for (int d = 0; d < D_NUM; d++) begin
      x = (k == 0) ? uu - d : uu + d;
      if (x >= 2 && x <= W - 3) begin
        c = sad(img[k][vv][uu], img[1-k][vv][x]);
        if (bd < 0 || c < best) begin best = c; bd = d; end
      end
    end
    return bd;
  endfunction

  sp_t exp_sp [NC];
  bit  exp_rej [NC];
  int  nwr = 0, nrej = 0, nrej_exp = 0;
  always @(posedge clk) if (rst_n) begin
    if (sp_we) begin
      checks++;
      if (int'(sp_waddr) != nwr || sp_wdata != exp_sp[nwr] || lr_reject != exp_rej[nwr]) begin
        failures++;
        $display("write %0d: addr %0d data %0d/%0d rej %0d, expected %0d/%0d rej %0d", nwr, sp_waddr,
                 sp_wdata.valid, sp_wdata.d, lr_reject, exp_sp[nwr].valid, exp_sp[nwr].d, exp_rej[nwr]);
      end
      nwr++;
    end
  end

  initial begin
    start = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      for (int i = 0; i < 4; i++) img[0][y][x][32*i +: 32] = $urandom;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      int d; d = (x < 18) ? 3 : 7;
      img[1][y][x] = (x + d < W) ? img[0][y][x + d] : '0;
      if (x >= 24 && x < 30 && y >= 5 && y < 10)        // unrelated patch: unreliable matches
        for (int i = 0; i < 4; i++) img[1][y][x][32*i +: 32] = $urandom;
    end
    for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++) begin
      int u, v, d1, d2, a;
      u = S * i + S / 2; v = S * j + S / 2; a = j * GW + i;
      d1 = search(0, u, v);
      d2 = (d1 >= 0) ? search(1, u - d1, v) : -1;
      exp_sp[a].valid = d1 >= 0 && d2 >= 0 && (d1 - d2 <= LR) && (d2 - d1 <= LR);
      exp_sp[a].d     = (d1 >= 0) ? 8'(d1) : 8'(0);
      exp_rej[a]      = d1 >= 0 && !exp_sp[a].valid;
      if (exp_rej[a]) nrej_exp++;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      nwr = 0;
      start = 1; @(posedge clk); #1 start = 0;
      while (!done) begin @(posedge clk); #1; end
      @(posedge clk); #1;      // the last write is counted at this edge
      checks++;
      if (nwr != NC) begin failures++; $display("%0d writes, expected %0d", nwr, NC); end
    end
    checks++;
    if (nrej_exp == 0) begin failures++; $display("scene produced no left/right rejection"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
