// tb_dense_matcher: self-checking test of one dense-matching unit.
// The descriptor, RAM_GRID and mesh memories are behavioural models here
// (random contents, one cycle of read latency; descriptors exist only for
// centres at least 2 pixels from the border, as in the descriptor RAM).
// Descriptor bytes are small (0..3) so that equal energies are frequent
// and the tie rule (first candidate in list order wins) is exercised.
// Every output pixel is compared with a brute-force evaluation of all
// candidates (grid list, then mu-SRADIUS .. mu+SRADIUS). Three row bands
// are run to check row_lo / row_hi.
module tb_dense_matcher;
  import ielas_pkg::*;
  localparam int W = 40, H = 20, S = 5, GC = 4, D_NUM = 16, DEPTH = 4, SRADIUS = 2, PRIOR_W = 1;
  localparam int GW = W / S, GH = H / S, NGX = (GW + GC - 1) / GC, NGY = (GH + GC - 1) / GC;
  localparam int NCELL = NGX * NGY, CW = $clog2(DEPTH + 1), GWORD = CW + 8 * DEPTH, NSQ = (GW - 1) * (GH - 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, l_ok, r_ok, out_valid, out_ok, out_plane;
  logic [$clog2(H+1)-1:0] row_lo, row_hi;
  logic signed [15:0] l_u, l_v, r_u, r_v;
  desc_t l_desc, r_desc;
  logic [$clog2(NCELL)-1:0] g_raddr;
  logic [GWORD-1:0] g_rdata;
  logic [$clog2(NSQ)-1:0] m_raddr;
  logic [71:0] m_rdata;
  logic [$clog2(W)-1:0] out_u;
  logic [$clog2(H)-1:0] out_v;
  disp_t out_d;

  dense_matcher #(.W(W), .H(H), .S(S), .GC(GC), .D_NUM(D_NUM), .DEPTH(DEPTH),
                  .SRADIUS(SRADIUS), .PRIOR_W(PRIOR_W)) dut (.*);

  desc_t L [H][W], R [H][W];
  logic [GWORD-1:0] G [NCELL];
  logic [71:0] M [NSQ];

  function automatic bit inside_img(int u, int v);
    return u >= 2 && u <= W - 3 && v >= 2 && v <= H - 3;
  endfunction
  always_ff @(posedge clk) begin
    l_ok   <= inside_img(l_u, l_v);
    l_desc <= inside_img(l_u, l_v) ? L[l_v][l_u] : '0;
    r_ok   <= inside_img(r_u, r_v);
    r_desc <= inside_img(r_u, r_v) ? R[r_v][r_u] : '0;
    g_rdata <= G[g_raddr];
    m_rdata <= M[m_raddr];
  end

  function automatic int sad(desc_t a, desc_t b);
    int s = 0;
    for (int k = 0; k < 16; k++) s += (a[8*k +: 8] > b[8*k +: 8]) ? a[8*k +: 8] - b[8*k +: 8] : b[8*k +: 8] - a[8*k +: 8];
    return s;
  endfunction

  // brute-force reference for pixel (u, v)
  function automatic void model(int u, int v, output bit ok, output int d, output bit pl);
    int sx, sy, x, y, mu, a, b, t, cnt, best, e, c;
    logic [71:0] mw; logic [GWORD-1:0] gw;
    ok = 0; d = 0; pl = 0;
    if (!inside_img(u, v)) return;
    sx = (u < S / 2) ? 0 : (u - S / 2) / S; if (sx > GW - 2) sx = GW - 2;
    sy = (v < S / 2) ? 0 : (v - S / 2) / S; if (sy > GH - 2) sy = GH - 2;
    x = u - (S * sx + S / 2); y = v - (S * sy + S / 2);
    mw = M[sy * (GW - 1) + sx];
    if (x >= y) begin a = int'($signed(mw[63:48])); b = int'($signed(mw[47:32])); end
    else        begin a = int'($signed(mw[31:16])); b = int'($signed(mw[15:0])); end
    mu = int'(mw[71:64]) + ((a * x + b * y + 128) >>> 8);
    if (mu < 0) mu = 0;
    if (mu > D_NUM - 1) mu = D_NUM - 1;
    gw = G[(((v / (S * GC)) > NGY - 1) ? NGY - 1 : v / (S * GC)) * NGX + (((u / (S * GC)) > NGX - 1) ? NGX - 1 : u / (S * GC))];
    cnt = int'(gw[GWORD-1 -: CW]);
    best = 1 << 30;
    for (int k = 0; k < cnt + 2 * SRADIUS + 1; k++) begin
      bit isp = (k >= cnt);
      c = isp ? mu - SRADIUS + k - cnt : int'(gw[8*k +: 8]);
      if (c < 0 || c >= D_NUM || !inside_img(u - c, v)) continue;
      e = sad(L[v][u], R[v][u - c]) + PRIOR_W * ((c > mu) ? c - mu : mu - c);
      if (e < best) begin best = e; ok = 1; d = c; pl = isp; end
    end
  endfunction

  int checks = 0, failures = 0, nout = 0, nplane = 0, ngrid = 0, nnok = 0, exp_u, exp_v;
  always @(posedge clk) if (rst_n && out_valid) begin
    bit ok, pl; int d;
    model(out_u, out_v, ok, d, pl);
    checks++;
    if (int'(out_u) != exp_u || int'(out_v) != exp_v || out_ok != ok || (ok && (int'(out_d) != d || out_plane != pl))) begin
      failures++;
      $display("(%0d,%0d) exp (%0d,%0d): ok %0d d %0d pl %0d, model ok %0d d %0d pl %0d",
               out_u, out_v, exp_u, exp_v, out_ok, out_d, out_plane, ok, d, pl);
    end
    if (!ok) nnok++; else if (pl) nplane++; else ngrid++;
    nout++;
    if (exp_u == W - 1) begin exp_u = 0; exp_v++; end else exp_u++;
  end

  task automatic band(int lo, int hi);
    nout = 0; exp_u = 0; exp_v = lo;
    row_lo = ($bits(row_lo))'(lo); row_hi = ($bits(row_hi))'(hi);
    start = 1; @(posedge clk); #1 start = 0;
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    checks++;
    if (nout != (hi - lo) * W) begin failures++; $display("band %0d..%0d: %0d outputs", lo, hi, nout); end
  endtask

  initial begin
    start = 0; row_lo = 0; row_hi = 0;
    for (int v = 0; v < H; v++) for (int u = 0; u < W; u++)
      for (int k = 0; k < 16; k++) begin
        L[v][u][8*k +: 8] = 8'($urandom_range(3));
        R[v][u][8*k +: 8] = 8'($urandom_range(3));
      end
    for (int c = 0; c < NCELL; c++) begin
      int cnt = (c == 0) ? DEPTH : $urandom_range(1, DEPTH);
      G[c] = '0;
      G[c][GWORD-1 -: CW] = CW'(cnt);
      for (int k = 0; k < cnt; k++) G[c][8*k +: 8] = 8'($urandom_range(D_NUM - 1));
    end
    for (int q = 0; q < NSQ; q++)
      M[q] = {8'($urandom_range(D_NUM - 1)), 16'($urandom_range(0, 400) - 200), 16'($urandom_range(0, 400) - 200),
              16'($urandom_range(0, 400) - 200), 16'($urandom_range(0, 400) - 200)};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    band(0, 7);
    band(7, H);
    band(3, 4);
    checks++;
    if (nplane == 0 || ngrid == 0 || nnok == 0) begin failures++; $display("paths not exercised"); end
    $display("winners: plane %0d grid %0d none %0d", nplane, ngrid, nnok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
