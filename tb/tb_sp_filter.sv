// tb_sp_filter: self-checking test of the support-point filter.
// A behavioural support-point RAM holds a 12 x 9 grid: a smooth field with
// runs of identical values (redundant points), isolated outliers (implausible
// points) and vacancies. The expected output of every position is computed
// here directly from the removal rules; the stream order, out_last and the
// removal pulses are checked, and both removal kinds must occur. Ten more
// random grids, with disparities spread around INCON_THR, test the edges of
// the thresholds.
module tb_sp_filter;
  import ielas_pkg::*;
  localparam int GW = 12, GH = 9, NC = GW * GH, IT = 5, IM = 5, RT = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, out_valid, out_last, rm_incon, rm_redun;
  logic [$clog2(NC)-1:0] sp_raddr;
  sp_t sp_rdata, out_sp;
  logic [$clog2(GW)-1:0] out_i;
  logic [$clog2(GH)-1:0] out_j;

  sp_filter #(.GW(GW), .GH(GH), .INCON_THR(IT), .INCON_MIN(IM), .REDUN_THR(RT)) dut (.*);

  sp_t g [GH][GW];
  always_ff @(posedge clk) sp_rdata <= g[int'(sp_raddr) / GW][int'(sp_raddr) % GW];

  function automatic bit okc(int i, int j);
    return i >= 0 && i < GW && j >= 0 && j < GH && g[j][i].valid;
  endfunction
  function automatic int ad(int a, int b); return a > b ? a - b : b - a; endfunction
  function automatic bit side(int i, int j, int di, int dj);
    for (int k = 1; k <= 2; k++)
      if (okc(i + k * di, j + k * dj)) return ad(g[j + k * dj][i + k * di].d, g[j][i].d) <= RT;
    return 0;
  endfunction
  // expected: 0 vacant, 1 kept, 2 implausible, 3 redundant
  function automatic int expect_of(int i, int j);
    int cnt;
    if (!g[j][i].valid) return 0;
    cnt = 0;
    for (int dj = -2; dj <= 2; dj++) for (int di = -2; di <= 2; di++)
      if (!(di == 0 && dj == 0) && okc(i + di, j + dj) && ad(g[j + dj][i + di].d, g[j][i].d) <= IT) cnt++;
    if (cnt < IM) return 2;
    if ((side(i, j, -1, 0) && side(i, j, 1, 0)) || (side(i, j, 0, -1) && side(i, j, 0, 1))) return 3;
    return 1;
  endfunction

  int checks = 0, failures = 0, n = 0, n_inc = 0, n_red = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    int i, j, e;
    i = n % GW; j = n / GW; e = expect_of(i, j);
    checks++;
    if (int'(out_i) != i || int'(out_j) != j || out_sp.valid != (e == 1) || (e == 1 && out_sp.d != g[j][i].d)
        || rm_incon != (e == 2) || rm_redun != (e == 3) || out_last != (n == NC - 1)) begin
      failures++;
      $display("(%0d,%0d): got @(%0d,%0d) v%0d d%0d inc%0d red%0d, expected kind %0d", i, j, out_i, out_j,
               out_sp.valid, out_sp.d, rm_incon, rm_redun, e);
    end
    if (e == 2) n_inc++;
    if (e == 3) n_red++;
    n++;
  end

  initial begin
    start = 0;
    for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++) begin
      g[j][i].valid = ($urandom_range(9) != 0);
      g[j][i].d     = 8'(20 + i / 3 + (j > 4 ? 2 : 0));
    end
    g[4][5].d = 90; g[2][9].d = 3; g[7][2].d = 60;       // outliers
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int rep = 0; rep < 12; rep++) begin
      n = 0;
      if (rep >= 2)        // random grids: disparities spread around the thresholds
        for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++) begin
          g[j][i].valid = ($urandom_range(5) != 0);
          g[j][i].d     = 8'(30 + $urandom_range(2 * IT + 4));
        end
      start = 1; @(posedge clk); #1 start = 0;
      while (!done) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      checks++;
      if (n != NC) begin failures++; $display("%0d outputs", n); end
    end
    checks++;
    if (n_inc == 0 || n_red == 0) begin failures++; $display("removals: %0d implausible %0d redundant", n_inc, n_red); end
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
