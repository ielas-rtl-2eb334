// tb_interpolator: self-checking test of the support-point interpolator.
// Test 1 is the worked example of the paper (8 x 8 grid, s_delta = 5,
// eps = 3, C = 0): the output is compared with the printed result. One
// printed cell (row 2, column 3: 26) does not follow the stated rules
// (nearest points above and below are 38 and 46, so min = 38); it is
// checked against the rule instead.
// Test 2 streams random grids and compares every output with a brute-force
// search for the nearest points. Both tests run on the same design, whose
// support-point RAM is modelled here with one cycle of read latency.
module tb_interpolator;
  import ielas_pkg::*;
  localparam int GW = 8, GH = 8, S_DELTA = 5, EPS = 3, C = 0, NC = GW * GH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, out_valid, out_last;
  logic [$clog2(NC)-1:0] sp_raddr;
  sp_t sp_rdata;
  logic [$clog2(GW)-1:0] out_i;
  logic [$clog2(GH)-1:0] out_j;
  disp_t out_d;
  ikind_t out_kind;

  interpolator #(.GW(GW), .GH(GH), .S_DELTA(S_DELTA), .EPS(EPS), .C(C)) dut (.*);

  sp_t g [GH][GW];
  always_ff @(posedge clk) sp_rdata <= g[sp_raddr / GW][sp_raddr % GW];

  // Paper Fig. 3: input (0 = vacant) and printed output.
  int fig_in [GH][GW] = '{
    '{36, 0, 0,38, 0, 0, 0,38}, '{ 0, 0,26, 0,38, 0, 0, 0},
    '{38, 0, 0, 0, 0, 0, 0, 0}, '{ 0, 0, 0,46, 0, 0,32, 0},
    '{ 0, 0,24, 0, 0, 0, 0, 0}, '{ 0,54, 0, 0, 0, 0,54, 0},
    '{ 0, 0, 0,46, 0, 0, 0, 0}, '{ 0,32, 0, 0, 0, 0,52, 0}};
  int fig_out [GH][GW] = '{
    '{36,37,37,38,38,38,38,38}, '{37, 0,26,26,38, 0, 0, 0},
    '{38, 0,25,26, 0, 0, 0, 0}, '{ 0, 0,25,46,32,32,32, 0},
    '{ 0, 0,24,46, 0, 0,32, 0}, '{ 0,54,54,54,54,54,54, 0},
    '{ 0,32, 0,46, 0, 0,53, 0}, '{ 0,32,32,32,32,32,52, 0}};

  function automatic int pair(int a, int b);
    int df = (a > b) ? a - b : b - a;
    return (df <= EPS) ? (a + b) / 2 : ((a < b) ? a : b);
  endfunction

  function automatic void model(int i, int j, output int d, output ikind_t k);
    int l, r, t, b;
    l = -1; r = -1; t = -1; b = -1;
    if (g[j][i].valid) begin d = g[j][i].d; k = IK_ORIG; return; end
    for (int x = i - 1; x >= 0 && l < 0; x--) if (g[j][x].valid) l = x;
    for (int x = i + 1; x < GW && r < 0; x++) if (g[j][x].valid) r = x;
    for (int y = j - 1; y >= 0 && t < 0; y--) if (g[y][i].valid) t = y;
    for (int y = j + 1; y < GH && b < 0; y++) if (g[y][i].valid) b = y;
    if (l >= 0 && r >= 0 && i - l < S_DELTA && r - i < S_DELTA) begin
      d = pair(g[j][l].d, g[j][r].d); k = IK_HORIZ;
    end else if (t >= 0 && b >= 0 && j - t < S_DELTA && b - j < S_DELTA) begin
      d = pair(g[t][i].d, g[b][i].d); k = IK_VERT;
    end else begin d = C; k = IK_CONST; end
  endfunction

  int checks = 0, failures = 0, nout = 0, test = 0;
  int nkind [4];
  always @(posedge clk) if (rst_n && out_valid) begin
    int e; ikind_t k;
    model(out_i, out_j, e, k);
    checks++;
    if (int'(out_i) != nout % GW || int'(out_j) != nout / GW || int'(out_d) != e || out_kind != k ||
        out_last != (nout == NC - 1)) begin
      failures++;
      $display("(%0d,%0d): d %0d kind %0d, model %0d kind %0d", out_j, out_i, out_d, out_kind, e, k);
    end
    if (test == 0 && !(out_j == 2 && out_i == 3)) begin
      checks++;
      if (int'(out_d) != fig_out[out_j][out_i]) begin
        failures++; $display("fig: (%0d,%0d) %0d, printed %0d", out_j, out_i, out_d, fig_out[out_j][out_i]);
      end
    end
    if (test == 0 && out_j == 2 && out_i == 3) begin
      checks++;
      if (out_d != 8'd38) begin failures++; $display("fig cell (2,3): %0d", out_d); end
    end
    nkind[k]++;
    nout++;
  end

  task automatic run_frame();
    nout = 0;
    start = 1; @(posedge clk); #1 start = 0;
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    checks++;
    if (nout != NC) begin failures++; $display("%0d outputs", nout); end
  endtask

  initial begin
    start = 0;
    for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++)
      g[j][i] = '{valid: fig_in[j][i] != 0, d: 8'(fig_in[j][i])};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_frame();
    for (test = 1; test <= 40; test++) begin
      int dens = $urandom_range(2, 8);
      for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++) begin
        g[j][i].valid = ($urandom_range(dens) == 0);
        g[j][i].d = 8'($urandom_range(255));
        if ($urandom_range(1)) g[j][i].d = 8'(40 + $urandom_range(6));
      end
      run_frame();
    end
    checks++;
    if (nkind[IK_ORIG] == 0 || nkind[IK_HORIZ] == 0 || nkind[IK_VERT] == 0 || nkind[IK_CONST] == 0) begin
      failures++; $display("kind not exercised");
    end
    $display("kinds: orig %0d horiz %0d vert %0d const %0d", nkind[0], nkind[1], nkind[2], nkind[3]);
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
