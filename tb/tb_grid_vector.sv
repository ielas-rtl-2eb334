// tb_grid_vector: self-checking test of the grid-vector builder.
// A 12 x 8 support grid (cells of 4 x 4 points, so 3 x 2 cells) is streamed
// in with random valid points. The expected word of every cell (sorted
// distinct disparities d-1..d+1 of the points of the cell and its
// neighbouring cells, at most DEPTH of them) and the overflow pulses are
// computed here. Two frames check that CLEAR empties the flags.
module tb_grid_vector;
  import ielas_pkg::*;
  localparam int GW = 12, GH = 8, GC = 4, D_NUM = 64, DEPTH = 6;
  localparam int NGX = 3, NGY = 2, NCELL = 6, CW = $clog2(DEPTH + 1), GWORD = CW + 8 * DEPTH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, ready, done, in_valid, in_last, g_we, overflow;
  logic [$clog2(GW)-1:0] in_i;
  logic [$clog2(GH)-1:0] in_j;
  sp_t in_sp;
  logic [$clog2(NCELL)-1:0] g_waddr;
  logic [GWORD-1:0] g_wdata;

  grid_vector #(.GW(GW), .GH(GH), .GC(GC), .D_NUM(D_NUM), .DEPTH(DEPTH)) dut (.*);

  sp_t g [GH][GW];
  int checks = 0, failures = 0, nw = 0, n_ovf = 0;

  task automatic expect_cell(int c, output logic [GWORD-1:0] w, output bit ovf);
    bit f [D_NUM];
    int cx, cy, cnt;
    logic [8*DEPTH-1:0] l;
    cx = c % NGX; cy = c / NGX;
    for (int d = 0; d < D_NUM; d++) f[d] = 0;
    for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++)
      if (g[j][i].valid && i / GC - cx <= 1 && cx - i / GC <= 1 && j / GC - cy <= 1 && cy - j / GC <= 1)
        for (int k = -1; k <= 1; k++) if (g[j][i].d + k >= 0 && g[j][i].d + k < D_NUM) f[g[j][i].d + k] = 1;
    cnt = 0; l = '0; ovf = 0;
    for (int d = 0; d < D_NUM; d++) if (f[d]) begin
      if (cnt < DEPTH) begin l[8*cnt +: 8] = 8'(d); cnt++; end
      else ovf = 1;
    end
    w = {CW'(cnt), l};
  endtask

  always @(posedge clk) if (rst_n && g_we) begin
    logic [GWORD-1:0] e; bit o;
    expect_cell(nw, e, o);
    checks++;
    if (int'(g_waddr) != nw || g_wdata != e || overflow != o) begin
      failures++; $display("cell %0d: addr %0d %h ovf %0d, expected %h ovf %0d", nw, g_waddr, g_wdata, overflow, e, o);
    end
    if (o) n_ovf++;
    nw++;
  end

  initial begin
    start = 0; in_valid = 0; in_last = 0; in_i = 0; in_j = 0; in_sp = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++) begin
        g[j][i].valid = ($urandom_range(4) == 0);
        g[j][i].d = 8'((f == 0) ? $urandom_range(D_NUM - 1) : 10 + i);
      end
      g[0][0] = '{valid: 1'b1, d: 8'd0};                 // d-1 below the range
      g[7][11] = '{valid: 1'b1, d: 8'(D_NUM - 1)};       // d+1 above the range
      nw = 0;
      start = 1; @(posedge clk); #1 start = 0;
      while (!ready) begin @(posedge clk); #1; end
      for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++) begin
        in_valid = 1; in_i = ($bits(in_i))'(i); in_j = ($bits(in_j))'(j); in_sp = g[j][i];
        in_last = (i == GW - 1 && j == GH - 1);
        @(posedge clk); #1;
      end
      in_valid = 0; in_last = 0;
      while (!done) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      checks++;
      if (nw != NCELL) begin failures++; $display("%0d cells written", nw); end
    end
    checks++;
    if (n_ovf == 0) begin failures++; $display("no overflow exercised"); end
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
