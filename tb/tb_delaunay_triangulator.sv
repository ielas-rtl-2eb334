// tb_delaunay_triangulator: self-checking test of the mesh builder.
// Random interpolated grids (10 x 7, S = 5) are streamed in raster order.
// Each mesh word written is compared with the plane parameters recomputed
// here from the four corners of its square, and the plane is evaluated at
// every pixel of the square: it must reproduce the three corner disparities
// of its triangle within 1 (the Q8.8 rounding).
module tb_delaunay_triangulator;
  import ielas_pkg::*;
  localparam int GW = 10, GH = 7, S = 5, NSQ = (GW - 1) * (GH - 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_last, m_we, done;
  logic [$clog2(GW)-1:0] in_i;
  logic [$clog2(GH)-1:0] in_j;
  disp_t in_d;
  logic [$clog2(NSQ)-1:0] m_waddr;
  logic [71:0] m_wdata;

  delaunay_triangulator #(.GW(GW), .GH(GH), .S(S)) dut (.*);

  int g [GH][GW];
  int checks = 0, failures = 0, nw = 0, ndone = 0;

  function automatic int slope(int from, int to);
    return ((to - from) * 256) / S;   // truncates towards zero
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (done) ndone++;
    if (m_we) begin
      int i, j, d00, d10, d01, d11;
      logic [71:0] e;
      i = nw % (GW - 1); j = nw / (GW - 1);
      d00 = g[j][i]; d10 = g[j][i+1]; d01 = g[j+1][i]; d11 = g[j+1][i+1];
      e = {8'(d00), 16'(slope(d00, d10)), 16'(slope(d10, d11)), 16'(slope(d01, d11)), 16'(slope(d00, d01))};
      checks++;
      if (int'(m_waddr) != nw || m_wdata != e) begin
        failures++; $display("square %0d: addr %0d %h, expected %h", nw, m_waddr, m_wdata, e);
      end
      // corners of the triangles from the written word
      begin
        int a_up, b_up, a_lo, b_lo, v;
        a_up = int'($signed(m_wdata[63:48])); b_up = int'($signed(m_wdata[47:32]));
        a_lo = int'($signed(m_wdata[31:16])); b_lo = int'($signed(m_wdata[15:0]));
        v = (int'(m_wdata[71:64]) * 256 + a_up * S) >>> 8;                 // (S, 0)
        checks++; if (v - d10 > 1 || d10 - v > 1) begin failures++; $display("up d10 %0d %0d", v, d10); end
        v = (int'(m_wdata[71:64]) * 256 + a_up * S + b_up * S) >>> 8;      // (S, S)
        checks++; if (v - d11 > 1 || d11 - v > 1) begin failures++; $display("up d11 %0d %0d", v, d11); end
        v = (int'(m_wdata[71:64]) * 256 + b_lo * S) >>> 8;                 // (0, S)
        checks++; if (v - d01 > 1 || d01 - v > 1) begin failures++; $display("lo d01 %0d %0d", v, d01); end
        v = (int'(m_wdata[71:64]) * 256 + a_lo * S + b_lo * S) >>> 8;      // (S, S)
        checks++; if (v - d11 > 1 || d11 - v > 1) begin failures++; $display("lo d11 %0d %0d", v, d11); end
      end
      nw++;
    end
  end

  initial begin
    in_valid = 0; in_last = 0; in_i = 0; in_j = 0; in_d = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < 5; f++) begin
      nw = 0;
      for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++)
        g[j][i] = (f == 0) ? ((i + j) % 2) * 255 : $urandom_range(255);
      for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++) begin
        in_valid = 1; in_i = ($bits(in_i))'(i); in_j = ($bits(in_j))'(j); in_d = 8'(g[j][i]);
        in_last = (i == GW - 1 && j == GH - 1);
        @(posedge clk); #1;
        if ($urandom_range(3) == 0) begin in_valid = 0; in_last = 0; @(posedge clk); #1; end
      end
      in_valid = 0; in_last = 0;
      repeat (3) @(posedge clk); #1;
      checks++;
      if (nw != NSQ || ndone != f + 1) begin failures++; $display("frame %0d: %0d words, %0d done", f, nw, ndone); end
    end
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
