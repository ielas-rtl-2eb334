// tb_desc_ram: self-checking test of the ping-pong descriptor memory.
// Fills both frame banks of a 16 x 12 image with random Sobel results, then
// reads random centres (also outside the valid area) on both ports and
// compares the 128-bit descriptors with a reference assembled from a copy of
// the data, and rok with the border rule. Writes into one bank while reading
// the other check that the banks are independent.
module tb_desc_ram;
  import ielas_pkg::*;
  localparam int W = 16, H = 12;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we, wbank;
  logic [$clog2(W)-1:0] wx;
  logic [$clog2(H)-1:0] wy;
  logic [7:0] wdu, wdv;
  logic rbank [2];
  logic signed [15:0] ru [2], rv [2];
  desc_t rdesc [2];
  logic rok [2];

  desc_ram #(.W(W), .H(H), .NRD(2)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] du [2][H][W], dv [2][H][W];
  // descriptor layout: (du/dv, dx, dy) of byte k
  int lay_dx [16] = '{0, -2, 0, 2, -1, 0, 0, 1, -2, 0, 2, 0, 0, -1, 1, 0};
  int lay_dy [16] = '{-2, -1, -1, -1, 0, 0, 0, 0, 1, 1, 1, 2, -1, 0, 0, 1};

  function automatic desc_t ref_desc(int b, int u, int v);
    desc_t d;
    for (int k = 0; k < 16; k++)
      d[8*k +: 8] = (k < 12) ? du[b][v + lay_dy[k]][u + lay_dx[k]] : dv[b][v + lay_dy[k]][u + lay_dx[k]];
    return d;
  endfunction

  task automatic wr(int b, int x, int y);
    we = 1; wbank = 1'(b); wx = ($bits(wx))'(x); wy = ($bits(wy))'(y);
    du[b][y][x] = 8'($urandom); dv[b][y][x] = 8'($urandom);
    wdu = du[b][y][x]; wdv = dv[b][y][x];
    @(posedge clk);
    #1 we = 0;
  endtask

  initial begin
    we = 0; wbank = 0; wx = 0; wy = 0; wdu = 0; wdv = 0;
    for (int p = 0; p < 2; p++) begin rbank[p] = 0; ru[p] = 0; rv[p] = 0; end
    @(posedge clk);
    #1;
    for (int b = 0; b < 2; b++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) wr(b, x, y);
    for (int t = 0; t < 400; t++) begin
      int u [2], v [2], b [2];
      for (int p = 0; p < 2; p++) begin
        u[p] = $urandom_range(W + 1) - 1; v[p] = $urandom_range(H + 1) - 1; b[p] = $urandom_range(1);
        rbank[p] = 1'(b[p]); ru[p] = 16'(u[p]); rv[p] = 16'(v[p]);
      end
      // concurrent write into bank 1 at a random place on odd steps
      if (t % 2 == 1 && b[0] == 0 && b[1] == 0) begin
        int x, y; x = $urandom_range(W - 1); y = $urandom_range(H - 1);
        we = 1; wbank = 1; wx = ($bits(wx))'(x); wy = ($bits(wy))'(y);
        du[1][y][x] = 8'($urandom); dv[1][y][x] = 8'($urandom);
        wdu = du[1][y][x]; wdv = dv[1][y][x];
      end
      @(posedge clk);
      #1 we = 0;
      for (int p = 0; p < 2; p++) begin
        bit ok;
        ok = u[p] >= 2 && u[p] <= W - 3 && v[p] >= 2 && v[p] <= H - 3;
        checks++;
        if (rok[p] != ok || (ok && rdesc[p] != ref_desc(b[p], u[p], v[p]))) begin
          failures++;
          if (failures < 10) $display("port %0d (%0d,%0d) bank %0d: ok %0d/%0d desc %h exp %h", p, u[p], v[p], b[p],
                                      rok[p], ok, rdesc[p], ok ? ref_desc(b[p], u[p], v[p]) : '0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
