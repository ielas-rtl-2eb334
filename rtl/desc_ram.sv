// desc_ram: descriptor memory of one image (RAM_L or RAM_R).
//
// Holds the 8-bit horizontal (du) and vertical (dv) Sobel results of a whole
// W x H image, twice: two frame banks used in ping-pong fashion, so that the
// descriptor extractor can write frame i+1 while the later stages still read
// frame i. Inside a frame bank every fifth row goes to the same row bank
// (row y is in row bank y mod 5), so the five rows of a 5x5 window always lie
// in five different row banks and can be read in the same cycle.
// Storing only the 8-bit Sobel results, the ping-pong scheme and the five-row
// banking follow the paper. The 128-bit descriptor is concatenated on read:
// each read port returns, one cycle after the request, the sixteen bytes of
// the descriptor centred on (ru, rv). The byte positions (twelve du and four dv
// values of the 5x5 window) are those of the original ELAS software, an own
// choice here. A centre closer than 2 pixels to the border has no descriptor;
// the port then returns rok = 0.
//
// Interface: one write port (we, wbank, wx, wy, wdu, wdv); NRD read ports with
// a signed centre, so callers may ask for positions outside the image.
module desc_ram #(
  parameter int W   = 640,
  parameter int H   = 480,
  parameter int NRD = 2
) (
  input  logic        clk,
  input  logic        we,
  input  logic        wbank,
  input  logic [$clog2(W)-1:0] wx,
  input  logic [$clog2(H)-1:0] wy,
  input  logic [7:0]  wdu,
  input  logic [7:0]  wdv,
  input  logic              rbank [NRD],
  input  logic signed [15:0] ru  [NRD],
  input  logic signed [15:0] rv  [NRD],
  output ielas_pkg::desc_t  rdesc [NRD],
  output logic              rok  [NRD]
);
  import ielas_pkg::*;

  localparam int RPB   = (H + 4) / 5;      // rows held by one row bank
  localparam int DEPTH = RPB * W;
  localparam int AW    = $clog2(DEPTH);

  logic [15:0] mem [2*5*DEPTH];            // {du, dv}, index (bank*5 + row bank)*DEPTH + address

  logic [2:0]    wbk;
  logic [AW-1:0] wa;
  always_comb begin
    wbk = 3'(int'(wy) % 5);
    wa  = AW'((int'(wy) / 5) * W + int'(wx));
  end
  always_ff @(posedge clk) begin
    if (we) mem[(int'(wbank) * 5 + int'(wbk)) * DEPTH + int'(wa)] <= {wdu, wdv};
  end

  // Byte k of the descriptor: du (k < 12) or dv (k >= 12) at offset (dx, dy).
  localparam int LAY_DX [16] = '{0, -2, 0, 2, -1, 0, 0, 1, -2, 0, 2, 0, 0, -1, 1, 0};
  localparam int LAY_DY [16] = '{-2, -1, -1, -1, 0, 0, 0, 0, 1, 1, 1, 2, -1, 0, 0, 1};

  for (genvar p = 0; p < NRD; p++) begin : g_port
    logic          ok;
    logic [2:0]    rbk [16];
    logic [AW-1:0] ra  [16];
    always_comb begin
      int u, v, r;
      u  = int'(ru[p]);
      v  = int'(rv[p]);
      ok = (u >= 2) && (u <= W - 3) && (v >= 2) && (v <= H - 3);
      for (int k = 0; k < 16; k++) begin
        r      = ok ? v + LAY_DY[k] : 0;
        rbk[k] = 3'(r % 5);
        ra[k]  = ok ? AW'((r / 5) * W + u + LAY_DX[k]) : '0;
      end
    end
    always_ff @(posedge clk) begin
      for (int k = 0; k < 16; k++) begin
        if (k < 12) rdesc[p][8*k +: 8] <= ok ? mem[(int'(rbank[p]) * 5 + int'(rbk[k])) * DEPTH + int'(ra[k])][15:8] : 8'd0;
        else        rdesc[p][8*k +: 8] <= ok ? mem[(int'(rbank[p]) * 5 + int'(rbk[k])) * DEPTH + int'(ra[k])][7:0]  : 8'd0;
      end
      rok[p] <= ok;
    end
  end

endmodule
