// delaunay_triangulator: triangle mesh over the interpolated support grid.
//
// After interpolation every support-grid position carries a disparity, so the
// support points form a regular square lattice with spacing S pixels. Each
// lattice square with corners d00 (top left), d10 (top right), d01 (bottom
// left) and d11 (bottom right) is split along its d00-d11 diagonal into an
// upper and a lower triangle; for a square lattice this split is a valid
// Delaunay triangulation (the four corners are cocircular, so either diagonal
// is). The slanted plane of each triangle, in pixel offsets (x, y) from the
// d00 corner, is
//     upper (x >= y): d = d00 + a_up*x + b_up*y,  a_up = (d10-d00)/S, b_up = (d11-d10)/S
//     lower (x <  y): d = d00 + a_lo*x + b_lo*y,  a_lo = (d11-d01)/S, b_lo = (d01-d00)/S
// with slopes in signed Q8.8 (truncated towards zero).
// The paper gives the block's purpose (a mesh from the regular interpolated
// points that approximates the scene for dense matching); the fixed diagonal,
// the plane form and the number formats are own choices.
//
// How it works: a line buffer of one grid row and a 2x2 register bank; when
// position (i, j) with i, j >= 1 arrives, square (i-1, j-1) is complete and
// its mesh word {d00, a_up, b_up, a_lo, b_lo} (72 bits) is written to the mesh
// RAM at (j-1)*(GW-1) + (i-1) in the next cycle. done pulses with the word of
// the last square.
module delaunay_triangulator #(
  parameter int GW = 128,
  parameter int GH = 96,
  parameter int S  = 5,
  localparam int NSQ = (GW - 1) * (GH - 1),
  localparam int MA  = $clog2(NSQ)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [$clog2(GW)-1:0] in_i,
  input  logic [$clog2(GH)-1:0] in_j,
  input  ielas_pkg::disp_t      in_d,
  input  logic                  in_last,
  output logic                  m_we,
  output logic [MA-1:0]         m_waddr,
  output logic [71:0]           m_wdata,
  output logic                  done
);
  import ielas_pkg::*;

  disp_t lb [GW];          // previous grid row
  disp_t d00_q, d01_q;     // register bank: left column of the current square

  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb[in_i] <= in_d;
      d01_q    <= in_d;
      d00_q    <= lb[in_i];
    end
  end

  function automatic logic signed [15:0] slope(input disp_t from, input disp_t to);
    logic signed [17:0] t;
    t = 18'(signed'({1'b0, to}) - signed'({1'b0, from})) * 18'sd256;
    return 16'(t / 18'(S));
  endfunction

  disp_t d00, d10, d01, d11;
  assign d11 = in_d;
  assign d10 = lb[in_i];
  assign d01 = d01_q;
  assign d00 = d00_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_we <= 1'b0; m_waddr <= '0; m_wdata <= '0; done <= 1'b0;
    end else begin
      m_we <= 1'b0; done <= 1'b0;
      if (in_valid && in_i != '0 && in_j != '0) begin
        m_we    <= 1'b1;
        m_waddr <= MA'((int'(in_j) - 1) * (GW - 1) + int'(in_i) - 1);
        m_wdata <= {d00, slope(d00, d10), slope(d10, d11), slope(d01, d11), slope(d00, d01)};
        done    <= in_last;
      end
    end
  end

endmodule
