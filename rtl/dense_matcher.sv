// dense_matcher: dense disparity computation for a band of image rows.
//
// For every pixel (u, v) of rows ROW_LO .. ROW_HI-1 of the left image the unit
//   1. reads the left descriptor, the RAM_GRID word of the pixel's grid cell
//      and the mesh word of the lattice square that holds the pixel;
//   2. evaluates the triangle's plane at the pixel, giving the prior mu;
//   3. tries as candidates the (up to DEPTH) grid-vector disparities and the
//      2*SRADIUS+1 disparities around mu, one candidate per cycle: the energy
//      is SAD(left descriptor at (u,v), right descriptor at (u-d,v))
//      + PRIOR_W*|d - mu|;
//   4. outputs the 8-bit disparity of lowest energy (out_ok = 0 if the pixel
//      has no descriptor or no candidate lies inside the image).
// That dense matching combines descriptors, grid vector and mesh, outputs 8
// bits per pixel and exists twice (Fig. 6) follows the paper. The candidate
// set and the linear prior term are simplifications of the original ELAS
// energy (which uses a Gaussian prior) and are own choices, as is splitting
// the image between the two units by rows.
//
// Timing: per pixel 2 cycles of fetch, then one cycle per candidate plus one
// to drain, then the result cycle (about 29 cycles with a full grid list);
// border pixels take 3 cycles.
// Interface: start with the row band; done pulses after the last pixel; read
// ports on both descriptor RAMs, RAM_GRID and the mesh RAM (1-cycle latency).
module dense_matcher #(
  parameter int W       = 640,
  parameter int H       = 480,
  parameter int S       = 5,
  parameter int GC      = 4,
  parameter int D_NUM   = 256,
  parameter int DEPTH   = 20,
  parameter int SRADIUS = 2,
  parameter int PRIOR_W = 4,
  localparam int GW     = W / S,
  localparam int GH     = H / S,
  localparam int NGX    = (GW + GC - 1) / GC,
  localparam int NGY    = (GH + GC - 1) / GC,
  localparam int NCELL  = NGX * NGY,
  localparam int CW     = $clog2(DEPTH + 1),
  localparam int GWORD  = CW + 8 * DEPTH,
  localparam int NSQ    = (GW - 1) * (GH - 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(H+1)-1:0]   row_lo,
  input  logic [$clog2(H+1)-1:0]   row_hi,
  output logic                     done,
  output logic signed [15:0]       l_u,
  output logic signed [15:0]       l_v,
  input  ielas_pkg::desc_t         l_desc,
  input  logic                     l_ok,
  output logic signed [15:0]       r_u,
  output logic signed [15:0]       r_v,
  input  ielas_pkg::desc_t         r_desc,
  input  logic                     r_ok,
  output logic [$clog2(NCELL)-1:0] g_raddr,
  input  logic [GWORD-1:0]         g_rdata,
  output logic [$clog2(NSQ)-1:0]   m_raddr,
  input  logic [71:0]              m_rdata,
  output logic                     out_valid,
  output logic [$clog2(W)-1:0]     out_u,
  output logic [$clog2(H)-1:0]     out_v,
  output ielas_pkg::disp_t         out_d,
  output logic                     out_ok,
  output logic                     out_plane   // winning candidate came from the plane prior
);
  import ielas_pkg::*;

  localparam int NCAND = DEPTH + 2 * SRADIUS + 1;
  localparam int KW    = $clog2(NCAND + 1);
  typedef logic [13:0] ecost_t;

  typedef enum logic [2:0] {D_IDLE, D_FETCH, D_PREP, D_RUN, D_OUT} dstate_t;
  dstate_t state;

  logic [$clog2(W)-1:0]   pu;
  logic [$clog2(H+1)-1:0] pv, hi;
  logic [CW-1:0]          gcnt;
  logic [8*DEPTH-1:0]     glist;
  disp_t                  mu;
  logic [KW-1:0]          k, ncand;
  logic                   pend, pend_ok, pend_pl;
  disp_t                  pend_d;
  logic                   found, best_pl;
  disp_t                  best_d;
  ecost_t                 best_c;

  // addresses of the current pixel
  int sx, sy, lx, ly, cxi, cyi;
  always_comb begin
    cxi = int'(pu) / (S * GC);  if (cxi > NGX - 1) cxi = NGX - 1;
    cyi = int'(pv) / (S * GC);  if (cyi > NGY - 1) cyi = NGY - 1;
    sx  = (int'(pu) < S / 2) ? 0 : (int'(pu) - S / 2) / S;  if (sx > GW - 2) sx = GW - 2;
    sy  = (int'(pv) < S / 2) ? 0 : (int'(pv) - S / 2) / S;  if (sy > GH - 2) sy = GH - 2;
    lx  = int'(pu) - (S * sx + S / 2);
    ly  = int'(pv) - (S * sy + S / 2);
  end
  assign l_u     = 16'(pu);
  assign l_v     = 16'(pv);
  assign g_raddr = ($bits(g_raddr))'(cyi * NGX + cxi);
  assign m_raddr = ($bits(m_raddr))'(sy * (GW - 1) + sx);

  // plane prior at the pixel
  function automatic disp_t plane_mu(input logic [71:0] mw, input int x, input int y);
    int d00, a, b, t;
    d00 = int'(mw[71:64]);
    if (x >= y) begin a = int'(signed'(mw[63:48])); b = int'(signed'(mw[47:32])); end
    else        begin a = int'(signed'(mw[31:16])); b = int'(signed'(mw[15:0]));  end
    t = d00 + ((a * x + b * y + 128) >>> 8);
    if (t < 0) t = 0;
    if (t > D_NUM - 1) t = D_NUM - 1;
    return disp_t'(t);
  endfunction

  // candidate k
  logic  cand_ok, cand_pl;
  disp_t cand_d;
  always_comb begin
    int t;
    t       = int'(mu) - SRADIUS + int'(k) - int'(gcnt);
    cand_pl = (k >= KW'(gcnt));
    cand_d  = disp_t'(t);
    cand_ok = (t >= 0) && (t < D_NUM);
    if (!cand_pl) begin
      cand_d  = glist[8*int'(k) +: 8];
      cand_ok = 1'b1;
    end
  end
  assign r_u = 16'(pu) - 16'(cand_d);
  assign r_v = 16'(pv);

  ecost_t e;
  assign e = ecost_t'(desc_sad(l_desc, r_desc)) + ecost_t'(PRIOR_W * int'(disp_absdiff(pend_d, mu)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; done <= 1'b0; pu <= '0; pv <= '0; hi <= '0;
      gcnt <= '0; glist <= '0; mu <= '0; k <= '0; ncand <= '0;
      pend <= 1'b0; pend_ok <= 1'b0; pend_pl <= 1'b0; pend_d <= '0;
      found <= 1'b0; best_pl <= 1'b0; best_d <= '0; best_c <= '0;
      out_valid <= 1'b0; out_u <= '0; out_v <= '0; out_d <= '0; out_ok <= 1'b0; out_plane <= 1'b0;
    end else begin
      done <= 1'b0; out_valid <= 1'b0;
      case (state)
        D_IDLE: if (start) begin
          pu <= '0; pv <= row_lo; hi <= row_hi;
          state <= (row_lo < row_hi) ? D_FETCH : D_IDLE;
          done  <= !(row_lo < row_hi);
        end
        D_FETCH: state <= D_PREP;            // addresses presented, data next cycle
        D_PREP: begin
          gcnt  <= (g_rdata[GWORD-1 -: CW] > CW'(DEPTH)) ? CW'(DEPTH) : g_rdata[GWORD-1 -: CW];
          glist <= g_rdata[8*DEPTH-1:0];
          mu    <= plane_mu(m_rdata, lx, ly);
          ncand <= ((g_rdata[GWORD-1 -: CW] > CW'(DEPTH)) ? KW'(DEPTH) : KW'(g_rdata[GWORD-1 -: CW]))
                   + KW'(2 * SRADIUS + 1);
          k     <= '0;
          found <= 1'b0;
          pend  <= 1'b0;
          state <= l_ok ? D_RUN : D_OUT;
        end
        D_RUN: begin
          if (k < ncand) begin
            pend    <= 1'b1;
            pend_ok <= cand_ok;
            pend_pl <= cand_pl;
            pend_d  <= cand_d;
            k       <= k + 1'b1;
          end else begin
            pend <= 1'b0;
          end
          if (pend && pend_ok && r_ok && (!found || e < best_c)) begin
            found   <= 1'b1;
            best_c  <= e;
            best_d  <= pend_d;
            best_pl <= pend_pl;
          end
          if (k >= ncand && !pend) state <= D_OUT;
        end
        D_OUT: begin
          out_valid <= 1'b1;
          out_u     <= pu;
          out_v     <= ($bits(out_v))'(pv);
          out_ok    <= found;
          out_d     <= found ? best_d : '0;
          out_plane <= found && best_pl;
          found     <= 1'b0;
          if (pu == ($bits(pu))'(W - 1)) begin
            pu <= '0;
            pv <= pv + 1'b1;
            if (pv + 1'b1 >= hi) begin
              state <= D_IDLE;
              done  <= 1'b1;
            end else state <= D_FETCH;
          end else begin
            pu <= pu + 1'b1;
            state <= D_FETCH;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

endmodule
