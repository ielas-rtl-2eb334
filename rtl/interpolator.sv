// interpolator: support-point interpolation to a full regular grid.
//
// Every position s of the GW x GH support grid gets a disparity:
//   1. s holds an extracted support point: its value is kept.
//   2. else, if the nearest support points left (P_L) and right (P_R) of s in
//      the same row both lie within (s - S_DELTA, s + S_DELTA):
//      mean(D_PL, D_PR) if |D_PL - D_PR| <= EPS, else min(D_PL, D_PR).
//   3. else the same with the nearest points above (P_T) and below (P_B).
//   4. else the constant C.
// These rules follow the paper. The paper gives numbers for S_DELTA (in
// support-grid steps), EPS and C only in its worked example (5, 3 and 0);
// they are the defaults here. The search looks at extracted support points
// only and the mean is rounded down: own choices, which reproduce the
// worked example except one printed cell that contradicts the rules.
//
// How it works: two passes over RAM_Support Point. Pass A reads the grid in
// reverse raster order and tracks, per row, the nearest point to the right
// and, per column, the nearest point below; it stores both for every position
// in a scratch buffer. Pass B reads the grid forwards, tracks the nearest
// point to the left and above the same way, joins them with the scratch entry
// and emits the result. One position per cycle in each pass, so a frame
// takes about 2*GW*GH cycles. This replaces the paper's line buffer LB3 and
// register bank RB3, whose sizes the paper does not give, by full-frame
// tracking; the result is the same.
//
// Interface: start/done; a read port on RAM_Support Point (1-cycle latency);
// an output stream in raster order (out_valid, out_i, out_j, out_d,
// out_kind, out_last).
module interpolator #(
  parameter int GW      = 128,
  parameter int GH      = 96,
  parameter int S_DELTA = 5,
  parameter int EPS     = 3,
  parameter int C       = 0,
  localparam int NC     = GW * GH,
  localparam int AW     = $clog2(NC)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  done,
  output logic [AW-1:0]         sp_raddr,
  input  ielas_pkg::sp_t        sp_rdata,
  output logic                  out_valid,
  output logic [$clog2(GW)-1:0] out_i,
  output logic [$clog2(GH)-1:0] out_j,
  output ielas_pkg::disp_t      out_d,
  output ielas_pkg::ikind_t     out_kind,
  output logic                  out_last
);
  import ielas_pkg::*;

  localparam int XW = $clog2(GW);
  localparam int YW = $clog2(GH);

  typedef struct packed {
    logic  a_ok;    // pass A: nearest to the right found
    disp_t a_d;
    logic  b_ok;    // pass A: nearest below found
    disp_t b_d;
  } near_t;

  typedef enum logic [1:0] {I_IDLE, I_PASSA, I_PASSB} istate_t;
  istate_t state;

  near_t         scratch [NC];
  near_t         scr_q;
  logic [AW-1:0] addr;
  logic [XW-1:0] ai;            // grid position of the read being issued
  logic [YW-1:0] aj;
  logic          issuing;
  logic          pv;            // data for (pi, pj) arrives this cycle
  logic          pb;            // ... and belongs to pass B
  logic [AW-1:0] paddr;
  logic [XW-1:0] pi;
  logic [YW-1:0] pj;
  logic          plast;

  // nearest-point trackers
  logic          row_ok;
  disp_t         row_d;
  logic [XW-1:0] row_i;
  logic [GW-1:0] col_ok;
  disp_t         col_d [GW];
  logic [YW-1:0] col_j [GW];

  assign sp_raddr = addr;

  always_ff @(posedge clk) begin
    scr_q <= scratch[addr];
  end

  // Nearest point on the row / column side seen so far, if within the window.
  logic  h_ok, v_ok;
  disp_t h_d, v_d;
  always_comb begin
    int dh, dv;
    dh = pb ? int'(pi) - int'(row_i) : int'(row_i) - int'(pi);
    dv = pb ? int'(pj) - int'(col_j[pi]) : int'(col_j[pi]) - int'(pj);
    // a new row starts at i = 0 (pass B) or i = GW-1 (pass A)
    h_ok = row_ok && (pb ? (pi != '0) : (pi != XW'(GW - 1))) && (dh < S_DELTA);
    v_ok = col_ok[pi] && (dv < S_DELTA);
    h_d  = row_d;
    v_d  = col_d[pi];
  end

  function automatic disp_t pair(input disp_t a, input disp_t b);
    logic [8:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (disp_absdiff(a, b) <= disp_t'(EPS)) return s[8:1];   // mean, rounded down
    else                                    return (a < b) ? a : b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= I_IDLE; done <= 1'b0; addr <= '0; ai <= '0; aj <= '0;
      issuing <= 1'b0; pv <= 1'b0; pb <= 1'b0; paddr <= '0;
      pi <= '0; pj <= '0; plast <= 1'b0;
      row_ok <= 1'b0; row_d <= '0; row_i <= '0; col_ok <= '0;
      out_valid <= 1'b0; out_i <= '0; out_j <= '0; out_d <= '0; out_kind <= IK_ORIG; out_last <= 1'b0;
    end else begin
      done <= 1'b0; out_valid <= 1'b0; out_last <= 1'b0;
      // issue stage
      pv    <= issuing;
      pb    <= (state == I_PASSB);
      paddr <= addr;
      pi    <= ai;
      pj    <= aj;
      plast <= (state == I_PASSB) && issuing && (addr == AW'(NC - 1));
      case (state)
        I_IDLE: if (start) begin
          state <= I_PASSA; issuing <= 1'b1;
          addr <= AW'(NC - 1); ai <= XW'(GW - 1); aj <= YW'(GH - 1);
          col_ok <= '0;
        end
        I_PASSA: if (issuing) begin
          if (addr == '0) begin
            issuing <= 1'b0;
          end else begin
            addr <= addr - 1'b1;
            if (ai == '0) begin ai <= XW'(GW - 1); aj <= aj - 1'b1; end
            else ai <= ai - 1'b1;
          end
        end else if (!pv) begin
          state <= I_PASSB; issuing <= 1'b1;
          addr <= '0; ai <= '0; aj <= '0;
          col_ok <= '0;
        end
        I_PASSB: if (issuing) begin
          if (addr == AW'(NC - 1)) begin
            issuing <= 1'b0;
          end else begin
            addr <= addr + 1'b1;
            if (ai == XW'(GW - 1)) begin ai <= '0; aj <= aj + 1'b1; end
            else ai <= ai + 1'b1;
          end
        end else if (!pv) begin
          state <= I_IDLE;
        end
        default: state <= I_IDLE;
      endcase

      // data stage
      if (pv) begin
        if (!pb) scratch[paddr] <= '{a_ok: h_ok, a_d: h_d, b_ok: v_ok, b_d: v_d};
        else begin
          out_valid <= 1'b1;
          out_i     <= pi;
          out_j     <= pj;
          out_last  <= plast;
          done      <= plast;
          if (sp_rdata.valid) begin
            out_d <= sp_rdata.d;      out_kind <= IK_ORIG;
          end else if (h_ok && scr_q.a_ok) begin
            out_d <= pair(h_d, scr_q.a_d); out_kind <= IK_HORIZ;
          end else if (v_ok && scr_q.b_ok) begin
            out_d <= pair(v_d, scr_q.b_d); out_kind <= IK_VERT;
          end else begin
            out_d <= disp_t'(C);      out_kind <= IK_CONST;
          end
        end
        // tracker update (row tracker restarts at each row)
        if (sp_rdata.valid) begin
          row_ok <= 1'b1; row_d <= sp_rdata.d; row_i <= pi;
          col_ok[pi] <= 1'b1; col_d[pi] <= sp_rdata.d; col_j[pi] <= pj;
        end else if (pb ? (pi == '0) : (pi == XW'(GW - 1))) begin
          row_ok <= 1'b0;
        end
      end
    end
  end

endmodule
