// ielas_top: ELAS-style stereo matching accelerator with interpolated support points.
//
// Data flow (one frame = one rectified left/right image pair, W x H, 8-bit):
//   pixels -> two Sobel descriptor extractors -> RAM_L / RAM_R (ping-pong)
//          -> support-point stage (two extractors + left/right check)
//          -> RAM_Support Point
//          -> filter -> grid vector -> RAM_GRID
//          -> interpolator -> Delaunay triangulator -> mesh RAM
//          -> two dense matching units (upper / lower half of the rows)
//          -> 8-bit disparity per pixel on two output lanes.
// The block set, the branch into filter/grid vector and interpolation/
// triangulation, the two support point extractors, the two dense matching
// units and the ping-pong descriptor memory follow the paper (Fig. 6, Fig. 9).
//
// Frame sequencing: the descriptor RAMs hold two frames. While the back end
// (support points .. dense matching) works on frame i in one bank, the Sobel
// filters write frame i+1 into the other. When frame i+1 is complete and the
// back end still holds the other bank, in_ready stays low: the input stalls
// until the back end releases it. The back-end steps of one frame run one
// after another (support points; then filter/grid vector in parallel with
// interpolation/triangulation; then dense matching), an own simplification of
// the finer overlap drawn in the paper's Fig. 9.
//
// Interface: in_valid/in_ready with one left and one right pixel per beat in
// raster order; out_valid[k] qualifies out_u/out_v/out_d/out_ok of lane k
// (lane 0 rows 0..H/2-1, lane 1 rows H/2..H-1, each in raster order);
// frame_done pulses when the back end has finished a frame; events carries
// one-cycle pulses of the internal mechanisms for monitoring.
module ielas_top #(
  parameter int W         = 640,
  parameter int H         = 480,
  parameter int S         = 5,
  parameter int D_NUM     = 256,
  parameter int LR_THR    = 2,
  parameter int INCON_THR = 5,
  parameter int INCON_MIN = 5,
  parameter int REDUN_THR = 0,
  parameter int GC        = 4,
  parameter int DEPTH     = 20,
  parameter int S_DELTA   = 5,
  parameter int EPS       = 3,
  parameter int C         = 0,
  parameter int SRADIUS   = 2,
  parameter int PRIOR_W   = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [7:0]           in_left,
  input  logic [7:0]           in_right,
  output logic                 out_valid [2],
  output logic [$clog2(W)-1:0] out_u [2],
  output logic [$clog2(H)-1:0] out_v [2],
  output logic [7:0]           out_d [2],
  output logic                 out_ok [2],
  output logic                 frame_done,
  output ielas_pkg::ev_t       events
);
  import ielas_pkg::*;

  localparam int GW    = W / S;
  localparam int GH    = H / S;
  localparam int NC    = GW * GH;
  localparam int NGX   = (GW + GC - 1) / GC;
  localparam int NGY   = (GH + GC - 1) / GC;
  localparam int NCELL = NGX * NGY;
  localparam int CW    = $clog2(DEPTH + 1);
  localparam int GWORD = CW + 8 * DEPTH;
  localparam int NSQ   = (GW - 1) * (GH - 1);
  localparam int XW    = $clog2(W);
  localparam int YW    = $clog2(H);

  // ---------------------------------------------------------------- front end
  logic          wbank, rbank;
  logic [1:0]    full;                 // bank holds a complete frame not yet released
  // Both filters see the same handshake and run in lockstep, so the left one's
  // in_ready and frame_done stand for both; sob_rdy_r and sfd_r stay unused.
  logic          sob_rdy_l, sob_rdy_r, sob_in;
  logic          sov_l, sov_r, sfd_l, sfd_r;
  logic [XW-1:0] sx_l, sx_r;
  logic [YW-1:0] sy_l, sy_r;
  logic [7:0]    sdu_l, sdv_l, sdu_r, sdv_r;

  assign in_ready = sob_rdy_l && !full[wbank];
  assign sob_in   = in_valid && in_ready;

  sobel_filter #(.W(W), .H(H)) u_sobel_l (
    .clk, .rst_n, .in_valid(sob_in), .in_ready(sob_rdy_l), .in_pix(in_left),
    .out_valid(sov_l), .out_x(sx_l), .out_y(sy_l), .out_du(sdu_l), .out_dv(sdv_l), .frame_done(sfd_l));
  sobel_filter #(.W(W), .H(H)) u_sobel_r (
    .clk, .rst_n, .in_valid(sob_in), .in_ready(sob_rdy_r), .in_pix(in_right),
    .out_valid(sov_r), .out_x(sx_r), .out_y(sy_r), .out_du(sdu_r), .out_dv(sdv_r), .frame_done(sfd_r));

  // ---------------------------------------------------------- descriptor RAMs
  logic              rb [2];
  logic signed [15:0] lu [2], lv [2], ru [2], rv [2];
  desc_t             ldesc [2], rdesc [2];
  logic              lok [2], rok [2];

  assign rb[0] = rbank;
  assign rb[1] = rbank;

  desc_ram #(.W(W), .H(H), .NRD(2)) u_ram_l (
    .clk, .we(sov_l), .wbank(wbank), .wx(sx_l), .wy(sy_l), .wdu(sdu_l), .wdv(sdv_l),
    .rbank(rb), .ru(lu), .rv(lv), .rdesc(ldesc), .rok(lok));
  desc_ram #(.W(W), .H(H), .NRD(2)) u_ram_r (
    .clk, .we(sov_r), .wbank(wbank), .wx(sx_r), .wy(sy_r), .wdu(sdu_r), .wdv(sdv_r),
    .rbank(rb), .ru(ru), .rv(rv), .rdesc(rdesc), .rok(rok));

  // ------------------------------------------------------- back-end sequencer
  typedef enum logic [2:0] {B_IDLE, B_SP, B_GVCLR, B_FI, B_DM} bstate_t;
  bstate_t bstate;
  logic    sp_start, sp_done, gv_start, gv_ready, gv_done, it_start, it_done, tr_done;
  logic    fl_start, fl_done, dm_start, dm_done [2];
  logic    seen_gv, seen_it, seen_tr, seen_fl, seen_dm0, seen_dm1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0; rbank <= 1'b0; full <= '0; bstate <= B_IDLE;
      sp_start <= 1'b0; gv_start <= 1'b0; it_start <= 1'b0; fl_start <= 1'b0; dm_start <= 1'b0;
      seen_gv <= 1'b0; seen_it <= 1'b0; seen_tr <= 1'b0; seen_fl <= 1'b0;
      seen_dm0 <= 1'b0; seen_dm1 <= 1'b0; frame_done <= 1'b0;
    end else begin
      sp_start <= 1'b0; gv_start <= 1'b0; it_start <= 1'b0; fl_start <= 1'b0; dm_start <= 1'b0;
      frame_done <= 1'b0;
      // front end: a finished frame fills its bank and the writer moves on
      if (sfd_l) begin
        full[wbank] <= 1'b1;
        wbank       <= !wbank;
      end
      case (bstate)
        B_IDLE: if (full[rbank]) begin
          sp_start <= 1'b1;
          bstate   <= B_SP;
        end
        B_SP: if (sp_done) begin
          gv_start <= 1'b1;
          it_start <= 1'b1;
          seen_gv <= 1'b0; seen_it <= 1'b0; seen_tr <= 1'b0; seen_fl <= 1'b0;
          bstate   <= B_GVCLR;
        end
        B_GVCLR: if (gv_ready) begin
          fl_start <= 1'b1;
          bstate   <= B_FI;
        end
        B_FI: begin
          if (gv_done) seen_gv <= 1'b1;
          if (it_done) seen_it <= 1'b1;
          if (tr_done) seen_tr <= 1'b1;
          if (fl_done) seen_fl <= 1'b1;
          if ((seen_gv || gv_done) && (seen_it || it_done) && (seen_tr || tr_done) && (seen_fl || fl_done)) begin
            dm_start <= 1'b1;
            seen_dm0 <= 1'b0; seen_dm1 <= 1'b0;
            bstate   <= B_DM;
          end
        end
        B_DM: begin
          if (dm_done[0]) seen_dm0 <= 1'b1;
          if (dm_done[1]) seen_dm1 <= 1'b1;
          if ((seen_dm0 || dm_done[0]) && (seen_dm1 || dm_done[1])) begin
            full[rbank] <= 1'b0;
            rbank       <= !rbank;
            frame_done  <= 1'b1;
            bstate      <= B_IDLE;
          end
        end
        default: bstate <= B_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------- support point stage
  logic signed [15:0] sp_lu [2], sp_lv [2], sp_ru [2], sp_rv [2];
  logic               sp_we, lr_reject;
  logic [$clog2(NC)-1:0] sp_waddr;
  sp_t                sp_wdata;

  sp_controller #(.W(W), .H(H), .S(S), .D_NUM(D_NUM), .LR_THR(LR_THR)) u_sp (
    .clk, .rst_n, .start(sp_start), .done(sp_done),
    .l_u(sp_lu), .l_v(sp_lv), .l_desc(ldesc), .l_ok(lok),
    .r_u(sp_ru), .r_v(sp_rv), .r_desc(rdesc), .r_ok(rok),
    .sp_we, .sp_waddr, .sp_wdata, .lr_reject);

  logic [$clog2(NC)-1:0] sp_raddr [2];
  sp_t                   sp_rdata [2];
  logic [8:0]            sp_rraw  [2];
  sdp_ram #(.DW(9), .DEPTH(NC), .NRD(2)) u_ram_sp (
    .clk, .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata), .raddr(sp_raddr), .rdata(sp_rraw));
  assign sp_rdata[0] = sp_t'(sp_rraw[0]);
  assign sp_rdata[1] = sp_t'(sp_rraw[1]);

  // ------------------------------------------------- filter and grid vector
  logic                  fo_valid, fo_last, rm_incon, rm_redun, gv_overflow;
  logic [$clog2(GW)-1:0] fo_i;
  logic [$clog2(GH)-1:0] fo_j;
  sp_t                   fo_sp;

  sp_filter #(.GW(GW), .GH(GH), .INCON_THR(INCON_THR), .INCON_MIN(INCON_MIN), .REDUN_THR(REDUN_THR)) u_filter (
    .clk, .rst_n, .start(fl_start), .done(fl_done), .sp_raddr(sp_raddr[0]), .sp_rdata(sp_rdata[0]),
    .out_valid(fo_valid), .out_i(fo_i), .out_j(fo_j), .out_sp(fo_sp), .out_last(fo_last),
    .rm_incon, .rm_redun);

  logic                     g_we;
  logic [$clog2(NCELL)-1:0] g_waddr, g_raddr [2];
  logic [GWORD-1:0]         g_wdata, g_rdata [2];

  grid_vector #(.GW(GW), .GH(GH), .GC(GC), .D_NUM(D_NUM), .DEPTH(DEPTH)) u_grid (
    .clk, .rst_n, .start(gv_start), .ready(gv_ready), .done(gv_done),
    .in_valid(fo_valid), .in_i(fo_i), .in_j(fo_j), .in_sp(fo_sp), .in_last(fo_last),
    .g_we, .g_waddr, .g_wdata, .overflow(gv_overflow));

  sdp_ram #(.DW(GWORD), .DEPTH(NCELL), .NRD(2)) u_ram_grid (
    .clk, .we(g_we), .waddr(g_waddr), .wdata(g_wdata), .raddr(g_raddr), .rdata(g_rdata));

  // ------------------------------------------- interpolation and triangulation
  logic                  io_valid, io_last;
  logic [$clog2(GW)-1:0] io_i;
  logic [$clog2(GH)-1:0] io_j;
  disp_t                 io_d;
  ikind_t                io_kind;

  interpolator #(.GW(GW), .GH(GH), .S_DELTA(S_DELTA), .EPS(EPS), .C(C)) u_interp (
    .clk, .rst_n, .start(it_start), .done(it_done), .sp_raddr(sp_raddr[1]), .sp_rdata(sp_rdata[1]),
    .out_valid(io_valid), .out_i(io_i), .out_j(io_j), .out_d(io_d), .out_kind(io_kind), .out_last(io_last));

  logic                   m_we;
  logic [$clog2(NSQ)-1:0] m_waddr, m_raddr [2];
  logic [71:0]            m_wdata, m_rdata [2];

  delaunay_triangulator #(.GW(GW), .GH(GH), .S(S)) u_tri (
    .clk, .rst_n, .in_valid(io_valid), .in_i(io_i), .in_j(io_j), .in_d(io_d), .in_last(io_last),
    .m_we, .m_waddr, .m_wdata, .done(tr_done));

  sdp_ram #(.DW(72), .DEPTH(NSQ), .NRD(2)) u_ram_mesh (
    .clk, .we(m_we), .waddr(m_waddr), .wdata(m_wdata), .raddr(m_raddr), .rdata(m_rdata));

  // ------------------------------------------------------------ dense matching
  logic signed [15:0] dm_lu [2], dm_lv [2], dm_ru [2], dm_rv [2];
  logic               dm_plane [2];

  for (genvar k = 0; k < 2; k++) begin : g_dm
    dense_matcher #(.W(W), .H(H), .S(S), .GC(GC), .D_NUM(D_NUM), .DEPTH(DEPTH),
                    .SRADIUS(SRADIUS), .PRIOR_W(PRIOR_W)) u_dm (
      .clk, .rst_n, .start(dm_start),
      .row_lo(($clog2(H+1))'(k * (H / 2))), .row_hi(($clog2(H+1))'((k == 0) ? H / 2 : H)),
      .done(dm_done[k]),
      .l_u(dm_lu[k]), .l_v(dm_lv[k]), .l_desc(ldesc[k]), .l_ok(lok[k]),
      .r_u(dm_ru[k]), .r_v(dm_rv[k]), .r_desc(rdesc[k]), .r_ok(rok[k]),
      .g_raddr(g_raddr[k]), .g_rdata(g_rdata[k]), .m_raddr(m_raddr[k]), .m_rdata(m_rdata[k]),
      .out_valid(out_valid[k]), .out_u(out_u[k]), .out_v(out_v[k]), .out_d(out_d[k]),
      .out_ok(out_ok[k]), .out_plane(dm_plane[k]));

    // descriptor read ports: support-point stage, else dense matching
    assign lu[k] = (bstate == B_SP) ? sp_lu[k] : dm_lu[k];
    assign lv[k] = (bstate == B_SP) ? sp_lv[k] : dm_lv[k];
    assign ru[k] = (bstate == B_SP) ? sp_ru[k] : dm_ru[k];
    assign rv[k] = (bstate == B_SP) ? sp_rv[k] : dm_rv[k];
  end

  always_comb begin
    events             = '0;
    events.in_stall    = in_valid && !in_ready;
    events.bank_swap   = sfd_l;
    events.lr_reject   = lr_reject;
    events.rm_incon    = rm_incon;
    events.rm_redun    = rm_redun;
    events.gv_overflow = gv_overflow;
    events.ip_horiz    = io_valid && io_kind == IK_HORIZ;
    events.ip_vert     = io_valid && io_kind == IK_VERT;
    events.ip_const    = io_valid && io_kind == IK_CONST;
    events.dm_plane    = (out_valid[0] && dm_plane[0]) || (out_valid[1] && dm_plane[1]);
  end

endmodule
