// sp_controller: support-point stage (two extractors and the left/right check).
//
// The image is divided into S x S windows; the centre of each window, pixel
// (S*i + S/2, S*j + S/2), is one support-point candidate, so the support grid
// has GW = W/S columns and GH = H/S rows. For every candidate the left
// extractor (reference = left image) finds d1; the right extractor then takes
// the matched pixel (u-d1, v) of the right image and searches the left image
// (reference = right image), giving d2. The candidate becomes a support point
// with disparity d1 if both searches found a match and |d1 - d2| <= LR_THR;
// otherwise it is written as vacant (valid = 0) and lr_reject pulses.
// The two extractors run as a two-stage pipeline: in each "wave" the left one
// works on candidate k while the right one checks candidate k-1, and the
// wave ends when both are done. Results go to RAM_Support Point in raster
// order of the support grid (address j*GW + i).
// The two extractors, one per image, and the repeat of the search from the
// right image follow the paper (Fig. 6, Fig. 8 and the text); the grid
// placement, the wave pipeline and LR_THR are own choices.
//
// Interface: start/done handshake (done pulses once per frame); read ports
// 0 (left extractor) and 1 (right extractor) on each descriptor RAM; the
// write port of the support-point RAM.
module sp_controller #(
  parameter int W      = 640,
  parameter int H      = 480,
  parameter int S      = 5,
  parameter int D_NUM  = 256,
  parameter int LR_THR = 2,
  localparam int GW    = W / S,
  localparam int GH    = H / S,
  localparam int NC    = GW * GH
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               done,
  // descriptor RAM read ports: [0] left extractor, [1] right extractor
  output logic signed [15:0] l_u [2],
  output logic signed [15:0] l_v [2],
  input  ielas_pkg::desc_t   l_desc [2],
  input  logic               l_ok [2],
  output logic signed [15:0] r_u [2],
  output logic signed [15:0] r_v [2],
  input  ielas_pkg::desc_t   r_desc [2],
  input  logic               r_ok [2],
  // support-point RAM write port
  output logic                      sp_we,
  output logic [$clog2(NC)-1:0]     sp_waddr,
  output ielas_pkg::sp_t            sp_wdata,
  output logic                      lr_reject
);
  import ielas_pkg::*;

  localparam int AW = $clog2(NC);

  typedef enum logic [1:0] {S_IDLE, S_LAUNCH, S_WAIT} state_t;
  state_t state;

  logic [AW:0]        k;                  // candidate handled by the left extractor
  logic [$clog2(GW+1)-1:0] ci;
  logic [$clog2(GH+1)-1:0] cj;
  logic               have_prev, prev_found;
  disp_t              prev_d;
  logic signed [15:0] prev_u, prev_v;
  logic               run0, run1, seen0, seen1;

  logic               st0, st1, done0, done1, found0, found1;
  disp_t              d0, d1;
  logic signed [15:0] u0, v0, u1, v1;
  logic               b0, b1;          // busy flags: the wave logic tracks done instead
  cost_t              c0, c1;          // match energies: not needed by the check

  assign u0 = 16'(S * int'(ci) + S / 2);
  assign v0 = 16'(S * int'(cj) + S / 2);
  assign u1 = prev_u - 16'(prev_d);
  assign v1 = prev_v;

  support_point_extractor #(.W(W), .D_NUM(D_NUM), .DIR(1'b0)) u_ext_l (
    .clk, .rst_n, .start(st0), .u(u0), .v(v0), .busy(b0), .done(done0),
    .d_best(d0), .cost_best(c0), .found(found0),
    .ref_u(l_u[0]), .ref_v(l_v[0]), .ref_desc(l_desc[0]), .ref_ok(l_ok[0]),
    .tgt_u(r_u[0]), .tgt_v(r_v[0]), .tgt_desc(r_desc[0]), .tgt_ok(r_ok[0]));

  support_point_extractor #(.W(W), .D_NUM(D_NUM), .DIR(1'b1)) u_ext_r (
    .clk, .rst_n, .start(st1), .u(u1), .v(v1), .busy(b1), .done(done1),
    .d_best(d1), .cost_best(c1), .found(found1),
    .ref_u(r_u[1]), .ref_v(r_v[1]), .ref_desc(r_desc[1]), .ref_ok(r_ok[1]),
    .tgt_u(l_u[1]), .tgt_v(l_v[1]), .tgt_desc(l_desc[1]), .tgt_ok(l_ok[1]));

  assign st0 = (state == S_LAUNCH) && (k < (AW+1)'(NC));
  assign st1 = (state == S_LAUNCH) && have_prev && prev_found;

  logic lr_ok;
  assign lr_ok = prev_found && found1 && (disp_absdiff(prev_d, d1) <= disp_t'(LR_THR));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; k <= '0; ci <= '0; cj <= '0;
      have_prev <= 1'b0; prev_found <= 1'b0; prev_d <= '0; prev_u <= '0; prev_v <= '0;
      run0 <= 1'b0; run1 <= 1'b0; seen0 <= 1'b0; seen1 <= 1'b0;
      sp_we <= 1'b0; sp_waddr <= '0; sp_wdata <= '0; lr_reject <= 1'b0;
    end else begin
      done <= 1'b0; sp_we <= 1'b0; lr_reject <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          k <= '0; ci <= '0; cj <= '0; have_prev <= 1'b0;
          state <= S_LAUNCH;
        end
        S_LAUNCH: begin
          run0 <= st0; run1 <= st1; seen0 <= 1'b0; seen1 <= 1'b0;
          state <= S_WAIT;
        end
        S_WAIT: begin
          if (done0) seen0 <= 1'b1;
          if (done1) seen1 <= 1'b1;
          if ((!run0 || seen0 || done0) && (!run1 || seen1 || done1)) begin
            if (have_prev) begin
              sp_we          <= 1'b1;
              sp_waddr       <= AW'(k - 1'b1);
              sp_wdata.valid <= lr_ok;
              sp_wdata.d     <= prev_d;
              lr_reject      <= prev_found && !lr_ok;
            end
            have_prev  <= run0;
            prev_found <= run0 && found0;
            prev_d     <= d0;
            prev_u     <= u0;
            prev_v     <= v0;
            k          <= k + 1'b1;
            if (ci == ($bits(ci))'(GW - 1)) begin
              ci <= '0;
              cj <= cj + 1'b1;
            end else begin
              ci <= ci + 1'b1;
            end
            if (!run0) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_LAUNCH;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
