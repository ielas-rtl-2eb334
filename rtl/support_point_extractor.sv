// support_point_extractor: disparity search for one reference pixel.
//
// Given a reference pixel (u, v) in one image, the engine compares its
// descriptor with the descriptors of the other image at (u-d, v) (DIR = 0,
// reference = left image, as in the paper's Fig. 8) or at (u+d, v) (DIR = 1,
// reference = right image, used for the left/right repetition), for
// d = 0 .. D_NUM-1 as far as the other image reaches. The energy of a
// candidate is the SAD of the two 128-bit descriptors; the candidate with the
// lowest energy wins (the smallest d on a tie). The search along the row and the
// minimum-energy rule follow the paper; SAD as the energy and the tie rule are
// own choices.
//
// Timing: start is taken in IDLE. The reference read is held on its port while
// one target descriptor is requested per cycle, so the engine needs N+2 cycles
// for N candidates (one cycle when there is none), then pulses done with d_best/found valid (held until the
// next start). found = 0 when the reference pixel has no descriptor (border)
// or no candidate lies inside the image.
//
// Interface: two read ports towards desc_ram instances (one on the reference
// image, one on the other image), 1-cycle read latency.
module support_point_extractor #(
  parameter int W     = 640,
  parameter int D_NUM = 256,
  parameter bit DIR   = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic signed [15:0] u,
  input  logic signed [15:0] v,
  output logic               busy,
  output logic               done,
  output ielas_pkg::disp_t   d_best,
  output ielas_pkg::cost_t   cost_best,
  output logic               found,
  // reference image read port
  output logic signed [15:0] ref_u,
  output logic signed [15:0] ref_v,
  input  ielas_pkg::desc_t   ref_desc,
  input  logic               ref_ok,
  // target image read port
  output logic signed [15:0] tgt_u,
  output logic signed [15:0] tgt_v,
  input  ielas_pkg::desc_t   tgt_desc,
  input  logic               tgt_ok
);
  import ielas_pkg::*;

  logic signed [15:0] cu, cv;
  logic [9:0]  d_iss, n_cand;
  logic        pend;
  disp_t       pend_d;
  logic        run;
  cost_t       c;

  assign ref_u = cu;
  assign ref_v = cv;
  assign tgt_u = DIR ? cu + 16'(d_iss) : cu - 16'(d_iss);
  assign tgt_v = cv;
  assign busy  = run;
  assign c     = desc_sad(ref_desc, tgt_desc);

  function automatic logic [9:0] ncand(input logic signed [15:0] uu);
    int lim;
    lim = DIR ? (W - 2 - int'(uu)) : (int'(uu) - 1);
    if (lim < 0) lim = 0;
    if (lim > D_NUM) lim = D_NUM;
    return 10'(lim);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; pend <= 1'b0; found <= 1'b0;
      d_iss <= '0; n_cand <= '0; d_best <= '0; cost_best <= '0; pend_d <= '0;
      cu <= '0; cv <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        pend <= 1'b0;
        if (start) begin
          run    <= 1'b1;
          cu     <= u;
          cv     <= v;
          d_iss  <= '0;
          n_cand <= ncand(u);
          found  <= 1'b0;
        end
      end else begin
        if (d_iss < n_cand) begin
          pend   <= 1'b1;
          pend_d <= disp_t'(d_iss);
          d_iss  <= d_iss + 1'b1;
        end else begin
          pend <= 1'b0;
        end
        if (pend && ref_ok && tgt_ok && (!found || c < cost_best)) begin
          found     <= 1'b1;
          d_best    <= pend_d;
          cost_best <= c;
        end
        if (d_iss >= n_cand && !pend) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
