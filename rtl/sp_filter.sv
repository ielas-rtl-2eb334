// sp_filter: support-point filtering (line buffers LB2 and register bank RB2).
//
// Reads RAM_Support Point in raster order of the GW x GH support grid, one word
// per cycle, and slides a 5x5 window over it: four line buffers of GW entries
// and a 5x5 register bank, centred two rows and two columns behind the newest
// word. For the centre point c (if valid):
//   implausible - fewer than INCON_MIN valid neighbours in the window have a
//                 disparity within INCON_THR of c; c is removed (rm_incon);
//   redundant   - the nearest valid neighbours on both sides in the same row
//                 (or both sides in the same column, within two positions)
//                 carry a disparity within REDUN_THR of c; c is removed
//                 (rm_redun).
// Both tests look at the unfiltered neighbours. The two removal rules and the
// line-buffer/register-bank structure follow the paper; the window size and
// the thresholds (those of the original ELAS software, with REDUN_THR = 0
// for "identical") are own choices.
//
// Timing: after start, GW*GH reads, then 2*GW+2 flush cycles; one filtered
// point per cycle leaves on out_valid with its grid position, in raster order,
// out_last marks the last one and done pulses with it.
module sp_filter #(
  parameter int GW        = 128,
  parameter int GH        = 96,
  parameter int INCON_THR = 5,
  parameter int INCON_MIN = 5,
  parameter int REDUN_THR = 0,
  localparam int NC       = GW * GH,
  localparam int AW       = $clog2(NC)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      done,
  output logic [AW-1:0]             sp_raddr,
  input  ielas_pkg::sp_t            sp_rdata,
  output logic                      out_valid,
  output logic [$clog2(GW)-1:0]     out_i,
  output logic [$clog2(GH)-1:0]     out_j,
  output ielas_pkg::sp_t            out_sp,
  output logic                      out_last,
  output logic                      rm_incon,
  output logic                      rm_redun
);
  import ielas_pkg::*;

  localparam int XW = $clog2(GW);
  localparam int YW = $clog2(GH);
  localparam int LAG = 2 * GW + 2;
  localparam int NW = $clog2(NC + LAG + 2);

  logic          reading, rd_pend, flushing;
  logic [NW-1:0] n_rd, n_in;
  logic [XW-1:0] wx;
  logic          step, win_ok;
  sp_t           din;
  sp_t           lb  [4][GW];
  sp_t           win [5][5];
  logic [XW-1:0] ex;
  logic [YW-1:0] ey;

  assign sp_raddr = AW'(n_rd);
  assign step     = rd_pend || flushing;
  assign din      = flushing ? sp_t'('0) : sp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reading <= 1'b0; rd_pend <= 1'b0; flushing <= 1'b0;
      n_rd <= '0; n_in <= '0; wx <= '0; win_ok <= 1'b0;
    end else begin
      rd_pend <= 1'b0;
      win_ok  <= 1'b0;
      if (start && !reading && !flushing) begin
        reading <= 1'b1;
        n_rd    <= '0;
        n_in    <= '0;
        wx      <= '0;
      end
      if (reading) begin
        rd_pend <= 1'b1;
        n_rd    <= n_rd + 1'b1;
        if (n_rd == NW'(NC - 1)) reading <= 1'b0;
      end
      if (step) begin
        wx   <= (wx == XW'(GW - 1)) ? '0 : wx + 1'b1;
        n_in <= n_in + 1'b1;
        if (n_in >= NW'(LAG)) win_ok <= 1'b1;
        if (rd_pend && n_in == NW'(NC - 1)) flushing <= 1'b1;
        if (flushing && n_in == NW'(NC + LAG - 1)) flushing <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (step) begin
      lb[3][wx] <= din;
      for (int k = 1; k < 4; k++) lb[k-1][wx] <= lb[k][wx];
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 4; c++) win[r][c] <= win[r][c+1];
      win[4][4] <= din;
      for (int k = 0; k < 4; k++) win[k][4] <= lb[k][wx];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex <= '0; ey <= '0;
    end else if (win_ok) begin
      if (ex == XW'(GW - 1)) begin
        ex <= '0;
        ey <= (ey == YW'(GH - 1)) ? '0 : ey + 1'b1;
      end else begin
        ex <= ex + 1'b1;
      end
    end
  end

  // Window evaluation.
  logic  ok [5][5];               // window cell holds a valid, in-grid point
  logic  incon, redun, h_red, v_red;
  int    cnt;
  sp_t   c;
  always_comb begin
    c = win[2][2];
    for (int r = 0; r < 5; r++)
      for (int q = 0; q < 5; q++)
        ok[r][q] = win[r][q].valid
                && (int'(ex) + q - 2 >= 0) && (int'(ex) + q - 2 < GW)
                && (int'(ey) + r - 2 >= 0) && (int'(ey) + r - 2 < GH);
    cnt = 0;
    for (int r = 0; r < 5; r++)
      for (int q = 0; q < 5; q++)
        if (!(r == 2 && q == 2) && ok[r][q] && disp_absdiff(win[r][q].d, c.d) <= disp_t'(INCON_THR))
          cnt = cnt + 1;
    incon = cnt < INCON_MIN;
    h_red = side_same(ok[2][1], win[2][1].d, ok[2][0], win[2][0].d, c.d)
         && side_same(ok[2][3], win[2][3].d, ok[2][4], win[2][4].d, c.d);
    v_red = side_same(ok[1][2], win[1][2].d, ok[0][2], win[0][2].d, c.d)
         && side_same(ok[3][2], win[3][2].d, ok[4][2], win[4][2].d, c.d);
    redun = h_red || v_red;
  end

  // Nearest valid neighbour on one side (distance 1, else 2) matches the centre.
  function automatic logic side_same(input logic ok1, input disp_t d1,
                                     input logic ok2, input disp_t d2, input disp_t dc);
    if (ok1)      return disp_absdiff(d1, dc) <= disp_t'(REDUN_THR);
    else if (ok2) return disp_absdiff(d2, dc) <= disp_t'(REDUN_THR);
    else          return 1'b0;
  endfunction

  assign out_valid    = win_ok;
  assign out_i        = ex;
  assign out_j        = ey;
  assign out_sp.valid = win_ok && c.valid && !incon && !redun;
  assign out_sp.d     = c.d;
  assign out_last     = win_ok && (ex == XW'(GW - 1)) && (ey == YW'(GH - 1));
  assign done         = out_last;
  assign rm_incon     = win_ok && c.valid && incon;
  assign rm_redun     = win_ok && c.valid && !incon && redun;

endmodule
