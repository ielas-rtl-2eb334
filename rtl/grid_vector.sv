// grid_vector: pools filtered support points into per-cell disparity lists.
//
// The support grid is cut into cells of GC x GC support points (GC*S pixels
// square in the image). Phase CLEAR empties one 256-bit disparity-flag word
// per cell. Phase ACC takes the filtered stream from sp_filter; every valid
// point with disparity d marks d-1, d and d+1 in the flag word of its own cell.
// Phase SER then, cell by cell, ORs the flag words of the cell and its eight
// neighbours (nine reads, one per cycle) and lists the set disparities in
// ascending order, one per cycle, keeping at most DEPTH of them. The word
// written to RAM_GRID is {count, list[DEPTH-1:0]} with list[0] in the low byte.
// If more than DEPTH disparities are present the rest is dropped and
// overflow pulses.
// Pooling per sub-region and the limit of 20 stored disparities follow the
// paper; the cell size, the d-1..d+1 spread, the 3x3-cell neighbourhood
// (taken from the original ELAS software) and keeping the smallest values on
// overflow are own choices.
//
// Interface: start begins CLEAR; ready is high in ACC; the stream ends with
// in_last; done pulses after the last cell word is written.
module grid_vector #(
  parameter int GW    = 128,
  parameter int GH    = 96,
  parameter int GC    = 4,
  parameter int D_NUM = 256,
  parameter int DEPTH = 20,
  localparam int NGX  = (GW + GC - 1) / GC,
  localparam int NGY  = (GH + GC - 1) / GC,
  localparam int NCELL = NGX * NGY,
  localparam int CW   = $clog2(DEPTH + 1),
  localparam int GWORD = CW + 8 * DEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      ready,
  output logic                      done,
  input  logic                      in_valid,
  input  logic [$clog2(GW)-1:0]     in_i,
  input  logic [$clog2(GH)-1:0]     in_j,
  input  ielas_pkg::sp_t            in_sp,
  input  logic                      in_last,
  output logic                      g_we,
  output logic [$clog2(NCELL)-1:0]  g_waddr,
  output logic [GWORD-1:0]          g_wdata,
  output logic                      overflow
);
  import ielas_pkg::*;

  localparam int CA = $clog2(NCELL);

  typedef enum logic [2:0] {G_IDLE, G_CLEAR, G_ACC, G_OR, G_EXT} gstate_t;
  gstate_t state;

  logic [D_NUM-1:0] flags [NCELL];
  logic [D_NUM-1:0] acc;
  logic [CA-1:0]    cur_cell, clr;
  logic [$clog2(NGX+1)-1:0] cx;
  logic [$clog2(NGY+1)-1:0] cy;
  logic [3:0]       nb;                 // neighbour being ORed, 0..8
  logic [CW-1:0]    cnt;
  logic [8*DEPTH-1:0] list;

  assign ready = (state == G_ACC);

  // Cell of an incoming point and its flag mask.
  logic [CA-1:0]    in_cell;
  logic [D_NUM-1:0] in_mask;
  always_comb begin
    in_cell = CA'((int'(in_j) / GC) * NGX + int'(in_i) / GC);
    in_mask = '0;
    for (int k = -1; k <= 1; k++)
      if (int'(in_sp.d) + k >= 0 && int'(in_sp.d) + k < D_NUM) in_mask[int'(in_sp.d) + k] = 1'b1;
  end

  // Neighbour nb of cur_cell (cx, cy).
  int  nx, ny;
  logic nb_in;
  always_comb begin
    nx    = int'(cx) + int'(nb) % 3 - 1;
    ny    = int'(cy) + int'(nb) / 3 - 1;
    nb_in = (nx >= 0) && (nx < NGX) && (ny >= 0) && (ny < NGY);
  end

  // Lowest set disparity of acc.
  logic       any;
  logic [7:0] low;
  always_comb begin
    any = 1'b0;
    low = '0;
    for (int d = D_NUM - 1; d >= 0; d--)
      if (acc[d]) begin any = 1'b1; low = 8'(d); end
  end

  always_ff @(posedge clk) begin
    if (state == G_CLEAR) flags[clr] <= '0;
    else if (state == G_ACC && in_valid && in_sp.valid) flags[in_cell] <= flags[in_cell] | in_mask;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE; done <= 1'b0; clr <= '0; cur_cell <= '0; cx <= '0; cy <= '0;
      nb <= '0; acc <= '0; cnt <= '0; list <= '0;
      g_we <= 1'b0; g_waddr <= '0; g_wdata <= '0; overflow <= 1'b0;
    end else begin
      done <= 1'b0; g_we <= 1'b0; overflow <= 1'b0;
      case (state)
        G_IDLE: if (start) begin clr <= '0; state <= G_CLEAR; end
        G_CLEAR: begin
          clr <= clr + 1'b1;
          if (clr == CA'(NCELL - 1)) state <= G_ACC;
        end
        G_ACC: if (in_valid && in_last) begin
          cur_cell <= '0; cx <= '0; cy <= '0; nb <= '0; acc <= '0;
          state <= G_OR;
        end
        G_OR: begin
          if (nb_in) acc <= acc | flags[CA'(ny * NGX + nx)];
          if (nb == 4'd8) begin
            cnt  <= '0;
            list <= '0;
            state <= G_EXT;
          end else begin
            nb <= nb + 1'b1;
          end
        end
        G_EXT: begin
          if (any && cnt < CW'(DEPTH)) begin
            list[8*int'(cnt) +: 8] <= low;
            cnt <= cnt + 1'b1;
            acc[low] <= 1'b0;
          end else begin
            g_we     <= 1'b1;
            g_waddr  <= cur_cell;
            g_wdata  <= {cnt, list};
            overflow <= any;
            acc      <= '0;
            nb       <= '0;
            if (cur_cell == CA'(NCELL - 1)) begin
              state <= G_IDLE;
              done  <= 1'b1;
            end else begin
              cur_cell <= cur_cell + 1'b1;
              if (cx == ($bits(cx))'(NGX - 1)) begin
                cx <= '0;
                cy <= cy + 1'b1;
              end else begin
                cx <= cx + 1'b1;
              end
              state <= G_OR;
            end
          end
        end
        default: state <= G_IDLE;
      endcase
    end
  end

endmodule
