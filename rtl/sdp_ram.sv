// sdp_ram: block RAM with one write port and NRD synchronous read ports.
//
// Used for the support-point store (RAM_Support Point), the grid-vector store
// (RAM_GRID), the triangle-mesh store and the interpolator's scratch buffer.
// A read returns the word one cycle after the address is presented; a read of
// the address being written in the same cycle returns the old word. Widths
// and depths are set by the instantiating stage; the port arrangement is an
// own choice (the paper only names these RAMs).
module sdp_ram #(
  parameter int DW    = 9,
  parameter int DEPTH = 12288,
  parameter int NRD   = 2
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [DW-1:0]            wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr [NRD],
  output logic [DW-1:0]            rdata [NRD]
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int p = 0; p < NRD; p++) rdata[p] <= mem[raddr[p]];
  end

endmodule
