// tb_sdp_ram: self-checking test of the one-write, two-read block RAM.
// Random writes and reads on both ports against a reference array; a read
// returns the word one cycle later, the old word when it hits the address
// written in the same cycle.
module tb_sdp_ram;
  localparam int DW = 12, DEPTH = 40;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [$clog2(DEPTH)-1:0] waddr, raddr [2];
  logic [DW-1:0] wdata, rdata [2];
  sdp_ram #(.DW(DW), .DEPTH(DEPTH), .NRD(2)) dut (.*);
  int checks = 0, failures = 0;
  logic [DW-1:0] model [DEPTH];
  initial begin
    we = 0; waddr = 0; wdata = 0; raddr[0] = 0; raddr[1] = 0;
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 6'(a); wdata = DW'($urandom); model[a] = wdata;
      @(posedge clk); #1;
    end
    for (int t = 0; t < 500; t++) begin
      logic [DW-1:0] e [2];
      we = 1'($urandom_range(1)); waddr = 6'($urandom_range(DEPTH - 1)); wdata = DW'($urandom);
      for (int p = 0; p < 2; p++) begin
        raddr[p] = (p == 1 && t % 5 == 0) ? waddr : 6'($urandom_range(DEPTH - 1));
        e[p] = model[raddr[p]];
      end
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rdata[p] != e[p]) begin failures++; $display("port %0d addr %0d: %h, expected %h", p, raddr[p], rdata[p], e[p]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
