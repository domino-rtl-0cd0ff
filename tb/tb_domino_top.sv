// tb_domino_top -- end-to-end test of the Domino top level on a reduced
// mesh (4 x 3 tiles, 16 x 16 crossbars, ADC shift 4), so that it runs in
// seconds. The scenario and its checks are in domino_e2e.svh: an FC layer
// with max pooling and ReLU on a 3 x 2 block, inputs forwarded through a
// non-block column, partial sums chained through the Rofm buffers, and a
// count of every mechanism used. The weights lean negative here so that
// with only 32 output lanes both ReLU clipping and positive results occur.
module tb_domino_top;
  import domino_pkg::*;
  localparam int AR = 4, AC = 3, NC = 16, NM = 16, SH = 4, IBD = 64;
  localparam int XMAX = 15, WLO = -8, WHI = 6;

  `include "domino_e2e.svh"

  domino_top #(.AR(AR), .AC(AC), .NC(NC), .NM(NM), .ADC_SHIFT(SH), .IB_DEPTH(IBD)) dut (.*);
endmodule
