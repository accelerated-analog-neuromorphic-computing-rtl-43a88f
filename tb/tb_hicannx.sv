// tb_hicannx: end-to-end test of the chip at reduced size (16 rows, 32
// columns per quadrant, hence 8 drivers per half and 128 compartments).
// The procedure is in tb_hicannx_body.svh.
module tb_hicannx;
  import bss2_pkg::*;
  localparam int R = 16, C = 32;
`include "tb_hicannx_body.svh"
  hicannx #(.ROWS(R), .COLS(C)) dut (.*);
endmodule
