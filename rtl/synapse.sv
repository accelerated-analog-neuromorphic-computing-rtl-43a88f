// synapse: digital part of one synapse circuit.
//
// Each synapse holds 16 SRAM bits as two 8-bit words: word 0 = {calib[3:2],
// weight[5:0]}, word 1 = {calib[1:0], address[5:0]} (the split into two words
// follows the chip, the bit layout is this design's choice). The address
// comparator matches the row's 6-bit pre-synaptic address against the stored
// neuron number while the row's pre enable is high and then raises the local
// pre signal. In rate (HAGEN) mode the low five address bits carry the pulse
// length, so only bit 5 is compared. The DAC's current pulse is represented by
// its area: weight * pulse length, in units of one weight LSB for one pulse
// length code step. The row-level switch to input A or B lives in the array.
//
// Interface: word-line write enables we[1:0] with the bit lines wdata, stored
// words always visible on word0/word1. Timing: writes take effect at the next
// rising clock edge; pre and charge are combinational from the row signals.
module synapse
  import bss2_pkg::*;
(
  input  logic                 clk,
  input  logic [1:0]           we,
  input  logic [7:0]           wdata,
  output logic [7:0]           word0,
  output logic [7:0]           word1,
  input  logic                 pre_en,
  input  logic [SYN_ADDR_W-1:0] pre_addr,
  input  logic [PULSE_W-1:0]   pulse_len,
  input  logic                 rate_mode,
  output logic                 pre,
  output logic [CHARGE_W-1:0]  charge
);

  logic [7:0] w0_q, w1_q;

  always_ff @(posedge clk) begin
    if (we[0]) w0_q <= wdata;
    if (we[1]) w1_q <= wdata;
  end

  assign word0 = w0_q;
  assign word1 = w1_q;

  logic [WEIGHT_W-1:0]   weight;
  logic [SYN_ADDR_W-1:0] stored_addr;
  logic                  match;

  assign weight      = w0_q[WEIGHT_W-1:0];
  assign stored_addr = w1_q[SYN_ADDR_W-1:0];

  always_comb begin
    if (rate_mode) match = (pre_addr[SYN_ADDR_W-1] == stored_addr[SYN_ADDR_W-1]);
    else           match = (pre_addr == stored_addr);
    pre    = pre_en && match;
    charge = pre ? CHARGE_W'(weight * pulse_len) : '0;
  end

endmodule
