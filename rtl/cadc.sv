// cadc: column-parallel single-slope ADC of one synapse array quadrant.
//
// A conversion digitises all CH channels at once. On start every channel
// counter is cleared and a shared ramp starts at zero; every cycle the ramp
// rises by one code and each channel whose comparator still sees the ramp below
// its input keeps counting. When the ramp reaches full scale (2**BITS cycles)
// the counters hold the results and done pulses. Channels 0..CH/2-1 convert the
// causal correlation level of their column, or with sel_mem the column's
// neuron membrane (its upper BITS bits); channels CH/2..CH-1 convert the
// anti-causal correlation levels.
//
// The ramp and the comparators are analog on the chip; here the input levels
// arrive as codes and the comparator is an integer compare, so a level L reads
// back as L. 256 channels of 8 bits, the per-channel counters and comparators
// and the ramp follow the chip; one ramp step per clock cycle, the channel map
// and the membrane scaling are this design's choices.
// Timing: start while idle; busy for 2**BITS cycles; result valid with done.
module cadc
  import bss2_pkg::*;
#(
  parameter int unsigned CH   = CADC_CH,
  parameter int unsigned BITS = CADC_BITS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       sel_mem,
  input  logic [CH/2-1:0][BITS-1:0]  causal,
  input  logic [CH/2-1:0][BITS-1:0]  acausal,
  input  logic [CH/2-1:0][MEM_W-1:0] membrane,
  output logic                       busy,
  output logic                       done,
  output logic [CH-1:0][BITS-1:0]    result
);

  logic [BITS-1:0]           ramp_q;
  logic [CH-1:0][BITS-1:0]   level;

  always_comb begin
    for (int c = 0; c < CH / 2; c++) begin
      level[c]        = sel_mem ? membrane[c][MEM_W-1 -: BITS] : causal[c];
      level[c + CH/2] = acausal[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      ramp_q <= '0;
      result <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          ramp_q <= '0;
          result <= '0;
        end
      end else begin
        for (int c = 0; c < CH; c++)
          if (ramp_q < level[c]) result[c] <= result[c] + 1'b1;
        ramp_q <= ramp_q + 1'b1;
        if (ramp_q == '1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
