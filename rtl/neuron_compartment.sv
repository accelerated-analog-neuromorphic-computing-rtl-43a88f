// neuron_compartment: behavioural model of one analog neuron compartment.
//
// The real compartment is an analog adaptive-exponential integrate-and-fire
// circuit; this model stands in for it in discrete time so that the digital
// parts around it can be simulated. Each cycle the summed synaptic pulse areas
// of dendritic input A are added to the membrane state and those of input B
// subtracted (A excitatory, B inhibitory). In spiking mode a leak pulls the
// membrane towards the leak potential (decay by a right shift per cycle), and
// crossing the threshold emits a one-cycle spike and sets the membrane to the
// reset potential. In HAGEN (rate) mode the leak and the spike are off: the
// membrane only sums its input until the plasticity processor's reset returns
// it to the reset potential. The membrane code v_mem is the state divided by
// 2**MEM_SHIFT and clipped to 0..1023, so with the reset potential at the lower
// end of the ADC range the compartment acts as a ReLU.
//
// Parameters come from the parameter memory refresh stream (param_we,
// param_idx, param_val): 0 threshold, 1 reset, 2 leak potential (all membrane
// codes), 3 leak shift [3:0]. This mapping, the discrete-time leak and the
// scaling are this model's choices; adaptation, the exponential term and the
// NMDA/plateau extensions are not modelled. Timing: state and spike are
// registered; spike is high for the cycle after the crossing.
module neuron_compartment
  import bss2_pkg::*;
#(
  parameter int unsigned MEM_SHIFT = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [COLSUM_W-1:0] in_a,
  input  logic [COLSUM_W-1:0] in_b,
  input  logic                hagen_mode,
  input  logic                ppu_reset,
  input  logic                param_we,
  input  logic [4:0]          param_idx,
  input  logic [CAP_W-1:0]    param_val,
  output logic                spike,
  output logic [MEM_W-1:0]    v_mem
);

  localparam int unsigned SW = 32;

  logic [CAP_W-1:0] p_thresh, p_reset, p_leak;
  logic [3:0]       p_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_thresh <= '1;
      p_reset  <= '0;
      p_leak   <= '0;
      p_shift  <= 4'd4;
    end else if (param_we) begin
      case (param_idx)
        5'd0: p_thresh <= param_val;
        5'd1: p_reset  <= param_val;
        5'd2: p_leak   <= param_val;
        5'd3: p_shift  <= param_val[3:0];
        default: ;
      endcase
    end
  end

  logic signed [SW-1:0] v_q, v_int, v_reset_s, v_leak_s, v_next;
  logic                 fire;

  function automatic logic [MEM_W-1:0] to_code(input logic signed [SW-1:0] v);
    logic signed [SW-1:0] s;
    s = v >>> MEM_SHIFT;
    if (s < 0)                 return '0;
    else if (s > (2**MEM_W-1)) return '1;
    else                       return s[MEM_W-1:0];
  endfunction

  always_comb begin
    v_reset_s = SW'(p_reset) <<< MEM_SHIFT;
    v_leak_s  = SW'(p_leak)  <<< MEM_SHIFT;
    v_int     = v_q + $signed(SW'(in_a)) - $signed(SW'(in_b));
    fire      = 1'b0;
    if (!hagen_mode) begin
      v_int = v_int - ((v_q - v_leak_s) >>> p_shift);
      fire  = (v_int >>> MEM_SHIFT) >= $signed(SW'(p_thresh));
    end
    if (ppu_reset || fire) v_next = v_reset_s;
    else                   v_next = v_int;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= '0;
      spike <= 1'b0;
    end else begin
      v_q   <= v_next;
      spike <= fire;
    end
  end

  assign v_mem = to_code(v_q);

endmodule
