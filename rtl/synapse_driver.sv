// synapse_driver: feeds one pair of synapse rows from a real-time event bus.
//
// The driver watches its local input bus. An event whose driver-select field
// (address bits [13:6]) matches the programmed target under the programmed
// mask is for this driver: one cycle later each enabled row of the pair sees a
// one-cycle (4 ns) pre-synaptic enable together with the 6-bit neuron number
// from address bits [5:0]. The address then stays on the row until the next
// event; the input bus brings at most one event every two cycles, which leaves
// the other 4 ns for the address to change. In spiking mode the pulse length is
// the full code; a row in rate (HAGEN) mode takes its pulse length from the
// five low address bits, which is how an activation value travels with the
// event. The row-level A/B switch is also held here.
//
// Config word (cfg_we, cfg_wdata): [7:0] target, [15:8] mask, [17:16] row
// enable, [19:18] row to input B, [21:20] row in rate mode. The field layout,
// the target/mask selection and the analog short-term plasticity being left
// out (full pulse in spiking mode) are this design's choices; the pair of rows,
// the 4 ns pulse and the pulse length in the low five bits follow the chip.
module synapse_driver
  import bss2_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  l1_event_t           ev,
  input  logic                cfg_we,
  input  logic [31:0]         cfg_wdata,
  output row_sig_t [1:0]      rows
);

  logic [7:0] target_q, mask_q;
  logic [1:0] row_en_q, row_b_q, row_rate_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      target_q   <= '0;
      mask_q     <= '0;
      row_en_q   <= '0;
      row_b_q    <= '0;
      row_rate_q <= '0;
    end else if (cfg_we) begin
      target_q   <= cfg_wdata[7:0];
      mask_q     <= cfg_wdata[15:8];
      row_en_q   <= cfg_wdata[17:16];
      row_b_q    <= cfg_wdata[19:18];
      row_rate_q <= cfg_wdata[21:20];
    end
  end

  logic hit;
  assign hit = ev.valid &&
               (((ev.addr[EV_ADDR_W-1:SYN_ADDR_W] ^ target_q) & mask_q) == '0);

  logic                  pulse_q;
  logic [SYN_ADDR_W-1:0] addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pulse_q <= 1'b0;
      addr_q  <= '0;
    end else begin
      pulse_q <= hit;
      if (hit) addr_q <= ev.addr[SYN_ADDR_W-1:0];
    end
  end

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      rows[i].pre_en    = pulse_q && row_en_q[i];
      rows[i].addr      = addr_q;
      rows[i].pulse_len = row_rate_q[i] ? addr_q[PULSE_W-1:0] : FULL_PULSE;
      rows[i].rate      = row_rate_q[i];
      rows[i].to_b      = row_b_q[i];
    end
  end

  // The input bus carries at most one event every two cycles.
  a_bus_rate: assert property (@(posedge clk) disable iff (!rst_n) hit |=> !hit)
    else $error("synapse_driver: events on consecutive cycles");

endmodule
