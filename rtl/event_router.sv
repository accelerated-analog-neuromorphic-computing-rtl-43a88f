// event_router: central real-time (L1) event routing matrix.
//
// N_SRC sources (anncore output buses 0..7, L2->L1 links 8..11, random
// generators 12..19) cross N_CH output channels (anncore input buses 0..7,
// L1->L2 links 8..11). At every crossing a programmable routing element decides
// whether the source feeds the channel, and a one-event buffer holds the event
// until the channel's n-to-1 merger takes it. The merger serves the buffers
// round robin and sends one event per cycle, except on the anncore input
// buses, which get at most one event every two cycles. L1 has no handshake, so
// an event that meets a full buffer is dropped and counted per channel.
//
// Config: cfg_we writes the N_SRC route enables of channel cfg_ch
// (bit s = source s). Timing: an event entering in cycle t leaves at the
// earliest in cycle t+2 (buffer, then output register). The 20 x 12 size, the
// merger columns and the anncore rate limit follow the chip; a routing element
// at every crossing (the chip has them only at selected crossings), one-event
// buffers, round robin and dropping are this design's choices.
module event_router
  import bss2_pkg::*;
#(
  parameter int unsigned NS      = N_SRC,
  parameter int unsigned NCH     = N_CH,
  parameter int unsigned NCORE   = N_IN_BUS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  l1_event_t [NS-1:0]      src_ev,
  input  logic                    cfg_we,
  input  logic [3:0]              cfg_ch,
  input  logic [31:0]             cfg_wdata,
  output l1_event_t [NCH-1:0]     ch_ev,
  output logic [NCH-1:0][15:0]    drops
);

  localparam int unsigned SW = $clog2(NS);

  logic [NCH-1:0][NS-1:0]                route_q;
  logic [NCH-1:0][NS-1:0]                buf_v;
  logic [NCH-1:0][NS-1:0][EV_ADDR_W-1:0] buf_a;
  logic [NCH-1:0][SW-1:0]                rr_q;
  logic [NCH-1:0]                        gap_q;

  logic [NCH-1:0]         take;
  logic [NCH-1:0][SW-1:0] sel;

  // merger: first full buffer at or after the round-robin pointer
  always_comb begin
    for (int ch = 0; ch < NCH; ch++) begin
      take[ch] = 1'b0;
      sel[ch]  = '0;
      for (int k = NS - 1; k >= 0; k--) begin
        int s;
        s = (int'(rr_q[ch]) + k) % NS;
        if (buf_v[ch][s]) begin
          take[ch] = 1'b1;
          sel[ch]  = SW'(s);
        end
      end
      if (ch < NCORE && gap_q[ch]) take[ch] = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      route_q <= '0;
      buf_v   <= '0;
      buf_a   <= '0;
      rr_q    <= '0;
      gap_q   <= '0;
      ch_ev   <= '0;
      drops   <= '0;
    end else begin
      if (cfg_we && cfg_ch < 4'(NCH)) route_q[cfg_ch] <= cfg_wdata[NS-1:0];
      for (int ch = 0; ch < NCH; ch++) begin
        logic [15:0] d;
        d = drops[ch];
        ch_ev[ch].valid <= take[ch];
        ch_ev[ch].addr  <= buf_a[ch][sel[ch]];
        gap_q[ch]       <= take[ch];
        if (take[ch]) rr_q[ch] <= (int'(sel[ch]) == NS - 1) ? '0 : sel[ch] + 1'b1;
        for (int s = 0; s < NS; s++) begin
          logic freed;
          freed = take[ch] && (int'(sel[ch]) == s);
          if (src_ev[s].valid && route_q[ch][s]) begin
            if (!buf_v[ch][s] || freed) begin
              buf_v[ch][s] <= 1'b1;
              buf_a[ch][s] <= src_ev[s].addr;
            end else begin
              d = d + 16'd1;
            end
          end else if (freed) begin
            buf_v[ch][s] <= 1'b0;
          end
        end
        drops[ch] <= d;
      end
    end
  end

endmodule
