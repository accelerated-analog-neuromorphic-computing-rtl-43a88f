// l2_l1_converter: bridge between time-stamped (L2) and real-time (L1) events.
//
// The block keeps the system time counter, a free-running cycle count that
// can be loaded (systime_load) so that all chips of a system share one time
// base. Towards the chip, each of N_LINKS links queues incoming L2 events (address
// plus TS_W-bit time stamp) in a FIFO of DEPTH entries and releases the head as
// an L1 event in the first cycle in which the low TS_W bits of the system time
// have reached or passed its stamp (signed difference, so stamps up to half the
// time stamp range in the future are held back, older ones leave at once).
// Events of one link leave in their arrival order. Towards the host, every L1
// event of the router's L1->L2 channels is stamped with the current system time.
//
// Timing: l2_in is accepted when l2_in_ready; an event due on arrival leaves two
// cycles later; stamping takes one cycle. Four links each way and the global
// system time follow the chip; widths, FIFO depth and the release rule are this
// design's choices.
module l2_l1_converter
  import bss2_pkg::*;
#(
  parameter int unsigned N_LINKS = N_L2_LINKS,
  parameter int unsigned DEPTH   = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    systime_load,
  input  logic [SYSTIME_W-1:0]    systime_val,
  output logic [SYSTIME_W-1:0]    systime,
  input  l2_event_t [N_LINKS-1:0] l2_in,
  output logic [N_LINKS-1:0]      l2_in_ready,
  output l1_event_t [N_LINKS-1:0] l1_out,
  input  l1_event_t [N_LINKS-1:0] l1_in,
  output l2_event_t [N_LINKS-1:0] l2_out
);

  localparam int unsigned AW = $clog2(DEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            systime <= '0;
    else if (systime_load) systime <= systime_val;
    else                   systime <= systime + 1'b1;
  end

  for (genvar l = 0; l < N_LINKS; l++) begin : g_link
    logic [EV_ADDR_W+TS_W-1:0] fifo [DEPTH];
    logic [AW-1:0]             wp_q, rp_q;
    logic [AW:0]               cnt_q;
    logic                      push, pop;
    logic [TS_W-1:0]           head_ts;
    logic signed [TS_W-1:0]    diff;

    assign l2_in_ready[l] = (cnt_q != (AW+1)'(DEPTH));
    assign push    = l2_in[l].valid && l2_in_ready[l];
    assign head_ts = fifo[rp_q][TS_W-1:0];
    assign diff    = $signed(head_ts - systime[TS_W-1:0]);
    assign pop     = (cnt_q != '0) && (diff <= 0);

    always_ff @(posedge clk) begin
      if (push) fifo[wp_q] <= {l2_in[l].addr, l2_in[l].ts};
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wp_q      <= '0;
        rp_q      <= '0;
        cnt_q     <= '0;
        l1_out[l] <= '0;
        l2_out[l] <= '0;
      end else begin
        if (push) wp_q <= wp_q + 1'b1;
        if (pop)  rp_q <= rp_q + 1'b1;
        cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
        l1_out[l].valid <= pop;
        l1_out[l].addr  <= fifo[rp_q][TS_W +: EV_ADDR_W];
        l2_out[l].valid <= l1_in[l].valid;
        l2_out[l].addr  <= l1_in[l].addr;
        l2_out[l].ts    <= systime[TS_W-1:0];
      end
    end
  end

endmodule
