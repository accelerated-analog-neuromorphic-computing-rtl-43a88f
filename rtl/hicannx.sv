// hicannx: top level of the single-chip accelerated analog neuromorphic system.
//
// Spikes travel as real-time (L1) events, one per 4 ns cycle on every link.
// The analog network core (anncore) sends the spikes of its neurons on eight
// output buses and takes pre-synaptic events on eight input buses. The central
// event router mixes these with two other sources: events from the host, which
// arrive time-stamped (L2) and are released on time by the L2/L1 converter, and
// eight random background generators. Router channels 0..7 feed the core's input
// buses, channels 8..11 go back through the converter, which stamps them with
// the system time for the host.
//
// The host link serialisers, the packet layer, the PLL, the fast ADC, the output
// amplifiers and the two plasticity processors are not part of this logic: the
// L2 event streams, the config bus and everything a plasticity processor drives
// or reads (synapse memories, ADCs, neuron resets) are ports of this module.
// Config (cfg_we, cfg_addr[19:0], cfg_wdata): cfg_addr[19:16] = 0..2 go to the
// core (see anncore), 3 = router route enables of channel cfg_addr[3:0],
// 4 = random generator cfg_addr[4:2], register cfg_addr[1:0].
module hicannx
  import bss2_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned COLS = N_COLS
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   cfg_we,
  input  logic [19:0]                            cfg_addr,
  input  logic [31:0]                            cfg_wdata,
  // time-stamped event streams of the host links
  input  logic                                   systime_load,
  input  logic [SYSTIME_W-1:0]                   systime_val,
  output logic [SYSTIME_W-1:0]                   systime,
  input  l2_event_t [N_L2_LINKS-1:0]             l2_in,
  output logic [N_L2_LINKS-1:0]                  l2_in_ready,
  output l2_event_t [N_L2_LINKS-1:0]             l2_out,
  // plasticity processor side
  input  logic [N_QUAD-1:0]                      mem_we,
  input  logic [N_QUAD-1:0]                      mem_re,
  input  logic [N_QUAD-1:0][$clog2(ROWS)-1:0]    mem_row,
  input  logic [N_QUAD-1:0]                      mem_word,
  input  logic [N_QUAD-1:0][COLS-1:0][7:0]       mem_wdata,
  output logic [N_QUAD-1:0][COLS-1:0][7:0]       mem_rdata,
  input  logic [N_QUAD-1:0]                      cadc_start,
  input  logic [N_QUAD-1:0]                      cadc_sel_mem,
  input  logic [N_QUAD-1:0][COLS-1:0][CADC_BITS-1:0] corr_causal,
  input  logic [N_QUAD-1:0][COLS-1:0][CADC_BITS-1:0] corr_acausal,
  output logic [N_QUAD-1:0]                      cadc_busy,
  output logic [N_QUAD-1:0]                      cadc_done,
  output logic [N_QUAD-1:0][2*COLS-1:0][CADC_BITS-1:0] cadc_result,
  input  logic [N_QUAD-1:0][COLS-1:0]            neuron_reset,
  // towards correlation sensors, output amplifiers and status
  output logic [N_QUAD-1:0][COLS-1:0]            post,
  output logic [N_QUAD-1:0][COLS-1:0][MEM_W-1:0] v_mem,
  output logic [N_OUT_BUS-1:0][15:0]             spikes_lost,
  output logic [N_CH-1:0][15:0]                  route_drops
);

  l1_event_t [N_SRC-1:0]      src_ev;
  l1_event_t [N_CH-1:0]       ch_ev;
  l1_event_t [N_OUT_BUS-1:0]  core_out;
  l1_event_t [N_L2_LINKS-1:0] l2l1_out;
  l1_event_t [N_RANDOM-1:0]   rnd_ev;

  anncore #(.ROWS(ROWS), .COLS(COLS)) u_core (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_ev        (ch_ev[N_IN_BUS-1:0]),
    .out_ev       (core_out),
    .cfg_we       (cfg_we),
    .cfg_addr     (cfg_addr),
    .cfg_wdata    (cfg_wdata),
    .mem_we       (mem_we),
    .mem_re       (mem_re),
    .mem_row      (mem_row),
    .mem_word     (mem_word),
    .mem_wdata    (mem_wdata),
    .mem_rdata    (mem_rdata),
    .cadc_start   (cadc_start),
    .cadc_sel_mem (cadc_sel_mem),
    .corr_causal  (corr_causal),
    .corr_acausal (corr_acausal),
    .cadc_busy    (cadc_busy),
    .cadc_done    (cadc_done),
    .cadc_result  (cadc_result),
    .neuron_reset (neuron_reset),
    .post         (post),
    .v_mem        (v_mem),
    .spikes_lost  (spikes_lost)
  );

  for (genvar g = 0; g < N_RANDOM; g++) begin : g_rnd
    random_generator u_rnd (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg_we    (cfg_we && cfg_addr[19:16] == 4'd4 && cfg_addr[4:2] == 3'(g)),
      .cfg_addr  (cfg_addr[1:0]),
      .cfg_wdata (cfg_wdata),
      .ev        (rnd_ev[g])
    );
  end

  assign src_ev = {rnd_ev, l2l1_out, core_out};

  event_router u_router (
    .clk       (clk),
    .rst_n     (rst_n),
    .src_ev    (src_ev),
    .cfg_we    (cfg_we && cfg_addr[19:16] == 4'd3),
    .cfg_ch    (cfg_addr[3:0]),
    .cfg_wdata (cfg_wdata),
    .ch_ev     (ch_ev),
    .drops     (route_drops)
  );

  l2_l1_converter u_l2l1 (
    .clk          (clk),
    .rst_n        (rst_n),
    .systime_load (systime_load),
    .systime_val  (systime_val),
    .systime      (systime),
    .l2_in        (l2_in),
    .l2_in_ready  (l2_in_ready),
    .l1_out       (l2l1_out),
    .l1_in        (ch_ev[N_CH-1 -: N_L2_LINKS]),
    .l2_out       (l2_out)
  );

endmodule
