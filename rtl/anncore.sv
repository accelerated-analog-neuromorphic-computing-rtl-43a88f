// anncore: the analog network core with its digital periphery.
//
// Four synapse arrays of ROWS x COLS synapses form two halves: quadrants 0
// (left) and 1 (right) on top, 2 and 3 at the bottom. In each half a column of
// ROWS/2 synapse drivers sits between the two arrays; driver d feeds rows 2d and
// 2d+1 of both arrays and listens to input bus 4*half + d mod 4. Every column
// ends in a neuron compartment (behavioural model) that receives the column's
// summed pulses on inputs A and B, so the core holds 4*COLS compartments.
// Each quadrant's row of compartments has a parameter memory (COLS+2 columns of
// 24 values, the last two global) whose refresh
// stream sets the compartments' parameters, and a column-parallel ADC that
// digitises correlation levels or membranes for the plasticity processors.
// Eight neuron control blocks, each taking 32 columns of a top quadrant and the
// same 32 columns of the bottom quadrant below it (block b: quadrants b/4 and
// b/4+2, columns 32*(b mod 4)..+31), serialise the spikes onto the eight output
// buses.
//
// Config (cfg_we, cfg_addr[19:0], cfg_wdata): cfg_addr[19:16] = 0 synapse
// driver (bit 7 half, bits 6:0 driver), 1 neuron control (bits 9:7 block, 6:0
// register), 2 parameter memory (bits 14:13 quadrant, 12:5 column, 4:0 row).
// The plasticity processors' side is made of ports: per quadrant the synapse
// memory port, ADC control and results, and a reset line per compartment. The
// correlation sensors are analog and not modelled: their levels are inputs, and
// the post-synaptic spike lines leave as post. The arrangement of arrays,
// drivers, compartments, control blocks, parameter memories and ADCs follows
// the chip; bus and quadrant numbering and the config map are this design's.
module anncore
  import bss2_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned COLS = N_COLS
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  l1_event_t [N_IN_BUS-1:0]               in_ev,
  output l1_event_t [N_OUT_BUS-1:0]              out_ev,
  input  logic                                   cfg_we,
  input  logic [19:0]                            cfg_addr,
  input  logic [31:0]                            cfg_wdata,
  // synapse memory ports (plasticity processors)
  input  logic [N_QUAD-1:0]                      mem_we,
  input  logic [N_QUAD-1:0]                      mem_re,
  input  logic [N_QUAD-1:0][$clog2(ROWS)-1:0]    mem_row,
  input  logic [N_QUAD-1:0]                      mem_word,
  input  logic [N_QUAD-1:0][COLS-1:0][7:0]       mem_wdata,
  output logic [N_QUAD-1:0][COLS-1:0][7:0]       mem_rdata,
  // column-parallel ADCs
  input  logic [N_QUAD-1:0]                      cadc_start,
  input  logic [N_QUAD-1:0]                      cadc_sel_mem,
  input  logic [N_QUAD-1:0][COLS-1:0][CADC_BITS-1:0] corr_causal,
  input  logic [N_QUAD-1:0][COLS-1:0][CADC_BITS-1:0] corr_acausal,
  output logic [N_QUAD-1:0]                      cadc_busy,
  output logic [N_QUAD-1:0]                      cadc_done,
  output logic [N_QUAD-1:0][2*COLS-1:0][CADC_BITS-1:0] cadc_result,
  // neurons
  input  logic [N_QUAD-1:0][COLS-1:0]            neuron_reset,
  output logic [N_QUAD-1:0][COLS-1:0]            post,
  output logic [N_QUAD-1:0][COLS-1:0][MEM_W-1:0] v_mem,
  output logic [N_OUT_BUS-1:0][15:0]             spikes_lost
);

  localparam int unsigned NDRV  = ROWS / 2;
  localparam int unsigned BCOLS = NC_N / 2;          // columns per control block

  // ---------------------------------------------------------------- drivers
  row_sig_t [1:0][ROWS-1:0] half_rows;

  for (genvar h = 0; h < 2; h++) begin : g_half
    for (genvar d = 0; d < NDRV; d++) begin : g_drv
      logic drv_we;
      assign drv_we = cfg_we && cfg_addr[19:16] == 4'd0 && cfg_addr[7] == 1'(h)
                      && cfg_addr[6:0] == 7'(d);
      synapse_driver u_drv (
        .clk       (clk),
        .rst_n     (rst_n),
        .ev        (in_ev[4*h + d%4]),
        .cfg_we    (drv_we),
        .cfg_wdata (cfg_wdata),
        .rows      (half_rows[h][2*d+1 -: 2])
      );
    end
  end

  // ------------------------------------------- arrays, neurons, capmem, ADC
  logic [N_QUAD-1:0][COLS-1:0] fire;
  logic [N_QUAD-1:0][COLS-1:0] hagen;

  for (genvar q = 0; q < N_QUAD; q++) begin : g_quad
    logic [COLS-1:0][COLSUM_W-1:0] col_a, col_b;
    logic                          ref_valid;
    logic [7:0]                    ref_col;
    logic [4:0]                    ref_row;
    logic [CAP_W-1:0]              ref_val;

    synapse_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
      .clk       (clk),
      .mem_we    (mem_we[q]),
      .mem_re    (mem_re[q]),
      .mem_row   (mem_row[q]),
      .mem_word  (mem_word[q]),
      .mem_wdata (mem_wdata[q]),
      .mem_rdata (mem_rdata[q]),
      .row       (half_rows[q/2]),
      .col_a     (col_a),
      .col_b     (col_b)
    );

    capmem #(.COLS(COLS + 2)) u_capmem (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg_we    (cfg_we && cfg_addr[19:16] == 4'd2 && cfg_addr[14:13] == 2'(q)),
      .cfg_col   (cfg_addr[12:5]),
      .cfg_row   (cfg_addr[4:0]),
      .cfg_wdata (cfg_wdata[CAP_W-1:0]),
      .ref_valid (ref_valid),
      .ref_col   (ref_col),
      .ref_row   (ref_row),
      .ref_val   (ref_val)
    );

    for (genvar c = 0; c < COLS; c++) begin : g_neuron
      neuron_compartment u_neuron (
        .clk        (clk),
        .rst_n      (rst_n),
        .in_a       (col_a[c]),
        .in_b       (col_b[c]),
        .hagen_mode (hagen[q][c]),
        .ppu_reset  (neuron_reset[q][c]),
        .param_we   (ref_valid && ref_col == 8'(c)),
        .param_idx  (ref_row),
        .param_val  (ref_val),
        .spike      (fire[q][c]),
        .v_mem      (v_mem[q][c])
      );
    end

    cadc #(.CH(2*COLS)) u_cadc (
      .clk      (clk),
      .rst_n    (rst_n),
      .start    (cadc_start[q]),
      .sel_mem  (cadc_sel_mem[q]),
      .causal   (corr_causal[q]),
      .acausal  (corr_acausal[q]),
      .membrane (v_mem[q]),
      .busy     (cadc_busy[q]),
      .done     (cadc_done[q]),
      .result   (cadc_result[q])
    );
  end

  // ------------------------------------------------- digital neuron control
  for (genvar b = 0; b < N_OUT_BUS; b++) begin : g_nc
    localparam int unsigned QT = (b / 4) % 2;      // top quadrant of the pair
    localparam int unsigned C0 = BCOLS * (b % 4);  // first column
    logic [NC_N-1:0] nc_fire, nc_post, nc_hagen;
    logic            nc_we;

    assign nc_we = cfg_we && cfg_addr[19:16] == 4'd1 && cfg_addr[9:7] == 3'(b);

    if (C0 + BCOLS <= COLS) begin : g_used
      assign nc_fire = {fire[QT+2][C0 +: BCOLS], fire[QT][C0 +: BCOLS]};
      assign post[QT][C0 +: BCOLS]    = nc_post[BCOLS-1:0];
      assign post[QT+2][C0 +: BCOLS]  = nc_post[NC_N-1:BCOLS];
      assign hagen[QT][C0 +: BCOLS]   = nc_hagen[BCOLS-1:0];
      assign hagen[QT+2][C0 +: BCOLS] = nc_hagen[NC_N-1:BCOLS];
    end else begin : g_unused
      assign nc_fire = '0;
    end

    neuron_control #(.BLOCK_ID(b)) u_nc (
      .clk        (clk),
      .rst_n      (rst_n),
      .fire       (nc_fire),
      .cfg_we     (nc_we),
      .cfg_addr   (cfg_addr[6:0]),
      .cfg_wdata  (cfg_wdata),
      .ev         (out_ev[b]),
      .post       (nc_post),
      .hagen_mode (nc_hagen),
      .lost       (spikes_lost[b])
    );
  end

endmodule
