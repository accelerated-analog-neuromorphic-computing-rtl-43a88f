// bss2_pkg: sizes, types and constants shared by the accelerated analog
// neuromorphic core (a BrainScaleS-2 style single chip).
//
// The chip runs on one 250 MHz system clock (4 ns per cycle). Neural events on
// the real-time layer (L1) are a valid bit plus an address; the address width
// (14 bits) and its split into a driver-select field [13:6] and a 6-bit
// pre-synaptic neuron number [5:0] are this design's choice. The array sizes
// (256 rows, 4 x 128 columns, 8 event buses each way, 20 router sources and 12
// channels, 64 compartments per neuron control block, 130 x 24 parameter cells,
// 256 8-bit ADC channels per quadrant) follow the published chip.
package bss2_pkg;

  localparam int unsigned EV_ADDR_W   = 14;  // L1 event address width
  localparam int unsigned SYN_ADDR_W  = 6;   // pre-synaptic neuron number
  localparam int unsigned WEIGHT_W    = 6;   // synaptic weight
  localparam int unsigned CALIB_W     = 4;   // correlation sensor calibration
  localparam int unsigned PULSE_W     = 5;   // pulse length code (HAGEN mode)
  localparam int unsigned CHARGE_W    = WEIGHT_W + PULSE_W;  // one synapse pulse area
  localparam int unsigned COLSUM_W    = CHARGE_W + 8;        // sum over 256 rows

  localparam int unsigned N_ROWS      = 256; // synapse rows per array
  localparam int unsigned N_COLS      = 128; // synapse columns per array
  localparam int unsigned N_QUAD      = 4;   // synapse arrays
  localparam int unsigned N_DRV       = 128; // synapse drivers per chip half
  localparam int unsigned N_IN_BUS    = 8;   // anncore event input buses
  localparam int unsigned N_OUT_BUS   = 8;   // anncore event output buses
  localparam int unsigned N_L2_LINKS  = 4;   // L2<->L1 converter links each way
  localparam int unsigned N_RANDOM    = 8;   // random background generators
  localparam int unsigned N_SRC       = N_OUT_BUS + N_L2_LINKS + N_RANDOM; // 20
  localparam int unsigned N_CH        = N_IN_BUS + N_L2_LINKS;             // 12
  localparam int unsigned NC_N        = 64;  // compartments per neuron control block
  localparam int unsigned CAP_COLS    = 130; // parameter cells per neuron row
  localparam int unsigned CAP_ROWS    = 24;  // parameters per neuron
  localparam int unsigned CAP_W       = 10;  // parameter value width
  localparam int unsigned CADC_CH     = 256; // ADC channels per quadrant
  localparam int unsigned CADC_BITS   = 8;
  localparam int unsigned MEM_W       = 10;  // membrane code width
  localparam int unsigned TS_W        = 16;  // L2 time stamp width
  localparam int unsigned SYSTIME_W   = 32;

  localparam logic [PULSE_W-1:0] FULL_PULSE = '1; // 4 ns pulse in spiking mode

  // Real-time event: valid bit and address, no handshake.
  typedef struct packed {
    logic                 valid;
    logic [EV_ADDR_W-1:0] addr;
  } l1_event_t;

  // Time-stamped event of the packet layer.
  typedef struct packed {
    logic                 valid;
    logic [EV_ADDR_W-1:0] addr;
    logic [TS_W-1:0]      ts;
  } l2_event_t;

  // Signals a synapse driver puts on one synapse row.
  typedef struct packed {
    logic                  pre_en;    // pre-synaptic enable, one 4 ns cycle
    logic [SYN_ADDR_W-1:0] addr;      // pre-synaptic neuron number
    logic [PULSE_W-1:0]    pulse_len; // DAC pulse length code
    logic                  rate;      // row in rate-based (HAGEN) mode
    logic                  to_b;      // row switched to dendritic input B
  } row_sig_t;

endpackage
