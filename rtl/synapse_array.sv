// synapse_array: one of the four synapse blocks (ROWS x COLS synapses).
//
// The array is a static memory from the digital side: a row address and a word
// select pick one 8-bit word in every synapse of a row, and all COLS words move
// at once over the parallel data lines (COLS*8 bits, 1024 for 128 columns).
// From the analog side, every row receives its driver's signals (pre enable,
// 6-bit address, pulse length, rate mode, A/B switch) and each synapse that
// recognises the address adds its pulse to the column's dendritic input A or B,
// as chosen per row. The analog current summation on the column wires is
// represented by the exact integer sum of the pulse areas of one cycle.
//
// Timing: a write (mem_we) lands at the next rising edge; a read (mem_re) shows
// on mem_rdata one cycle later and holds until the next read. col_a/col_b are
// combinational from the row signals of the same cycle. Sizes follow the chip
// (256 rows, 128 columns); the memory timing and the integer stand-in for the
// analog sum are this design's choices.
module synapse_array
  import bss2_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned COLS = N_COLS
) (
  input  logic                         clk,
  // static memory interface
  input  logic                         mem_we,
  input  logic                         mem_re,
  input  logic [$clog2(ROWS)-1:0]      mem_row,
  input  logic                         mem_word,
  input  logic [COLS-1:0][7:0]         mem_wdata,
  output logic [COLS-1:0][7:0]         mem_rdata,
  // row signals from the synapse drivers
  input  row_sig_t [ROWS-1:0]          row,
  // summed pulse areas per column and dendritic input
  output logic [COLS-1:0][COLSUM_W-1:0] col_a,
  output logic [COLS-1:0][COLSUM_W-1:0] col_b
);

  logic [7:0]          word0  [ROWS][COLS];
  logic [7:0]          word1  [ROWS][COLS];
  logic [CHARGE_W-1:0] charge [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic [1:0] we_row;
    assign we_row = (mem_we && mem_row == r) ? (mem_word ? 2'b10 : 2'b01) : 2'b00;
    for (genvar c = 0; c < COLS; c++) begin : g_col
      synapse u_syn (
        .clk       (clk),
        .we        (we_row),
        .wdata     (mem_wdata[c]),
        .word0     (word0[r][c]),
        .word1     (word1[r][c]),
        .pre_en    (row[r].pre_en),
        .pre_addr  (row[r].addr),
        .pulse_len (row[r].pulse_len),
        .rate_mode (row[r].rate),
        .pre       (),
        .charge    (charge[r][c])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (mem_re) begin
      for (int c = 0; c < COLS; c++)
        mem_rdata[c] <= mem_word ? word1[mem_row][c] : word0[mem_row][c];
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      col_a[c] = '0;
      col_b[c] = '0;
      for (int r = 0; r < ROWS; r++) begin
        if (row[r].to_b) col_b[c] = col_b[c] + COLSUM_W'(charge[r][c]);
        else             col_a[c] = col_a[c] + COLSUM_W'(charge[r][c]);
      end
    end
  end

endmodule
