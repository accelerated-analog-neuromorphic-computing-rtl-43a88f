// capmem: digital side of one row of analog parameter memories.
//
// Every neuron compartment has 24 analog parameters (voltages and currents)
// kept on small capacitors that slowly lose their charge. This block keeps the
// digital value of every cell (COLS x ROWS words; columns 0..127 are the
// compartments, columns 128 and 129 the 48 global parameters) and refreshes the
// cells continuously: a sequencer walks over all cells, one per cycle, column
// by column and within a column parameter by parameter, and presents column,
// parameter index and value on the refresh outputs, where the cell's DAC would
// copy it onto the capacitor. A write through the config port changes the
// stored value; the cell takes it at its next refresh.
//
// Timing: a write lands at the next edge; ref_* are registered and advance
// every cycle after reset. The 130 x 24 organisation follows the chip; the
// 10-bit value, the scan order and the refresh rate are this design's choices.
module capmem
  import bss2_pkg::*;
#(
  parameter int unsigned COLS = CAP_COLS,
  parameter int unsigned ROWS = CAP_ROWS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [7:0]              cfg_col,
  input  logic [4:0]              cfg_row,
  input  logic [CAP_W-1:0]        cfg_wdata,
  output logic                    ref_valid,
  output logic [7:0]              ref_col,
  output logic [4:0]              ref_row,
  output logic [CAP_W-1:0]        ref_val
);

  logic [CAP_W-1:0] mem [COLS*ROWS];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_col < 8'(COLS) && cfg_row < 5'(ROWS))
      mem[int'(cfg_col) * ROWS + int'(cfg_row)] <= cfg_wdata;
  end

  logic [7:0] col_q;
  logic [4:0] row_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_q     <= '0;
      row_q     <= '0;
      ref_valid <= 1'b0;
      ref_col   <= '0;
      ref_row   <= '0;
      ref_val   <= '0;
    end else begin
      ref_valid <= 1'b1;
      ref_col   <= col_q;
      ref_row   <= row_q;
      ref_val   <= mem[int'(col_q) * ROWS + int'(row_q)];
      if (row_q == 5'(ROWS - 1)) begin
        row_q <= '0;
        col_q <= (col_q == 8'(COLS - 1)) ? '0 : col_q + 8'd1;
      end else begin
        row_q <= row_q + 5'd1;
      end
    end
  end

endmodule
