// neuron_builder: spike interconnect of the compartments of one neuron
// control block.
//
// The block serves two rows of COLS compartments (index = row*COLS + column).
// h_conn[i] joins compartment i to its right-hand neighbour in the same row,
// v_conn[c] joins the two compartments of column c. Compartments joined this
// way form one larger neuron, and a spike of any member is passed to every
// member (fire_out), so the whole group fires as one. The connected groups are
// found by repeated neighbour propagation, 2*COLS rounds, enough for the
// longest possible chain. Purely combinational.
//
// Joining horizontally and vertically adjacent compartments follows the chip;
// the analog membrane switches are not part of this logic, and links across
// block borders are not provided (this design's choice).
module neuron_builder #(
  parameter int unsigned COLS = 32
) (
  input  logic [2*COLS-1:0] fire_in,
  input  logic [2*COLS-1:0] h_conn,
  input  logic [COLS-1:0]   v_conn,
  output logic [2*COLS-1:0] fire_out
);

  localparam int unsigned N = 2 * COLS;

  always_comb begin
    logic [N-1:0] f, nf;
    f = fire_in;
    for (int it = 0; it < N; it++) begin
      nf = f;
      for (int r = 0; r < 2; r++) begin
        for (int c = 0; c < COLS; c++) begin
          if (c < COLS - 1 && h_conn[r*COLS+c] && f[r*COLS+c+1]) nf[r*COLS+c] = 1'b1;
          if (c > 0 && h_conn[r*COLS+c-1] && f[r*COLS+c-1])     nf[r*COLS+c] = 1'b1;
          if (v_conn[c] && f[(1-r)*COLS+c])                       nf[r*COLS+c] = 1'b1;
        end
      end
      f = nf;
    end
    fire_out = f;
  end

endmodule
