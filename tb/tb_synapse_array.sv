// tb_synapse_array: self-checking test of a reduced synapse array.
// Fills the memory with random words through the row-parallel port, reads every
// row back, then drives random row signals and compares each column's A and B
// sums with sums computed here from the written words.
module tb_synapse_array;
  import bss2_pkg::*;
  localparam int R = 16, C = 8;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic mem_we = 0, mem_re = 0, mem_word = 0;
  logic [$clog2(R)-1:0] mem_row = 0;
  logic [C-1:0][7:0] mem_wdata, mem_rdata;
  row_sig_t [R-1:0] row;
  logic [C-1:0][COLSUM_W-1:0] col_a, col_b;
  logic [7:0] shadow [R][2][C];
  int checks = 0, failures = 0;

  synapse_array #(.ROWS(R), .COLS(C)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea, eb, w, a;
    row = '0;
    for (int r = 0; r < R; r++)
      for (int k = 0; k < 2; k++) begin
        @(negedge clk);
        mem_we = 1; mem_row = r[$clog2(R)-1:0]; mem_word = k[0];
        for (int c = 0; c < C; c++) begin
          mem_wdata[c] = 8'($urandom);
          if (k == 1) mem_wdata[c][5:0] = 6'($urandom % 4); // few addresses, many hits
          shadow[r][k][c] = mem_wdata[c];
        end
      end
    @(negedge clk); mem_we = 0;
    for (int r = 0; r < R; r++)
      for (int k = 0; k < 2; k++) begin
        @(negedge clk); mem_re = 1; mem_row = r[$clog2(R)-1:0]; mem_word = k[0];
        @(negedge clk); mem_re = 0;
        for (int c = 0; c < C; c++)
          check(mem_rdata[c] == shadow[r][k][c], $sformatf("read r%0d w%0d c%0d", r, k, c));
      end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      for (int r = 0; r < R; r++) begin
        row[r].pre_en    = ($urandom % 3) != 0;
        row[r].addr      = 6'($urandom % 4) | (($urandom % 2) ? 6'h20 : 6'h00);
        row[r].pulse_len = 5'($urandom);
        row[r].rate      = ($urandom % 4) == 0;
        row[r].to_b      = $urandom % 2;
      end
      #1;
      for (int c = 0; c < C; c++) begin
        ea = 0; eb = 0;
        for (int r = 0; r < R; r++) begin
          a = shadow[r][1][c][5:0];
          w = shadow[r][0][c][5:0];
          if (row[r].pre_en && (row[r].rate ? (row[r].addr[5] == a[5]) : (row[r].addr == a[5:0]))) begin
            if (row[r].to_b) eb += w * row[r].pulse_len;
            else             ea += w * row[r].pulse_len;
          end
        end
        check(col_a[c] == COLSUM_W'(ea) && col_b[c] == COLSUM_W'(eb),
              $sformatf("col %0d a %0d/%0d b %0d/%0d", c, col_a[c], ea, col_b[c], eb));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
