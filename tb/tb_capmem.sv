// tb_capmem: self-checking test of the parameter memory.
// Writes random values into every cell of a reduced memory, then follows the
// refresh stream for two full sweeps: every cell must come by once per sweep,
// in column-major order, one per cycle, carrying the value last written.
module tb_capmem;
  import bss2_pkg::*;
  localparam int C = 6, R = 24;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n = 0, cfg_we = 0, ref_valid;
  logic [7:0] cfg_col = 0, ref_col;
  logic [4:0] cfg_row = 0, ref_row;
  logic [CAP_W-1:0] cfg_wdata = 0, ref_val;
  logic [CAP_W-1:0] shadow [C][R];
  int checks = 0, failures = 0;

  capmem #(.COLS(C), .ROWS(R)) dut (.*);

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
    int ec, er;
    repeat (2) @(negedge clk);
    for (int c = 0; c < C; c++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        cfg_we = 1; cfg_col = 8'(c); cfg_row = 5'(r); cfg_wdata = CAP_W'($urandom);
        shadow[c][r] = cfg_wdata;
      end
    @(negedge clk); cfg_we = 0;
    // out-of-range write must not alias
    @(negedge clk); cfg_we = 1; cfg_col = 8'(C); cfg_row = 0; cfg_wdata = '1;
    @(negedge clk); cfg_we = 0;
    rst_n = 1;
    @(negedge clk);
    ec = 0; er = 0;
    for (int n = 0; n < 2 * C * R; n++) begin
      check(ref_valid && ref_col == 8'(ec) && ref_row == 5'(er) && ref_val == shadow[ec][er],
            $sformatf("refresh %0d: col %0d row %0d val %0d", n, ref_col, ref_row, ref_val));
      er++;
      if (er == R) begin er = 0; ec = (ec + 1) % C; end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
