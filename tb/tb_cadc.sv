// tb_cadc: self-checking test of the column-parallel ADC.
// Random levels on a reduced number of channels; after start the ADC must be
// busy for exactly 256 cycles, pulse done, and return each level; with sel_mem
// the first half returns the upper 8 bits of the membrane codes.
module tb_cadc;
  import bss2_pkg::*;
  localparam int CH = 16;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n = 0, start = 0, sel_mem = 0, busy, done;
  logic [CH/2-1:0][7:0] causal, acausal;
  logic [CH/2-1:0][MEM_W-1:0] membrane;
  logic [CH-1:0][7:0] result;
  int checks = 0, failures = 0;

  cadc #(.CH(CH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      sel_mem = t % 2;
      for (int c = 0; c < CH / 2; c++) begin
        causal[c] = 8'($urandom); acausal[c] = 8'($urandom); membrane[c] = MEM_W'($urandom);
        if (t == 0) begin causal[c] = (c % 2) ? 8'hFF : 8'h00; end
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      n = 0;
      while (!done) begin
        check(busy, "busy during conversion");
        @(negedge clk); n++;
      end
      check(n == 256, $sformatf("conversion took %0d cycles", n));
      for (int c = 0; c < CH / 2; c++) begin
        check(result[c] == (sel_mem ? membrane[c][9:2] : causal[c]), $sformatf("ch %0d", c));
        check(result[c + CH/2] == acausal[c], $sformatf("ch %0d", c + CH/2));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
