// tb_random_generator: self-checking test of a background event generator.
// A reference LFSR (x^32+x^22+x^2+x+1, Galois form) runs next to the design
// from the same seed; every cycle the event valid bit and address must match.
// The measured event rate must be close to rate/65536, and a disabled
// generator must stay silent.
module tb_random_generator;
  import bss2_pkg::*;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n = 0, cfg_we = 0;
  logic [1:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  l1_event_t ev;
  int checks = 0, failures = 0;

  random_generator dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 2'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] l;
    int count, quiet;
    logic [13:0] base, mask;
    repeat (2) @(negedge clk);
    rst_n = 1;
    base = 14'h1A40; mask = 14'h003F;
    wr(1, base); wr(2, mask); wr(0, 32'h1_0000 | 32'd6554);
    @(negedge clk); cfg_we = 1; cfg_addr = 3; cfg_wdata = 32'hC0FF_EE01;
    @(posedge clk); l = 32'hC0FF_EE01;
    @(negedge clk); cfg_we = 0;
    count = 0;
    for (int n = 0; n < 20000; n++) begin
      bit v;
      logic [13:0] a;
      v = l[15:0] < 16'd6554;
      a = base | (l[29:16] & mask);
      l = l[0] ? ((l >> 1) ^ 32'h8020_0003) : (l >> 1);
      @(negedge clk);
      check(ev.valid == v, $sformatf("valid at %0d", n));
      if (v) check(ev.addr == a, "address");
      count += int'(ev.valid);
    end
    check(count > 1800 && count < 2200, $sformatf("rate: %0d events in 20000 cycles", count));
    wr(0, 32'd6554);
    quiet = 0;
    repeat (1000) begin @(negedge clk); quiet += int'(ev.valid); end
    check(quiet == 0, "disabled generator is silent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
