// tb_neuron_compartment: self-checking test of the neuron model.
// HAGEN mode: the membrane must be the plain sum of A minus B (scaled by 64),
// clipped at zero, and return to the reset potential on the reset line.
// Spiking mode: without input the membrane settles at the leak potential; with
// a strong input it fires, a spike follows each threshold crossing and the
// membrane restarts at the reset potential. A cycle-by-cycle reference of the
// discrete-time equations is run alongside for random input.
module tb_neuron_compartment;
  import bss2_pkg::*;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n = 0, hagen_mode = 0, ppu_reset = 0, param_we = 0, spike;
  logic [COLSUM_W-1:0] in_a = 0, in_b = 0;
  logic [4:0] param_idx = 0;
  logic [CAP_W-1:0] param_val = 0;
  logic [MEM_W-1:0] v_mem;
  int checks = 0, failures = 0, spikes = 0;

  neuron_compartment dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic setp(input int idx, input int val);
    @(negedge clk); param_we = 1; param_idx = 5'(idx); param_val = CAP_W'(val);
    @(negedge clk); param_we = 0;
  endtask

  function automatic int code(input longint v);
    longint s = v >>> 6;
    return s < 0 ? 0 : (s > 1023 ? 1023 : int'(s));
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v;
    int thr, rst, lk, sh;
    bit f;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---------------- HAGEN mode
    hagen_mode = 1;
    setp(1, 0);
    @(negedge clk); ppu_reset = 1; @(negedge clk); ppu_reset = 0;
    check(v_mem == 0, "reset to 0");
    in_a = 1000; repeat (3) @(negedge clk);
    in_a = 0; in_b = 200; @(negedge clk); in_b = 0;
    check(v_mem == 10'(2800 / 64), $sformatf("sum %0d", v_mem));
    repeat (10) @(negedge clk);
    check(v_mem == 10'(2800 / 64) && spike == 0, "no leak, no spike in HAGEN mode");
    in_b = 5000; @(negedge clk); in_b = 0;
    check(v_mem == 0, "clipped at zero (ReLU)");
    setp(1, 10);
    ppu_reset = 1; @(negedge clk); ppu_reset = 0;
    check(v_mem == 10, "reset potential");
    // ---------------- spiking mode
    thr = 100; rst = 5; lk = 20; sh = 2;
    setp(0, thr); setp(1, rst); setp(2, lk); setp(3, sh);
    hagen_mode = 0;
    repeat (200) @(negedge clk);
    check(v_mem >= 19 && v_mem <= 20, $sformatf("settles at leak %0d", v_mem));
    v = longint'(dut.v_q);
    for (int n = 0; n < 2000; n++) begin
      in_a = COLSUM_W'($urandom % 3000);
      in_b = COLSUM_W'($urandom % 1500);
      v = v + longint'(in_a) - longint'(in_b) - ((v - longint'(lk << 6)) >>> sh);
      f = (v >>> 6) >= thr;
      if (f) v = rst << 6;
      @(negedge clk);
      check(spike == f, $sformatf("spike %0b exp %0b at %0d", spike, f, n));
      check(v_mem == 10'(code(v)), $sformatf("v %0d exp %0d", v_mem, code(v)));
      spikes += int'(spike);
    end
    in_a = 0; in_b = 0;
    check(spikes > 10, $sformatf("fired %0d times", spikes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
