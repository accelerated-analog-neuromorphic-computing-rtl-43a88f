// tb_synapse: self-checking test of one synapse.
// Writes random address/weight/calibration words, reads them back, and drives
// random row signals, comparing pre and the pulse area with a reference
// computed here: spiking mode needs all six address bits to match, rate mode
// only bit 5; the area is weight * pulse length.
module tb_synapse;
  import bss2_pkg::*;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic [1:0] we;
  logic [7:0] wdata, word0, word1;
  logic       pre_en, rate_mode, pre;
  logic [5:0] pre_addr;
  logic [4:0] pulse_len;
  logic [10:0] charge;
  int checks = 0, failures = 0;

  synapse dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] w0, w1;
    bit exp_pre;
    we = 0; wdata = 0; pre_en = 0; rate_mode = 0; pre_addr = 0; pulse_len = 0;
    for (int n = 0; n < 40; n++) begin
      w0 = 8'($urandom); w1 = 8'($urandom);
      @(negedge clk); we = 2'b01; wdata = w0;
      @(negedge clk); we = 2'b10; wdata = w1;
      @(negedge clk); we = 2'b00; wdata = 8'($urandom);
      check(word0 == w0 && word1 == w1, $sformatf("readback %h %h", word0, word1));
      for (int k = 0; k < 20; k++) begin
        pre_en    = ($urandom % 4) != 0;
        rate_mode = $urandom % 2;
        pulse_len = 5'($urandom);
        pre_addr  = (k % 3 == 0) ? w1[5:0] : 6'($urandom);
        if (k % 5 == 1) pre_addr = {w1[5], 5'($urandom)};
        #1;
        exp_pre = pre_en && (rate_mode ? (pre_addr[5] == w1[5]) : (pre_addr == w1[5:0]));
        check(pre == exp_pre, $sformatf("pre %0b exp %0b", pre, exp_pre));
        check(charge == (exp_pre ? 11'(w0[5:0]) * 11'(pulse_len) : 11'd0),
              $sformatf("charge %0d w %0d len %0d", charge, w0[5:0], pulse_len));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
