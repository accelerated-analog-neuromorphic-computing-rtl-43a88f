// tb_synapse_driver: self-checking test of one synapse driver.
// Programs target/mask and row modes, sends events every two cycles with
// random driver-select fields, and checks that exactly the matching events give
// a one-cycle pre pulse on the enabled rows one cycle later, with the 6-bit
// address, full pulse length in spiking mode and the low 5 bits in rate mode.
module tb_synapse_driver;
  import bss2_pkg::*;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n = 0, cfg_we = 0;
  logic [31:0] cfg_wdata = 0;
  l1_event_t ev;
  row_sig_t [1:0] rows;
  int checks = 0, failures = 0, hits = 0;

  synapse_driver dut (.*);

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
    logic [7:0] target, mask;
    logic [1:0] en, tob, rate;
    bit hit;
    ev = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cfg = 0; cfg < 8; cfg++) begin
      target = 8'($urandom); mask = (cfg == 0) ? 8'hFF : 8'($urandom) | 8'h01;
      en = 2'($urandom) | 2'b01; tob = 2'($urandom); rate = 2'($urandom);
      @(negedge clk);
      cfg_we = 1; cfg_wdata = {10'd0, rate, tob, en, mask, target};
      @(negedge clk); cfg_we = 0;
      for (int n = 0; n < 100; n++) begin
        ev.valid = 1;
        ev.addr[13:6] = ($urandom % 2) ? (target ^ (8'($urandom) & ~mask)) : 8'($urandom);
        ev.addr[5:0]  = 6'($urandom);
        hit = ((ev.addr[13:6] ^ target) & mask) == 0;
        @(negedge clk);
        for (int i = 0; i < 2; i++) begin
          check(rows[i].pre_en == (hit && en[i]), $sformatf("pre_en row %0d", i));
          check(rows[i].to_b == tob[i] && rows[i].rate == rate[i], "row mode");
          if (hit) begin
            check(rows[i].addr == ev.addr[5:0], "addr");
            check(rows[i].pulse_len == (rate[i] ? ev.addr[4:0] : 5'd31), "pulse_len");
          end
        end
        hits += int'(hit);
        ev.valid = 0;
        @(negedge clk);
        check(rows[0].pre_en == 0 && rows[1].pre_en == 0, "pulse is one cycle");
      end
    end
    check(hits > 50, "enough hits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
