// tb_l2_l1_converter: self-checking test of the L2/L1 bridge.
// Loads the system time, sends time-stamped events on all links and checks
// that each leaves as an L1 event exactly one cycle after the system time
// reached its stamp (late ones at once, in arrival order), that a full FIFO
// deasserts ready, and that L1 events come back stamped with the system time
// of the cycle they arrived in.
module tb_l2_l1_converter;
  import bss2_pkg::*;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n = 0, systime_load = 0;
  logic [31:0] systime_val = 0, systime;
  l2_event_t [3:0] l2_in, l2_out;
  logic [3:0] l2_in_ready;
  l1_event_t [3:0] l1_out, l1_in;
  int checks = 0, failures = 0;

  l2_l1_converter dut (.*);

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

  typedef struct { int addr; int ts; bit late; } exp_t;
  exp_t q [4][$];
  int nrel = 0;

  // checker: every L1 output must be the head of its link's expected queue,
  // one cycle after its stamp, or later only if its stamp had already passed
  always @(negedge clk) if (rst_n) begin
    for (int l = 0; l < 4; l++) if (l1_out[l].valid) begin
      int late;
      check(q[l].size() > 0, "unexpected event");
      if (q[l].size() > 0) begin
        late = int'(16'(systime[15:0] - 16'(q[l][0].ts)));
        check(int'(l1_out[l].addr) == q[l][0].addr, $sformatf("link %0d order", l));
        if (q[l][0].late) check(late >= 1, $sformatf("link %0d late event released %0d after stamp", l, late));
        else              check(late == 1, $sformatf("link %0d released %0d cycles after stamp %0d now %0d addr %0d/%0d", l, late, q[l][0].ts, systime, l1_out[l].addr, q[l][0].addr));
        void'(q[l].pop_front());
        nrel++;
      end
    end
  end

  initial begin
    int t, r;
    l2_in = '0; l1_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); systime_load = 1; systime_val = 32'd4990;
    @(negedge clk); systime_load = 0;
    check(systime == 32'd4990, "system time loaded");
    @(negedge clk);
    check(systime == 32'd4991, "system time counting");
    // stamped events, some late
    for (int n = 0; n < 40; n++) begin
      for (int l = 0; l < 4; l++) begin
        l2_in[l].valid = ($urandom % 2) && l2_in_ready[l];
        l2_in[l].addr  = 14'($urandom);
        r = int'($urandom_range(0, 4));
        l2_in[l].ts    = 16'(5000 + n * 6 + r - ((n % 7 == 3) ? 200 : 0));
        if (l2_in[l].valid) q[l].push_back('{int'(l2_in[l].addr), int'(l2_in[l].ts), (n % 7 == 3)});
      end
      @(negedge clk);
    end
    l2_in = '0;
    repeat (400) @(negedge clk);
    for (int l = 0; l < 4; l++) check(q[l].size() == 0, $sformatf("link %0d drained", l));
    check(nrel > 40, $sformatf("released %0d", nrel));
    // full FIFO
    t = int'(systime[15:0]);
    for (int n = 0; n < 16; n++) begin
      check(l2_in_ready[2], "ready while not full");
      l2_in[2] = '{valid: 1'b1, addr: 14'(n), ts: 16'(t + 1000)};
      q[2].push_back('{n, (t + 1000) % 65536, 1'b1});
      @(negedge clk);
    end
    l2_in = '0;
    check(!l2_in_ready[2], "not ready when full");
    // stamping of L1 events
    for (int n = 0; n < 20; n++) begin
      logic [15:0] st;
      l1_in[n % 4] = '{valid: 1'b1, addr: 14'(n * 3)};
      st = systime[15:0];
      @(negedge clk);
      check(l2_out[n % 4].valid && l2_out[n % 4].addr == 14'(n * 3) && l2_out[n % 4].ts == st,
            $sformatf("stamp %0d exp %0d", l2_out[n % 4].ts, st));
      l1_in = '0;
    end
    repeat (1100) @(negedge clk);
    check(q[2].size() == 0, "full FIFO drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
