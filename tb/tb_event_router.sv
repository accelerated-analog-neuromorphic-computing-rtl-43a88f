// tb_event_router: self-checking test of the routing matrix.
// Directed part: one event reaches exactly the channels whose route enable is
// set, two cycles later; five simultaneous events on a rate-limited anncore
// channel leave on every second cycle, on an L2 channel on consecutive cycles.
// Random part: random route enables and traffic with unique addresses; every
// delivered event must have been sent by a routed source, none twice, anncore
// channels never carry events on consecutive cycles, and per channel delivered
// plus dropped events equal the routed ones.
module tb_event_router;
  import bss2_pkg::*;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n = 0, cfg_we = 0;
  logic [3:0] cfg_ch = 0;
  logic [31:0] cfg_wdata = 0;
  l1_event_t [19:0] src_ev;
  l1_event_t [11:0] ch_ev;
  logic [11:0][15:0] drops;
  logic [19:0] route [12];
  int checks = 0, failures = 0;

  event_router dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic setroute(input int ch, input logic [19:0] r);
    @(negedge clk); cfg_we = 1; cfg_ch = 4'(ch); cfg_wdata = 32'(r); route[ch] = r;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [12];
  int got  [12];
  bit seen [12][int];
  bit routed_addr [12][int];
  bit prev_v [12];

  initial begin
    int t_got [12];
    src_ev = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 12; ch++) setroute(ch, '0);
    setroute(0, 20'h0001F); setroute(8, 20'h01020); setroute(11, 20'hFFFFF);
    // single event from source 5
    @(negedge clk); src_ev[5] = '{valid: 1'b1, addr: 14'h0155};
    @(negedge clk); src_ev = '0;
    check(ch_ev[8].valid == 0 && ch_ev[11].valid == 0, "not after one cycle");
    @(negedge clk);
    check(ch_ev[8].valid && ch_ev[8].addr == 14'h0155, "ch8 after two cycles");
    check(ch_ev[11].valid && ch_ev[11].addr == 14'h0155, "ch11 after two cycles");
    check(ch_ev[0].valid == 0, "ch0 not routed");
    repeat (4) @(negedge clk);
    // five simultaneous events into channel 0 (rate-limited) and 11
    for (int s = 0; s < 5; s++) src_ev[s] = '{valid: 1'b1, addr: 14'(16'h100 + s)};
    @(negedge clk); src_ev = '0;
    t_got[0] = 0; t_got[11] = 0;
    for (int k = 0; k < 12; k++) begin
      @(negedge clk);
      if (ch_ev[0].valid) begin
        check(k % 2 == 0, $sformatf("ch0 event at even cycle %0d", k));
        t_got[0]++;
      end
      if (ch_ev[11].valid) begin
        check(k >= 0 && k <= 4, $sformatf("ch11 event at %0d", k));
        t_got[11]++;
      end
    end
    check(t_got[0] == 5 && t_got[11] == 5, $sformatf("merged %0d %0d", t_got[0], t_got[11]));
    // random traffic
    for (int ch = 0; ch < 12; ch++) begin
      setroute(ch, 20'($urandom) & 20'($urandom));
      sent[ch] = 0; got[ch] = 0;
    end
    @(negedge clk);
    for (int ch = 0; ch < 12; ch++) begin
      sent[ch] = -int'(drops[ch]); prev_v[ch] = 0;
    end
    for (int n = 0; n < 1000; n++) begin
      for (int s = 0; s < 20; s++) begin
        src_ev[s].valid = (n < 800) && (($urandom % 8) == 0);
        src_ev[s].addr  = 14'(n * 20 + s);
        if (src_ev[s].valid)
          for (int ch = 0; ch < 12; ch++)
            if (route[ch][s]) begin sent[ch]++; routed_addr[ch][n*20+s] = 1; end
      end
      @(negedge clk);
      for (int ch = 0; ch < 12; ch++) begin
        if (ch_ev[ch].valid) begin
          got[ch]++;
          check(routed_addr[ch].exists(int'(ch_ev[ch].addr)), $sformatf("ch%0d unrouted %0d", ch, ch_ev[ch].addr));
          check(!seen[ch].exists(int'(ch_ev[ch].addr)), "duplicate");
          seen[ch][int'(ch_ev[ch].addr)] = 1;
          if (ch < 8) check(!prev_v[ch], "anncore bus rate");
        end
        prev_v[ch] = ch_ev[ch].valid;
      end
    end
    for (int ch = 0; ch < 12; ch++)
      check(got[ch] + int'(drops[ch]) == sent[ch],
            $sformatf("ch%0d got %0d drops %0d sent %0d", ch, got[ch], drops[ch], sent[ch]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
