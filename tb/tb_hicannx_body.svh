// Body of the end-to-end test of hicannx, shared by the reduced-size and the
// full-size testbench. The including module defines localparams R (rows) and
// C (columns per quadrant) and instantiates the DUT as `dut` with the signals
// declared here.
//
// The test drives the chip the way a host and the plasticity processors would:
//  1. parameter memory: threshold, reset, leak for every compartment, then one
//     full refresh sweep so that the compartments hold them;
//  2. synapse memories of all four quadrants written and one row read back;
//  3. top half in HAGEN mode: drivers in rate mode, row 2d excitatory (A) and
//     row 2d+1 inhibitory (B), so weights are signed; one time-stamped input
//     event per driver carries a 5-bit activation; after integration the
//     column ADCs digitise the membranes, compared with the vector-matrix
//     product computed here (ReLU and scaling included);
//  4. bottom half spiking: a random generator drives one row pair; the
//     compartments fire, the neuron builder joins a silent compartment to a
//     firing one, the events travel through the router back to the host with
//     a time stamp; flooding the rate-limited bus makes the router drop events;
//  5. the ADC also digitises correlation levels (stand-ins for the analog
//     sensors), and one late L2 event is released at once.
// Every mechanism is counted and a mechanism that never happened is a failure.

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic                                rst_n = 1'b0;
  logic                                cfg_we = 1'b0;
  logic [19:0]                         cfg_addr = '0;
  logic [31:0]                         cfg_wdata = '0;
  logic                                systime_load = 1'b0;
  logic [31:0]                         systime_val = '0;
  logic [31:0]                         systime;
  l2_event_t [3:0]                     l2_in;
  logic [3:0]                          l2_in_ready;
  l2_event_t [3:0]                     l2_out;
  logic [3:0]                          mem_we = '0, mem_re = '0, mem_word = '0;
  logic [3:0][$clog2(R)-1:0]           mem_row;
  logic [3:0][C-1:0][7:0]              mem_wdata, mem_rdata;
  logic [3:0]                          cadc_start = '0, cadc_sel_mem = '0, cadc_busy, cadc_done;
  logic [3:0][C-1:0][7:0]              corr_causal, corr_acausal;
  logic [3:0][2*C-1:0][7:0]            cadc_result;
  logic [3:0][C-1:0]                   neuron_reset = '0;
  logic [3:0][C-1:0]                   post;
  logic [3:0][C-1:0][9:0]              v_mem;
  logic [7:0][15:0]                    spikes_lost;
  logic [11:0][15:0]                   route_drops;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int n_hagen_ok = 0, n_spike_ev = 0, n_builder = 0, n_drop = 0, n_late = 0;
  int n_hagen_nz = 0;
  int n_rate_limit_ok = 0, n_corr_ok = 0, n_readback = 0, n_random_ev = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic cfg(input int unsigned a, input logic [31:0] d);
    cfg_we = 1'b1; cfg_addr = 20'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  logic [5:0] w   [4][R][C];   // weights
  logic [5:0] adr [4][R][C];   // stored neuron numbers
  int         x   [R/2];       // activations per driver (top half)

  // the anncore input buses must never carry events on consecutive cycles
  logic [7:0] prev_in;
  always @(posedge clk) begin
    for (int b = 0; b < 8; b++)
      if (rst_n && dut.u_core.in_ev[b].valid && prev_in[b]) begin
        failures++;
        $display("FAIL input bus %0d on consecutive cycles", b);
      end
    for (int b = 0; b < 8; b++) prev_in[b] = dut.u_core.in_ev[b].valid;
  end

  // host side: collect stamped events coming back
  int        back_addr [$];
  logic [13:0] got_addr;
  always @(negedge clk) begin
    for (int l = 0; l < 4; l++)
      if (rst_n && l2_out[l].valid) begin
        back_addr.push_back(int'(l2_out[l].addr));
        check(16'(systime[15:0] - l2_out[l].ts) == 16'd1, "returned event stamped with arrival time");
      end
  end

  initial begin
    int watchdog_cycles;
    watchdog_cycles = 40000 + 40 * R * 4 + 200 * C;
    repeat (watchdog_cycles) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t_first, t_last, n, link, ts;
    longint v;
    int expv, code;
    l2_in = '0;
    mem_row = '0; mem_wdata = '0;
    corr_causal = '0; corr_acausal = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---------------------------------------------------------------- 1
    for (int q = 0; q < 4; q++)
      for (int c = 0; c < C + 2; c++) begin
        cfg(32'h20000 | (q << 13) | (c << 5) | 0, (q < 2) ? 32'd1023 : 32'd60);  // threshold
        cfg(32'h20000 | (q << 13) | (c << 5) | 1, 32'd0);                        // reset
        cfg(32'h20000 | (q << 13) | (c << 5) | 2, 32'd0);                        // leak potential
        cfg(32'h20000 | (q << 13) | (c << 5) | 3, 32'd6);                        // leak shift
      end
    repeat ((C + 2) * 24 + 4) @(negedge clk);
    check(dut.u_core.g_quad[2].g_neuron[0].u_neuron.p_thresh == 10'd60, "capmem refreshed threshold");

    // ---------------------------------------------------------------- 2
    for (int q = 0; q < 4; q++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          w[q][r][c]   = 6'($urandom);
          adr[q][r][c] = (q < 2) ? 6'($urandom % 32) : ((r == 0 && c != 1) ? 6'd5 : 6'd40);
        end
    for (int r = 0; r < R; r++)
      for (int k = 0; k < 2; k++) begin
        for (int q = 0; q < 4; q++) begin
          mem_we[q] = 1'b1; mem_row[q] = r[$clog2(R)-1:0]; mem_word[q] = k[0];
          for (int c = 0; c < C; c++)
            mem_wdata[q][c] = (k == 0) ? {2'b00, w[q][r][c]} : {2'b00, adr[q][r][c]};
        end
        @(negedge clk);
      end
    mem_we = '0;
    for (int q = 0; q < 4; q++) begin mem_re[q] = 1'b1; mem_row[q] = 1; mem_word[q] = 1'b0; end
    @(negedge clk); mem_re = '0;
    for (int q = 0; q < 4; q++) begin
      bit ok = 1;
      for (int c = 0; c < C; c++) if (mem_rdata[q][c] != {2'b00, w[q][1][c]}) ok = 0;
      check(ok, $sformatf("synapse memory readback q%0d", q));
      n_readback += int'(ok);
    end

    // ---------------------------------------------------------------- 3
    // drivers of the top half: target d, rate mode, row 2d -> A, 2d+1 -> B
    for (int d = 0; d < R / 2; d++)
      cfg(32'h00000 | d, {10'd0, 2'b11, 2'b10, 2'b11, 8'hFF, 8'(d)});
    // drivers of the bottom half: driver 0 spiking, both rows to A
    cfg(32'h00080, {10'd0, 2'b00, 2'b00, 2'b01, 8'hFF, 8'd0});
    for (int d = 1; d < R / 2; d++) cfg(32'h00080 | d, 32'd0);
    // neuron control: top compartments HAGEN, bottom spiking with output on
    for (int b = 0; b < 8; b++) begin
      for (int i = 0; i < 64; i++)
        cfg(32'h10000 | (b << 7) | i, {22'd0, (i < 32) ? 1'b1 : 1'b0, (i >= 32) ? 1'b1 : 1'b0, 8'(i)});
      cfg(32'h10000 | (b << 7) | 64, 32'd0);
      cfg(32'h10000 | (b << 7) | 65, (b == 0) ? 32'h2 : 32'h0);  // block 0: join bottom 1 to 2
      cfg(32'h10000 | (b << 7) | 66, 32'd0);
    end
    // router: L2 link l -> core input bus l; core bus 0 output -> L1->L2 link 0
    for (int l = 0; l < 4; l++) cfg(32'h30000 | l, 32'(1 << (8 + l)));
    cfg(32'h30000 | 8, 32'h000FF);
    // reset all top membranes
    neuron_reset[0] = '1; neuron_reset[1] = '1;
    @(negedge clk);
    neuron_reset = '0;
    // one event per driver, stamped two cycles apart per link
    systime_load = 1'b1; systime_val = 32'd1000;
    @(negedge clk); systime_load = 1'b0;
    for (int d = 0; d < R / 2; d++) x[d] = int'($urandom % 32);
    n = 0;
    for (int d = 0; d < R / 2; d += 4) begin
      for (int l = 0; l < 4; l++) begin
        l2_in[l].valid = (d + l < R / 2);
        l2_in[l].addr  = {8'(d + l), 1'b0, 5'(x[(d + l) % (R / 2)])};
        l2_in[l].ts    = 16'(1100 + 2 * (d / 4));
      end
      if (!(&l2_in_ready)) begin failures++; $display("FAIL converter not ready"); end
      @(negedge clk);
    end
    l2_in = '0;
    // wait until the events have been delivered and integrated
    t_first = -1; t_last = -1;
    while (int'(systime) < 1100 + R + 40) begin
      if (|{dut.u_core.in_ev[0].valid, dut.u_core.in_ev[1].valid,
            dut.u_core.in_ev[2].valid, dut.u_core.in_ev[3].valid}) begin
        if (t_first < 0) t_first = int'(systime);
        t_last = int'(systime);
      end
      @(negedge clk);
    end
    check(t_first == 1100 + 3, $sformatf("first input event on the core bus at %0d", t_first));
    // R/2 events on 4 buses, one per bus every two cycles
    check(t_last - t_first == 2 * ((R / 2 + 3) / 4 - 1), $sformatf("input window %0d cycles", t_last - t_first));
    n_rate_limit_ok += int'(t_last - t_first == 2 * ((R / 2 + 3) / 4 - 1));
    cadc_sel_mem = 4'b0011;
    cadc_start   = 4'b0011;
    @(negedge clk); cadc_start = '0;
    t0 = cyc;
    while (!cadc_done[0]) @(negedge clk);
    check(cyc - t0 == 256, $sformatf("ADC conversion %0d cycles", cyc - t0));
    for (int q = 0; q < 2; q++)
      for (int c = 0; c < C; c++) begin
        v = 0;
        for (int d = 0; d < R / 2; d++) begin
          if (adr[q][2*d][c][5] == 1'b0)   v += longint'(w[q][2*d][c]) * x[d];
          if (adr[q][2*d+1][c][5] == 1'b0) v -= longint'(w[q][2*d+1][c]) * x[d];
        end
        code = (v >>> 6) < 0 ? 0 : ((v >>> 6) > 1023 ? 1023 : int'(v >>> 6));
        expv = code >> 2;
        check(int'(cadc_result[q][c]) == expv,
              $sformatf("VMM q%0d col %0d: %0d expected %0d", q, c, cadc_result[q][c], expv));
        n_hagen_ok += int'(int'(cadc_result[q][c]) == expv);
        n_hagen_nz += int'(expv > 0);
      end
    check(n_hagen_nz > C / 4, $sformatf("only %0d non-zero products", n_hagen_nz));

    // ---------------------------------------------------------------- 4
    // random generator 0: rows of bottom driver 0, neuron number 5
    cfg(32'h40000 | 1, {18'd0, 8'd0, 6'd5});
    cfg(32'h40000 | 2, 32'd0);
    cfg(32'h40000 | 3, 32'h1234_5678);
    cfg(32'h30000 | 4, 32'h01000);          // generator 0 -> core bus 4
    cfg(32'h40000 | 0, 32'h1_0000 | 32'd16384);
    back_addr = {};
    repeat (400) begin
      @(negedge clk);
      n_random_ev += int'(dut.u_core.in_ev[4].valid);
    end
    cfg(32'h40000 | 0, 32'd0);
    repeat (40) @(negedge clk);
    n_spike_ev = back_addr.size();
    check(n_spike_ev > 0, "spikes came back to the host");
    foreach (back_addr[i]) begin
      logic [13:0] a;
      a = 14'(back_addr[i]);
      check(a[7:0] >= 8'd32, $sformatf("returned address %h is a bottom compartment", a));
      if (a == {6'd0, 8'd33}) n_builder++;       // compartment 1 of the bottom row: no input of its own
    end
    // flood the rate-limited bus
    cfg(32'h40000 | 0, 32'h1_FFFF);
    repeat (100) @(negedge clk);
    cfg(32'h40000 | 0, 32'd0);
    n_drop = int'(route_drops[4]);
    check(n_drop > 0, "router dropped events on a flooded bus");

    // ---------------------------------------------------------------- 5
    for (int c = 0; c < C; c++) begin corr_causal[2][c] = 8'($urandom); corr_acausal[2][c] = 8'($urandom); end
    cadc_sel_mem = '0; cadc_start = 4'b0100;
    @(negedge clk); cadc_start = '0;
    while (!cadc_done[2]) @(negedge clk);
    for (int c = 0; c < C; c++) begin
      check(cadc_result[2][c] == corr_causal[2][c] && cadc_result[2][C + c] == corr_acausal[2][c], "correlation readout");
      n_corr_ok += int'(cadc_result[2][c] == corr_causal[2][c]);
    end
    // a late L2 event is released at once (route link 1 -> core bus 1 is set)
    l2_in[1] = '{valid: 1'b1, addr: 14'h3FFF, ts: 16'(systime[15:0] - 16'd50)};
    @(negedge clk); l2_in = '0;
    repeat (3) @(negedge clk);
    n_late = int'(dut.u_core.in_ev[1].valid && dut.u_core.in_ev[1].addr == 14'h3FFF);
    check(n_late == 1, "late event released at once");

    $display("mechanisms: hagen_vmm=%0d rate_limit=%0d spikes_back=%0d builder=%0d random=%0d drops=%0d late=%0d corr=%0d readback=%0d",
             n_hagen_ok, n_rate_limit_ok, n_spike_ev, n_builder, n_random_ev, n_drop, n_late, n_corr_ok, n_readback);
    check(n_hagen_ok > 0 && n_rate_limit_ok > 0 && n_spike_ev > 0 && n_builder > 0 && n_random_ev > 0 &&
          n_drop > 0 && n_late > 0 && n_corr_ok > 0 && n_readback > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
