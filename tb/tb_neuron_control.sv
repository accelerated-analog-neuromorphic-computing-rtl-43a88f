// tb_neuron_control: self-checking test of a digital neuron control block.
// Programs the source address memory and output enables, then checks: the
// latency from a fire edge to its output event (4 cycles), the address
// {block, source address}, lowest-index-first serialisation of simultaneous
// spikes, disabled outputs, the neuron builder spreading a spike over joined
// compartments (events and post lines), the lost-spike counter and mode bits.
module tb_neuron_control;
  import bss2_pkg::*;
  localparam int BID = 5;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n = 0, cfg_we = 0;
  logic [63:0] fire = 0, post, hagen_mode;
  logic [6:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  l1_event_t ev;
  logic [15:0] lost;
  logic [7:0] src [64];
  logic [63:0] en;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  neuron_control #(.BLOCK_ID(BID)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 7'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // pulse the given fire bits for three cycles, collect the events that follow
  task automatic burst(input logic [63:0] f, output logic [13:0] got [$], output int first_lat);
    int t0;
    got = {};
    first_lat = -1;
    @(negedge clk); fire = f; t0 = cyc;
    for (int k = 0; k < 80; k++) begin
      @(negedge clk);
      if (k == 2) fire = '0;
      if (ev.valid) begin
        if (first_lat < 0) first_lat = cyc - t0;
        got.push_back(ev.addr);
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [13:0] got [$];
    int lat, j;
    logic [63:0] f;
    repeat (2) @(negedge clk);
    rst_n = 1;
    en = {$urandom, $urandom} | 64'h8000_0000_0000_0003;
    en[2] = 1'b0;
    for (int i = 0; i < 64; i++) begin
      src[i] = 8'($urandom);
      wr(i, {22'd0, 1'(i % 2), en[i], src[i]});
    end
    for (int i = 0; i < 64; i++) check(hagen_mode[i] == 1'(i % 2), "mode bit");
    // single spike latency and address
    burst(64'h1, got, lat);
    check(got.size() == 1 && lat == 4, $sformatf("single: n=%0d lat=%0d", got.size(), lat));
    if (got.size() > 0) check(got[0] == {6'(BID), src[0]}, "address");
    // disabled output
    burst(64'h4, got, lat);
    check(got.size() == 0, "disabled compartment sends nothing");
    // many at once: ascending order
    for (int t = 0; t < 10; t++) begin
      f = {$urandom, $urandom};
      burst(f, got, lat);
      j = 0;
      for (int i = 0; i < 64; i++) if (f[i] && en[i]) begin
        check(j < got.size() && got[j] == {6'(BID), src[i]}, $sformatf("order %0d", i));
        j++;
      end
      check(got.size() == j, $sformatf("count %0d vs %0d", got.size(), j));
    end
    // neuron builder: join 0-1 horizontally and column 0 vertically (0-32)
    wr(64, 32'h1); wr(66, 32'h1);
    en[32] = 1'b1; wr(32, {22'd0, 1'b0, 1'b1, src[32]});
    fork
      begin
        burst(64'h1, got, lat);
      end
      begin
        logic [63:0] seen = 0;
        repeat (8) begin @(posedge clk); #1 seen |= post; end
        check(seen == 64'h1_0000_0003, $sformatf("post lines %h", seen));
      end
    join
    check(got.size() == 3, $sformatf("joined group fires together: %0d", got.size()));
    wr(64, 32'h0); wr(66, 32'h0);
    // lost spikes: all 64 fire, then neuron 63 again while still pending
    en = '1;
    for (int i = 0; i < 64; i++) wr(i, {22'd0, 1'b0, 1'b1, src[i]});
    @(negedge clk); fire = '1;
    repeat (3) @(negedge clk); fire = '0;
    repeat (3) @(negedge clk); fire[63] = 1'b1;
    repeat (3) @(negedge clk); fire[63] = 1'b0;
    repeat (80) @(negedge clk);
    check(lost == 1, $sformatf("lost %0d", lost));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
