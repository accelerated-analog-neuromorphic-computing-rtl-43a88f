// tb_anncore: self-checking test of the analog network core at reduced size
// (8 rows, 32 columns per quadrant).
// Top half, HAGEN mode: random weights and neuron numbers, drivers in spiking
// mode with row 2d on input A and row 2d+1 on input B; events with random
// neuron numbers go straight onto the input buses (every second cycle per bus).
// Each top membrane must equal the sum of +/- weight * 31 over the matching
// synapses (scaled by 64, clipped at 0). Bottom half, spiking: only even
// columns hold a synapse that responds, so only even bottom compartments may
// fire and each of them must, and their events must carry the programmed
// source addresses on the right output bus.
module tb_anncore;
  import bss2_pkg::*;
  localparam int R = 8, C = 32;

  logic clk = 1'b0;
  always #2 clk = ~clk;

  logic rst_n = 0, cfg_we = 0;
  logic [19:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  l1_event_t [7:0] in_ev, out_ev;
  logic [3:0] mem_we = 0, mem_re = 0, mem_word = 0;
  logic [3:0][$clog2(R)-1:0] mem_row = 0;
  logic [3:0][C-1:0][7:0] mem_wdata = 0, mem_rdata;
  logic [3:0] cadc_start = 0, cadc_sel_mem = 0, cadc_busy, cadc_done;
  logic [3:0][C-1:0][7:0] corr_causal = 0, corr_acausal = 0;
  logic [3:0][2*C-1:0][7:0] cadc_result;
  logic [3:0][C-1:0] neuron_reset = 0, post;
  logic [3:0][C-1:0][9:0] v_mem;
  logic [7:0][15:0] spikes_lost;
  int checks = 0, failures = 0;

  anncore #(.ROWS(R), .COLS(C)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic cfg(input int unsigned a, input logic [31:0] d);
    cfg_we = 1; cfg_addr = 20'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [5:0] w [4][R][C], adr [4][R][C];
  longint vexp [2][C];
  int fired [64];

  always @(negedge clk) begin
    for (int b = 0; b < 8; b++) if (rst_n && out_ev[b].valid) begin
      int i;
      i = int'(out_ev[b].addr[7:0]) - 100;
      check(out_ev[b].addr[13:8] == 6'(b) && (b == 0 || b == 4), $sformatf("bus %0d", b));
      check(i >= 32 && i < 64 && (i % 2) == 0, $sformatf("compartment %0d fired", i));
      if (b == 0 && i >= 0 && i < 64) fired[i]++;
    end
  end

  initial begin
    int code;
    in_ev = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < 4; q++)
      for (int c = 0; c < C + 2; c++) begin
        cfg(32'h20000 | (q << 13) | (c << 5) | 0, (q < 2) ? 32'd1023 : 32'd100);
        cfg(32'h20000 | (q << 13) | (c << 5) | 1, 0);
        cfg(32'h20000 | (q << 13) | (c << 5) | 2, 0);
        cfg(32'h20000 | (q << 13) | (c << 5) | 3, 6);
      end
    repeat ((C + 2) * 24 + 2) @(negedge clk);
    for (int q = 0; q < 4; q++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          w[q][r][c]   = (q < 2) ? 6'($urandom) : 6'd63;
          adr[q][r][c] = (q < 2) ? 6'($urandom % 4) : ((r < 2 && c % 2 == 0) ? 6'd5 : 6'd9);
        end
    for (int r = 0; r < R; r++)
      for (int k = 0; k < 2; k++) begin
        for (int q = 0; q < 4; q++) begin
          mem_we[q] = 1; mem_row[q] = 3'(r); mem_word[q] = k[0];
          for (int c = 0; c < C; c++) mem_wdata[q][c] = k ? {2'b0, adr[q][r][c]} : {2'b0, w[q][r][c]};
        end
        @(negedge clk);
      end
    mem_we = 0;
    for (int d = 0; d < R / 2; d++) begin
      cfg(32'h00000 | d, {10'd0, 2'b00, 2'b10, 2'b11, 8'hFF, 8'(d)});
      cfg(32'h00080 | d, {10'd0, 2'b00, 2'b00, 2'b11, 8'hFF, 8'(d)});
    end
    for (int b = 0; b < 8; b++)
      for (int i = 0; i < 64; i++)
        cfg(32'h10000 | (b << 7) | i, {22'd0, (i < 32), (i >= 32), 8'(100 + i)});
    neuron_reset[0] = '1; neuron_reset[1] = '1;
    @(negedge clk); neuron_reset = '0;
    for (int q = 0; q < 2; q++) for (int c = 0; c < C; c++) vexp[q][c] = 0;
    // top half: 6 rounds, one event per driver
    for (int round = 0; round < 6; round++)
      for (int d = 0; d < R / 2; d += 4) begin
        for (int l = 0; l < 4; l++) begin
          logic [5:0] a;
          a = 6'($urandom % 4);
          in_ev[l] = '{valid: (d + l < R / 2), addr: {8'(d + l), a}};
          if (d + l < R / 2)
            for (int q = 0; q < 2; q++)
              for (int c = 0; c < C; c++) begin
                if (adr[q][2*(d+l)][c] == a)   vexp[q][c] += 31 * longint'(w[q][2*(d+l)][c]);
                if (adr[q][2*(d+l)+1][c] == a) vexp[q][c] -= 31 * longint'(w[q][2*(d+l)+1][c]);
              end
        end
        @(negedge clk); in_ev = '0;
        @(negedge clk);
      end
    repeat (3) @(negedge clk);
    for (int q = 0; q < 2; q++)
      for (int c = 0; c < C; c++) begin
        code = (vexp[q][c] >>> 6) < 0 ? 0 : ((vexp[q][c] >>> 6) > 1023 ? 1023 : int'(vexp[q][c] >>> 6));
        check(int'(v_mem[q][c]) == code, $sformatf("membrane q%0d c%0d %0d exp %0d", q, c, v_mem[q][c], code));
      end
    // bottom half: drive bottom driver 0 with neuron number 5
    for (int i = 0; i < 64; i++) fired[i] = 0;
    for (int n = 0; n < 60; n++) begin
      in_ev[4] = '{valid: 1'b1, addr: {8'd0, 6'd5}};
      @(negedge clk); in_ev = '0;
      @(negedge clk);
    end
    repeat (50) @(negedge clk);
    for (int i = 32; i < 64; i += 2) check(fired[i] > 0, $sformatf("compartment %0d never fired", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
