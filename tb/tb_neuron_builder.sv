// tb_neuron_builder: self-checking test of the spike interconnect.
// For random link patterns and random single or multiple spikes, the expected
// output is computed here by labelling connected groups (union-find over the
// horizontal and vertical links) and OR-ing the spikes of each group.
module tb_neuron_builder;
  localparam int C = 32, N = 64;

  logic [N-1:0] fire_in, h_conn, fire_out;
  logic [C-1:0] v_conn;
  int checks = 0, failures = 0;
  int parent [N];

  neuron_builder #(.COLS(C)) dut (.*);

  function automatic int find(int i);
    while (parent[i] != i) i = parent[i];
    return i;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] exp_out;
    bit grp [N];
    for (int t = 0; t < 300; t++) begin
      h_conn  = {$urandom, $urandom};
      v_conn  = $urandom;
      if (t % 3 == 0) begin h_conn = {$urandom, $urandom} | {$urandom, $urandom}; end
      fire_in = '0;
      repeat (1 + $urandom % 3) fire_in[$urandom % N] = 1'b1;
      for (int i = 0; i < N; i++) parent[i] = i;
      for (int r = 0; r < 2; r++)
        for (int c = 0; c < C - 1; c++)
          if (h_conn[r*C+c]) parent[find(r*C+c)] = find(r*C+c+1);
      for (int c = 0; c < C; c++)
        if (v_conn[c]) parent[find(c)] = find(C+c);
      for (int i = 0; i < N; i++) grp[i] = 0;
      for (int i = 0; i < N; i++) if (fire_in[i]) grp[find(i)] = 1;
      for (int i = 0; i < N; i++) exp_out[i] = grp[find(i)];
      #1;
      checks++;
      if (fire_out !== exp_out) begin
        failures++;
        $display("FAIL t%0d got %h exp %h", t, fire_out, exp_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
