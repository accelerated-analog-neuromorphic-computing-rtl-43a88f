// neuron_control: digital neuron control block for 64 compartments.
//
// Spikes arrive from the analog compartments without relation to the clock.
// Each is passed through a two-flip-flop synchroniser and a rising-edge
// detector, then through the neuron builder, which spreads a spike over all
// compartments joined into one neuron. The resulting one-cycle pulses go out
// on post (the post-synaptic signal lines into the synapse array) and, for
// compartments whose output is enabled, set a pending bit. A priority encoder
// grants the lowest-numbered pending compartment each cycle and puts one event
// on the output bus: address {BLOCK_ID[5:0], source address}, the source
// address coming from the 8 x 64 neuron source address memory. A spike that
// finds its compartment still pending is lost and counted.
//
// Config (cfg_we, cfg_addr, cfg_wdata): address 0..63 = compartment i,
// {hagen_mode[9], out_en[8], source address[7:0]}; 64/65 = h_conn[31:0] /
// h_conn[63:32]; 66 = v_conn[31:0]. The map is this design's choice.
// Latency: a fire edge at the input gives an output event four cycles later
// when nothing else is pending. Synchroniser, lowest-index priority and the
// drop rule are this design's choices; 64 compartments in two rows, the
// priority encoder, the neuron builder and the 8 x 64 memory follow the chip.
module neuron_control
  import bss2_pkg::*;
#(
  parameter int unsigned BLOCK_ID = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NC_N-1:0]     fire,
  input  logic                cfg_we,
  input  logic [6:0]          cfg_addr,
  input  logic [31:0]         cfg_wdata,
  output l1_event_t           ev,
  output logic [NC_N-1:0]     post,
  output logic [NC_N-1:0]     hagen_mode,
  output logic [15:0]         lost
);

  localparam int unsigned HALF = NC_N / 2;

  logic [7:0]      src_mem [NC_N];
  logic [NC_N-1:0] out_en_q, hagen_q, h_conn_q;
  logic [HALF-1:0] v_conn_q;

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr < 7'(NC_N)) src_mem[cfg_addr[5:0]] <= cfg_wdata[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_en_q <= '0;
      hagen_q  <= '0;
      h_conn_q <= '0;
      v_conn_q <= '0;
    end else if (cfg_we) begin
      if (cfg_addr < 7'(NC_N)) begin
        out_en_q[cfg_addr[5:0]] <= cfg_wdata[8];
        hagen_q[cfg_addr[5:0]]  <= cfg_wdata[9];
      end else if (cfg_addr == 7'd64) h_conn_q[HALF-1:0]    <= cfg_wdata[HALF-1:0];
      else if (cfg_addr == 7'd65)     h_conn_q[NC_N-1:HALF] <= cfg_wdata[HALF-1:0];
      else if (cfg_addr == 7'd66)     v_conn_q              <= cfg_wdata[HALF-1:0];
    end
  end

  assign hagen_mode = hagen_q;

  // synchroniser and edge detection
  logic [NC_N-1:0] s1_q, s2_q, s3_q, edge_p, merged;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_q <= '0;
      s2_q <= '0;
      s3_q <= '0;
    end else begin
      s1_q <= fire;
      s2_q <= s1_q;
      s3_q <= s2_q;
    end
  end

  assign edge_p = s2_q & ~s3_q;

  neuron_builder #(.COLS(HALF)) u_builder (
    .fire_in  (edge_p),
    .h_conn   (h_conn_q),
    .v_conn   (v_conn_q),
    .fire_out (merged)
  );

  assign post = merged;

  // pending bits and priority encoder
  logic [NC_N-1:0]         pend_q, grant, req;
  logic [$clog2(NC_N)-1:0] gidx;
  logic                    gvalid;

  always_comb begin
    grant  = '0;
    gidx   = '0;
    gvalid = 1'b0;
    for (int i = NC_N - 1; i >= 0; i--) begin
      if (pend_q[i]) begin
        gidx   = i[$clog2(NC_N)-1:0];
        gvalid = 1'b1;
      end
    end
    if (gvalid) grant[gidx] = 1'b1;
  end

  assign req = merged & out_en_q;

  logic [7:0] n_lost;
  always_comb begin
    n_lost = '0;
    for (int i = 0; i < NC_N; i++)
      if (req[i] && pend_q[i] && !grant[i]) n_lost = n_lost + 8'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= '0;
      ev     <= '0;
      lost   <= '0;
    end else begin
      pend_q   <= (pend_q & ~grant) | req;
      ev.valid <= gvalid;
      ev.addr  <= {6'(BLOCK_ID), src_mem[gidx]};
      lost     <= lost + 16'(n_lost);
    end
  end

endmodule
