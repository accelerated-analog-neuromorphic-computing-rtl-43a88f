// random_generator: source of random background events.
//
// A 32-bit Galois LFSR (polynomial x^32+x^22+x^2+x+1) advances every cycle.
// When the generator is enabled and the low 16 LFSR bits are below the
// programmed rate, an event leaves in that cycle, so the event probability per
// cycle is rate/65536 (Bernoulli, close to Poisson for small rates). Its
// address is base | (LFSR[29:16] & mask): the mask selects which address bits
// are random, for instance the 6-bit neuron number to hit random synapses.
//
// Config registers (cfg_we, cfg_addr, cfg_wdata): 0 = {enable[16], rate[15:0]},
// 1 = base[13:0], 2 = mask[13:0], 3 = seed (a zero seed is replaced by 1).
// Timing: the event is registered, one per cycle at most. The use of random
// background sources follows the chip; everything inside is this design's own.
module random_generator
  import bss2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [1:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  output l1_event_t   ev
);

  logic                 en_q;
  logic [15:0]          rate_q;
  logic [EV_ADDR_W-1:0] base_q, mask_q;
  logic [31:0]          lfsr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q   <= 1'b0;
      rate_q <= '0;
      base_q <= '0;
      mask_q <= '0;
      lfsr_q <= 32'h1;
      ev     <= '0;
    end else begin
      if (cfg_we && cfg_addr == 2'd3)
        lfsr_q <= (cfg_wdata == '0) ? 32'h1 : cfg_wdata;
      else
        lfsr_q <= lfsr_q[0] ? ((lfsr_q >> 1) ^ 32'h8020_0003) : (lfsr_q >> 1);
      if (cfg_we) begin
        case (cfg_addr)
          2'd0: begin en_q <= cfg_wdata[16]; rate_q <= cfg_wdata[15:0]; end
          2'd1: base_q <= cfg_wdata[EV_ADDR_W-1:0];
          2'd2: mask_q <= cfg_wdata[EV_ADDR_W-1:0];
          default: ;
        endcase
      end
      ev.valid <= en_q && (lfsr_q[15:0] < rate_q);
      ev.addr  <= base_q | (lfsr_q[16 +: EV_ADDR_W] & mask_q);
    end
  end

endmodule
