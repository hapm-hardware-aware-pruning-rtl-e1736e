// bram_mux: the Block RAM multiplexer.
//
// Gives the two Block RAM ports to one owner at a time - the CDMA, the
// convolution controller, the adder module or the pooling module - as chosen
// by the layer translator (owner input, hapm_pkg::bram_owner_e). The chosen
// owner's two request ports are routed to the RAM; read data are returned to
// every owner, which only uses them while it owns the RAM. Requests of the
// modules that do not own the RAM are dropped (an assertion reports one).
// The paper shows the multiplexer, its two ports per module and the control
// line from the layer translator; exclusive ownership per layer is this
// design's reading of it. Purely combinational.
module bram_mux
  import hapm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  bram_owner_e owner,
  input  bram_req_t   cdma_a, cdma_b,
  input  bram_req_t   conv_a, conv_b,
  input  bram_req_t   add_a,  add_b,
  input  bram_req_t   pool_a, pool_b,
  output bram_req_t   ram_a,  ram_b
);

  always_comb begin
    unique case (owner)
      OWN_CDMA: begin ram_a = cdma_a; ram_b = cdma_b; end
      OWN_CONV: begin ram_a = conv_a; ram_b = conv_b; end
      OWN_ADD:  begin ram_a = add_a;  ram_b = add_b;  end
      OWN_POOL: begin ram_a = pool_a; ram_b = pool_b; end
      default:  begin ram_a = BRAM_IDLE; ram_b = BRAM_IDLE; end
    endcase
  end

  a_only_owner: assert property (@(posedge clk) disable iff (!rst_n)
    ((owner == OWN_CONV) || !(conv_a.en || conv_b.en)) &&
    ((owner == OWN_ADD)  || !(add_a.en  || add_b.en))  &&
    ((owner == OWN_POOL) || !(pool_a.en || pool_b.en)));

endmodule
