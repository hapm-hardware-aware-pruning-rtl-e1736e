// pe: processing element of the computation-unit matrix.
//
// A multiplier, a two-input multiplexer and an accumulating adder, in the
// arrangement of the PE block diagram: the mux feeds the adder either the
// product coef*data or the partial sum coming from the PE below, and the adder
// adds that to its own registered output. One PE maps to one DSP48 slice.
//
// Control, given per cycle by the matrix sequencer:
//   en       - the accumulator updates this cycle
//   first    - start a new sum: the register's old value is replaced, not added to
//   sel_psum - 1: add psum_in, 0: add the product
// psum_out is the accumulator register; it updates on the clock edge after en.
// The separate "first" control (clearing the feedback path) is this design's
// choice: the diagram shows only the feedback loop, not how it is restarted.
// Arithmetic is two's complement and wraps at PSUM_W bits, like a 16-bit
// partial-sum bus would.
module pe
  import hapm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  first,
  input  logic  sel_psum,
  input  coef_t coef,
  input  act_t  data,
  input  psum_t psum_in,
  output psum_t psum_out
);

  psum_t product, addend, base;

  always_comb begin
    product = psum_t'(coef * data);
    addend  = sel_psum ? psum_in : product;
    base    = first ? '0 : psum_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  psum_out <= '0;
    else if (en) psum_out <= base + addend;
  end

endmodule
