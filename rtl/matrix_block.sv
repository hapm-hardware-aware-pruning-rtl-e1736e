// matrix_block: N_CU computation-unit matrices working side by side.
//
// Every matrix gets the same data column (broadcast on the 32-bit data bus
// with its 1-bit flag) but its own kernel, so the N_CU matrices compute N_CU
// output channels of a layer at once (the unrolled output-filter loop). The
// 24-bit coefficient bus is shared too; coef_sel names the matrix whose
// circular buffer takes the word. Partial sums enter and leave on buses of
// 16*N_CU bits, one 16-bit lane per matrix, and move as whole vectors: a push
// goes into every input FIFO and a pop takes one value from every output FIFO.
//
// Handshake: a bus write is taken only when the matching *_ready is high
// (data_ready / psum_ready: all matrices have room; coef_ready: the selected
// one has). out_valid is high when every matrix has an output waiting. With
// the Dynamic Sparsity Bypass a matrix whose kernel is zero runs ahead of the
// others, bounded by the depth of its buffers.
// The per-matrix coefficient select and the all-ready rule are this design's
// choices; the bus widths are those of the matrix-block figure.
// Lint note: rst_n also disables the concurrent assertions inside the
// matrices, which a linter reports as a synchronous use of the reset.
module matrix_block
  import hapm_pkg::*;
#(
  parameter int unsigned N_CU       = 24,
  parameter int unsigned CU_X       = 2,
  parameter int unsigned CU_Y       = 3,
  parameter int unsigned DATA_DEPTH = 32,
  parameter int unsigned PSUM_DEPTH = 8,
  parameter int unsigned OUT_DEPTH  = 8,
  parameter bit          DSB        = 1'b1,
  localparam int unsigned CU_H      = CU_X + CU_Y - 1,
  localparam int unsigned SELW      = (N_CU > 1) ? $clog2(N_CU) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   coef_we,
  input  logic [SELW-1:0]        coef_sel,
  input  logic [CU_Y*COEF_W-1:0] coef_wdata,
  output logic                   coef_ready,
  input  logic                   data_we,
  input  logic [CU_H*ACT_W-1:0]  data_wdata,
  input  logic                   data_last,
  output logic                   data_ready,
  input  logic                   psum_we,
  input  psum_t                  psum_wdata [N_CU],
  output logic                   psum_ready,
  input  logic                   out_re,
  output psum_t                  out_rdata [N_CU],
  output logic                   out_valid,
  output logic [N_CU-1:0]        win_start,
  output logic [N_CU-1:0]        win_bypass
);

  logic [N_CU-1:0] c_rdy, d_rdy, p_rdy, o_vld;

  for (genvar m = 0; m < N_CU; m++) begin : g_cu
    cu_matrix #(
      .CU_X(CU_X), .CU_Y(CU_Y), .DATA_DEPTH(DATA_DEPTH),
      .PSUM_DEPTH(PSUM_DEPTH), .OUT_DEPTH(OUT_DEPTH), .DSB(DSB)
    ) u_cu (
      .clk, .rst_n,
      .coef_we    (coef_we && (coef_sel == SELW'(m))),
      .coef_wdata,
      .coef_ready (c_rdy[m]),
      .data_we    (data_we && data_ready),
      .data_wdata,
      .data_last,
      .data_ready (d_rdy[m]),
      .psum_we    (psum_we && psum_ready),
      .psum_wdata (psum_wdata[m]),
      .psum_ready (p_rdy[m]),
      .out_re     (out_re && out_valid),
      .out_rdata  (out_rdata[m]),
      .out_valid  (o_vld[m]),
      .win_start  (win_start[m]),
      .win_bypass (win_bypass[m]));
  end

  assign coef_ready = c_rdy[coef_sel];
  assign data_ready = &d_rdy;
  assign psum_ready = &p_rdy;
  assign out_valid  = &o_vld;

endmodule
