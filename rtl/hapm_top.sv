// hapm_top: the HAPM convolution accelerator on the programmable-logic side
// of the SoC.
//
// Blocks: the layer translator (AXI4-Lite slave to the processor, AXI4-Lite
// master to the CDMA, interrupt), the three principal modules - convolution
// controller with its matrix block, adder, pooling - the Block RAM
// multiplexer and the 240 KB dual-port Block RAM (61440 words of 32 bits).
// The processor, the AXI CDMA and the DDR memory are outside: the CDMA's
// register port is driven by m_*, its completion interrupt is cdma_irq and
// its two Block RAM ports come in as cdma_a / cdma_b (word addresses, byte
// enables, one-cycle read latency) with their read data on cdma_a_rdata /
// cdma_b_rdata.
// Use: load the input tensor into the Block RAM through the CDMA ports (or
// let the CDMA copy it), write 1 to the control register, wait for irq, read
// the result through the CDMA ports, write 2 to the status register.
// The block structure and connections follow the system figure of the
// paper; the sizes are those of its largest configuration (Zedboard,
// 144 DSP slices: N_CU = 24 matrices of 2x3 processing elements).
// Lint notes: rst_n is both the asynchronous reset of the flip-flops and the
// disable condition of the concurrent assertions, which a linter reports as
// a reset used synchronously; no logic uses it synchronously. Some outputs
// are constant by design (AXI response codes always OKAY, full write
// strobes, the unused upper bits of the status read data).
module hapm_top
  import hapm_pkg::*;
#(
  parameter int unsigned N_CU       = 24,
  parameter int unsigned CU_X       = 2,
  parameter int unsigned CU_Y       = 3,
  parameter int unsigned DATA_DEPTH = 32,
  parameter bit          DSB        = 1'b1,
  parameter int unsigned BRAM_WORDS = 61440,
  parameter int unsigned N_LAYERS   = DEFAULT_N_LAYERS,
  parameter layer_t      LAYERS [N_LAYERS] = DEFAULT_NET
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave from the processor
  input  logic [3:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [3:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic        irq,
  // AXI4-Lite master to the CDMA registers (write channels)
  output logic [31:0] m_awaddr,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready,
  input  logic        cdma_irq,
  // CDMA side of the Block RAM
  input  bram_req_t   cdma_a,
  input  bram_req_t   cdma_b,
  output bram_rsp_t   cdma_a_rdata,
  output bram_rsp_t   cdma_b_rdata,
  // activity, for observation
  output logic [N_CU-1:0] win_start,
  output logic [N_CU-1:0] win_bypass,
  output logic        feed_stall
);

  localparam int unsigned CU_H = CU_X + CU_Y - 1;
  localparam int unsigned SELW = (N_CU > 1) ? $clog2(N_CU) : 1;

  bram_owner_e owner;
  logic        conv_start, conv_busy, conv_done;
  logic        add_start, add_busy, add_done;
  logic        pool_start, pool_busy, pool_done;
  conv_cfg_t   conv_cfg;
  add_cfg_t    add_cfg;
  pool_cfg_t   pool_cfg;
  bram_req_t   conv_a, conv_b, add_a, add_b, pool_a, pool_b, ram_a, ram_b;
  bram_rsp_t   ram_a_rdata, ram_b_rdata;

  logic                   coef_we, coef_ready, data_we, data_last, data_ready;
  logic                   psum_we, psum_ready, out_re, out_valid;
  logic [SELW-1:0]        coef_sel;
  logic [CU_Y*COEF_W-1:0] coef_wdata;
  logic [CU_H*ACT_W-1:0]  data_wdata;
  psum_t                  psum_wdata [N_CU];
  psum_t                  out_rdata  [N_CU];

  layer_translator #(.N_LAYERS(N_LAYERS), .LAYERS(LAYERS)) u_lt (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready, .s_bresp, .s_bvalid,
    .s_bready, .s_araddr, .s_arvalid, .s_arready, .s_rdata, .s_rresp, .s_rvalid, .s_rready, .irq,
    .m_awaddr, .m_awvalid, .m_awready, .m_wdata, .m_wstrb, .m_wvalid, .m_wready, .m_bresp,
    .m_bvalid, .m_bready, .cdma_irq,
    .owner, .conv_start, .conv_cfg, .conv_done, .add_start, .add_cfg, .add_done,
    .pool_start, .pool_cfg, .pool_done
  );

  conv_controller #(.N_CU(N_CU), .CU_X(CU_X), .CU_Y(CU_Y)) u_conv (
    .clk, .rst_n, .start(conv_start), .cfg(conv_cfg), .busy(conv_busy), .done(conv_done),
    .ram_a(conv_a), .ram_b(conv_b), .ram_a_rdata, .ram_b_rdata,
    .coef_we, .coef_sel, .coef_wdata, .coef_ready, .data_we, .data_wdata, .data_last, .data_ready,
    .psum_we, .psum_wdata, .psum_ready, .out_re, .out_rdata, .out_valid, .feed_stall
  );

  matrix_block #(.N_CU(N_CU), .CU_X(CU_X), .CU_Y(CU_Y), .DATA_DEPTH(DATA_DEPTH), .DSB(DSB)) u_mb (
    .clk, .rst_n,
    .coef_we, .coef_sel, .coef_wdata, .coef_ready, .data_we, .data_wdata, .data_last, .data_ready,
    .psum_we, .psum_wdata, .psum_ready, .out_re, .out_rdata, .out_valid, .win_start, .win_bypass
  );

  adder_module u_add (
    .clk, .rst_n, .start(add_start), .cfg(add_cfg), .busy(add_busy), .done(add_done),
    .ram_a(add_a), .ram_b(add_b), .ram_a_rdata, .ram_b_rdata
  );

  pooling_module u_pool (
    .clk, .rst_n, .start(pool_start), .cfg(pool_cfg), .busy(pool_busy), .done(pool_done),
    .ram_a(pool_a), .ram_b(pool_b), .ram_a_rdata, .ram_b_rdata
  );

  bram_mux u_mux (
    .clk, .rst_n, .owner, .cdma_a, .cdma_b, .conv_a, .conv_b, .add_a, .add_b, .pool_a, .pool_b,
    .ram_a, .ram_b
  );

  block_ram #(.DEPTH(BRAM_WORDS)) u_ram (
    .clk, .a(ram_a), .b(ram_b), .a_rdata(ram_a_rdata), .b_rdata(ram_b_rdata)
  );

  assign cdma_a_rdata = ram_a_rdata;
  assign cdma_b_rdata = ram_b_rdata;

  // at most one principal module works at a time
  a_one_module: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({conv_busy, add_busy, pool_busy}));

endmodule
