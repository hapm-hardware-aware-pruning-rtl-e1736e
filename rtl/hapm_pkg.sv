// hapm_pkg: types, widths and helper functions shared by the HAPM accelerator.
//
// Numbers: activations are 8-bit Q3.4 and coefficients 8-bit Q2.5, as the
// accelerator was trained; a product is then a 16-bit Q6.9 value and partial
// sums are carried as 16-bit values in that format (the 16-bit partial-sum
// lanes of the matrix block). The buses of the matrix block are 24 bits wide
// for coefficients (one kernel column of CU_Y=3 weights) and 32 bits wide for
// data (one column of CU_H=4 activations).
//
// The Block RAM is modelled as 32-bit words with byte enables and one cycle
// of read latency; bram_req_t / bram_rsp_t describe one port of it.
//
// Layer descriptors (layer_t) are what the layer translator holds for every
// layer of the network; the layout of tensors in the Block RAM they refer to
// is described in conv_controller.
package hapm_pkg;

  localparam int unsigned ACT_W   = 8;    // activation width (Q3.4)
  localparam int unsigned COEF_W  = 8;    // coefficient width (Q2.5)
  localparam int unsigned PSUM_W  = 16;   // partial-sum width (Q6.9)
  localparam int unsigned BRAM_AW = 16;   // Block RAM word address width
  localparam int unsigned BRAM_DW = 32;   // Block RAM word width
  localparam int unsigned BYTE_AW = BRAM_AW + 2;  // Block RAM byte address width

  typedef logic [BYTE_AW-1:0] baddr_t;

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [PSUM_W-1:0] psum_t;

  // One port of the Block RAM (requests from a module, responses to it).
  typedef struct packed {
    logic               en;
    logic [3:0]         we;     // byte write enables, 0 = read
    logic [BRAM_AW-1:0] addr;   // word address
    logic [BRAM_DW-1:0] wdata;
  } bram_req_t;

  typedef logic [BRAM_DW-1:0] bram_rsp_t;  // read data, valid one cycle after en

  localparam bram_req_t BRAM_IDLE = '{en: 1'b0, we: 4'h0, addr: '0, wdata: '0};

  // Owner of the Block RAM ports, chosen by the layer translator.
  typedef enum logic [2:0] {
    OWN_NONE = 3'd0,
    OWN_CDMA = 3'd1,
    OWN_CONV = 3'd2,
    OWN_ADD  = 3'd3,
    OWN_POOL = 3'd4
  } bram_owner_e;

  typedef enum logic [1:0] {
    L_CONV = 2'd0,
    L_ADD  = 2'd1,
    L_POOL = 2'd2
  } layer_kind_e;

  // Convolution layer: all addresses are byte addresses in the Block RAM except
  // coef_base and tmp_base (word addresses). Input sizes include the padding.
  typedef struct packed {
    baddr_t      in_base;    // byte address of input tensor
    logic [7:0]  in_w;       // N_ix (columns, with padding)
    logic [7:0]  in_h;       // N_iy (rows, with padding)
    logic [9:0]  n_if;       // input channels
    logic [9:0]  n_of;       // output channels (multiple of N_CU)
    logic [1:0]  stride;     // 1 or 2
    logic [15:0] coef_base;  // word address of kernels (3 words per kernel)
    logic [15:0] bias_base;  // word address of biases (2 per word)
    logic [15:0] tmp_base;   // word address of partial-sum scratch area
    baddr_t      out_base;   // byte address of output tensor
    logic [7:0]  out_w;      // output columns incl. padding
    logic [7:0]  out_h;      // output rows incl. padding
    logic [1:0]  out_pad;    // border left around the output
    logic [3:0]  shift;      // right shift Q6.9 -> Q3.4 (5)
    logic        relu;       // apply ReLU at the output
  } conv_cfg_t;

  // Element-wise (residual) addition of two equally sized tensors.
  typedef struct packed {
    logic [15:0] a_base;     // word addresses
    logic [15:0] b_base;
    logic [15:0] c_base;
    logic [15:0] n_words;    // length in 32-bit words
    logic        relu;
  } add_cfg_t;

  // Pooling of a P x P window with stride P.
  typedef struct packed {
    baddr_t      in_base;    // byte addresses
    logic [7:0]  in_w;       // includes padding
    logic [7:0]  in_h;
    logic [1:0]  in_pad;     // border to skip in the input
    logic [9:0]  n_ch;
    baddr_t      out_base;
    logic [7:0]  out_w;      // includes padding
    logic [7:0]  out_h;
    logic [1:0]  out_pad;
    logic [3:0]  pool;       // P
    logic        avg;        // 0 = max, 1 = average
    logic [3:0]  avg_shift;  // log2(P*P) for the average
  } pool_cfg_t;

  // One entry of the layer translator's network description.
  typedef struct packed {
    layer_kind_e kind;
    logic        coef_ext;   // coefficients first copied from DDR by the CDMA
    logic [31:0] ddr_addr;   // CDMA source address
    logic [15:0] cdma_bytes; // CDMA transfer length
    conv_cfg_t   conv;
    add_cfg_t    add;
    pool_cfg_t   pool;
  } layer_t;

  // Theoretical minimum cycle count of one convolution layer, equation (1) of
  // the design description. Sizes include the padding.
  function automatic int unsigned min_cycles(int unsigned n_valid, int unsigned nix,
      int unsigned niy, int unsigned nif, int unsigned nof, int unsigned kx, int unsigned ky,
      int unsigned sx, int unsigned sy, int unsigned n_cu, int unsigned cu_x,
      int unsigned cu_y);
    int unsigned kox, koy, px, py, g_cu, g_ky, cu_h;
    kox  = (kx > sx) ? kx - sx : sx - kx;  if (kox == 0) kox = 1;
    koy  = (ky > sy) ? ky - sy : sy - ky;  if (koy == 0) koy = 1;
    cu_h = cu_x + cu_y - 1;
    px   = (nix - kox) / sx;
    g_cu = (cu_h - koy) / sy;
    g_ky = (niy / koy) - sy;
    py   = (g_ky + g_cu - 1) / g_cu;
    return n_valid * px * py * nif * (nof / n_cu);
  endfunction

  // ---------------------------------------------------------------- network
  // Constructors of layer descriptors, used for the layer table.
  function automatic layer_t conv_layer(logic [31:0] ddr, int unsigned in_b, int unsigned nw,
      int unsigned nh, int unsigned nif, int unsigned nof, int unsigned s, int unsigned coef_w,
      int unsigned tmp_w, int unsigned out_b, logic relu);
    layer_t l;
    int unsigned ow, oh;
    ow = (nw - 3) / s + 1;
    oh = (nh - 3) / s + 1;
    l = '0;
    l.kind           = L_CONV;
    l.coef_ext       = 1'b1;
    l.ddr_addr       = ddr;
    l.cdma_bytes     = 16'(4 * (3 * nif * nof + nof / 2));  // kernels, then biases
    l.conv.in_base   = BYTE_AW'(in_b);
    l.conv.in_w      = 8'(nw);
    l.conv.in_h      = 8'(nh);
    l.conv.n_if      = 10'(nif);
    l.conv.n_of      = 10'(nof);
    l.conv.stride    = 2'(s);
    l.conv.coef_base = 16'(coef_w);
    l.conv.bias_base = 16'(coef_w + 3 * nif * nof);
    l.conv.tmp_base  = 16'(tmp_w);
    l.conv.out_base  = BYTE_AW'(out_b);
    l.conv.out_w     = 8'(ow + 2);
    l.conv.out_h     = 8'(oh + 2);
    l.conv.out_pad   = 2'd1;
    l.conv.shift     = 4'd5;
    l.conv.relu      = relu;
    return l;
  endfunction

  function automatic layer_t add_layer(int unsigned a_b, int unsigned b_b, int unsigned c_b,
      int unsigned n_bytes);
    layer_t l;
    l = '0;
    l.kind        = L_ADD;
    l.add.a_base  = 16'(a_b / 4);
    l.add.b_base  = 16'(b_b / 4);
    l.add.c_base  = 16'(c_b / 4);
    l.add.n_words = 16'((n_bytes + 3) / 4);
    l.add.relu    = 1'b1;
    return l;
  endfunction

  function automatic layer_t pool_layer(int unsigned in_b, int unsigned nw, int unsigned nh,
      int unsigned nch, int unsigned p, logic avg, int unsigned out_b);
    layer_t l;
    l = '0;
    l.kind           = L_POOL;
    l.pool.in_base   = BYTE_AW'(in_b);
    l.pool.in_w      = 8'(nw);
    l.pool.in_h      = 8'(nh);
    l.pool.in_pad    = 2'd1;
    l.pool.n_ch      = 10'(nch);
    l.pool.out_base  = BYTE_AW'(out_b);
    l.pool.out_w     = 8'((nw - 2) / p);
    l.pool.out_h     = 8'((nh - 2) / p);
    l.pool.out_pad   = 2'd0;
    l.pool.pool      = 4'(p);
    l.pool.avg       = avg;
    l.pool.avg_shift = 4'($clog2(p * p));
    return l;
  endfunction

  // Default network: one residual block of 24 filters on an 8x8x3 input
  // (10x10 with its border), followed by 2x2 max pooling.
  //   L0 conv 3x3  10x10x3  -> 8x8x24 (+border)  byte 0x0000 -> 0x0400
  //   L1 conv 3x3  10x10x24 -> 8x8x24 (+border)  byte 0x0400 -> 0x1000
  //   L2 add  L0 + L1 (ReLU)                      -> 0x2000
  //   L3 pool 2x2 max 8x8x24 -> 4x4x24            -> 0x3000
  // Kernels and biases of each convolution are copied by the CDMA from DDR
  // into word 0x1000 (byte 0x4000); partial sums use word 0x2000.
  localparam int unsigned DEFAULT_N_LAYERS = 4;
  localparam logic [31:0] DEFAULT_DDR_BASE = 32'h1000_0000;
  localparam layer_t DEFAULT_NET [DEFAULT_N_LAYERS] = '{
    conv_layer(DEFAULT_DDR_BASE,           'h0000, 10, 10,  3, 24, 1, 'h1000, 'h2000, 'h0400, 1'b1),
    conv_layer(DEFAULT_DDR_BASE + 'h1000,  'h0400, 10, 10, 24, 24, 1, 'h1000, 'h2000, 'h1000, 1'b0),
    add_layer('h0400, 'h1000, 'h2000, 10 * 10 * 24),
    pool_layer('h2000, 10, 10, 24, 2, 1'b0, 'h3000)
  };

endpackage
