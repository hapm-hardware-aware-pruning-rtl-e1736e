// cu_matrix: one computation-unit matrix with its buffers.
//
// A CU_Y x CU_X systolic array of PEs (3 x 2 by default) that computes CU_X
// vertically adjacent outputs of a CU_Y x CU_Y convolution window per pass,
// plus the buffers the matrix block places in front of and behind it:
//   - data FIFO (DATA_DEPTH words of CU_H = CU_X+CU_Y-1 activations, 32 bits,
//     each with a 1-bit "last window of this kernel" flag),
//   - circular coefficient buffer (COEF_DEPTH words of CU_Y coefficients,
//     24 bits): a kernel is loaded once and re-read for every window of an
//     input channel, then released when a window flagged "last" is issued,
//   - partial-sum input FIFO and partial-sum output FIFO (16-bit entries).
//
// Scheduling of one window (a "normal" pass, CU_Y+1 = 4 cycles): slot s of
// the window presents kernel column s and data column s, slot CU_Y presents
// zeros and makes every PE add the partial sum from the PE below instead of a
// product (the "0" entries of the scheduling figure). PE(r,c) (row r counted
// from the bottom, column c) works on slot s in cycle t0+r+c+s and uses kernel
// row CU_Y-1-r and data lane CU_Y-1-r+c, so the two columns compute the window
// at rows 0..2 and 1..3 of the data column. Row 0 adds the incoming partial
// sum (bias or earlier channel's result), the top row's accumulator holds the
// output: column c is written into the output FIFO at t0+LAT+c, LAT=2*CU_Y.
// A new window can start every CU_Y+1 cycles, i.e. two 3x3 outputs every 4.
// The staggering r+c is produced by one delay line of window slots in this
// RTL; the figure shows it as coefficients forwarded to the right and data
// forwarded diagonally, which gives the same cycle for every PE.
//
// Dynamic Sparsity Bypass (DSB=1): when the kernel in the coefficient buffer
// is all zero, or all CU_Y data words of the window are zero, the products
// cannot change the result, so the window is not sent through the array: the
// CU_X partial sums are copied to the output through a delay line of the same
// latency, taking CU_X cycles instead of CU_Y+1. Window-level skipping, the
// 2-cycle bypass and the FIFO handshake are this design's own choices; the
// paper says only that zero data or coefficients are detected to save cycles.
//
// Interfaces: *_we/*_wdata push into the buffers, *_ready says there is room;
// out_valid/out_rdata show the oldest output, out_re pops it. win_start and
// win_bypass pulse when a window enters the array or is bypassed.
// Lint notes: rst_n also disables the concurrent assertions of the FIFOs,
// which a linter reports as a synchronous use of the reset; p_empty of the
// partial-sum input FIFO is not needed because issue checks its count.
module cu_matrix
  import hapm_pkg::*;
#(
  parameter int unsigned CU_X       = 2,
  parameter int unsigned CU_Y       = 3,
  parameter int unsigned DATA_DEPTH = 32,
  parameter int unsigned COEF_DEPTH = 2 * CU_Y,
  parameter int unsigned PSUM_DEPTH = 8,
  parameter int unsigned OUT_DEPTH  = 8,
  parameter bit          DSB        = 1'b1,
  localparam int unsigned CU_H      = CU_X + CU_Y - 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // coefficient bus: one kernel column (CU_Y coefficients, row 0 in bits [7:0])
  input  logic                      coef_we,
  input  logic [CU_Y*COEF_W-1:0]    coef_wdata,
  output logic                      coef_ready,
  // data bus: one data column (CU_H activations, lane 0 in bits [7:0])
  input  logic                      data_we,
  input  logic [CU_H*ACT_W-1:0]     data_wdata,
  input  logic                      data_last,
  output logic                      data_ready,
  // partial-sum input
  input  logic                      psum_we,
  input  psum_t                     psum_wdata,
  output logic                      psum_ready,
  // partial-sum output
  input  logic                      out_re,
  output psum_t                     out_rdata,
  output logic                      out_valid,
  // activity
  output logic                      win_start,
  output logic                      win_bypass
);

  localparam int unsigned W    = CU_Y + 1;        // slots per normal window
  localparam int unsigned LAT  = 2 * CU_Y;        // slot 0 -> column 0 output
  localparam int unsigned SKEW = CU_Y + CU_X - 1; // PE stagger stages
  localparam int unsigned DPW  = $clog2(DATA_DEPTH);
  localparam int unsigned CPW  = $clog2(COEF_DEPTH);
  localparam int unsigned SW   = $clog2(W + 1);

  typedef logic [CU_H*ACT_W-1:0]  dword_t;
  typedef logic [CU_Y*COEF_W-1:0] cword_t;

  // ---------------------------------------------------------------- data FIFO
  dword_t              dmem  [DATA_DEPTH];
  logic                dlast [DATA_DEPTH];
  logic [DPW-1:0]      d_rd, d_wr;
  logic [DPW:0]        d_cnt;
  logic                d_pop;   // pops CU_Y words (one window)

  function automatic logic [DPW-1:0] dadd(logic [DPW-1:0] p, int unsigned k);
    return DPW'((int'(p) + k) % DATA_DEPTH);
  endfunction

  assign data_ready = (d_cnt < (DPW+1)'(DATA_DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_rd <= '0; d_wr <= '0; d_cnt <= '0;
    end else begin
      if (data_we && data_ready) d_wr <= dadd(d_wr, 1);
      if (d_pop)                 d_rd <= dadd(d_rd, CU_Y);
      d_cnt <= d_cnt + (DPW+1)'(data_we && data_ready) - (d_pop ? (DPW+1)'(CU_Y) : '0);
    end
  end

  always_ff @(posedge clk) begin
    if (data_we && data_ready) begin
      dmem[d_wr]  <= data_wdata;
      dlast[d_wr] <= data_last;
    end
  end

  // ------------------------------------------------ circular coefficient buffer
  cword_t              cmem [COEF_DEPTH];
  logic [CPW-1:0]      c_base, c_wr;
  logic [CPW:0]        c_cnt;
  logic                c_release;   // current kernel no longer needed

  function automatic logic [CPW-1:0] cadd(logic [CPW-1:0] p, int unsigned k);
    return CPW'((int'(p) + k) % COEF_DEPTH);
  endfunction

  assign coef_ready = (c_cnt < (CPW+1)'(COEF_DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_base <= '0; c_wr <= '0; c_cnt <= '0;
    end else begin
      if (coef_we && coef_ready) c_wr   <= cadd(c_wr, 1);
      if (c_release)             c_base <= cadd(c_base, CU_Y);
      c_cnt <= c_cnt + (CPW+1)'(coef_we && coef_ready) - (c_release ? (CPW+1)'(CU_Y) : '0);
    end
  end

  always_ff @(posedge clk) begin
    if (coef_we && coef_ready) cmem[c_wr] <= coef_wdata;
  end

  // ------------------------------------------------ partial-sum FIFOs
  logic                          p_pop;
  psum_t                         p_head;
  logic [$clog2(PSUM_DEPTH+1)-1:0] p_cnt;
  logic                          p_full, p_empty;

  sync_fifo #(.WIDTH(PSUM_W), .DEPTH(PSUM_DEPTH)) u_psum_in (
    .clk, .rst_n, .push(psum_we), .wdata(psum_wdata), .pop(p_pop), .rdata(p_head),
    .count(p_cnt), .full(p_full), .empty(p_empty));
  assign psum_ready = !p_full;

  logic                          o_push;
  psum_t                         o_wdata;
  logic [$clog2(OUT_DEPTH+1)-1:0] o_cnt;
  logic                          o_full, o_empty;

  sync_fifo #(.WIDTH(PSUM_W), .DEPTH(OUT_DEPTH)) u_psum_out (
    .clk, .rst_n, .push(o_push), .wdata(o_wdata), .pop(out_re), .rdata(out_rdata),
    .count(o_cnt), .full(o_full), .empty(o_empty));
  assign out_valid = !o_empty;

  // ------------------------------------------------ window sequencer
  logic            active, bypass;   // a window is being run / it is bypassed
  logic [SW-1:0]   slot;
  dword_t          win_d [CU_Y];
  cword_t          win_k [CU_Y];
  logic [7:0]      inflight;         // outputs promised to the output FIFO
  logic            last_cycle, can_issue, issue, zero_win, kernel_zero, data_zero;
  logic            pop_now;

  always_comb begin
    kernel_zero = 1'b1;
    data_zero   = 1'b1;
    for (int k = 0; k < CU_Y; k++) begin
      if (cmem[cadd(c_base, k)] != '0) kernel_zero = 1'b0;
      if (dmem[dadd(d_rd, k)]   != '0) data_zero   = 1'b0;
    end
    zero_win   = DSB && (kernel_zero || data_zero);
    last_cycle = active && (slot == SW'(bypass ? CU_X - 1 : W - 1));
    pop_now    = active && (bypass || (slot >= SW'(W - CU_X)));
    can_issue  = (!active || last_cycle)
              && (d_cnt >= (DPW+1)'(CU_Y))
              && (c_cnt >= (CPW+1)'(CU_Y))
              && ((32'(p_cnt) - 32'(pop_now)) >= CU_X)
              && ((32'(o_cnt) + 32'(inflight) + CU_X) <= OUT_DEPTH);
    issue      = can_issue;
    d_pop      = issue;
    c_release  = issue && dlast[d_rd];
    p_pop      = pop_now;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; bypass <= 1'b0; slot <= '0;
    end else if (issue) begin
      active <= 1'b1; bypass <= zero_win; slot <= '0;
    end else if (last_cycle) begin
      active <= 1'b0;
    end else if (active) begin
      slot <= slot + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (issue) begin
      for (int k = 0; k < CU_Y; k++) begin
        win_d[k] <= dmem[dadd(d_rd, k)];
        win_k[k] <= cmem[cadd(c_base, k)];
      end
    end
  end

  assign win_start  = active && (slot == '0) && !bypass;
  assign win_bypass = active && (slot == '0) && bypass;

  // ------------------------------------------------ PE stagger line
  typedef struct packed {
    logic   valid;
    logic   first;
    logic   psum_slot;
    dword_t d;
    cword_t k;
  } tok_t;

  tok_t tok [SKEW+1];

  always_comb begin
    tok[0].valid     = active && !bypass;
    tok[0].first     = (slot == '0);
    tok[0].psum_slot = (slot == SW'(CU_Y));
    tok[0].d         = '0;
    tok[0].k         = '0;
    for (int k = 0; k < CU_Y; k++) begin
      if (slot == SW'(k)) begin
        tok[0].d = win_d[k];
        tok[0].k = win_k[k];
      end
    end
  end

  for (genvar i = 1; i <= SKEW; i++) begin : g_skew
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) tok[i] <= '0;
      else        tok[i] <= tok[i-1];
    end
  end

  // ------------------------------------------------ partial-sum delay line
  psum_t pdly [LAT+1];
  assign pdly[0] = p_head;
  for (genvar i = 1; i <= LAT; i++) begin : g_pdly
    always_ff @(posedge clk) pdly[i] <= pdly[i-1];
  end

  // ------------------------------------------------ PE array
  psum_t acc [CU_Y][CU_X];

  for (genvar r = 0; r < CU_Y; r++) begin : g_row
    for (genvar c = 0; c < CU_X; c++) begin : g_col
      tok_t  t;
      psum_t pin;
      assign t   = tok[r + c];
      assign pin = (r == 0) ? pdly[CU_X - 1] : acc[(r == 0) ? 0 : r - 1][c];
      pe u_pe (
        .clk, .rst_n,
        .en       (t.valid),
        .first    (t.first),
        .sel_psum (t.psum_slot),
        .coef     (coef_t'(t.k[(CU_Y-1-r)*COEF_W +: COEF_W])),
        .data     (act_t'(t.d[(CU_Y-1-r+c)*ACT_W +: ACT_W])),
        .psum_in  (pin),
        .psum_out (acc[r][c]));
    end
  end

  // ------------------------------------------------ output write scheduling
  logic ev_v [LAT+CU_X];
  logic ev_b [LAT+CU_X];
  assign ev_v[0] = active && (slot == '0);
  assign ev_b[0] = bypass;
  for (genvar i = 1; i < LAT + CU_X; i++) begin : g_ev
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin ev_v[i] <= 1'b0; ev_b[i] <= 1'b0; end
      else        begin ev_v[i] <= ev_v[i-1]; ev_b[i] <= ev_b[i-1]; end
    end
  end

  always_comb begin
    o_push  = 1'b0;
    o_wdata = '0;
    for (int c = 0; c < CU_X; c++) begin
      if (ev_v[LAT + c]) begin
        o_push  = 1'b1;
        o_wdata = ev_b[LAT + c] ? pdly[LAT] : acc[CU_Y-1][c];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + (issue ? 8'(CU_X) : 8'd0) - 8'(o_push);
  end

  initial begin
    assert (CU_X <= CU_Y + 1) else $error("CU_X must not exceed CU_Y+1");
    assert (DATA_DEPTH >= CU_Y && COEF_DEPTH >= CU_Y) else $error("buffers too small");
  end
  a_out_room: assert property (@(posedge clk) disable iff (!rst_n) !(o_push && o_full));

endmodule
