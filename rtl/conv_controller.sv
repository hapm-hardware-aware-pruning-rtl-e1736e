// conv_controller: the "controller" principal module - runs one convolution
// layer on the matrix block, reading its operands from and writing its
// results to the Block RAM.
//
// Schedule (filter groups outermost, as in the convolution schedule of the
// design description):
//   for f0 = 0 .. N_of-1 step N_CU          -- N_CU filters at once
//     load the N_CU biases
//     for g = 0 .. N_if-1                   -- input channels
//       load kernel k[:,:,g,f0+cu] into the circular buffer of matrix cu
//       for x = 0 .. N_ix-K step s          -- window columns
//         for y = 0 .. N_iy-K step CU_X     -- CU_X output rows per window
//           push K data columns (rows y..y+CU_H-1 of columns x..x+K-1)
//           push CU_X partial-sum vectors: the biases when g = 0, otherwise
//             the sums kept for this position after channel g-1
//       outputs are drained as they appear: while g < N_if-1 into a 16-bit
//       scratch area, for the last channel requantised to 8 bits into the
//       output tensor, at its final position (with border) for the next layer.
// A data column read is issued in the same cycle the scheduler picks it, and
// the next column of a window is read while the current one is pushed.
// Draining has priority over feeding, so the matrix block never waits on a
// full output buffer because the controller is waiting on a full input one.
// Kernels are K x K with K = CU_Y (3), strides 1 or 2.
//
// Block RAM layout used (all tensors 8-bit, channel-major, then column-major:
// the CU_H rows of one column are consecutive bytes, so one data column takes
// one read on each port):
//   input   byte  in_base  + (g*N_ix + x)*N_iy + y
//   kernels word  coef_base + ((f*N_if + g)*K + j), byte r = k[row r][col j]
//   biases  word  bias_base + f/2, 16 bits each, low half = even f
//   scratch word  tmp_base + (ox*OH + oy)*N_CU/2 + cu/2, 16 bits each
//   output  byte  out_base + (f*out_w + ox+pad)*out_h + oy+pad
// Requantisation: out = sat8(relu(psum >>> shift)), truncating. The layout,
// the requantisation and all the FSM timing are this design's choices; the
// paper gives the loop order, the bias/partial-sum selection and that the
// output is stored in its final layout with byte writes to disjoint places.
//
// Interface: start (pulse) with cfg, done pulses when the layer is written;
// two Block RAM ports (one-cycle read latency); the matrix-block buses.
// feed_stall is high in cycles where a data column waits for buffer room.
// Lint note: address arithmetic mixes 8-, 10- and 16-bit fields that are
// widened to the address width on purpose (the widening is reported).
module conv_controller
  import hapm_pkg::*;
#(
  parameter int unsigned N_CU = 24,
  parameter int unsigned CU_X = 2,
  parameter int unsigned CU_Y = 3,
  localparam int unsigned CU_H = CU_X + CU_Y - 1,
  localparam int unsigned SELW = (N_CU > 1) ? $clog2(N_CU) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  conv_cfg_t              cfg,
  output logic                   busy,
  output logic                   done,
  // Block RAM
  output bram_req_t              ram_a,
  output bram_req_t              ram_b,
  input  bram_rsp_t              ram_a_rdata,
  input  bram_rsp_t              ram_b_rdata,
  // matrix block
  output logic                   coef_we,
  output logic [SELW-1:0]        coef_sel,
  output logic [CU_Y*COEF_W-1:0] coef_wdata,
  input  logic                   coef_ready,
  output logic                   data_we,
  output logic [CU_H*ACT_W-1:0]  data_wdata,
  output logic                   data_last,
  input  logic                   data_ready,
  output logic                   psum_we,
  output psum_t                  psum_wdata [N_CU],
  input  logic                   psum_ready,
  output logic                   out_re,
  input  psum_t                  out_rdata [N_CU],
  input  logic                   out_valid,
  output logic                   feed_stall
);

  localparam int unsigned K  = CU_Y;
  localparam int unsigned NW = N_CU / 2;          // 16-bit values -> words
  localparam int unsigned NP = (NW + 1) / 2;      // word pairs (two ports)

  typedef enum logic [3:0] {
    S_IDLE, S_BIAS, S_COEF_RD, S_COEF_CAP, S_COEF_PUSH, S_SCHED,
    S_DCAP, S_DPUSH, S_PRD, S_PPUSH, S_WRITE, S_NEXT
  } state_e;

  state_e    st;
  conv_cfg_t c;
  logic [7:0]  oh, x_last, y_last;          // output rows, last window origin
  logic [9:0]  f0, g;
  logic [7:0]  fx, fy, dx, dy;              // feed / drain window origin
  logic [2:0]  fs;                          // feed step: K data words, CU_X psums
  logic        dc;                          // drain column
  logic        feed_done, hold;
  logic [SELW-1:0] cu;
  logic [2:0]  kj;
  logic [7:0]  rk;                          // read / write index
  logic        drain_done;
  psum_t       bias [N_CU];
  psum_t       pvec [N_CU];
  psum_t       ovec [N_CU];

  // ------------------------------------------------------------ helpers
  function automatic baddr_t in_addr(logic [9:0] gg, logic [7:0] x, logic [7:0] y);
    return BYTE_AW'(c.in_base + (BYTE_AW'(gg) * c.in_w + x) * c.in_h + y);
  endfunction

  function automatic logic pos_valid(logic [7:0] y, logic col);
    logic [8:0] r;
    r = 9'(y) + 9'(col);
    return (r <= 9'(c.in_h - 8'(K))) && ((c.stride == 2'd1) || !r[0]);
  endfunction

  function automatic logic [7:0] ocol(logic [7:0] x);
    return (c.stride == 2'd2) ? (x >> 1) : x;
  endfunction

  function automatic logic [7:0] orow(logic [7:0] y, logic col);
    return (c.stride == 2'd2) ? ((y + 8'(col)) >> 1) : (y + 8'(col));
  endfunction

  function automatic logic [15:0] tmp_addr(logic [7:0] x, logic [7:0] y, logic col, logic [7:0] k);
    return 16'(c.tmp_base + (ocol(x) * oh + orow(y, col)) * NW + k);
  endfunction

  function automatic logic signed [7:0] requant(psum_t v);
    psum_t s;
    s = v >>> c.shift;
    if (c.relu && s < 0) return 8'sd0;
    if (s > 16'sd127)    return 8'sd127;
    if (s < -16'sd128)   return -8'sd128;
    return s[7:0];
  endfunction

  function automatic baddr_t out_addr(logic [SELW-1:0] m);
    return BYTE_AW'(c.out_base + (BYTE_AW'(f0 + 10'(m)) * c.out_w + ocol(dx) + 8'(c.out_pad)) * c.out_h
                + orow(dy, dc) + 8'(c.out_pad));
  endfunction

  baddr_t      daddr;
  logic [1:0]  doff;
  logic pcol;                               // column of the psum being fed
  baddr_t      a0, a1;                      // output byte addresses, S_WRITE
  assign a0    = out_addr(SELW'(2 * rk));
  assign a1    = out_addr(SELW'(2 * rk + 1));
  baddr_t      daddr_n;                     // next data column
  logic        rd_sched, rd_chain;          // data read issued from S_SCHED / S_DPUSH
  assign daddr   = in_addr(g, fx + 8'(fs), fy);
  assign daddr_n = in_addr(g, fx + 8'(fs) + 8'd1, fy);
  assign rd_sched = (st == S_SCHED) && !out_valid && !feed_done && (fs < 3'(K)) && !hold;
  assign rd_chain = (st == S_DPUSH) && data_ready && !out_valid && (fs + 3'd1 < 3'(K));
  assign pcol  = 1'(fs - 3'(K));

  // ------------------------------------------------------------ outputs
  always_comb begin
    ram_a      = BRAM_IDLE;
    ram_b      = BRAM_IDLE;
    coef_we    = (st == S_COEF_PUSH);
    coef_sel   = cu;
    data_we    = (st == S_DPUSH);
    data_last  = (fx == x_last) && (fy == y_last);
    psum_we    = (st == S_PPUSH);
    psum_wdata = pvec;
    out_re     = (st == S_SCHED) && out_valid;
    feed_stall = (st == S_DPUSH) && !data_ready;
    busy       = (st != S_IDLE);
    case (st)
      S_BIAS: if (rk < 8'(NW)) begin
        ram_a.en   = 1'b1;
        ram_a.addr = 16'(c.bias_base + (f0 >> 1) + rk);
      end
      S_COEF_RD: begin
        ram_a.en   = 1'b1;
        ram_a.addr = 16'(c.coef_base + ((f0 + 10'(cu)) * c.n_if + g) * K + kj);
      end
      S_SCHED: if (rd_sched) begin
        ram_a.en   = 1'b1;
        ram_a.addr = BRAM_AW'(daddr >> 2);
        ram_b.en   = 1'b1;
        ram_b.addr = BRAM_AW'(daddr >> 2) + 1'b1;
      end
      S_DPUSH: if (rd_chain) begin
        ram_a.en   = 1'b1;
        ram_a.addr = BRAM_AW'(daddr_n >> 2);
        ram_b.en   = 1'b1;
        ram_b.addr = BRAM_AW'(daddr_n >> 2) + 1'b1;
      end
      S_PRD: if (rk < 8'(NP)) begin
        ram_a.en   = 1'b1;
        ram_a.addr = tmp_addr(fx, fy, pcol, 8'(2 * rk));
        if (2 * rk + 1 < NW) begin
          ram_b.en   = 1'b1;
          ram_b.addr = tmp_addr(fx, fy, pcol, 8'(2 * rk + 1));
        end
      end
      S_WRITE: if (!pos_valid(dy, dc)) begin
        // column outside the layer (border or skipped by the stride): dropped
      end else if (g == c.n_if - 10'd1) begin
        // final result: one byte per matrix, two matrices per cycle
        ram_a.en    = 1'b1;
        ram_a.we    = 4'b0001 << a0[1:0];
        ram_a.addr  = BRAM_AW'(a0 >> 2);
        ram_a.wdata = {4{requant(ovec[2 * rk])}};
        if (2 * rk + 1 < N_CU) begin
          ram_b.en    = 1'b1;
          ram_b.we    = 4'b0001 << a1[1:0];
          ram_b.addr  = BRAM_AW'(a1 >> 2);
          ram_b.wdata = {4{requant(ovec[2 * rk + 1])}};
        end
      end else begin
        // intermediate sums: two 16-bit values per word, two words per cycle
        ram_a.en    = 1'b1;
        ram_a.we    = 4'hF;
        ram_a.addr  = tmp_addr(dx, dy, dc, 8'(2 * rk));
        ram_a.wdata = {ovec[4 * rk + 1], ovec[4 * rk]};
        if (2 * rk + 1 < NW) begin
          ram_b.en    = 1'b1;
          ram_b.we    = 4'hF;
          ram_b.addr  = tmp_addr(dx, dy, dc, 8'(2 * rk + 1));
          ram_b.wdata = {ovec[4 * rk + 3], ovec[4 * rk + 2]};
        end
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ sequencer
  logic write_last;
  assign write_last = (g == c.n_if - 10'd1) ? (rk == 8'((N_CU + 1) / 2 - 1)) : (rk == 8'(NP - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0;
      c <= '0; oh <= '0; x_last <= '0; y_last <= '0;
      f0 <= '0; g <= '0; fx <= '0; fy <= '0; dx <= '0; dy <= '0; fs <= '0; dc <= '0;
      feed_done <= 1'b0; hold <= 1'b0; cu <= '0; kj <= '0; rk <= '0; drain_done <= 1'b0;
      data_wdata <= '0; coef_wdata <= '0; doff <= '0;
      for (int m = 0; m < N_CU; m++) begin bias[m] <= '0; pvec[m] <= '0; ovec[m] <= '0; end
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          c      <= cfg;
          oh     <= (cfg.stride == 2'd2) ? ((cfg.in_h - 8'(K)) >> 1) + 8'd1 : cfg.in_h - 8'(K) + 8'd1;
          x_last <= (cfg.stride == 2'd2) ? ((cfg.in_w - 8'(K)) & 8'hFE) : cfg.in_w - 8'(K);
          y_last <= 8'(((cfg.in_h - 8'(K)) / 8'(CU_X)) * 8'(CU_X));
          f0 <= '0; g <= '0; rk <= '0;
          st <= S_BIAS;
        end
        S_BIAS: begin
          // issue word rk, capture word rk-1
          if (rk < 8'(NW)) rk <= rk + 8'd1;
          if (rk > 8'd0) begin
            bias[2 * (rk - 1)]     <= psum_t'(ram_a_rdata[15:0]);
            bias[2 * (rk - 1) + 1] <= psum_t'(ram_a_rdata[31:16]);
          end
          if (rk == 8'(NW)) begin
            g <= '0; cu <= '0; kj <= '0;
            st <= S_COEF_RD;
          end
        end
        S_COEF_RD:  st <= S_COEF_CAP;
        S_COEF_CAP: begin
          coef_wdata <= ram_a_rdata[CU_Y*COEF_W-1:0];
          st <= S_COEF_PUSH;
        end
        S_COEF_PUSH: if (coef_ready) begin
          if (kj == 3'(K - 1)) begin
            kj <= '0;
            if (cu == SELW'(N_CU - 1)) begin
              cu <= '0;
              fx <= '0; fy <= '0; fs <= '0; dx <= '0; dy <= '0; dc <= '0;
              feed_done <= 1'b0; hold <= 1'b0; drain_done <= 1'b0;
              st <= S_SCHED;
            end else begin
              cu <= cu + 1'b1;
              st <= S_COEF_RD;
            end
          end else begin
            kj <= kj + 1'b1;
            st <= S_COEF_RD;
          end
        end
        S_SCHED: begin
          rk <= '0;
          if (out_valid) begin
            // pop one output vector (out_re) and write it
            for (int m = 0; m < N_CU; m++) ovec[m] <= out_rdata[m];
            st <= S_WRITE;
          end else if (!feed_done) begin
            if (fs < 3'(K)) begin
              if (hold) st <= S_DPUSH;
              else begin
                doff <= daddr[1:0];          // read issued this cycle
                st   <= S_DCAP;
              end
            end
            else if (hold)       st <= S_PPUSH;
            else if (g == '0 || !pos_valid(fy, pcol)) begin
              for (int m = 0; m < N_CU; m++) pvec[m] <= (g == '0) ? bias[m] : '0;
              hold <= 1'b1;
              st   <= S_PPUSH;
            end else st <= S_PRD;
          end else if (drain_done) st <= S_NEXT;
        end
        S_DCAP: begin
          data_wdata <= 32'({ram_b_rdata, ram_a_rdata} >> (8 * doff));
          hold <= 1'b1;
          st   <= S_DPUSH;
        end
        S_DPUSH: begin
          if (data_ready) begin
            hold <= 1'b0;
            fs   <= fs + 3'd1;
          end
          if (rd_chain) begin
            doff <= daddr_n[1:0];            // next column read issued this cycle
            st   <= S_DCAP;
          end else st <= S_SCHED;
        end
        S_PRD: begin
          if (rk < 8'(NP)) rk <= rk + 8'd1;
          if (rk > 8'd0) begin
            pvec[4 * (rk - 1)]     <= psum_t'(ram_a_rdata[15:0]);
            pvec[4 * (rk - 1) + 1] <= psum_t'(ram_a_rdata[31:16]);
            if (4 * (rk - 1) + 3 < N_CU) begin
              pvec[4 * (rk - 1) + 2] <= psum_t'(ram_b_rdata[15:0]);
              pvec[4 * (rk - 1) + 3] <= psum_t'(ram_b_rdata[31:16]);
            end
          end
          if (rk == 8'(NP)) begin
            hold <= 1'b1;
            st   <= S_PPUSH;
          end
        end
        S_PPUSH: begin
          if (psum_ready) begin
            hold <= 1'b0;
            if (fs == 3'(K + CU_X - 1)) begin
              fs <= '0;
              if (fy >= y_last) begin
                fy <= '0;
                if (fx >= x_last) feed_done <= 1'b1;
                else fx <= fx + 8'(c.stride);
              end else fy <= fy + 8'(CU_X);
            end else fs <= fs + 3'd1;
          end
          st <= S_SCHED;
        end
        S_WRITE: begin
          if (!pos_valid(dy, dc) || write_last) begin
            // advance the drain position
            rk <= '0;
            if (dc == 1'(CU_X - 1)) begin
              dc <= 1'b0;
              if (dy >= y_last) begin
                dy <= '0;
                if (dx >= x_last) drain_done <= 1'b1;
                else dx <= dx + 8'(c.stride);
              end else dy <= dy + 8'(CU_X);
            end else dc <= dc + 1'b1;
            st <= S_SCHED;
          end else rk <= rk + 8'd1;
        end
        S_NEXT: begin
          // channel g finished (all outputs drained)
          if (g == c.n_if - 10'd1) begin
            if (f0 + 10'(N_CU) >= c.n_of) begin
              done <= 1'b1;
              st   <= S_IDLE;
            end else begin
              f0 <= f0 + 10'(N_CU);
              rk <= '0;
              st <= S_BIAS;
            end
          end else begin
            g  <= g + 10'd1;
            cu <= '0; kj <= '0;
            st <= S_COEF_RD;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  initial assert (CU_H == 4 && CU_X == 2 && N_CU % 2 == 0)
    else $error("conv_controller is written for 2x3 matrices (32-bit data column) and even N_CU");

endmodule
