// pooling_module: the "pooling" principal module - max or average pooling of
// a feature map held in the Block RAM.
//
// For every channel and every output position it reads the P x P input
// bytes of the window one after the other on port A (one read issued every
// other cycle, read latency one cycle), keeps the running maximum or the
// running sum, and writes the result byte to the output tensor on port B.
// Windows do not overlap (stride P). The input's zero border (in_pad) is
// skipped; the output is written with its own border (out_pad), so it is
// ready to be the next layer's input. The average is sum >>> avg_shift,
// i.e. P*P must be a power of two.
// Tensor layout is the one of conv_controller (channel-major, column-major
// bytes): byte base + (ch*w + x)*h + y.
// Interface: start (pulse) with cfg, done pulses after the last write.
// Timing: 2*P*P + 1 cycles per output value.
// The paper names the module and its place in the system (two ports on the
// Block RAM multiplexer); window order, byte-serial reading and the shift
// average are this design's choices.
// Lint note: port B only writes, so its read data is unused.
module pooling_module
  import hapm_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  pool_cfg_t cfg,
  output logic      busy,
  output logic      done,
  output bram_req_t ram_a,
  output bram_req_t ram_b,
  input  bram_rsp_t ram_a_rdata,
  input  bram_rsp_t ram_b_rdata
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_ACC, S_WR} state_e;

  state_e            st;
  pool_cfg_t         c;
  logic [9:0]        ch;
  logic [7:0]        ox, oy, ow, oh;     // output position, output size
  logic [3:0]        wi, wj;             // position in the window
  logic signed [15:0] acc;
  logic [1:0]        boff;
  baddr_t            rd_addr, wr_addr;
  logic signed [7:0] rbyte, res;
  logic signed [15:0] avg;

  assign rd_addr = BYTE_AW'(c.in_base + (BYTE_AW'(ch) * c.in_w + BYTE_AW'(ox * c.pool) + BYTE_AW'(wi) + BYTE_AW'(c.in_pad)) * c.in_h
                            + BYTE_AW'(oy * c.pool) + BYTE_AW'(wj) + BYTE_AW'(c.in_pad));
  assign wr_addr = BYTE_AW'(c.out_base + (BYTE_AW'(ch) * c.out_w + BYTE_AW'(ox) + BYTE_AW'(c.out_pad)) * c.out_h
                            + BYTE_AW'(oy) + BYTE_AW'(c.out_pad));
  assign rbyte   = ram_a_rdata[8 * boff +: 8];
  assign avg     = acc >>> c.avg_shift;

  always_comb begin
    if (!c.avg)             res = acc[7:0];
    else if (avg > 16'sd127)  res = 8'sd127;
    else if (avg < -16'sd128) res = -8'sd128;
    else                    res = avg[7:0];
  end

  always_comb begin
    ram_a = BRAM_IDLE;
    ram_b = BRAM_IDLE;
    if (st == S_RD) begin
      ram_a.en   = 1'b1;
      ram_a.addr = BRAM_AW'(rd_addr >> 2);
    end
    if (st == S_WR) begin
      ram_b.en    = 1'b1;
      ram_b.we    = 4'b0001 << wr_addr[1:0];
      ram_b.addr  = BRAM_AW'(wr_addr >> 2);
      ram_b.wdata = {4{res}};
    end
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; ch <= '0; ox <= '0; oy <= '0; ow <= '0; oh <= '0;
      wi <= '0; wj <= '0; acc <= '0; boff <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          c  <= cfg;
          ow <= cfg.out_w - 8'(2 * cfg.out_pad);
          oh <= cfg.out_h - 8'(2 * cfg.out_pad);
          ch <= '0; ox <= '0; oy <= '0; wi <= '0; wj <= '0;
          st <= S_RD;
        end
        S_RD: begin
          boff <= rd_addr[1:0];
          st   <= S_ACC;
        end
        S_ACC: begin
          // first element of the window starts the maximum / sum
          if (wi == '0 && wj == '0) acc <= 16'(rbyte);
          else if (c.avg)           acc <= acc + 16'(rbyte);
          else if (16'(rbyte) > acc) acc <= 16'(rbyte);
          if (wj == c.pool - 4'd1) begin
            wj <= '0;
            if (wi == c.pool - 4'd1) begin
              wi <= '0;
              st <= S_WR;
            end else begin
              wi <= wi + 4'd1;
              st <= S_RD;
            end
          end else begin
            wj <= wj + 4'd1;
            st <= S_RD;
          end
        end
        S_WR: begin
          st <= S_RD;
          if (oy == oh - 8'd1) begin
            oy <= '0;
            if (ox == ow - 8'd1) begin
              ox <= '0;
              if (ch == c.n_ch - 10'd1) begin
                st <= S_IDLE; done <= 1'b1;
              end else ch <= ch + 10'd1;
            end else ox <= ox + 8'd1;
          end else oy <= oy + 8'd1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
