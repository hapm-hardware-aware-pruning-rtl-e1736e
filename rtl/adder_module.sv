// adder_module: the "adder" principal module - the element-wise addition of
// two feature maps that closes a residual (ResNet) block.
//
// Reads word i of tensor A on port A and word i of tensor B on port B in one
// cycle, adds the four 8-bit lanes with saturation to [-128, 127], applies
// ReLU if asked, and writes the word to tensor C on port A in the next cycle:
// two cycles per 32-bit word. Because tensors are stored with their zero
// border, adding whole buffers keeps the border at zero.
// Interface: start (pulse) with cfg; done pulses after the last write; the two
// Block RAM ports (one-cycle read latency).
// The paper gives only the module's role (one principal module per layer type,
// reading from and writing back to the internal memory); word-wise operation,
// saturation and the optional ReLU are this design's choices.
module adder_module
  import hapm_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  add_cfg_t  cfg,
  output logic      busy,
  output logic      done,
  output bram_req_t ram_a,
  output bram_req_t ram_b,
  input  bram_rsp_t ram_a_rdata,
  input  bram_rsp_t ram_b_rdata
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} state_e;

  state_e      st;
  add_cfg_t    c;
  logic [15:0] i;
  logic [31:0] sum;

  function automatic logic [7:0] add8(logic [7:0] a, logic [7:0] b, logic relu);
    logic signed [8:0] s;
    s = 9'($signed(a)) + 9'($signed(b));
    if (relu && s < 0) return 8'd0;
    if (s > 9'sd127)   return 8'd127;
    if (s < -9'sd128)  return 8'h80;
    return s[7:0];
  endfunction

  always_comb begin
    for (int l = 0; l < 4; l++)
      sum[8*l +: 8] = add8(ram_a_rdata[8*l +: 8], ram_b_rdata[8*l +: 8], c.relu);
    ram_a = BRAM_IDLE;
    ram_b = BRAM_IDLE;
    if (st == S_READ) begin
      ram_a.en   = 1'b1;
      ram_a.addr = c.a_base + i;
      ram_b.en   = 1'b1;
      ram_b.addr = c.b_base + i;
    end else if (st == S_WRITE) begin
      ram_a.en    = 1'b1;
      ram_a.we    = 4'hF;
      ram_a.addr  = c.c_base + i;
      ram_a.wdata = sum;
    end
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; i <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE:  if (start) begin
          c <= cfg; i <= '0;
          st <= (cfg.n_words == '0) ? S_IDLE : S_READ;
          done <= (cfg.n_words == '0);
        end
        S_READ:  st <= S_WRITE;
        S_WRITE: begin
          if (i == c.n_words - 16'd1) begin
            st <= S_IDLE; done <= 1'b1;
          end else begin
            i <= i + 16'd1; st <= S_READ;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
