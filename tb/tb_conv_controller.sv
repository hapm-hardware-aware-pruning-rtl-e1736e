// tb_conv_controller: runs whole convolution layers through the controller,
// a matrix block and the Block RAM, and compares the output tensor with a
// convolution computed here.
//
// Two layers with N_CU = 4: 8x8x3 -> 6x6x8 at stride 1 and 9x9x3 -> 4x4x4 at
// stride 2, each written with a one-element border. Some kernels are zero so
// the Dynamic Sparsity Bypass is used. Reference, per output:
//   acc = bias[f] + sum_g sum_{r,j} k[f][g][r][j] * in[g][x+j][y+r]  (16-bit wrap)
//   out = sat8(relu(acc >>> 5))
// The whole output area (border included) is compared, so stray writes show.
// The layer's cycle count is checked to be no lower than the paper's
// theoretical minimum for the same sizes.
module tb_conv_controller;
  import hapm_pkg::*;

  localparam int N_CU = 4, CU_X = 2, CU_Y = 3, CU_H = 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock
  always #5 clk = ~clk;

  logic start, busy, done;
  conv_cfg_t cfg;
  bram_req_t ram_a, ram_b;
  bram_rsp_t ram_a_rdata, ram_b_rdata;
  logic coef_we, coef_ready, data_we, data_last, data_ready, psum_we, psum_ready, out_re, out_valid;
  logic [1:0] coef_sel;
  logic [23:0] coef_wdata;
  logic [31:0] data_wdata;
  psum_t psum_wdata [N_CU];
  psum_t out_rdata [N_CU];
  logic feed_stall;
  logic [N_CU-1:0] win_start, win_bypass;

  conv_controller #(.N_CU(N_CU)) dut (.*);
  matrix_block #(.N_CU(N_CU), .DATA_DEPTH(8)) u_mb (.*);
  block_ram #(.DEPTH(4096)) u_ram (.clk, .a(ram_a), .b(ram_b), .a_rdata(ram_a_rdata), .b_rdata(ram_b_rdata));

  int checks = 0, failures = 0, cycles = 0, bypass_n = 0, stall_n = 0;
  always @(posedge clk) begin
    if (busy) cycles++;
    if (win_bypass != 0) bypass_n++;
    if (feed_stall) stall_n++;
  end

  function automatic logic [7:0] rd_byte(int a);
    logic [31:0] w;
    w = u_ram.mem[a / 4];
    return w[8 * (a % 4) +: 8];
  endfunction

  task automatic wr_byte(int a, logic [7:0] v);
    u_ram.mem[a / 4][8 * (a % 4) +: 8] = v;
  endtask

  task automatic run_layer(int nw, int nh, int nif, int nof, int s, int zero_f);
    int ow, oh, in_b, coef_w, bias_w, tmp_w, out_b, pad;
    int acc;
    logic signed [7:0] kk [8][3][3][3];
    logic signed [7:0] xin [3][9][9];
    psum_t bias [8];
    logic signed [7:0] e, got;
    ow = (nw - 3) / s + 1; oh = (nh - 3) / s + 1; pad = 1;
    in_b = 0; coef_w = 100; bias_w = 200; tmp_w = 300; out_b = 4 * 600;
    for (int w = 0; w < 4096; w++) u_ram.mem[w] = '0;
    for (int g = 0; g < nif; g++)
      for (int x = 0; x < nw; x++)
        for (int y = 0; y < nh; y++) begin
          xin[g][x][y] = 8'($urandom_range(0, 30)) - 8'sd15;
          wr_byte(in_b + (g * nw + x) * nh + y, xin[g][x][y]);
        end
    for (int f = 0; f < nof; f++) begin
      bias[f] = psum_t'($urandom_range(0, 400)) - 16'sd200;
      u_ram.mem[bias_w + f / 2][16 * (f % 2) +: 16] = bias[f];
      for (int g = 0; g < nif; g++)
        for (int j = 0; j < 3; j++) begin
          for (int r = 0; r < 3; r++) begin
            kk[f][g][r][j] = (f == zero_f) ? 8'sd0 : 8'($urandom_range(0, 16)) - 8'sd8;
            u_ram.mem[coef_w + (f * nif + g) * 3 + j][8 * r +: 8] = kk[f][g][r][j];
          end
        end
    end
    cfg = '0;
    cfg.in_base = BYTE_AW'(in_b); cfg.in_w = 8'(nw); cfg.in_h = 8'(nh);
    cfg.n_if = 10'(nif); cfg.n_of = 10'(nof); cfg.stride = 2'(s);
    cfg.coef_base = 16'(coef_w); cfg.bias_base = 16'(bias_w); cfg.tmp_base = 16'(tmp_w);
    cfg.out_base = BYTE_AW'(out_b); cfg.out_w = 8'(ow + 2 * pad); cfg.out_h = 8'(oh + 2 * pad);
    cfg.out_pad = 2'(pad); cfg.shift = 4'd5; cfg.relu = 1'b1;
    cycles = 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (done); @(posedge clk);
    for (int f = 0; f < nof; f++)
      for (int ox = 0; ox < ow + 2; ox++)
        for (int oy = 0; oy < oh + 2; oy++) begin
          if (ox == 0 || oy == 0 || ox == ow + 1 || oy == oh + 1) e = 0;
          else begin
            acc = int'(bias[f]);
            for (int g = 0; g < nif; g++)
              for (int r = 0; r < 3; r++)
                for (int j = 0; j < 3; j++)
                  acc += int'(kk[f][g][r][j]) * int'(xin[g][(ox-1)*s + j][(oy-1)*s + r]);
            acc = int'(psum_t'(acc)) >>> 5;
            e = (acc < 0) ? 8'sd0 : (acc > 127) ? 8'sd127 : 8'(acc);
          end
          got = rd_byte(out_b + (f * (ow + 2) + ox) * (oh + 2) + oy);
          checks++;
          if (got !== e) begin
            failures++;
            if (failures < 10) $display("f%0d (%0d,%0d): got %0d expected %0d", f, ox, oy, got, e);
          end
        end
    checks++;
    if (cycles < int'(min_cycles(4, nw, nh, nif, nof, 3, 3, s, s, N_CU, CU_X, CU_Y))) begin
      failures++; $display("layer took %0d cycles, below the theoretical minimum", cycles);
    end
    $display("layer %0dx%0dx%0d s%0d: %0d cycles (theoretical minimum %0d)", nw, nh, nif, s, cycles,
             min_cycles(4, nw, nh, nif, nof, 3, 3, s, s, N_CU, CU_X, CU_Y));
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_layer(8, 8, 3, 8, 1, 5);
    run_layer(9, 9, 3, 4, 2, 2);
    checks++;
    if (bypass_n == 0) begin failures++; $display("no window was bypassed"); end
    $display("bypass cycles=%0d feed stalls=%0d", bypass_n, stall_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
