// tb_conv_workload: the worked example layer of the cycle-count formula, run
// on the convolution controller with N_CU = 12 matrices.
//
// Layer: 3x3 kernels, stride 1, 32x32 input with a one-element zero border
// (34x34), 12 input and 12 output channels - the configuration for which the
// theoretical minimum is 12288 cycles. Random activations and kernels, with
// about one kernel in six pruned to zero so the Dynamic Sparsity Bypass is
// used. The whole 34x34x12 output area is compared with a convolution
// computed here:
//   out = sat8(relu(wrap16(bias[f] + sum_g sum_{r,j} k[f][g][r][j] * in[g][x+j][y+r]) >>> 5))
// and the layer's cycle count is printed next to the theoretical minimum
// (it may not be lower). The Block RAM has its full 240 KB.
module tb_conv_workload;
  import hapm_pkg::*;

  localparam int N_CU = 12, NW = 34, NIF = 12, NOF = 12, OW = 32;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic start, busy, done;
  conv_cfg_t cfg;
  bram_req_t ram_a, ram_b;
  bram_rsp_t ram_a_rdata, ram_b_rdata;
  logic coef_we, coef_ready, data_we, data_last, data_ready, psum_we, psum_ready, out_re, out_valid;
  logic [3:0] coef_sel;
  logic [23:0] coef_wdata;
  logic [31:0] data_wdata;
  psum_t psum_wdata [N_CU];
  psum_t out_rdata [N_CU];
  logic feed_stall;
  logic [N_CU-1:0] win_start, win_bypass;

  conv_controller #(.N_CU(N_CU)) dut (.*);
  matrix_block #(.N_CU(N_CU)) u_mb (.*);
  block_ram u_ram (.clk, .a(ram_a), .b(ram_b), .a_rdata(ram_a_rdata), .b_rdata(ram_b_rdata));

  int checks = 0, failures = 0, cycles = 0, bypass_n = 0, window_n = 0;
  always @(posedge clk) begin
    if (busy) cycles++;
    bypass_n += $countones(win_bypass);
    window_n += $countones(win_start);
  end

  localparam int IN_B = 0, COEF_W = 4000, BIAS_W = 4500, TMP_W = 5000, OUT_B = 4 * 12000;

  logic signed [7:0] kk [NOF][NIF][3][3];
  logic signed [7:0] xin [NIF][NW][NW];
  psum_t bias [NOF];

  function automatic logic [7:0] rd_byte(int a);
    logic [31:0] w;
    w = u_ram.mem[a / 4];
    return w[8 * (a % 4) +: 8];
  endfunction

  initial begin
    int acc, bad, minc;
    logic signed [7:0] e, got;
    start = 0; cfg = '0;
    #1 rst_n = 0;
    for (int w = 0; w < 61440; w++) u_ram.mem[w] = '0;
    for (int g = 0; g < NIF; g++)
      for (int x = 0; x < NW; x++)
        for (int y = 0; y < NW; y++) begin
          xin[g][x][y] = (x == 0 || y == 0 || x == NW - 1 || y == NW - 1) ? 8'sd0
                         : 8'($urandom_range(0, 30)) - 8'sd15;
          u_ram.mem[(IN_B + (g * NW + x) * NW + y) / 4][8 * ((IN_B + (g * NW + x) * NW + y) % 4) +: 8] = xin[g][x][y];
        end
    for (int f = 0; f < NOF; f++) begin
      bias[f] = psum_t'($urandom_range(0, 400)) - 16'sd200;
      u_ram.mem[BIAS_W + f / 2][16 * (f % 2) +: 16] = bias[f];
      for (int g = 0; g < NIF; g++) begin
        bit pruned;
        pruned = ($urandom_range(0, 5) == 0);
        for (int j = 0; j < 3; j++)
          for (int r = 0; r < 3; r++) begin
            kk[f][g][r][j] = pruned ? 8'sd0 : 8'($urandom_range(0, 8)) - 8'sd4;
            u_ram.mem[COEF_W + (f * NIF + g) * 3 + j][8 * r +: 8] = kk[f][g][r][j];
          end
      end
    end
    cfg.in_base = BYTE_AW'(IN_B); cfg.in_w = 8'(NW); cfg.in_h = 8'(NW);
    cfg.n_if = 10'(NIF); cfg.n_of = 10'(NOF); cfg.stride = 2'd1;
    cfg.coef_base = 16'(COEF_W); cfg.bias_base = 16'(BIAS_W); cfg.tmp_base = 16'(TMP_W);
    cfg.out_base = BYTE_AW'(OUT_B); cfg.out_w = 8'(OW + 2); cfg.out_h = 8'(OW + 2);
    cfg.out_pad = 2'd1; cfg.shift = 4'd5; cfg.relu = 1'b1;
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (done); @(posedge clk);
    bad = 0;
    for (int f = 0; f < NOF; f++)
      for (int ox = 0; ox < OW + 2; ox++)
        for (int oy = 0; oy < OW + 2; oy++) begin
          if (ox == 0 || oy == 0 || ox == OW + 1 || oy == OW + 1) e = 0;
          else begin
            acc = int'(bias[f]);
            for (int g = 0; g < NIF; g++)
              for (int r = 0; r < 3; r++)
                for (int j = 0; j < 3; j++)
                  acc += int'(kk[f][g][r][j]) * int'(xin[g][ox - 1 + j][oy - 1 + r]);
            acc = int'(psum_t'(acc)) >>> 5;
            e = (acc > 127) ? 8'sd127 : (acc < 0) ? 8'sd0 : 8'(acc);
          end
          got = rd_byte(OUT_B + (f * (OW + 2) + ox) * (OW + 2) + oy);
          checks++;
          if (got !== e) begin
            failures++; bad++;
            if (bad < 10) $display("f%0d (%0d,%0d): got %0d expected %0d", f, ox, oy, got, e);
          end
        end
    minc = int'(min_cycles(4, NW, NW, NIF, NOF, 3, 3, 1, 1, N_CU, 2, 3));
    checks++;
    if (minc != 12288) begin failures++; $display("theoretical minimum %0d, expected 12288", minc); end
    checks++;
    if (cycles < minc) begin failures++; $display("faster than the theoretical minimum"); end
    checks++;
    if (bypass_n == 0) begin failures++; $display("no window bypassed"); end
    $display("layer 34x34x12 -> 32x32x12: %0d cycles, theoretical minimum %0d; windows computed %0d, bypassed %0d",
             cycles, minc, window_n, bypass_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
