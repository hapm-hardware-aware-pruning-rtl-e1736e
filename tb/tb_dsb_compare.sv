// tb_dsb_compare: the same pruned convolution layer run on two copies of the
// convolution datapath, one built with the Dynamic Sparsity Bypass (DSB=1)
// and one without (DSB=0).
//
// Layer: 18x18x8 input (16x16 plus a zero border), 8 filters, 3x3, stride 1,
// N_CU = 4, with half of the kernels pruned to zero - the kernel-level
// pruning the bypass is meant for. Both outputs are compared with a
// convolution computed here (same formula as tb_conv_controller). Checked:
// both are correct, only the DSB=1 copy bypasses windows, and it needs no
// more cycles than the DSB=0 copy. The two cycle counts are printed; their
// ratio shows how much of the matrices' saving reaches the layer time.
module tb_dsb_compare;
  import hapm_pkg::*;

  localparam int N_CU = 4, NW = 18, NIF = 8, NOF = 8, OW = 16;
  localparam int IN_B = 0, COEF_W = 1000, BIAS_W = 1400, TMP_W = 1500, OUT_B = 4 * 3000;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic signed [7:0] kk [NOF][NIF][3][3];
  logic signed [7:0] xin [NIF][NW][NW];
  psum_t bias [NOF];
  logic       start;
  conv_cfg_t  cfg;
  logic [1:0] done, busy;
  int         cycles [2];
  int         bypass_n [2];

  for (genvar v = 0; v < 2; v++) begin : g_dp
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

    conv_controller #(.N_CU(N_CU)) u_cc (
      .clk, .rst_n, .start, .cfg, .busy(busy[v]), .done(done[v]), .ram_a, .ram_b, .ram_a_rdata,
      .ram_b_rdata, .coef_we, .coef_sel, .coef_wdata, .coef_ready, .data_we, .data_wdata,
      .data_last, .data_ready, .psum_we, .psum_wdata, .psum_ready, .out_re, .out_rdata,
      .out_valid, .feed_stall);
    matrix_block #(.N_CU(N_CU), .DSB(v == 1)) u_mb (
      .clk, .rst_n, .coef_we, .coef_sel, .coef_wdata, .coef_ready, .data_we, .data_wdata,
      .data_last, .data_ready, .psum_we, .psum_wdata, .psum_ready, .out_re, .out_rdata,
      .out_valid, .win_start, .win_bypass);
    block_ram #(.DEPTH(8192)) u_ram (.clk, .a(ram_a), .b(ram_b), .a_rdata(ram_a_rdata), .b_rdata(ram_b_rdata));

    always @(posedge clk) begin
      if (busy[v]) cycles[v]++;
      bypass_n[v] += $countones(win_bypass);
    end
  end

  int checks = 0, failures = 0;

  task automatic put_word(int w, logic [31:0] d);
    g_dp[0].u_ram.mem[w] = d;
    g_dp[1].u_ram.mem[w] = d;
  endtask

  function automatic logic [7:0] rd_byte(int v, int a);
    logic [31:0] w;
    w = (v == 0) ? g_dp[0].u_ram.mem[a / 4] : g_dp[1].u_ram.mem[a / 4];
    return w[8 * (a % 4) +: 8];
  endfunction

  initial begin
    int acc, bad;
    logic [31:0] word;
    logic signed [7:0] e, got;
    start = 0; cfg = '0;
    cycles[0] = 0; cycles[1] = 0; bypass_n[0] = 0; bypass_n[1] = 0;
    #1 rst_n = 0;
    for (int w = 0; w < 8192; w++) put_word(w, '0);
    for (int g = 0; g < NIF; g++)
      for (int x = 0; x < NW; x++)
        for (int y = 0; y < NW; y++)
          xin[g][x][y] = (x == 0 || y == 0 || x == NW - 1 || y == NW - 1) ? 8'sd0
                         : 8'($urandom_range(0, 30)) - 8'sd15;
    for (int a = 0; a < NIF * NW * NW; a += 4) begin
      for (int b = 0; b < 4; b++) word[8 * b +: 8] = (a + b < NIF * NW * NW) ?
          xin[(a + b) / (NW * NW)][((a + b) / NW) % NW][(a + b) % NW] : 8'd0;
      put_word(IN_B / 4 + a / 4, word);
    end
    for (int f = 0; f < NOF; f++) begin
      bias[f] = psum_t'($urandom_range(0, 400)) - 16'sd200;
      for (int g = 0; g < NIF; g++) begin
        bit pruned;
        pruned = ((f + g) % 2 == 1);
        for (int j = 0; j < 3; j++) begin
          for (int r = 0; r < 3; r++) begin
            kk[f][g][r][j] = pruned ? 8'sd0 : 8'($urandom_range(0, 8)) - 8'sd4;
            word[8 * r +: 8] = kk[f][g][r][j];
          end
          word[31:24] = '0;
          put_word(COEF_W + (f * NIF + g) * 3 + j, word);
        end
      end
    end
    for (int f = 0; f < NOF; f += 2) put_word(BIAS_W + f / 2, {bias[f + 1], bias[f]});
    cfg.in_base = BYTE_AW'(IN_B); cfg.in_w = 8'(NW); cfg.in_h = 8'(NW);
    cfg.n_if = 10'(NIF); cfg.n_of = 10'(NOF); cfg.stride = 2'd1;
    cfg.coef_base = 16'(COEF_W); cfg.bias_base = 16'(BIAS_W); cfg.tmp_base = 16'(TMP_W);
    cfg.out_base = BYTE_AW'(OUT_B); cfg.out_w = 8'(OW + 2); cfg.out_h = 8'(OW + 2);
    cfg.out_pad = 2'd1; cfg.shift = 4'd5; cfg.relu = 1'b1;
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    fork
      wait (done[0]);
      wait (done[1]);
    join
    @(posedge clk);
    for (int v = 0; v < 2; v++) begin
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
            got = rd_byte(v, OUT_B + (f * (OW + 2) + ox) * (OW + 2) + oy);
            checks++;
            if (got !== e) begin
              failures++; bad++;
              if (bad < 6) $display("DSB=%0d f%0d (%0d,%0d): got %0d expected %0d", v, f, ox, oy, got, e);
            end
          end
    end
    checks++;
    if (bypass_n[0] != 0 || bypass_n[1] == 0) begin
      failures++; $display("bypass counts wrong: DSB=0 %0d, DSB=1 %0d", bypass_n[0], bypass_n[1]);
    end
    checks++;
    if (cycles[1] > cycles[0]) begin failures++; $display("the bypass made the layer slower"); end
    $display("layer cycles: DSB=0 %0d, DSB=1 %0d (%0d %% fewer); bypassed windows %0d",
             cycles[0], cycles[1], 100 * (cycles[0] - cycles[1]) / cycles[0], bypass_n[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
