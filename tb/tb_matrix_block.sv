// tb_matrix_block: self-checking test of a block of N_CU = 3 matrices.
//
// Each matrix gets its own kernel through the shared coefficient bus
// (matrix 1 gets an all-zero kernel, so it bypasses every window while the
// others compute). Ten windows of data are broadcast, each with its vector of
// partial sums, and every output vector is compared lane by lane with window
// sums computed here: out[m][c] = sum_{r,s} k_m[s][r] * d[s][r+c] + p[m][c].
// Checks that the matrices stay in step (one output vector per window
// column) and that the block sustains a new window every 4 cycles.
module tb_matrix_block;
  import hapm_pkg::*;

  localparam int N_CU = 3, CU_X = 2, CU_Y = 3, CU_H = 4, NWIN = 10;

  logic clk = 0, rst_n = 1;
  initial begin #1 rst_n = 0; repeat (3) @(posedge clk); rst_n = 1; end
  always #5 clk = ~clk;

  logic              coef_we, coef_ready, data_we, data_last, data_ready, psum_we, psum_ready;
  logic              out_re, out_valid;
  logic [1:0]        coef_sel;
  logic [23:0]       coef_wdata;
  logic [31:0]       data_wdata;
  psum_t             psum_wdata [N_CU];
  psum_t             out_rdata [N_CU];
  logic [N_CU-1:0]   win_start, win_bypass;

  matrix_block #(.N_CU(N_CU)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [23:0] k [N_CU][CU_Y];
  logic [31:0] d [NWIN][CU_Y];
  psum_t       p [NWIN][CU_X][N_CU];
  psum_t       e [NWIN][CU_X][N_CU];

  initial begin
    for (int m = 0; m < N_CU; m++)
      for (int s = 0; s < CU_Y; s++) k[m][s] = (m == 1) ? 24'd0 : 24'($urandom);
    for (int w = 0; w < NWIN; w++) begin
      for (int s = 0; s < CU_Y; s++) d[w][s] = $urandom;
      for (int c = 0; c < CU_X; c++)
        for (int m = 0; m < N_CU; m++) begin
          int acc;
          p[w][c][m] = psum_t'($urandom);
          acc = int'(p[w][c][m]);
          for (int s = 0; s < CU_Y; s++)
            for (int r = 0; r < CU_Y; r++)
              acc += int'($signed(k[m][s][8*r +: 8])) * int'($signed(d[w][s][8*(r+c) +: 8]));
          e[w][c][m] = psum_t'(acc);
        end
    end
  end

  // feeder: coefficients first, then data and partial sums, each held until taken
  int ci = 0, di = 0, pi = 0;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      coef_we <= 0; data_we <= 0; psum_we <= 0; coef_sel <= '0; coef_wdata <= '0;
      data_wdata <= '0; data_last <= 0;
      for (int m = 0; m < N_CU; m++) psum_wdata[m] <= '0;
    end else begin
      if (!coef_we || coef_ready) begin
        coef_we <= (ci < N_CU * CU_Y);
        if (ci < N_CU * CU_Y) begin
          coef_sel <= 2'(ci / CU_Y); coef_wdata <= k[ci / CU_Y][ci % CU_Y]; ci <= ci + 1;
        end
      end
      if (!data_we || data_ready) begin
        data_we <= (di < NWIN * CU_Y);
        if (di < NWIN * CU_Y) begin
          data_wdata <= d[di / CU_Y][di % CU_Y]; data_last <= (di / CU_Y == NWIN - 1); di <= di + 1;
        end
      end
      if (!psum_we || psum_ready) begin
        psum_we <= (pi < NWIN * CU_X);
        if (pi < NWIN * CU_X) begin
          for (int m = 0; m < N_CU; m++) psum_wdata[m] <= p[pi / CU_X][pi % CU_X][m];
          pi <= pi + 1;
        end
      end
    end
  end

  int oi = 0, starts0 = 0, first0 = -1, last0 = -1, byp1 = 0;
  assign out_re = out_valid;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      for (int m = 0; m < N_CU; m++) begin
        checks++;
        if (out_rdata[m] !== e[oi / CU_X][oi % CU_X][m]) begin
          failures++;
          if (failures < 10) $display("out %0d lane %0d: got %0d expected %0d", oi, m, out_rdata[m], e[oi / CU_X][oi % CU_X][m]);
        end
      end
      oi++;
    end
    if (rst_n && win_start[0]) begin
      if (first0 < 0) first0 = cycle;
      last0 = cycle;
      starts0++;
    end
    if (rst_n && win_bypass[1]) byp1++;
  end

  initial begin
    wait (oi == NWIN * CU_X);
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output"); end
    checks++;
    if (byp1 != NWIN) begin failures++; $display("matrix 1 bypassed %0d windows, expected %0d", byp1, NWIN); end
    checks++;
    if (last0 - first0 != (NWIN - 1) * (CU_Y + 1)) begin
      failures++; $display("%0d windows took %0d cycles", NWIN, last0 - first0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
